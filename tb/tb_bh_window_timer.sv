// tb_bh_window_timer -- checks the throttling-window pulse.
// With a 10-cycle window, window_end must be high exactly on cycles
// 10, 20, 30, ... after reset release (counting the first clock edge after
// reset as cycle 1), one cycle wide.
module tb_bh_window_timer;
  localparam int unsigned W = 10;
  logic clk = 1'b0, rst_n = 1'b0, window_end;
  int checks = 0, failures = 0;

  bh_window_timer #(.WINDOW_CYCLES(W)) dut (.clk, .rst_n, .window_end);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pulses;
    pulses = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int cyc = 1; cyc <= 10 * W; cyc++) begin
      @(negedge clk);
      checks++;
      if (window_end !== ((cyc % W) == 0)) begin
        failures++;
        $display("cycle %0d: window_end=%0b", cyc, window_end);
      end
      if (window_end) pulses++;
      @(posedge clk);
    end
    checks++;
    if (pulses != 10) begin failures++; $display("pulses=%0d", pulses); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
