// tb_bh_rega_scorer -- random ACT traffic with REGA_T = 5; a thread must get
// exactly one point (1 << 7) on each 5th of its own activations, one cycle
// later, and nothing otherwise.
module tb_bh_rega_scorer;
  localparam int unsigned N = 4, FRAC_W = 7, REGA_T = 5, INC_W = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  logic act_valid = 1'b0;
  logic [1:0] act_thread = '0;
  logic out_valid;
  logic [N-1:0][INC_W-1:0] out_inc;
  int checks = 0, failures = 0, points = 0;

  bh_rega_scorer #(.N(N), .FRAC_W(FRAC_W), .REGA_T(REGA_T)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int acts [N];
  logic exp_v;
  logic [N-1:0][INC_W-1:0] exp_inc;

  initial begin
    foreach (acts[i]) acts[i] = 0;
    exp_v = 0; exp_inc = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      @(negedge clk);
      checks++;
      if (out_valid !== exp_v || out_inc !== exp_inc) begin
        failures++;
        $display("cyc %0d out_valid=%0b inc=%h exp %0b %h", cyc, out_valid, out_inc, exp_v, exp_inc);
      end
      act_valid  = ($urandom_range(0, 2) != 0);
      act_thread = 2'($urandom_range(0, 3));
      exp_v = 0; exp_inc = '0;
      if (act_valid) begin
        acts[act_thread]++;
        if (acts[act_thread] % 5 == 0) begin
          exp_v = 1; exp_inc[act_thread] = 8'd128; points++;
        end
      end
    end
    checks++;
    if (points < 100) begin failures++; $display("too few points %0d", points); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
