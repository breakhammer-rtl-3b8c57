// tb_breakhammer -- end-to-end run of the whole unit with a 20,000-cycle
// throttling window (everything else at its default): an attacker thread is
// caught in the first window, throttled for four windows, then behaves and
// gets its full quota back. See bh_e2e_driver for the system model and checks.
module tb_breakhammer;
  localparam int unsigned W = 20000;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, act_valid, action_valid, mshr_alloc_valid, mshr_free_valid;
  logic [1:0] act_thread, mshr_alloc_thread, mshr_free_thread, sw_thread;
  logic [3:0] mshr_alloc_ok, suspect, recent_suspect, quota_cut;
  logic [3:0][6:0] quota, mshr_occupancy;
  logic window_end, active_set;
  logic [31:0] sw_score;

  breakhammer #(.WINDOW_CYCLES(W)) dut (.*);

  bh_e2e_driver #(.WINDOW_CYCLES(W), .WINDOWS(6), .ATTACK_WINDOWS(4)) drv (.*);

  // watchdog of this run (the driver has a shorter one of its own)
  initial begin
    repeat (W * 6 + 5000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", drv.checks, drv.failures + 1);
    $finish;
  end
endmodule
