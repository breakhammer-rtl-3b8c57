// tb_breakhammer_benign -- an all-benign four-thread mix with two more
// memory-intensive threads and two less intensive ones (misses wanted with
// probability 1/8, 1/8, 1/16, 1/16), 20,000-cycle windows, four windows.
// No thread may be flagged or lose quota; scores, flags and quotas are still
// compared with the reference model at every window end.
module tb_breakhammer_benign;
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

  bh_e2e_driver #(.WINDOW_CYCLES(W), .WINDOWS(4), .ATTACK_WINDOWS(0),
                  .ODDS0(8), .ODDS1(8), .ODDS2(16), .ODDS3(16)) drv (.*);

  // watchdog of this run (the driver has a shorter one of its own)
  initial begin
    repeat (W * 4 + 5000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", drv.checks, drv.failures + 1);
    $finish;
  end
endmodule
