// tb_breakhammer_full -- the unit at its default configuration (64 ms window
// at 1.5 GHz = 96,000,000 cycles). Three windows: the attacker is caught and
// throttled in the first, is caught again through the interleaved counters
// in the second although it has stopped, and gets its quota back at the end
// of the third. About 288 million simulated cycles.
module tb_breakhammer_full;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, act_valid, action_valid, mshr_alloc_valid, mshr_free_valid;
  logic [1:0] act_thread, mshr_alloc_thread, mshr_free_thread, sw_thread;
  logic [3:0] mshr_alloc_ok, suspect, recent_suspect, quota_cut;
  logic [3:0][6:0] quota, mshr_occupancy;
  logic window_end, active_set;
  logic [31:0] sw_score;

  breakhammer dut (.*);

  bh_e2e_driver #(.WINDOW_CYCLES(bh_pkg::WINDOW_CYCLES), .WINDOWS(3), .ATTACK_WINDOWS(1)) drv (.*);

  // watchdog of this run (the driver has a shorter one of its own)
  initial begin
    repeat (bh_pkg::WINDOW_CYCLES * 3 + 5000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", drv.checks, drv.failures + 1);
    $finish;
  end
endmodule
