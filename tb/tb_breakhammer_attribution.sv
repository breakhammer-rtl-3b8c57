// tb_breakhammer_attribution -- an attacker tries to shift the blame for
// preventive actions onto a benign thread sharing its rows.
//
// In every round thread 0 (the attacker) opens rows 15 times without causing
// a preventive action, then thread 1 (benign) opens one row and the
// mitigation acts right after it. Because each action's point is split by the
// activations since the previous action, thread 0 must receive 15/16 of every
// point (120/128 in the fixed-point format) and thread 1 only 1/16 (8/128),
// read back through the software score port. Thread 0 reaches TH_threat = 32
// points in round 35 (34 x 120 = 4080 < 4096 <= 4200) and must be flagged
// then, and not before, with its quota cut from 64 to 64/10 = 6. Thread 1,
// the one that triggered every action, must never be flagged. The window is
// made longer than the run so no window boundary intervenes.
module tb_breakhammer_attribution;
  localparam int unsigned ROUNDS = 40;
  logic clk;
  initial clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, act_valid, action_valid, mshr_alloc_valid, mshr_free_valid;
  logic [1:0] act_thread, mshr_alloc_thread, mshr_free_thread, sw_thread;
  logic [3:0] mshr_alloc_ok, suspect, recent_suspect, quota_cut;
  logic [3:0][6:0] quota, mshr_occupancy;
  logic window_end, active_set;
  logic [31:0] sw_score;

  breakhammer #(.WINDOW_CYCLES(1_000_000)) dut (.*);

  int checks = 0, failures = 0;

  task automatic expect_eq(input string what, input longint got, input longint want);
    checks++;
    if (got != want) begin
      failures++;
      $display("FAIL: %s = %0d, expected %0d", what, got, want);
    end
  endtask

  task automatic read_score(input int t, output longint s);
    sw_thread = 2'(t);
    @(posedge clk); #1;
    s = longint'(sw_score);
  endtask

  initial begin
    longint s;
    rst_n = 1'b0; act_valid = 1'b0; act_thread = '0; action_valid = 1'b0;
    mshr_alloc_valid = 1'b0; mshr_alloc_thread = '0;
    mshr_free_valid = 1'b0; mshr_free_thread = '0; sw_thread = '0;
    repeat (3) @(posedge clk); #1;
    rst_n = 1'b1;
    for (int r = 1; r <= ROUNDS; r++) begin
      act_valid = 1'b1; act_thread = 2'd0;
      repeat (15) @(posedge clk); #1;
      act_thread = 2'd1;
      @(posedge clk); #1;
      act_valid = 1'b0; action_valid = 1'b1;
      @(posedge clk); #1;
      action_valid = 1'b0;
      repeat (16) @(posedge clk); #1;        // 12-cycle update latency, settled
      read_score(0, s); expect_eq($sformatf("round %0d score of thread 0", r), s, 120 * r);
      read_score(1, s); expect_eq($sformatf("round %0d score of thread 1", r), s, 8 * r);
      read_score(2, s); expect_eq("score of thread 2", s, 0);
      expect_eq($sformatf("round %0d suspect[0]", r), longint'(suspect[0]), longint'(r >= 35));
      expect_eq($sformatf("round %0d quota[0]", r), longint'(quota[0]), (r >= 35) ? 6 : 64);
      expect_eq($sformatf("round %0d suspect[1]", r), longint'(suspect[1]), 0);
      expect_eq($sformatf("round %0d quota[1]", r), longint'(quota[1]), 64);
    end
    expect_eq("window boundaries", longint'(window_end), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (ROUNDS * 40 + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
