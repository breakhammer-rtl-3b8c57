// tb_bh_act_tracker -- random ACT / preventive-action traffic against a
// reference count kept in the testbench. Uses 6-bit counters so that
// saturation is reached. Each snapshot must appear exactly one cycle after
// its action, include an ACT of the action cycle, and the counts must then
// restart from zero.
module tb_bh_act_tracker;
  localparam int unsigned N = 4, ACT_W = 6, TW = 2, TOT_W = ACT_W + 3;
  logic clk = 1'b0, rst_n = 1'b0;
  logic act_valid = 1'b0, action_valid = 1'b0;
  logic [TW-1:0] act_thread = '0;
  logic snap_valid;
  logic [N-1:0][ACT_W-1:0] snap_act;
  logic [TOT_W-1:0] snap_total;
  int checks = 0, failures = 0, saturations = 0, snaps = 0;

  bh_act_tracker #(.N(N), .ACT_W(ACT_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ref_cnt [N];
  int exp_act [N];
  int exp_total;
  bit exp_valid;

  initial begin
    foreach (ref_cnt[i]) ref_cnt[i] = 0;
    exp_valid = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      @(negedge clk);
      // check the output produced by the previous cycle's action
      checks++;
      if (snap_valid !== exp_valid) begin
        failures++; $display("cyc %0d snap_valid=%0b exp %0b", cyc, snap_valid, exp_valid);
      end
      if (exp_valid) begin
        snaps++;
        for (int i = 0; i < N; i++) begin
          checks++;
          if (int'(snap_act[i]) != exp_act[i]) begin
            failures++; $display("cyc %0d thread %0d act=%0d exp %0d", cyc, i, snap_act[i], exp_act[i]);
          end
        end
        checks++;
        if (int'(snap_total) != exp_total) begin
          failures++; $display("cyc %0d total=%0d exp %0d", cyc, snap_total, exp_total);
        end
      end
      // drive this cycle
      act_valid    = ($urandom_range(0, 3) != 0);
      act_thread   = TW'($urandom_range(0, 3) == 0 ? $urandom_range(1, 3) : 0);
      action_valid = (cyc < 10000) ? ($urandom_range(0, 299) == 0) : ($urandom_range(0, 9) == 0);
      if (act_valid) begin
        if (ref_cnt[act_thread] == 63) saturations++;
        else ref_cnt[act_thread]++;
      end
      exp_valid = action_valid;
      if (action_valid) begin
        exp_total = 0;
        for (int i = 0; i < N; i++) begin
          exp_act[i] = ref_cnt[i];
          exp_total += ref_cnt[i];
          ref_cnt[i] = 0;
        end
      end
    end
    checks++;
    if (saturations == 0 || snaps < 100) begin
      failures++; $display("coverage: saturations=%0d snaps=%0d", saturations, snaps);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
