// tb_bh_score_sets -- random score increments and window boundaries against
// a two-set reference model. Checks, every cycle, the active-set scores, their
// sum, the other set, the active-set index and the upd_done pulse; the score
// width is cut to 12 bits so that saturation is exercised.
module tb_bh_score_sets;
  localparam int unsigned N = 4, SCORE_W = 12, FRAC_W = 7, INC_W = 8, SUM_W = SCORE_W + 3;
  logic clk = 1'b0, rst_n = 1'b0;
  logic inc_valid = 1'b0, window_end = 1'b0;
  logic [N-1:0][INC_W-1:0] inc = '0;
  logic upd_done, active_set;
  logic [N-1:0][SCORE_W-1:0] active_score, train_score;
  logic [SUM_W-1:0] active_sum;
  int checks = 0, failures = 0, swaps = 0, sats = 0;

  bh_score_sets #(.N(N), .SCORE_W(SCORE_W), .FRAC_W(FRAC_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int m [2][N];
  int act;
  bit exp_upd;

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%t %s got %0d exp %0d", $time, what, got, exp);
    end
  endtask

  initial begin
    int sum;
    foreach (m[k, i]) m[k][i] = 0;
    act = 0; exp_upd = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int cyc = 0; cyc < 30000; cyc++) begin
      @(negedge clk);
      sum = 0;
      for (int i = 0; i < N; i++) begin
        check($sformatf("active[%0d]", i), int'(active_score[i]), m[act][i]);
        check($sformatf("train[%0d]", i), int'(train_score[i]), m[1-act][i]);
        sum += m[act][i];
      end
      check("sum", int'(active_sum), sum);
      check("active_set", int'(active_set), act);
      check("upd_done", int'(upd_done), int'(exp_upd));
      // drive
      inc_valid  = ($urandom_range(0, 1) == 0);
      window_end = ($urandom_range(0, 99) == 0);
      for (int i = 0; i < N; i++) inc[i] = INC_W'($urandom_range(0, 128));
      exp_upd = inc_valid;
      for (int k = 0; k < 2; k++)
        for (int i = 0; i < N; i++) begin
          if (window_end && k == act) m[k][i] = 0;
          else if (inc_valid) begin
            m[k][i] += inc[i];
            if (m[k][i] > 4095) begin m[k][i] = 4095; sats++; end
          end
        end
      if (window_end) begin act = 1 - act; swaps++; end
    end
    checks++;
    if (swaps < 100 || sats == 0) begin failures++; $display("coverage swaps=%0d sats=%0d", swaps, sats); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
