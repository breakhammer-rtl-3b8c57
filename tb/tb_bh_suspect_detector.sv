// tb_bh_suspect_detector -- checks the outlier test with real-valued
// arithmetic: a thread is marked one cycle after chk_valid when
// score/128 >= 32 and score > 1.65 * mean(score). Random score vectors
// (one large score among small ones, all similar, near the threshold) plus
// directed cases exactly on both boundaries.
module tb_bh_suspect_detector;
  localparam int unsigned N = 4, SCORE_W = 32, FRAC_W = 7, SUM_W = SCORE_W + 3;
  logic clk = 1'b0, rst_n = 1'b0;
  logic chk_valid = 1'b0;
  logic [N-1:0][SCORE_W-1:0] score = '0;
  logic [SUM_W-1:0] sum = '0;
  logic [N-1:0] mark;
  int checks = 0, failures = 0, marks = 0;

  bh_suspect_detector dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [N-1:0] exp_mark;
  bit tie;   // a case lying exactly on the outlier boundary (must not mark)

  task automatic set_scores(input longint s0, input longint s1, input longint s2, input longint s3);
    longint t;
    score[0] = SCORE_W'(s0); score[1] = SCORE_W'(s1);
    score[2] = SCORE_W'(s2); score[3] = SCORE_W'(s3);
    t = s0 + s1 + s2 + s3;
    sum = SUM_W'(t);
    exp_mark = '0;
    for (int i = 0; i < N; i++) begin
      real s, mean;
      s = real'(score[i]);
      mean = real'(t) / 4.0;
      if (s / 128.0 >= 32.0 && s > 1.65 * mean) exp_mark[i] = 1'b1;
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      @(negedge clk);
      chk_valid = ($urandom_range(0, 3) != 0);
      case ($urandom_range(0, 3))
        0: set_scores(longint'($urandom_range(0, 20000)), $urandom_range(0, 3000),
                      $urandom_range(0, 3000), $urandom_range(0, 3000));
        1: set_scores(longint'($urandom_range(3000, 6000)), $urandom_range(3000, 6000),
                      $urandom_range(3000, 6000), $urandom_range(3000, 6000));
        2: set_scores(longint'($urandom) * 2, $urandom_range(0, 100000),
                      $urandom, $urandom_range(0, 1000));
        default: set_scores(4096 - 2 + $urandom_range(0, 4), $urandom_range(0, 1000),
                      $urandom_range(0, 1000), $urandom_range(0, 1000));
      endcase
      if (cyc == 100) set_scores(4095, 0, 0, 0);          // just under TH_threat
      if (cyc == 101) set_scores(4096, 0, 0, 0);          // exactly TH_threat: marks
      if (cyc == 102) set_scores(6600, 3000, 3400, 3000); // 6600 == 1.65*mean: no mark
      if (cyc == 103) set_scores(6601, 3000, 3400, 3000); // just above: marks
      if (cyc >= 100 && cyc <= 103) chk_valid = 1'b1;
      if (cyc == 102) exp_mark = 4'b0000;                 // the exact tie
      @(posedge clk);
      #1;
      checks++;
      if (mark !== (chk_valid ? exp_mark : 4'b0)) begin
        failures++;
        $display("cyc %0d scores %0d %0d %0d %0d mark=%b exp=%b", cyc,
                 score[0], score[1], score[2], score[3], mark, exp_mark);
      end
      if (cyc == 101 || cyc == 103) begin
        checks++;
        if (mark[0] !== 1'b1) begin failures++; $display("boundary case %0d not marked", cyc); end
      end
      marks += $countones(mark);
    end
    checks++;
    if (marks < 100) begin failures++; $display("too few marks %0d", marks); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
