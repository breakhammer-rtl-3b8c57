// tb_bh_security_bound -- the multi-threaded "rigging" attack on the
// outlier test, run against the suspect detector.
//
// An attacker who owns N_atk of N threads gives all of them the same score R
// to raise the mean; the N_ben benign threads all have score B. An attack
// thread stays hidden while
//   R < (N_atk*R + N_ben*B) / N * (1 + TH_outlier)
// i.e. R/B < (1+T)*N_ben / (N - (1+T)*N_atk), and cannot be caught at all
// once (1+T)*N_atk >= N. For every split of N threads the testbench binary-
// searches the smallest R the detector marks and checks that it sits on this
// bound (to one score step), and that an unbounded split is never marked.
// Two detectors are tested: four threads with TH_outlier = 0.65 (the default)
// and ten threads with TH_outlier = 0.05. The two published points are also
// checked: 50% attack threads at 0.65 may reach 4.71x the benign score, and
// 90% at 0.05 may reach 1.90x. Last, a clear outlier must still be ignored
// until its score reaches TH_threat = 32.
module tb_bh_security_bound;
  localparam int unsigned SW = 32;
  localparam int unsigned FW = 7;
  localparam longint unsigned B = 64'd1000 << FW;   // benign score

  logic clk;
  initial clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, chk4, chk10;

  logic [3:0][SW-1:0] score4;
  logic [SW+2:0]      sum4;
  logic [3:0]         mark4;
  logic [9:0][SW-1:0] score10;
  logic [SW+3:0]      sum10;
  logic [9:0]         mark10;

  bh_suspect_detector #(.N(4), .SCORE_W(SW), .FRAC_W(FW), .TH_THREAT(32),
                        .TH_OUTLIER_NUM(65), .TH_OUTLIER_DEN(100))
    u_d4 (.clk, .rst_n, .chk_valid(chk4), .score(score4), .sum(sum4), .mark(mark4));
  bh_suspect_detector #(.N(10), .SCORE_W(SW), .FRAC_W(FW), .TH_THREAT(32),
                        .TH_OUTLIER_NUM(5), .TH_OUTLIER_DEN(100))
    u_d10 (.clk, .rst_n, .chk_valid(chk10), .score(score10), .sum(sum10), .mark(mark10));

  int checks = 0, failures = 0;

  // threads 0..na-1 attack with score r, the rest are benign with score B;
  // returns whether attack thread 0 is marked (and checks no benign one is)
  longint unsigned b_cur = B;

  task automatic probe(input int n, input int na, input longint unsigned r,
                       output logic hit);
    longint unsigned s;
    s = 0;
    for (int i = 0; i < n; i++) begin
      longint unsigned v;
      v = (i < na) ? r : b_cur;
      s += v;
      if (n == 4) score4[i] = SW'(v); else score10[i] = SW'(v);
    end
    sum4 = (SW+3)'(s); sum10 = (SW+4)'(s);
    if (n == 4) chk4 = 1'b1; else chk10 = 1'b1;
    @(posedge clk); #1;                     // mark is registered here
    chk4 = 1'b0; chk10 = 1'b0;
    hit = (n == 4) ? mark4[0] : mark10[0];
    for (int i = na; i < n; i++) begin
      checks++;
      if (((n == 4) ? mark4[i] : mark10[i]) !== 1'b0) begin
        failures++;
        $display("FAIL: benign thread %0d marked (n=%0d na=%0d)", i, n, na);
      end
    end
  endtask

  task automatic sweep(input int n, input real t);
    for (int na = 1; na < n; na++) begin
      real den, bound;
      logic hit;
      den = real'(n) - (1.0 + t) * real'(na);
      if (den <= 0.0) begin
        // no score can make an attack thread an outlier
        probe(n, na, 200 * B, hit);
        checks++;
        if (hit) begin failures++; $display("FAIL: n=%0d na=%0d marked", n, na); end
      end else begin
        longint unsigned lo, hi, mid;
        bound = (1.0 + t) * real'(n - na) / den;
        lo = B; hi = 200 * B;                 // lo unmarked, hi marked
        probe(n, na, hi, hit);
        checks++;
        if (!hit) begin failures++; $display("FAIL: n=%0d na=%0d never marked", n, na); end
        while (hi - lo > 1) begin
          mid = (lo + hi) / 2;
          probe(n, na, mid, hit);
          if (hit) hi = mid; else lo = mid;
        end
        checks++;
        if (real'(hi) < bound * real'(B) || real'(hi) > bound * real'(B) + 1.0) begin
          failures++;
          $display("FAIL: n=%0d na=%0d first marked at %0f x, bound %0f x",
                   n, na, real'(hi) / real'(B), bound);
        end
        $display("  %0d of %0d threads attack, TH_outlier %0.2f: hidden up to %0.3f x benign",
                 na, n, t, real'(lo) / real'(B));
        if ((n == 4 && na == 2) || (n == 10 && na == 9)) begin
          real want, got;
          want = (n == 4) ? 4.71 : 1.90;
          got  = real'(lo) / real'(B);
          checks++;
          if (got < want || got >= want + 0.01) begin
            failures++;
            $display("FAIL: published %0.2f x, measured %0.4f x", want, got);
          end
        end
      end
    end
  endtask

  initial begin
    rst_n = 1'b0; chk4 = 1'b0; chk10 = 1'b0; score4 = '0; score10 = '0;
    sum4 = '0; sum10 = '0;
    repeat (2) @(posedge clk); #1;
    rst_n = 1'b1;
    @(posedge clk); #1;
    sweep(4, 0.65);
    sweep(10, 0.05);
    // an outlier is still ignored below TH_threat = 32 whole points: benign
    // threads at a quarter point, the attack thread just under and at 32
    begin
      logic hit;
      b_cur = 64'd1 << (FW - 2);
      probe(4, 1, (64'd32 << FW) - 1, hit);
      checks++;
      if (hit) begin failures++; $display("FAIL: marked below TH_threat"); end
      probe(4, 1, 64'd32 << FW, hit);
      checks++;
      if (!hit) begin failures++; $display("FAIL: not marked at TH_threat"); end
      b_cur = B;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
