// tb_bh_quota_ctrl -- quota equation and suspect flags.
// A directed sequence first follows one thread through the life of a suspect
// with hand-computed quotas (64 -> 6 -> 5 -> 4 -> 3 -> restored to 64 -> 6), then random
// marks and window ends are checked against a reference model every cycle.
module tb_bh_quota_ctrl;
  localparam int unsigned N = 4, NUM_MSHR = 64, QW = 7;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0] mark = '0;
  logic window_end = 1'b0;
  logic [N-1:0][QW-1:0] quota;
  logic [N-1:0] suspect, recent_suspect, quota_cut;
  int checks = 0, failures = 0;
  int n_new = 0, n_old = 0, n_restore = 0, n_zero = 0;

  bh_quota_ctrl dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_q(input int t, input int q, input bit s, input bit rs);
    checks++;
    if (int'(quota[t]) != q || suspect[t] !== s || recent_suspect[t] !== rs) begin
      failures++;
      $display("%t thread %0d: quota=%0d suspect=%0b recent=%0b, exp %0d %0b %0b",
               $time, t, quota[t], suspect[t], recent_suspect[t], q, s, rs);
    end
  endtask

  // apply one cycle of stimulus
  task automatic step(input logic [N-1:0] m, input logic we);
    @(negedge clk);
    mark = m; window_end = we;
    @(negedge clk);
    mark = '0; window_end = 1'b0;
  endtask

  // reference model
  int rq [N];
  bit rs_m [N], rrs [N];

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    @(negedge clk);
    for (int i = 0; i < N; i++) expect_q(i, 64, 0, 0);
    step(4'b0001, 0);  expect_q(0, 6, 1, 0);   // new suspect: 64/10
    checks++; if (quota_cut !== 4'b0001) begin failures++; $display("quota_cut %b", quota_cut); end
    step(4'b0001, 0);  expect_q(0, 6, 1, 0);   // second mark, same window: no change
    step(4'b0000, 1);  expect_q(0, 6, 0, 1);   // window ends: recent suspect
    step(4'b0001, 0);  expect_q(0, 5, 1, 1);   // old suspect: 6-1
    step(4'b0000, 1);  expect_q(0, 5, 0, 1);
    step(4'b0001, 0);  expect_q(0, 4, 1, 1);   // old suspect again: 5-1
    step(4'b0001, 1);  expect_q(0, 3, 1, 1);   // mark in the window_end cycle counts for the new window
    step(4'b0000, 1);  expect_q(0, 3, 0, 1);   // not marked in this window ...
    step(4'b0000, 1);  expect_q(0, 64, 0, 0);  // ... so the next boundary restores
    step(4'b0000, 1);  expect_q(0, 64, 0, 0);
    step(4'b0001, 1);  expect_q(0, 6, 1, 0);   // not a suspect in the ending window: 64/10
    for (int i = 1; i < N; i++) expect_q(i, 64, 0, 0);

    // random phase against the model
    for (int i = 0; i < N; i++) begin rq[i] = int'(quota[i]); rs_m[i] = suspect[i]; rrs[i] = recent_suspect[i]; end
    for (int cyc = 0; cyc < 20000; cyc++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) expect_q(i, rq[i], rs_m[i], rrs[i]);
      mark = '0;
      for (int i = 0; i < N; i++) mark[i] = ($urandom_range(0, 9) < (i + 1));
      window_end = ($urandom_range(0, 19) == 0);
      for (int i = 0; i < N; i++) begin
        if (window_end) begin
          if (!rs_m[i]) begin if (rq[i] != 64) n_restore++; rq[i] = 64; end
          rrs[i] = rs_m[i];
          rs_m[i] = 0;
        end
        if (mark[i] && !rs_m[i]) begin
          rs_m[i] = 1;
          if (rrs[i]) begin rq[i] = (rq[i] > 1) ? rq[i] - 1 : 0; n_old++; if (rq[i] == 0) n_zero++; end
          else begin rq[i] = rq[i] / 10; n_new++; end
        end
      end
    end
    checks++;
    if (n_new == 0 || n_old == 0 || n_restore == 0 || n_zero == 0) begin
      failures++; $display("coverage new=%0d old=%0d restore=%0d zero=%0d", n_new, n_old, n_restore, n_zero);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
