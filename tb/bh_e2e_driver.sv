// bh_e2e_driver -- end-to-end stimulus and checker for breakhammer.
//
// Stands in for the system around BreakHammer:
//  * four hardware threads with a last-level cache whose miss buffers are
//    held for MISS_LAT cycles; thread 0 is an attacker that wants a new miss
//    every cycle during the first ATTACK_WINDOWS windows (each miss opens a
//    row: one ACT), then behaves like the others, which want a miss with
//    probability 1/ODDSi (16 by default) and open a row on half of them;
//    with ATTACK_WINDOWS = 0 all four threads are benign and no thread may
//    lose any of its quota;
//  * a cache port that allocates at most one miss buffer per cycle
//    (round-robin among threads that want one and are allowed by
//    mshr_alloc_ok) and releases at most one per cycle;
//  * an RFM-style mitigation trigger that performs a preventive action once
//    every RFM_ACTS activations, holding it back in the last QUIET cycles of
//    a window so that nothing is in flight at a window boundary;
//  * or, with REGA_T > 0, the REGA rule: one point per REGA_T activations of
//    a thread; the cache then issues no miss in the last QUIET cycles.
// A reference model of the paper's algorithm (shares act_i/total with 7
// fractional bits, two interleaved score sets, threshold and outlier test in
// real arithmetic, quota equation) is updated at each action. Near the end of
// every window the checker compares the design's quotas, suspect flags and
// scores (read through the software port) with the model, and counts how
// often each mechanism fired. It prints the TB_RESULT line and ends the run.
module bh_e2e_driver #(
  parameter int unsigned WINDOW_CYCLES  = 20000,
  parameter int unsigned WINDOWS        = 6,
  parameter int unsigned ATTACK_WINDOWS = 4,
  parameter int unsigned MISS_LAT       = 40,
  parameter int unsigned RFM_ACTS       = 16,
  parameter int unsigned QUIET          = 24,
  parameter int unsigned REGA_T         = 0,   // 0: activation shares; else REGA rule
  // a benign thread wants a new miss with probability 1/ODDSi per cycle
  parameter int unsigned ODDS0 = 16, ODDS1 = 16, ODDS2 = 16, ODDS3 = 16,
  localparam int unsigned N = 4, QW = 7, TW = 2, SCORE_W = 32
) (
  input  logic                  clk,
  output logic                  rst_n,
  output logic                  act_valid,
  output logic [TW-1:0]         act_thread,
  output logic                  action_valid,
  output logic                  mshr_alloc_valid,
  output logic [TW-1:0]         mshr_alloc_thread,
  output logic                  mshr_free_valid,
  output logic [TW-1:0]         mshr_free_thread,
  input  logic [N-1:0]          mshr_alloc_ok,
  input  logic [N-1:0][QW-1:0]  mshr_occupancy,
  input  logic [N-1:0][QW-1:0]  quota,
  input  logic [N-1:0]          suspect,
  input  logic [N-1:0]          recent_suspect,
  input  logic [N-1:0]          quota_cut,
  input  logic                  window_end,
  input  logic                  active_set,
  output logic [TW-1:0]         sw_thread,
  input  logic [SCORE_W-1:0]    sw_score
);
  localparam longint W = longint'(WINDOW_CYCLES);
  localparam longint NCYC = W * WINDOWS + 20;  // cycle k (from 1) sees count k mod W

  int checks = 0, failures = 0;

  task automatic fail(input string msg);
    failures++;
    if (failures < 20) $display("[%0t] FAIL: %s", $time, msg);
  endtask

  task automatic finish_run();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  // watchdog: a fixed number of cycles beyond the planned run
  initial begin
    repeat (int'(NCYC) + 1000) @(posedge clk);
    fail("watchdog expired");
    finish_run();
  end

  // ---------------- reference model ----------------
  longint m_act [N];
  longint m_set [2][N];
  int     m_active;
  int     m_q [N];
  bit     m_s [N], m_rs [N];

  int rega_cnt [N];

  // detection and quota update after the model scores changed
  function automatic void model_detect();
    longint sum;
    sum = 0;
    for (int i = 0; i < N; i++) sum += m_set[m_active][i];
    for (int i = 0; i < N; i++) begin
      real s;
      s = real'(m_set[m_active][i]);
      if (s / 128.0 >= 32.0 && s > 1.65 * (real'(sum) / 4.0) && !m_s[i]) begin
        m_s[i] = 1;
        m_q[i] = m_rs[i] ? ((m_q[i] > 1) ? m_q[i] - 1 : 0) : m_q[i] / 10;
      end
    end
  endfunction

  function automatic void model_rega_act(input int t);
    rega_cnt[t]++;
    if (rega_cnt[t] == int'(REGA_T)) begin
      rega_cnt[t] = 0;
      for (int k = 0; k < 2; k++) m_set[k][t] += 128;
      model_detect();
    end
  endfunction

  function automatic void model_action();
    longint tot, sh;
    tot = 0;
    for (int i = 0; i < N; i++) tot += m_act[i];
    for (int i = 0; i < N; i++) begin
      sh = (tot == 0) ? 0 : (m_act[i] * 128) / tot;
      for (int k = 0; k < 2; k++) begin
        m_set[k][i] += sh;
        if (m_set[k][i] > 64'hFFFF_FFFF) m_set[k][i] = 64'hFFFF_FFFF;
      end
      m_act[i] = 0;
    end
    model_detect();
  endfunction

  function automatic void model_window_end();
    for (int i = 0; i < N; i++) m_set[m_active][i] = 0;
    m_active = 1 - m_active;
    for (int i = 0; i < N; i++) begin
      if (!m_s[i]) m_q[i] = 64;
      m_rs[i] = m_s[i];
      m_s[i]  = 0;
    end
  endfunction

  // ---------------- traffic ----------------
  longint due [N][$];
  bit     want [N];
  int     rr;
  int     odds [N];

  // mechanism counters
  int n_act = 0, n_action = 0, n_wend = 0, n_new_cut = 0, n_old_cut = 0;
  int n_restore = 0, n_denied = 0, n_swap = 0, n_sw = 0, n_benign_suspect = 0;
  int atk_early [WINDOWS];
  int rfm_cnt;
  logic prev_active;
  logic [N-1:0][QW-1:0] prev_quota;

  initial begin
    rst_n = 1'b0; act_valid = 1'b0; act_thread = '0; action_valid = 1'b0;
    mshr_alloc_valid = 1'b0; mshr_alloc_thread = '0;
    mshr_free_valid = 1'b0; mshr_free_thread = '0; sw_thread = '0;
    for (int i = 0; i < N; i++) begin
      m_act[i] = 0; m_set[0][i] = 0; m_set[1][i] = 0; m_q[i] = 64; m_s[i] = 0; m_rs[i] = 0;
      want[i] = 0; rega_cnt[i] = 0;
    end
    for (int w = 0; w < WINDOWS; w++) atk_early[w] = 0;
    m_active = 0; rr = 0; rfm_cnt = 0;
    odds[0] = int'(ODDS0); odds[1] = int'(ODDS1); odds[2] = int'(ODDS2); odds[3] = int'(ODDS3);
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    prev_active = active_set;
    prev_quota  = quota;
    for (longint k = 1; k <= NCYC; k++) begin
      longint phase, win;
      bit attack, quiet;
      @(negedge clk);
      phase  = k % W;
      win    = k / W;
      attack = (win < longint'(ATTACK_WINDOWS));
      quiet  = (phase >= W - longint'(QUIET));

      // ---- observe the outputs of the previous cycle ----
      checks++;
      if (window_end !== (phase == W - 1)) fail($sformatf("window_end=%0b at phase %0d", window_end, phase));
      if (window_end) n_wend++;
      if (active_set != prev_active) n_swap++;
      prev_active = active_set;
      for (int i = 0; i < N; i++) begin
        if (quota_cut[i] &&  recent_suspect[i]) n_old_cut++;
        if (quota_cut[i] && !recent_suspect[i]) n_new_cut++;
        if (quota[i] == QW'(64) && prev_quota[i] != QW'(64)) n_restore++;
        if (i != 0 && suspect[i]) n_benign_suspect++;
      end
      prev_quota = quota;
      if (phase == W - 3) begin
        for (int i = 0; i < N; i++) begin
          checks++;
          if (int'(quota[i]) != m_q[i] || suspect[i] != m_s[i] || recent_suspect[i] != m_rs[i])
            fail($sformatf("window %0d thread %0d: quota %0d s %0b rs %0b, model %0d %0b %0b",
                           win, i, quota[i], suspect[i], recent_suspect[i], m_q[i], m_s[i], m_rs[i]));
        end
        if (win == 0 && ATTACK_WINDOWS > 0) begin
          // paper arithmetic: a first-time suspect keeps 64/10 miss buffers
          checks++;
          if (quota[0] != QW'(6)) fail($sformatf("attacker quota after window 0 is %0d, exp 6", quota[0]));
        end
      end
      if (phase >= W - 9 && phase <= W - 6) begin
        int t;
        t = int'(phase - (W - 9));
        checks++; n_sw++;
        if (longint'(sw_score) != m_set[m_active][t])
          fail($sformatf("window %0d score of thread %0d = %0d, model %0d", win, t, sw_score, m_set[m_active][t]));
      end
      sw_thread = (phase >= W - 10 && phase <= W - 7) ? TW'(phase - (W - 10)) : '0;

      // ---- drive this cycle ----
      // release the oldest finished miss
      mshr_free_valid = 1'b0;
      begin
        int best;
        best = -1;
        for (int i = 0; i < N; i++)
          if (due[i].size() > 0 && due[i][0] <= k && (best < 0 || due[i][0] < due[best][0])) best = i;
        if (best >= 0) begin
          void'(due[best].pop_front());
          mshr_free_valid  = 1'b1;
          mshr_free_thread = TW'(best);
        end
      end
      // new misses wanted
      for (int i = 0; i < N; i++) begin
        if (i == 0 && attack) want[i] = 1;
        else if (!want[i] && $urandom_range(0, odds[i] - 1) == 0) want[i] = 1;
        if (want[i] && !mshr_alloc_ok[i]) n_denied++;
      end
      // one allocation, round robin
      mshr_alloc_valid = 1'b0;
      act_valid = 1'b0;
      for (int j = 0; j < N; j++) begin
        int t;
        t = (rr + j) % N;
        if (!mshr_alloc_valid && want[t] && mshr_alloc_ok[t] && !(REGA_T > 0 && quiet)) begin
          mshr_alloc_valid  = 1'b1;
          mshr_alloc_thread = TW'(t);
          want[t] = 0;
          due[t].push_back(k + longint'(MISS_LAT));
          rr = (t + 1) % N;
          if ((t == 0 && attack) || $urandom_range(0, 1) == 0) begin
            act_valid = 1'b1;
            act_thread = TW'(t);
          end
          if (t == 0 && phase < 400) atk_early[int'(win)]++;
        end
      end
      // RFM-style mitigation trigger
      if (act_valid) begin
        n_act++;
        rfm_cnt++;
        if (m_act[act_thread] < 65535) m_act[act_thread]++;
      end
      if (act_valid && REGA_T > 0) model_rega_act(int'(act_thread));
      action_valid = (REGA_T == 0) && (rfm_cnt >= RFM_ACTS) && !quiet;
      if (action_valid) begin
        rfm_cnt = 0;
        n_action++;
        model_action();
      end
      if (phase == W - 1) model_window_end();
    end

    // ---- every mechanism must have happened ----
    $display("acts=%0d actions=%0d window_ends=%0d swaps=%0d new_suspect_cuts=%0d old_suspect_cuts=%0d restores=%0d denied=%0d sw_reads=%0d benign_suspect_cycles=%0d",
             n_act, n_action, n_wend, n_swap, n_new_cut, n_old_cut, n_restore, n_denied, n_sw, n_benign_suspect);
    for (int w = 0; w < WINDOWS; w++) $display("window %0d: attacker misses in first 400 cycles = %0d", w, atk_early[w]);
    checks++; if (n_act == 0)     fail("no activations");
    if (REGA_T == 0) begin
      checks++; if (n_action == 0)  fail("no preventive actions");
    end
    checks++; if (n_wend != WINDOWS) fail($sformatf("%0d window ends, exp %0d", n_wend, WINDOWS));
    checks++; if (n_swap != WINDOWS) fail("score sets did not swap at each window end");
    checks++; if (n_sw == 0)      fail("software port never read");
    if (ATTACK_WINDOWS == 0) begin
      // all-benign mix: nobody may be throttled
      checks++; if (n_new_cut != 0 || n_old_cut != 0) fail("a benign thread lost quota");
      checks++; if (n_benign_suspect != 0) fail("a benign thread was flagged");
    end else begin
      checks++; if (n_new_cut == 0) fail("no new-suspect quota cut");
      checks++; if (n_old_cut == 0) fail("no repeat-suspect quota cut");
      checks++; if (n_denied == 0)  fail("no allocation was throttled");
    end
    if (ATTACK_WINDOWS > 0 && WINDOWS > ATTACK_WINDOWS + 1) begin
      checks++; if (n_restore == 0) fail("quota never restored");
    end
    if (ATTACK_WINDOWS > 0 && WINDOWS > 1) begin
      checks++;
      if (atk_early[1] * 2 >= atk_early[0]) fail("attacker not slowed down in window 1");
    end
    finish_run();
  end
endmodule
