// breakhammer -- throttles the hardware threads that keep a RowHammer
// mitigation mechanism busy.
//
// Inputs come from the memory controller (every row activation and the
// hardware thread it serves), from the RowHammer mitigation mechanism (a pulse
// for every preventive action: a preventive refresh, a row migration, an RFM
// command or a PRAC back-off) and from the last-level cache (miss-buffer
// allocations and releases). Outputs tell the cache which threads may
// allocate another miss buffer.
//
// Pipeline, all stages registered, one action accepted per cycle:
//   act_tracker (1 cycle)       per-thread ACT counts since the last action
//   score_attributor (FRAC_W+1) each thread's share act_i/total of the action
//   score_sets (1)              add shares to two time-interleaved score sets
//   suspect_detector (1)        score >= TH_threat and > (1+TH_outlier)*mean
//   quota_ctrl (1)              cut the quota of a newly marked suspect
// so a quota changes 12 cycles after the action at the defaults.
// With REGA_MODE set (for a REGA-style mitigation, which has no discrete
// actions to share out) bh_rega_scorer replaces the first two stages and a
// thread earns one point per REGA_T of its activations; action_valid is then
// ignored.
// window_timer closes a throttling window every WINDOW_CYCLES cycles, which
// swaps the score sets and ends or renews each thread's suspect status.
// mshr_gate compares each thread's miss-buffer occupancy with its quota.
// The software port returns the active-set score of thread sw_thread in the
// next cycle, for the optional feedback to system software.
//
// The block structure, the score rule, the outlier test, the quota equation
// and the window mechanism follow the paper; the pipeline depth, port
// protocols and fixed-point score format are this design's.
module breakhammer #(
  parameter int unsigned N              = bh_pkg::NUM_THREADS,
  parameter int unsigned NUM_MSHR       = bh_pkg::NUM_MSHR,
  parameter int unsigned ACT_W          = bh_pkg::ACT_W,
  parameter int unsigned SCORE_W        = bh_pkg::SCORE_W,
  parameter int unsigned FRAC_W         = bh_pkg::FRAC_W,
  parameter int unsigned WINDOW_CYCLES  = bh_pkg::WINDOW_CYCLES,
  parameter int unsigned TH_THREAT      = bh_pkg::TH_THREAT,
  parameter int unsigned TH_OUTLIER_NUM = bh_pkg::TH_OUTLIER_NUM,
  parameter int unsigned TH_OUTLIER_DEN = bh_pkg::TH_OUTLIER_DEN,
  parameter int unsigned P_OLDSUSPECT   = bh_pkg::P_OLDSUSPECT,
  parameter int unsigned P_NEWSUSPECT   = bh_pkg::P_NEWSUSPECT,
  parameter bit          REGA_MODE      = 1'b0,
  parameter int unsigned REGA_T         = bh_pkg::REGA_T,
  localparam int unsigned TW            = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned QW            = $clog2(NUM_MSHR + 1)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // memory controller: row activations
  input  logic                       act_valid,
  input  logic [TW-1:0]              act_thread,
  // RowHammer mitigation mechanism: preventive action performed
  input  logic                       action_valid,
  // last-level cache: miss-buffer bookkeeping
  input  logic                       mshr_alloc_valid,
  input  logic [TW-1:0]              mshr_alloc_thread,
  input  logic                       mshr_free_valid,
  input  logic [TW-1:0]              mshr_free_thread,
  output logic [N-1:0]               mshr_alloc_ok,
  output logic [N-1:0][QW-1:0]       mshr_occupancy,
  // status
  output logic [N-1:0][QW-1:0]       quota,
  output logic [N-1:0]               suspect,
  output logic [N-1:0]               recent_suspect,
  output logic [N-1:0]               quota_cut,
  output logic                       window_end,
  output logic                       active_set,
  // system software feedback
  input  logic [TW-1:0]              sw_thread,
  output logic [SCORE_W-1:0]         sw_score
);
  localparam int unsigned TOT_W = ACT_W + $clog2(N + 1);
  localparam int unsigned INC_W = FRAC_W + 1;
  localparam int unsigned SUM_W = SCORE_W + $clog2(N + 1);

  logic                      snap_valid;
  logic [N-1:0][ACT_W-1:0]   snap_act;
  logic [TOT_W-1:0]          snap_total;
  logic                      inc_valid;
  logic [N-1:0][INC_W-1:0]   inc;
  logic                      upd_done;
  logic [N-1:0][SCORE_W-1:0] active_score;
  logic [SUM_W-1:0]          active_sum;
  logic [N-1:0]              mark;

  bh_window_timer #(.WINDOW_CYCLES(WINDOW_CYCLES)) u_timer (
    .clk, .rst_n, .window_end);

  bh_act_tracker #(.N(N), .ACT_W(ACT_W)) u_acts (
    .clk, .rst_n, .act_valid, .act_thread, .action_valid,
    .snap_valid, .snap_act, .snap_total);

  logic                      share_valid, rega_valid;
  logic [N-1:0][INC_W-1:0]   share_inc, rega_inc;

  bh_score_attributor #(.N(N), .ACT_W(ACT_W), .FRAC_W(FRAC_W)) u_attr (
    .clk, .rst_n, .in_valid(snap_valid), .in_act(snap_act), .in_total(snap_total),
    .out_valid(share_valid), .out_inc(share_inc));

  bh_rega_scorer #(.N(N), .FRAC_W(FRAC_W), .REGA_T(REGA_T)) u_rega (
    .clk, .rst_n, .act_valid, .act_thread, .out_valid(rega_valid), .out_inc(rega_inc));

  // attribution rule: activation shares at each preventive action, or
  // (REGA_MODE) one point per REGA_T activations of a thread
  assign inc_valid = REGA_MODE ? rega_valid : share_valid;
  assign inc       = REGA_MODE ? rega_inc   : share_inc;

  bh_score_sets #(.N(N), .SCORE_W(SCORE_W), .FRAC_W(FRAC_W)) u_scores (
    .clk, .rst_n, .inc_valid, .inc, .window_end, .upd_done, .active_set,
    .active_score, .active_sum, .train_score());

  bh_suspect_detector #(.N(N), .SCORE_W(SCORE_W), .FRAC_W(FRAC_W),
    .TH_THREAT(TH_THREAT), .TH_OUTLIER_NUM(TH_OUTLIER_NUM),
    .TH_OUTLIER_DEN(TH_OUTLIER_DEN)) u_detect (
    .clk, .rst_n, .chk_valid(upd_done), .score(active_score), .sum(active_sum),
    .mark);

  bh_quota_ctrl #(.N(N), .NUM_MSHR(NUM_MSHR), .P_OLDSUSPECT(P_OLDSUSPECT),
    .P_NEWSUSPECT(P_NEWSUSPECT)) u_quota (
    .clk, .rst_n, .mark, .window_end, .quota, .suspect, .recent_suspect,
    .quota_cut);

  bh_mshr_gate #(.N(N), .NUM_MSHR(NUM_MSHR)) u_gate (
    .clk, .rst_n, .quota, .alloc_valid(mshr_alloc_valid),
    .alloc_thread(mshr_alloc_thread), .free_valid(mshr_free_valid),
    .free_thread(mshr_free_thread), .alloc_ok(mshr_alloc_ok), .occupancy(mshr_occupancy));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sw_score <= '0;
    else        sw_score <= active_score[sw_thread];
  end

endmodule
