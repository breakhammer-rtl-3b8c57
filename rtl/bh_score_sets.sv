// bh_score_sets -- two time-interleaved sets of RowHammer-preventive scores.
//
// Each hardware thread owns one SCORE_W-bit score counter in each of two
// counter sets. Every score increment (inc_valid, one fixed-point increment
// per thread, FRAC_W fractional bits) is added, saturating, to both sets. Only
// the active set answers queries: its scores and their sum are the outputs.
// At window_end the active set is cleared and the other set, which has been
// counting since the previous window end, becomes active, so queries after a
// window boundary already see a full window of history. If an increment
// arrives in the window_end cycle it is added only to the set that is kept.
// upd_done pulses in the cycle after each increment, when the outputs already
// include it. Two interleaved sets, updating both and resetting only the active
// one are the paper's; saturation and the same-cycle rule are this design's.
module bh_score_sets #(
  parameter int unsigned N       = bh_pkg::NUM_THREADS,
  parameter int unsigned SCORE_W = bh_pkg::SCORE_W,
  parameter int unsigned FRAC_W  = bh_pkg::FRAC_W,
  localparam int unsigned INC_W  = FRAC_W + 1,
  localparam int unsigned SUM_W  = SCORE_W + $clog2(N + 1)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       inc_valid,
  input  logic [N-1:0][INC_W-1:0]    inc,
  input  logic                       window_end,
  output logic                       upd_done,
  output logic                       active_set,    // index of the active set
  output logic [N-1:0][SCORE_W-1:0]  active_score,
  output logic [SUM_W-1:0]           active_sum,
  output logic [N-1:0][SCORE_W-1:0]  train_score    // the other set, for observation
);
  logic [N-1:0][SCORE_W-1:0] set_q [2];
  logic                      act_q;

  function automatic logic [SCORE_W-1:0] sat_add(logic [SCORE_W-1:0] a, logic [INC_W-1:0] b);
    logic [SCORE_W:0] s;
    s = {1'b0, a} + (SCORE_W+1)'(b);
    return s[SCORE_W] ? '1 : s[SCORE_W-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      set_q[0] <= '0;
      set_q[1] <= '0;
      act_q    <= 1'b0;
      upd_done <= 1'b0;
    end else begin
      upd_done <= inc_valid;
      for (int k = 0; k < 2; k++) begin
        for (int i = 0; i < N; i++) begin
          if (window_end && act_q == 1'(k))
            set_q[k][i] <= '0;
          else if (inc_valid)
            set_q[k][i] <= sat_add(set_q[k][i], inc[i]);
        end
      end
      if (window_end) act_q <= ~act_q;
    end
  end

  always_comb begin
    active_sum = '0;
    for (int i = 0; i < N; i++) begin
      active_score[i] = set_q[act_q][i];
      train_score[i]  = set_q[~act_q][i];
      active_sum      = active_sum + SUM_W'(set_q[act_q][i]);
    end
  end

  assign active_set = act_q;

endmodule
