// bh_score_attributor -- share of a preventive action owed by each thread.
//
// For every snapshot of activation counts it computes, for each thread i,
//   inc_i = floor(act_i * 2^FRAC_W / total)
// i.e. act_i / total as an unsigned fixed-point number with FRAC_W fractional
// bits (at most 1.0). All N quotients are produced by N restoring dividers
// that run in parallel, one quotient bit per pipeline stage, so the block
// accepts a new snapshot every cycle and delivers it FRAC_W+1 cycles later
// (8 cycles at the defaults). A snapshot with total == 0 yields zero for every
// thread. Dividing each thread's activations by the total is the paper's
// attribution rule; the fixed-point format, the divider and the zero-total
// rule are choices of this design.
module bh_score_attributor #(
  parameter int unsigned N      = bh_pkg::NUM_THREADS,
  parameter int unsigned ACT_W  = bh_pkg::ACT_W,
  parameter int unsigned FRAC_W = bh_pkg::FRAC_W,
  localparam int unsigned TOT_W = ACT_W + $clog2(N + 1),
  localparam int unsigned INC_W = FRAC_W + 1,
  localparam int unsigned STAGES = FRAC_W + 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [N-1:0][ACT_W-1:0]  in_act,
  input  logic [TOT_W-1:0]         in_total,
  output logic                     out_valid,
  output logic [N-1:0][INC_W-1:0]  out_inc
);
  localparam int unsigned REM_W = TOT_W + 1;

  logic                            v_q   [STAGES];
  logic [TOT_W-1:0]                tot_q [STAGES];
  logic [N-1:0][REM_W-1:0]         rem_q [STAGES];
  logic [N-1:0][INC_W-1:0]         quo_q [STAGES];

  // One restoring-division step per stage. Stage 0 decides the integer bit
  // (act >= total); each later stage shifts the remainder and decides one
  // fractional bit.
  logic [N-1:0][REM_W-1:0]         rem_d [STAGES];
  logic [N-1:0][INC_W-1:0]         quo_d [STAGES];

  always_comb begin
    for (int s = 0; s < STAGES; s++) begin
      for (int i = 0; i < N; i++) begin
        logic [REM_W-1:0] r;
        logic [TOT_W-1:0] t;
        logic             b;
        if (s == 0) begin
          r = REM_W'(in_act[i]);
          t = in_total;
          quo_d[s][i] = '0;
        end else begin
          r = {rem_q[(s == 0) ? 0 : s-1][i][REM_W-2:0], 1'b0};
          t = tot_q[(s == 0) ? 0 : s-1];
          quo_d[s][i] = quo_q[(s == 0) ? 0 : s-1][i];
        end
        b = (t != '0) && (r >= REM_W'(t));
        rem_d[s][i] = b ? (r - REM_W'(t)) : r;
        quo_d[s][i][INC_W-1-s] = b;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < STAGES; s++) begin
        v_q[s]   <= 1'b0;
        tot_q[s] <= '0;
        rem_q[s] <= '0;
        quo_q[s] <= '0;
      end
    end else begin
      v_q[0]   <= in_valid;
      tot_q[0] <= in_total;
      for (int s = 1; s < STAGES; s++) begin
        v_q[s]   <= v_q[s-1];
        tot_q[s] <= tot_q[s-1];
      end
      for (int s = 0; s < STAGES; s++) begin
        rem_q[s] <= rem_d[s];
        quo_q[s] <= quo_d[s];
      end
    end
  end

  assign out_valid = v_q[STAGES-1];
  assign out_inc   = quo_q[STAGES-1];

endmodule
