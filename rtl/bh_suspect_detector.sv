// bh_suspect_detector -- "thresholded deviation from the mean" outlier test.
//
// Each time the scores have been updated (chk_valid), every thread i is
// checked against two conditions on the active-set scores:
//   score_i >= TH_threat                       (enough actions to matter)
//   score_i >  (1 + TH_outlier) * mean(scores) (an outlier)
// A thread that passes both gets a one-cycle pulse on mark, one cycle after
// chk_valid. The mean is never divided out: the second test is evaluated as
//   score_i * N * DEN > (DEN + NUM) * sum(scores)
// with TH_outlier = NUM/DEN, which is exact. Scores carry FRAC_W fractional
// bits, so TH_threat is compared as TH_THREAT << FRAC_W. The two tests and
// their thresholds (32 and 0.65) are the paper's; the division-free form and
// the registered output are this design's.
module bh_suspect_detector #(
  parameter int unsigned N              = bh_pkg::NUM_THREADS,
  parameter int unsigned SCORE_W        = bh_pkg::SCORE_W,
  parameter int unsigned FRAC_W         = bh_pkg::FRAC_W,
  parameter int unsigned TH_THREAT      = bh_pkg::TH_THREAT,
  parameter int unsigned TH_OUTLIER_NUM = bh_pkg::TH_OUTLIER_NUM,
  parameter int unsigned TH_OUTLIER_DEN = bh_pkg::TH_OUTLIER_DEN,
  localparam int unsigned SUM_W         = SCORE_W + $clog2(N + 1)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       chk_valid,
  input  logic [N-1:0][SCORE_W-1:0]  score,
  input  logic [SUM_W-1:0]           sum,
  output logic [N-1:0]               mark
);
  localparam int unsigned MUL_W = SUM_W + 32;
  localparam logic [MUL_W-1:0] THREAT_FX = MUL_W'(TH_THREAT) << FRAC_W;
  localparam logic [MUL_W-1:0] LHS_K     = MUL_W'(N * TH_OUTLIER_DEN);
  localparam logic [MUL_W-1:0] RHS_K     = MUL_W'(TH_OUTLIER_DEN + TH_OUTLIER_NUM);

  logic [N-1:0] pass;
  logic [MUL_W-1:0] rhs;

  always_comb begin
    rhs = MUL_W'(sum) * RHS_K;
    for (int i = 0; i < N; i++) begin
      logic [MUL_W-1:0] s;
      s       = MUL_W'(score[i]);
      pass[i] = (s >= THREAT_FX) && (s * LHS_K > rhs);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) mark <= '0;
    else        mark <= chk_valid ? pass : '0;
  end

endmodule
