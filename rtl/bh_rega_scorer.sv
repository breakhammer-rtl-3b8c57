// bh_rega_scorer -- score attribution for a REGA-style mitigation.
//
// REGA refreshes in the background at a fixed rate of one refresh per REGA_T
// activations, so there is no discrete preventive action to share out.
// Instead each thread earns one whole score point (1 << FRAC_W in the score
// format) for every REGA_T activations it performs. Each thread has a
// modulo-REGA_T activation counter; the ACT that completes a group produces,
// one cycle later, an out_valid pulse with that thread's increment set to 1.0
// and all others to zero. One ACT per cycle is accepted. The rule is the
// paper's; the counter, the output format (the same as bh_score_attributor's)
// and the REGA_T default (the paper does not give a value) are this design's.
module bh_rega_scorer #(
  parameter int unsigned N      = bh_pkg::NUM_THREADS,
  parameter int unsigned FRAC_W = bh_pkg::FRAC_W,
  parameter int unsigned REGA_T = bh_pkg::REGA_T,
  localparam int unsigned TW    = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned CW    = (REGA_T > 1) ? $clog2(REGA_T) : 1,
  localparam int unsigned INC_W = FRAC_W + 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     act_valid,
  input  logic [TW-1:0]            act_thread,
  output logic                     out_valid,
  output logic [N-1:0][INC_W-1:0]  out_inc
);
  logic [N-1:0][CW-1:0] cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q     <= '0;
      out_valid <= 1'b0;
      out_inc   <= '0;
    end else begin
      out_valid <= 1'b0;
      out_inc   <= '0;
      for (int i = 0; i < N; i++) begin
        if (act_valid && act_thread == TW'(i)) begin
          if (int'(cnt_q[i]) == int'(REGA_T) - 1) begin
            cnt_q[i]     <= '0;
            out_valid    <= 1'b1;
            out_inc[i]   <= INC_W'(1) << FRAC_W;
          end else begin
            cnt_q[i]     <= cnt_q[i] + 1'b1;
          end
        end
      end
    end
  end

endmodule
