// bh_act_tracker -- per-thread activation counters between preventive actions.
//
// The memory controller reports every row activation (ACT) with the hardware
// thread whose request caused it; this block keeps one saturating ACT_W-bit
// counter per thread. When the mitigation mechanism performs a
// RowHammer-preventive action (act_valid and action_valid may come in the same
// cycle), the counts, including an ACT of that same cycle, are copied to the
// snapshot outputs together with their sum, snap_valid pulses for one cycle,
// and the counters restart from zero. Latency: the snapshot appears one cycle
// after action_valid. One ACT and one action can be accepted every cycle.
// Counting activations per thread and clearing them at each action is the
// paper's; the 16-bit width is the paper's; saturation is this design's.
module bh_act_tracker #(
  parameter int unsigned N     = bh_pkg::NUM_THREADS,
  parameter int unsigned ACT_W = bh_pkg::ACT_W,
  localparam int unsigned TW   = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned TOT_W = ACT_W + $clog2(N + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     act_valid,
  input  logic [TW-1:0]            act_thread,
  input  logic                     action_valid,
  output logic                     snap_valid,
  output logic [N-1:0][ACT_W-1:0]  snap_act,
  output logic [TOT_W-1:0]         snap_total
);
  logic [N-1:0][ACT_W-1:0] cnt_q;
  logic [N-1:0][ACT_W-1:0] cnt_plus;
  logic [TOT_W-1:0]        total_plus;

  always_comb begin
    total_plus = '0;
    for (int i = 0; i < N; i++) begin
      cnt_plus[i] = cnt_q[i];
      if (act_valid && act_thread == TW'(i) && cnt_q[i] != '1)
        cnt_plus[i] = cnt_q[i] + 1'b1;
      total_plus = total_plus + TOT_W'(cnt_plus[i]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q      <= '0;
      snap_valid <= 1'b0;
      snap_act   <= '0;
      snap_total <= '0;
    end else begin
      snap_valid <= action_valid;
      if (action_valid) begin
        snap_act   <= cnt_plus;
        snap_total <= total_plus;
        cnt_q      <= '0;
      end else begin
        cnt_q      <= cnt_plus;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) act_valid |-> int'(act_thread) < int'(N))
    else $error("act_thread out of range");

endmodule
