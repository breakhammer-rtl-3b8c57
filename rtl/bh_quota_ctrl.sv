// bh_quota_ctrl -- dynamic request quota and suspect flags of each thread.
//
// Per thread it holds the quota Q_i (how many LLC miss buffers the thread may
// hold), a suspect flag (marked in the current throttling window) and a
// recent_suspect flag (was a suspect in the previous window). At reset no
// thread is a suspect and every quota equals NUM_MSHR.
// The first time a thread is marked in a window its quota is cut:
//   Q_i = max(Q_i - P_oldsuspect, 0)   if recent_suspect_i
//   Q_i = Q_i / P_newsuspect           otherwise
// Further marks in the same window change nothing. At window_end,
// recent_suspect takes the suspect flag, the suspect flag clears, and a thread
// that was not a suspect in the ending window gets its full quota back. A
// mark in the window_end cycle counts for the new window.
// The equation, the flags and the quota restore are the paper's; applying the
// cut once per window (at the first mark) is this design's reading.
module bh_quota_ctrl #(
  parameter int unsigned N            = bh_pkg::NUM_THREADS,
  parameter int unsigned NUM_MSHR     = bh_pkg::NUM_MSHR,
  parameter int unsigned P_OLDSUSPECT = bh_pkg::P_OLDSUSPECT,
  parameter int unsigned P_NEWSUSPECT = bh_pkg::P_NEWSUSPECT,
  localparam int unsigned QW          = $clog2(NUM_MSHR + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [N-1:0]          mark,
  input  logic                  window_end,
  output logic [N-1:0][QW-1:0]  quota,
  output logic [N-1:0]          suspect,
  output logic [N-1:0]          recent_suspect,
  output logic [N-1:0]          quota_cut      // pulse: quota was reduced this cycle
);
  logic [N-1:0][QW-1:0] q_d;
  logic [N-1:0]         s_d, rs_d, cut_d;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic [QW-1:0] q_base;
      logic          s_cur;
      rs_d[i]  = window_end ? suspect[i] : recent_suspect[i];
      s_cur    = window_end ? 1'b0 : suspect[i];
      q_base   = (window_end && !suspect[i]) ? QW'(NUM_MSHR) : quota[i];
      q_d[i]   = q_base;
      s_d[i]   = s_cur;
      cut_d[i] = 1'b0;
      if (mark[i] && !s_cur) begin
        s_d[i]   = 1'b1;
        cut_d[i] = 1'b1;
        if (rs_d[i])
          q_d[i] = (q_base > QW'(P_OLDSUSPECT)) ? q_base - QW'(P_OLDSUSPECT) : '0;
        else
          q_d[i] = q_base / QW'(P_NEWSUSPECT);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) quota[i] <= QW'(NUM_MSHR);
      suspect        <= '0;
      recent_suspect <= '0;
      quota_cut      <= '0;
    end else begin
      quota          <= q_d;
      suspect        <= s_d;
      recent_suspect <= rs_d;
      quota_cut      <= cut_d;
    end
  end

endmodule
