// bh_mshr_gate -- limits the LLC miss buffers each thread may hold.
//
// The last-level cache reports each miss-buffer (MSHR) allocation and release
// with the owning hardware thread. The gate keeps one occupancy counter per
// thread and tells the cache, per thread, whether one more allocation is
// allowed: alloc_ok[i] = occupancy_i < quota_i. Requests that hit an already
// allocated buffer need no new buffer and are not gated. When a quota falls
// below a thread's occupancy, its buffers in flight are not cancelled; the
// thread just cannot allocate until it drops under the quota. One allocation
// and one release may come in the same cycle; alloc_ok is combinational from
// registered state. Limiting miss buffers per thread is the paper's; the
// counter-based interface and the handshake rules below are this design's.
// The same block serves as the per-thread outstanding-request table the paper
// suggests for a DMA engine.
module bh_mshr_gate #(
  parameter int unsigned N        = bh_pkg::NUM_THREADS,
  parameter int unsigned NUM_MSHR = bh_pkg::NUM_MSHR,
  localparam int unsigned TW      = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned QW      = $clog2(NUM_MSHR + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [N-1:0][QW-1:0]  quota,
  input  logic                  alloc_valid,
  input  logic [TW-1:0]         alloc_thread,
  input  logic                  free_valid,
  input  logic [TW-1:0]         free_thread,
  output logic [N-1:0]          alloc_ok,
  output logic [N-1:0][QW-1:0]  occupancy
);
  always_comb begin
    for (int i = 0; i < N; i++) alloc_ok[i] = occupancy[i] < quota[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      occupancy <= '0;
    end else begin
      for (int i = 0; i < N; i++) begin
        logic inc, dec;
        inc = alloc_valid && alloc_thread == TW'(i);
        dec = free_valid  && free_thread  == TW'(i) && occupancy[i] != '0;
        if (inc && !dec)      occupancy[i] <= occupancy[i] + 1'b1;
        else if (dec && !inc) occupancy[i] <= occupancy[i] - 1'b1;
      end
    end
  end

  // The cache must respect the gate and never release a buffer it does not hold.
  assert property (@(posedge clk) disable iff (!rst_n)
    alloc_valid |-> alloc_ok[alloc_thread]) else $error("allocation beyond quota");
  assert property (@(posedge clk) disable iff (!rst_n)
    free_valid |-> occupancy[free_thread] != '0) else $error("release of unheld buffer");

endmodule
