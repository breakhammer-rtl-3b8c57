// bh_window_timer -- splits time into throttling windows.
//
// A free-running cycle counter that raises window_end for exactly one cycle
// at the last cycle of every window of WINDOW_CYCLES clock cycles; the next
// window starts on the following cycle. The first pulse comes WINDOW_CYCLES
// cycles after reset is released. The window length (64 ms, here 96,000,000
// cycles at 1.5 GHz) is the paper's; counting it in clock cycles and the
// asynchronous active-low reset are choices of this design.
module bh_window_timer #(
  parameter int unsigned WINDOW_CYCLES = bh_pkg::WINDOW_CYCLES
) (
  input  logic clk,
  input  logic rst_n,
  output logic window_end      // one-cycle pulse, last cycle of a window
);
  localparam int unsigned CW = (WINDOW_CYCLES > 1) ? $clog2(WINDOW_CYCLES) : 1;

  logic [CW-1:0] count_q;

  assign window_end = (count_q == CW'(WINDOW_CYCLES - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          count_q <= '0;
    else if (window_end) count_q <= '0;
    else                 count_q <= count_q + 1'b1;
  end

endmodule
