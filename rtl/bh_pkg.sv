// bh_pkg -- constants shared by the BreakHammer throttling unit.
//
// BreakHammer sits beside a DDR memory controller. It watches the row
// activations (ACTs) each hardware thread causes and the RowHammer-preventive
// actions the attached mitigation mechanism performs, gives each thread a
// "RowHammer-preventive score", flags threads whose score is an outlier as
// suspects, and shrinks the number of last-level-cache miss buffers (MSHRs) a
// suspect may hold.
//
// The defaults below are the configuration of the evaluated system: four
// hardware threads, 64 ms throttling window, TH_threat = 32, TH_outlier = 0.65,
// P_oldsuspect = 1, P_newsuspect = 10, 32-bit score counters and 16-bit
// activation counters, clocked at 1.5 GHz. Own choices: one hardware thread per
// core, 64 LLC MSHRs in total, 7 fractional bits in the score counters, and
// TH_outlier held as the fraction 65/100, REGA_T = 16.
package bh_pkg;

  // System size
  localparam int unsigned NUM_THREADS   = 4;    // quad-core, one thread per core
  localparam int unsigned NUM_MSHR      = 64;   // LLC cache-miss buffers (own choice)

  // Counter widths
  localparam int unsigned ACT_W         = 16;   // per-thread activation counter
  localparam int unsigned SCORE_W       = 32;   // per-thread score counter (each set)
  localparam int unsigned FRAC_W        = 7;    // fractional bits of a score

  // Throttling window: 64 ms at a 1.5 GHz clock
  localparam int unsigned CLK_KHZ       = 1_500_000;
  localparam int unsigned WINDOW_MS     = 64;
  localparam int unsigned WINDOW_CYCLES = CLK_KHZ * WINDOW_MS;   // 96,000,000

  // Suspect identification
  localparam int unsigned TH_THREAT      = 32;  // whole preventive actions
  localparam int unsigned TH_OUTLIER_NUM = 65;  // TH_outlier = 65/100 = 0.65
  localparam int unsigned TH_OUTLIER_DEN = 100;

  // Score attribution for REGA-style mitigation (one point per REGA_T ACTs).
  // The value is this design's choice; REGA_MODE = 0 selects the
  // activation-share rule used with all other mitigation mechanisms.
  localparam int unsigned REGA_T        = 16;

  // Memory throttling
  localparam int unsigned P_OLDSUSPECT  = 1;
  localparam int unsigned P_NEWSUSPECT  = 10;

endpackage
