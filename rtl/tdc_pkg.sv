// Shared constants and types of the multi-phase-clock TDC with a circular
// (oscillating) input buffer.
//
// The TDC samples its input with a 400 MHz, four-phase ISERDES (P = 4 phases,
// bin = 1/(f*P) = 625 ps) and groups four ISERDES words into one 16-bit code per
// 10 ns period of the 100 MHz system clock. One hit is measured M times (M = 8
// by default); the fine time is the sum of the M edge positions, so its LSB is
// 625 ps / M = 78.125 ps. The 40-bit coarse timer, the 400/100 MHz clocks, the
// four phases and M = 8 are the paper's numbers; the field widths FINE_W, M_W
// and PER_W, and the edge-pair and period encodings, are this design's own
// choices.
`timescale 1ps / 1fs
package tdc_pkg;

  localparam int unsigned COARSE_W  = 40;  // coarse timer width (paper: 40 bit)
  localparam int unsigned PHASES    = 4;   // ISERDES sampling phases (0/90/180/270 deg)
  localparam int unsigned WORDS     = 4;   // 400 MHz words per 100 MHz period
  localparam int unsigned CODE_W    = PHASES * WORDS;  // 16 bins per system period
  localparam int unsigned POS_W     = $clog2(CODE_W);  // 4-bit bin position
  localparam int unsigned M_W       = 4;   // width of the run-time M setting
  localparam int unsigned M_DEFAULT = 8;   // measurements per hit (paper: M = 8)
  localparam int unsigned WREL_W    = 8;   // system periods since the first edge
  localparam int unsigned FINE_W    = 12;  // width of the summed fine time
  localparam int unsigned TAP_W     = 5;   // IDELAY tap setting width
  localparam int unsigned PER_W     = 8;   // width of one measured T_OSC, in bins

  // Leading edges found in one 16-bit code: n of them (0, 1 or 2), pos0 the
  // earlier and pos1 the later, counted in bins from the start of the period.
  typedef struct packed {
    logic [1:0]       n;
    logic [POS_W-1:0] pos0;
    logic [POS_W-1:0] pos1;
  } edge_pair_t;

  // One finished measurement: coarse time of the first edge's system period
  // and the summed fine time.
  typedef struct packed {
    logic [COARSE_W-1:0] coarse;
    logic [FINE_W-1:0]   fine;
  } tdc_event_t;

  // Oscillation periods measured in one system period (paper's Eq. 3): n of
  // them (0, 1 or 2), each the distance in 625 ps bins between two successive
  // edges of one hit, d0 the earlier.
  typedef struct packed {
    logic [1:0]       n;
    logic [PER_W-1:0] d0;
    logic [PER_W-1:0] d1;
  } osc_period_t;

endpackage
