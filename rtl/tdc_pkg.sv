// tdc_pkg: widths and record types shared by the multi-threshold TDC digitizer.
//
// Time stamps are absolute picosecond counts since the end of reset, built
// as coarse*CLK_PS - fine_ps by each TDC channel. A channel reports one hit
// (an edge of its discriminator output) per record of type tdc_hit_t; the
// pairing of a leading with a trailing edge of the same threshold is a
// thr_meas_t (leading time plus time over threshold).
//
// All widths here are this design's choice: the source method fixes only
// the ~15 ps element delay and the four thresholds of the sampling scheme.
package tdc_pkg;
  timeunit 1ps; timeprecision 1ps;

  localparam int COARSE_W = 32;  // clock-edge counter width
  localparam int FINE_W   = 9;   // fine code width, enough for up to 511 taps
  localparam int PS_W     = 16;  // calibrated fine time, ps
  localparam int TS_W     = 48;  // absolute time stamp, ps (about 78 hours)
  localparam int TOT_W    = 20;  // time over threshold, ps (about 1 us)
  localparam int MV_W     = 16;  // analog values as signed millivolts

  typedef logic [TS_W-1:0]       ts_t;
  typedef logic signed [MV_W-1:0] mv_t;

  // One edge seen by one TDC channel.
  typedef struct packed {
    logic              valid;   // a hit is present this cycle
    logic              rising;  // 1: leading edge, 0: trailing edge
    logic [FINE_W-1:0] fine;    // raw fine code (delay elements travelled)
    ts_t               ts;      // calibrated time stamp, ps
  } tdc_hit_t;

  // One threshold crossing pair: leading time and time over threshold.
  typedef struct packed {
    logic             valid;
    ts_t              lead;
    logic [TOT_W-1:0] tot;
  } thr_meas_t;

endpackage
