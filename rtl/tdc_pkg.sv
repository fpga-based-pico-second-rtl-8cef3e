// tdc_pkg: types and constants shared by the DTOF timestamp TDC.
//
// A hit time is carried as a timestamp_t: the coarse field is the value of
// the free-running system-clock counter at the clock edge that sampled the
// delay line, the fine field is the number of delay taps the hit front edge
// had travelled by that edge (the ones count of the thermometer code). The
// hit therefore happened at  coarse*T_clk - fine*T_tap  (uncalibrated, equal
// taps). An event_t is one good event of one chain: the low-threshold
// timestamp, which is the event time, and the high-threshold timestamp that
// confirmed it. A coinc_t is one coincidence of the two chains.
// Field widths are this design's choice; the source design gives none.
`timescale 1ps / 1ps
package tdc_pkg;

  localparam int unsigned COARSE_W = 32;  // coarse counter width
  localparam int unsigned FINE_W   = 9;   // ones count, enough for up to 511 taps
  localparam int unsigned DEF_TAPS = 256; // delay-line length
  localparam int unsigned CNT_W    = 16;  // statistics counters

  typedef struct packed {
    logic [COARSE_W-1:0] coarse;
    logic [FINE_W-1:0]   fine;
  } timestamp_t;

  typedef struct packed {
    timestamp_t t_lo;  // event timing (low threshold)
    timestamp_t t_hi;  // confirming hit (high threshold)
  } event_t;

  typedef struct packed {
    event_t a;  // chain A
    event_t b;  // chain B
  } coinc_t;

endpackage
