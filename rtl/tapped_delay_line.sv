// tapped_delay_line: BEHAVIOURAL MODEL (not synthesizable) of a carry-chain
// tapped delay line with its front-edge latch and sampling flip-flops.
//
// In the FPGA the hit front edge runs along a chain of carry elements and the
// flip-flop behind each element is clocked by the system clock, so every
// clock edge captures how far the edge has travelled as a thermometer code.
// This model reproduces that with simulation time: a rising edge on `hit`
// sets the front-edge latch and records the time; at each rising edge of
// `clk`, tap i reads 1 when the latched edge is at least (i+1)*TAP_PS old,
// and 0 once the falling edge produced by a clear has also passed it.
// `clr` is sampled on `clk`: while it is high the latch is held reset and new
// hits are ignored; the falling edge then drains through the line.
// All taps have the same delay here; a real chain has uneven bins.
// The delay line, the latch and their sizes are this design's assumptions:
// the source design names only the ones-counter encoding behind it.
// Use a 1 ps time unit so that TAP_PS is exact. The clocked processes use
// blocking assignments on purpose: they keep simulation-time bookkeeping,
// not registers, and `taps` itself is written non-blocking like a flip-flop.
`timescale 1ps / 1ps
module tapped_delay_line #(
  parameter int unsigned TAPS   = tdc_pkg::DEF_TAPS,
  parameter int unsigned TAP_PS = 12
) (
  input  logic            clk,
  input  logic            hit,
  input  logic            clr,
  output logic [TAPS-1:0] taps
);

  // The hit process only counts front edges and the clock process only
  // counts clears, so each variable has a single writer.
  int unsigned n_rise = 0;   // front edges accepted by the latch
  int unsigned n_fall = 0;   // clears applied to the latch
  longint      t_rise = 0;
  longint      t_fall = 0;
  logic        latched;

  assign latched = (n_rise != n_fall);

  // front-edge latch
  always @(posedge hit) begin
    if (!latched && !clr) begin
      t_rise = longint'($time);
      n_rise = n_rise + 1;
    end
  end

  // sampling flip-flops, then the synchronous clear of the latch
  always @(posedge clk) begin
    longint          now;
    logic            rose, fell;
    logic [TAPS-1:0] s;
    now  = longint'($time);
    rose = (n_rise != 0);
    fell = (n_rise != 0) && !latched;
    for (int i = 0; i < TAPS; i++) begin
      s[i] = rose && (now - t_rise >= (longint'(i) + 1) * longint'(TAP_PS))
                  && !(fell && (now - t_fall >= (longint'(i) + 1) * longint'(TAP_PS)));
    end
    taps <= s;
    if (clr && latched) begin
      t_fall = now;
      n_fall = n_rise;
    end
  end

endmodule
