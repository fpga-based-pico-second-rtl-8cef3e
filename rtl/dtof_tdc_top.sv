// dtof_tdc_top: FPGA readout of two DIRC-like TOF electronics chains.
//
// Each chain feeds one detector pulse, after the amplifier and the bias
// network outside the FPGA, to two LVDS-receiver comparators: one at a low
// threshold (the event time) and one at a high threshold (the confirmation).
// Their outputs are the inputs hit_lo[c] and hit_hi[c] of this module. Every
// comparator output drives its own tapped delay line and timestamp TDC
// channel; all four channels share one coarse counter. Per chain a filter
// module keeps the low-threshold timestamps that the high threshold confirms,
// and the coincidence module passes on only events seen by both chains
// within CM_WINDOW cycles. Each pair, with all four timestamps, leaves on
// `out`; the link to the host computer is not part of this module.
//
// The delay lines are behavioural models (simulation only); for an FPGA build
// they are replaced by carry-chain primitives with the same ports. The
// structure (two thresholds, two TDCs and a filter per chain, coincidence of
// two chains) follows the source design; sizes, windows and the timestamp
// format are this design's choices.
//
// Latency from the clock edge that samples a hit to `out_valid`: 3 cycles in
// the TDC channel, 1 in the filter after the confirming hit, 1 in the
// coincidence module after the later chain's event.
`timescale 1ps / 1ps
module dtof_tdc_top #(
  parameter int unsigned TAPS           = tdc_pkg::DEF_TAPS,
  parameter int unsigned TAP_PS         = 12,
  parameter int unsigned CONFIRM_WINDOW = 2,
  parameter int unsigned CM_WINDOW      = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [1:0]                hit_lo,      // low-threshold comparator, per chain
  input  logic [1:0]                hit_hi,      // high-threshold comparator, per chain
  output logic                      out_valid,
  output tdc_pkg::coinc_t           out,
  output logic [tdc_pkg::CNT_W-1:0] n_rejected [2],
  output logic [tdc_pkg::CNT_W-1:0] n_single
);
  import tdc_pkg::*;

  logic [COARSE_W-1:0] coarse;

  coarse_counter u_coarse (.clk(clk), .rst_n(rst_n), .coarse(coarse));

  logic       ev_valid [2];
  event_t     ev       [2];

  for (genvar c = 0; c < 2; c++) begin : g_chain
    logic [TAPS-1:0] taps_lo, taps_hi;
    logic            clr_lo, clr_hi;
    logic            lo_valid, hi_valid;
    timestamp_t      lo_time, hi_time;

    tapped_delay_line #(.TAPS(TAPS), .TAP_PS(TAP_PS)) u_tdl_lo (
      .clk(clk), .hit(hit_lo[c]), .clr(clr_lo), .taps(taps_lo));
    tapped_delay_line #(.TAPS(TAPS), .TAP_PS(TAP_PS)) u_tdl_hi (
      .clk(clk), .hit(hit_hi[c]), .clr(clr_hi), .taps(taps_hi));

    tdc_channel #(.TAPS(TAPS)) u_tdc_lo (
      .clk(clk), .rst_n(rst_n), .taps(taps_lo), .coarse(coarse),
      .clr(clr_lo), .hit_valid(lo_valid), .hit_time(lo_time));
    tdc_channel #(.TAPS(TAPS)) u_tdc_hi (
      .clk(clk), .rst_n(rst_n), .taps(taps_hi), .coarse(coarse),
      .clr(clr_hi), .hit_valid(hi_valid), .hit_time(hi_time));

    filter_module #(.CONFIRM_WINDOW(CONFIRM_WINDOW)) u_filter (
      .clk(clk), .rst_n(rst_n),
      .lo_valid(lo_valid), .lo_time(lo_time),
      .hi_valid(hi_valid), .hi_time(hi_time),
      .ev_valid(ev_valid[c]), .ev(ev[c]), .n_rejected(n_rejected[c]));
  end

  coincidence_module #(.CM_WINDOW(CM_WINDOW)) u_cm (
    .clk(clk), .rst_n(rst_n),
    .a_valid(ev_valid[0]), .a_ev(ev[0]),
    .b_valid(ev_valid[1]), .b_ev(ev[1]),
    .out_valid(out_valid), .out(out), .n_single(n_single));

endmodule
