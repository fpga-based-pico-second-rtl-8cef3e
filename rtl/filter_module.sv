// filter_module: event judgement of one electronics chain (dual threshold).
//
// Each chain has two comparators on the same pulse: the low-threshold one
// gives the event time, the high-threshold one only confirms that the pulse
// was large enough to be a real signal and not noise. This module receives
// the timestamps of both TDC channels and keeps a low-threshold hit only if a
// high-threshold hit follows it within CONFIRM_WINDOW clock cycles (or comes
// in the same cycle). A confirmed hit leaves as one event carrying both
// timestamps; a low hit that times out, or is replaced by a newer low hit
// before being confirmed, is dropped and counted in `n_rejected`. A high hit
// with no low hit waiting is ignored, since on a rising pulse the high
// threshold cannot be crossed first.
//
// Interface: valid/data strobes in and out, no back-pressure. `ev_valid` comes
// one clock after the confirming `hi_valid`. The low/high roles follow the
// source design; the window length and the drop rules are this design's.
`timescale 1ps / 1ps
module filter_module #(
  parameter int unsigned CONFIRM_WINDOW = 2
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        lo_valid,
  input  tdc_pkg::timestamp_t         lo_time,
  input  logic                        hi_valid,
  input  tdc_pkg::timestamp_t         hi_time,
  output logic                        ev_valid,
  output tdc_pkg::event_t             ev,
  output logic [tdc_pkg::CNT_W-1:0]   n_rejected
);
  import tdc_pkg::*;

  localparam int unsigned AGE_W = $clog2(CONFIRM_WINDOW + 1);

  logic             pend;      // a low hit waits for confirmation
  timestamp_t       pend_time;
  logic [AGE_W-1:0] age;       // cycles since the waiting low hit arrived

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pend       <= 1'b0;
      pend_time  <= '0;
      age        <= '0;
      ev_valid   <= 1'b0;
      ev         <= '0;
      n_rejected <= '0;
    end else begin
      ev_valid <= 1'b0;
      if (lo_valid && hi_valid) begin
        // both thresholds crossed within the same cycle
        ev_valid <= 1'b1;
        ev       <= '{t_lo: lo_time, t_hi: hi_time};
        pend     <= 1'b0;
        if (pend) n_rejected <= n_rejected + 1'b1;
      end else if (hi_valid && pend) begin
        // confirmation of the waiting low hit
        ev_valid <= 1'b1;
        ev       <= '{t_lo: pend_time, t_hi: hi_time};
        pend     <= 1'b0;
      end else if (lo_valid) begin
        if (pend) n_rejected <= n_rejected + 1'b1;
        pend      <= 1'b1;
        pend_time <= lo_time;
        age       <= AGE_W'(1);
      end else if (pend) begin
        if (age == AGE_W'(CONFIRM_WINDOW)) begin
          pend       <= 1'b0;
          n_rejected <= n_rejected + 1'b1;
        end else begin
          age <= age + 1'b1;
        end
      end
    end
  end

endmodule
