// tdc_channel: one timestamp TDC channel behind a tapped delay line.
//
// The delay line delivers a sampled thermometer code on every clock. While
// the channel is ARMED, the first code whose tap 0 is set marks a new hit:
// that code goes to the ones-counter encoder, which yields the fine time (how
// many taps the front edge passed before the sampling edge), and the coarse
// counter value of the same clock edge travels alongside it. The channel then
// enters DRAIN, drives `clr` to reset the front-edge latch of the line, and
// re-arms once a sampled code is all zeros, i.e. the falling edge has left
// the line. Hits arriving in DRAIN are lost; the dead time is five to six
// clock cycles from the hit for a line shorter than two clock periods.
//
// Interface: `hit_valid` is a one-cycle strobe with `hit_time` =
// {coarse, fine}; the hit happened at coarse*T_clk - fine*T_tap. It comes
// three clock cycles after the sampling edge (one for detection, two for the
// encoder). The timestamp format, the arming sequence and the lack of bin
// calibration are this design's choices; the source design specifies a
// timestamp TDC with ones-counter encoding and no more.
`timescale 1ps / 1ps
module tdc_channel #(
  parameter int unsigned TAPS = tdc_pkg::DEF_TAPS
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [TAPS-1:0]              taps,
  input  logic [tdc_pkg::COARSE_W-1:0] coarse,
  output logic                         clr,
  output logic                         hit_valid,
  output tdc_pkg::timestamp_t          hit_time
);
  import tdc_pkg::*;

  typedef enum logic {ARMED, DRAIN} state_t;
  state_t state;

  logic fire;
  assign fire = (state == ARMED) && taps[0];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= DRAIN;  // start by emptying the line
    end else begin
      unique case (state)
        ARMED: if (taps[0])     state <= DRAIN;
        DRAIN: if (taps == '0)  state <= ARMED;
      endcase
    end
  end

  assign clr = (state == DRAIN);

  // fine time
  logic              enc_valid;
  logic [FINE_W-1:0] enc_count;

  ones_counter_encoder #(.TAPS(TAPS)) u_enc (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (fire),
    .code     (taps),
    .out_valid(enc_valid),
    .count    (enc_count)
  );

  // coarse time of the sampling edge, delayed to match the encoder
  logic [COARSE_W-1:0] coarse_d1, coarse_d2;
  always_ff @(posedge clk) begin
    coarse_d1 <= coarse;
    coarse_d2 <= coarse_d1;
  end

  always_ff @(posedge clk) begin
    hit_valid <= rst_n && enc_valid;
    hit_time  <= '{coarse: coarse_d2, fine: enc_count};
  end

endmodule
