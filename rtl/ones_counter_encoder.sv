// ones_counter_encoder: fine-time encoder of the TDC.
//
// The sampled delay line is a thermometer code whose length of ones tells how
// far the hit front edge travelled before the clock edge. Instead of looking
// for the 0/1 transition, which bubbles (isolated wrong bits near the edge)
// corrupt, the encoder counts every 1 in the code. A bubble then moves the
// result by at most its own size. Counting ones is the encoding scheme the
// source design uses; how the count is pipelined is this design's choice:
// stage 1 counts the ones of each GROUP-bit slice and registers the partial
// counts, stage 2 adds the partial counts and registers the result.
//
// Interface: `code` with `in_valid` in; `count` with `out_valid` out exactly
// two clock cycles later. A new code can be accepted on every cycle.
`timescale 1ps / 1ps
module ones_counter_encoder #(
  parameter int unsigned TAPS  = tdc_pkg::DEF_TAPS,
  parameter int unsigned GROUP = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic [TAPS-1:0]            code,
  output logic                       out_valid,
  output logic [tdc_pkg::FINE_W-1:0] count
);
  import tdc_pkg::*;

  localparam int unsigned NGRP  = (TAPS + GROUP - 1) / GROUP;
  localparam int unsigned GRP_W = $clog2(GROUP + 1);

  initial begin
    assert (TAPS < (1 << FINE_W)) else $error("TAPS does not fit in FINE_W bits");
  end

  // code padded with zeros to a whole number of groups
  logic [NGRP*GROUP-1:0] padded;
  assign padded = {{(NGRP*GROUP-TAPS){1'b0}}, code};

  // stage 1: per-group ones counts
  logic [GRP_W-1:0] part_d [NGRP];
  logic [GRP_W-1:0] part_q [NGRP];
  logic             v1;

  always_comb begin
    for (int g = 0; g < NGRP; g++) begin
      part_d[g] = '0;
      for (int b = 0; b < GROUP; b++)
        part_d[g] = part_d[g] + GRP_W'(padded[g*GROUP+b]);
    end
  end

  always_ff @(posedge clk) begin
    part_q <= part_d;
    v1     <= rst_n && in_valid;
  end

  // stage 2: sum of the partial counts
  logic [FINE_W-1:0] sum_d;

  always_comb begin
    sum_d = '0;
    for (int g = 0; g < NGRP; g++)
      sum_d = sum_d + FINE_W'(part_q[g]);
  end

  always_ff @(posedge clk) begin
    count     <= sum_d;
    out_valid <= rst_n && v1;
  end

endmodule
