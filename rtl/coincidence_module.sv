// coincidence_module: event selection between the two electronics chains.
//
// A good event of one chain is held for up to CM_WINDOW clock cycles waiting
// for a good event of the other chain. When both chains have an event (held
// or arriving now) the pair leaves on `out`, and only such pairs go on to the
// host, where the time difference of the chains is formed. An event whose
// partner does not come in time, or that is replaced by a newer event of its
// own chain, is dropped and counted in `n_single`. The window is counted in
// arrival cycles; since both chains have the same pipeline latency this is
// the coarse time difference of the two events to within the filter's
// confirmation delay.
//
// Interface: valid/data strobes, no back-pressure; `out_valid` comes one clock
// after the event that completes the pair. That the selection is a
// coincidence of the two chains inside the FPGA follows the source design;
// the window and the drop rules are this design's.
`timescale 1ps / 1ps
module coincidence_module #(
  parameter int unsigned CM_WINDOW = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      a_valid,
  input  tdc_pkg::event_t           a_ev,
  input  logic                      b_valid,
  input  tdc_pkg::event_t           b_ev,
  output logic                      out_valid,
  output tdc_pkg::coinc_t           out,
  output logic [tdc_pkg::CNT_W-1:0] n_single
);
  import tdc_pkg::*;

  localparam int unsigned AGE_W = $clog2(CM_WINDOW + 1);

  logic             pend_a, pend_b;
  event_t           hold_a, hold_b;
  logic [AGE_W-1:0] age_a, age_b;

  logic   has_a, has_b;
  event_t cur_a, cur_b;
  assign has_a = a_valid || pend_a;
  assign has_b = b_valid || pend_b;
  assign cur_a = a_valid ? a_ev : hold_a;
  assign cur_b = b_valid ? b_ev : hold_b;

  // events dropped this cycle
  logic [1:0] drop;
  always_comb begin
    drop = '0;
    if (a_valid && pend_a) drop = drop + 2'd1;
    if (b_valid && pend_b) drop = drop + 2'd1;
    if (!(has_a && has_b)) begin
      if (!a_valid && pend_a && age_a == AGE_W'(CM_WINDOW)) drop = drop + 2'd1;
      if (!b_valid && pend_b && age_b == AGE_W'(CM_WINDOW)) drop = drop + 2'd1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pend_a    <= 1'b0;
      pend_b    <= 1'b0;
      hold_a    <= '0;
      hold_b    <= '0;
      age_a     <= '0;
      age_b     <= '0;
      out_valid <= 1'b0;
      out       <= '0;
      n_single  <= '0;
    end else begin
      out_valid <= 1'b0;
      n_single  <= n_single + CNT_W'(drop);
      if (has_a && has_b) begin
        out_valid <= 1'b1;
        out       <= '{a: cur_a, b: cur_b};
        pend_a    <= 1'b0;
        pend_b    <= 1'b0;
      end else begin
        if (a_valid) begin
          pend_a <= 1'b1;
          hold_a <= a_ev;
          age_a  <= AGE_W'(1);
        end else if (pend_a) begin
          if (age_a == AGE_W'(CM_WINDOW)) pend_a <= 1'b0;
          else                            age_a  <= age_a + 1'b1;
        end
        if (b_valid) begin
          pend_b <= 1'b1;
          hold_b <= b_ev;
          age_b  <= AGE_W'(1);
        end else if (pend_b) begin
          if (age_b == AGE_W'(CM_WINDOW)) pend_b <= 1'b0;
          else                            age_b  <= age_b + 1'b1;
        end
      end
    end
  end

endmodule
