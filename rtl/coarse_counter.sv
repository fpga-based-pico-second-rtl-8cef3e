// coarse_counter: free-running coarse time counter shared by all TDC channels.
//
// Counts system-clock cycles from reset and wraps at 2^COARSE_W. Every TDC
// channel stamps its hits with this value, so timestamps of different
// channels and chains are directly comparable. The count is the number of
// rising clock edges since reset was released, minus one.
`timescale 1ps / 1ps
module coarse_counter (
  input  logic                         clk,
  input  logic                         rst_n,
  output logic [tdc_pkg::COARSE_W-1:0] coarse
);
  always_ff @(posedge clk) begin
    if (!rst_n) coarse <= '0;
    else        coarse <= coarse + 1'b1;
  end
endmodule
