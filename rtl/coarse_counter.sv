// coarse_counter: free-running count of system clock cycles.
//
// Gives the coarse part of every timestamp: the count is incremented on each
// rising edge of the 600 MHz system clock and wraps modulo 2**WIDTH (9 bits,
// 853 ns of range, as in the published prototype). The time assembler reads
// it on the clock edge that follows ctrl_1.
//
// Interface: clk, synchronous active-high rst (clears to 0), cnt.
// Timing: cnt changes one register delay after each rising edge of clk.
// The width is the paper's; the synchronous reset and the wrap-around are
// this design's choices.
`timescale 1ps/1fs
module coarse_counter #(
  parameter int unsigned WIDTH = tdc_pkg::COARSE_W
) (
  input  logic             clk,
  input  logic             rst,
  output logic [WIDTH-1:0] cnt
);

  always_ff @(posedge clk) begin
    if (rst) cnt <= '0;
    else     cnt <= cnt + 1'b1;
  end

endmodule
