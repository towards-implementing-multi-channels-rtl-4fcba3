// fine_time_counter: counts oscillations of the slow ring oscillator.
//
// Clocked by the slow RO's reshaped output, the counter adds one per lap
// while En is high. When the fast RO catches up, En falls and the count n
// stays put until clear; n times the period difference of the two ROs is
// the fine time interval. 7 bits as in the published prototype; the count
// saturates at all ones instead of wrapping.
//
// Interface: clk (slow RO), en, clr (asynchronous, active high), cnt.
// The width is the paper's; saturation is this design's choice.
`timescale 1ps/1fs
module fine_time_counter #(
  parameter int unsigned WIDTH = tdc_pkg::FINE_W
) (
  input  logic             clk,
  input  logic             en,
  input  logic             clr,
  output logic [WIDTH-1:0] cnt
);

  always_ff @(posedge clk or posedge clr) begin
    if (clr)                    cnt <= '0;
    else if (en && (cnt != '1)) cnt <= cnt + 1'b1;
  end

endmodule
