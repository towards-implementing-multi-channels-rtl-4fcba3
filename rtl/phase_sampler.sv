// phase_sampler: the Vernier coincidence flip-flop (output En).
//
// The fast RO's carry chain output clocks this flip-flop and the slow RO's
// carry chain output is its data. While the fast edge still lags the slow
// edge it lands inside the slow pulse and samples 1; once the fast RO has
// caught up, its edge arrives before the slow pulse and samples 0. En is
// thus high exactly while the fine counter should count.
//
// Interface: slow (D), fast (clock), clear (asynchronous, active high,
// clears En to 0), en (Q).
// Connections follow the paper's drawing (the SET pin is unused); the
// clear-to-0 state is this design's choice.
`timescale 1ps/1fs
module phase_sampler (
  input  logic slow,
  input  logic fast,
  input  logic clear,
  output logic en
);

  always_ff @(posedge fast or posedge clear) begin
    if (clear) en <= 1'b0;
    else       en <= slow;
  end

endmodule
