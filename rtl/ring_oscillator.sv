// ring_oscillator: behavioural model of one carry-chain ring oscillator of
// the Vernier fine time interpolator.
//
// A start pulse (hit_syn for the slow RO, clk_syn for the fast one) is
// reshaped and enters an OR gate; the OR output runs through the tapped
// carry chain, the chain output is reshaped again and fed back through a
// 2:1 multiplexer into the other OR input. The multiplexer's input 0 is the
// feedback and input 1 is ground; clear drives its select, so clear = 1
// opens the loop and the oscillation dies after the pulse in flight has
// left the chain. One lap takes PERIOD_PS: the chain delay is set to
// PERIOD_PS - TDFF_PS so that chain plus loop reshaper make up the period.
//
// Interface: start, clear; chain_out (carry chain output, sampled by the
// phase flip-flop) and ro_out (reshaped loop signal: fine counter clock and
// the oscilloscope output).
// Structure follows the paper's drawing; the delays are this model's.
`timescale 1ps/1fs
module ring_oscillator #(
  parameter real PERIOD_PS = 5000.0,
  parameter real TPOS_PS   = 2000.0,
  parameter real TDFF_PS   = 100.0
) (
  input  logic start,
  input  logic clear,
  output logic chain_out,
  output logic ro_out
);

  logic start_shaped;
  logic fb_mux;
  logic chain_in;

  pulse_width_reshaper #(.TPOS_PS(TPOS_PS), .TDFF_PS(TDFF_PS)) u_in_shape (
    .a(start), .y(start_shaped)
  );

  always_comb begin
    fb_mux   = clear ? 1'b0 : ro_out;     // mux input 1 = ground, input 0 = loop
    chain_in = start_shaped | fb_mux;
  end

  carry_chain #(.DELAY_PS(PERIOD_PS - TDFF_PS)) u_chain (
    .a(chain_in), .y(chain_out)
  );

  pulse_width_reshaper #(.TPOS_PS(TPOS_PS), .TDFF_PS(TDFF_PS)) u_loop_shape (
    .a(chain_out), .y(ro_out)
  );

endmodule
