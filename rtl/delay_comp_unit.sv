// delay_comp_unit: behavioural model of the delay compensation unit of the
// clock extraction module (a chain of up to 32 LUT NOT gates).
//
// On the FPGA the unit is a cascade of LUT-implemented NOT gates whose used
// length is trimmed by hand after place and route; its only job is to add a
// fixed delay (tau_1 on the hit path, tau_2 on the clock path). Gate delays
// are a property of the silicon and the routing, so this model is not
// synthesizable logic: it is a transport delay of N_GATES * GATE_PS plus
// EXTRA_PS (used to lump in the clock-to-Q time tau_reg of the preceding
// flip-flop). Every edge is passed, however short the pulse.
//
// Interface: a (input), y (delayed copy of a).
// The 32-gate maximum is the paper's; the per-gate delay, the lumping of
// tau_reg and the non-inverting polarity for any gate count are this
// model's choices.
`timescale 1ps/1fs
module delay_comp_unit #(
  parameter int unsigned MAX_GATES = 32,
  parameter int unsigned N_GATES   = 22,
  parameter real         GATE_PS   = 80.0,
  parameter real         EXTRA_PS  = 0.0
) (
  input  logic a,
  output logic y
);

  localparam real DELAY_PS = real'(N_GATES) * GATE_PS + EXTRA_PS;

  if (N_GATES > MAX_GATES) begin : g_bad
    $error("delay_comp_unit: N_GATES exceeds MAX_GATES");
  end

  transport_delay #(.DELAY_PS(DELAY_PS)) u_delay (.a(a), .y(y));

endmodule
