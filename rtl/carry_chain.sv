// carry_chain: behavioural model of the tapped carry chain inside each ring
// oscillator.
//
// On the FPGA each RO runs through a chain of CHAIN_LEN (32) carry cells,
// the delay units (DUs). The chain is cut at the fine tuning point after DU
// i (fast RO) or j (slow RO) and routed to the pulse width reshaper. What
// matters to the TDC is the total delay of that path (tau_p1 + tau_p2),
// which is not linear in the tap because the routing after the cut changes
// with it. The model is therefore a transport delay DELAY_PS chosen by the
// instantiating RO from the period table in tdc_pkg.
//
// Interface: a (chain input), y (output at the selected tap).
// The 32-DU chain length is the paper's (see tdc_pkg::CHAIN_LEN); the
// delay values are this model's.
`timescale 1ps/1fs
module carry_chain #(
  parameter real         DELAY_PS  = 4700.0
) (
  input  logic a,
  output logic y
);

  transport_delay #(.DELAY_PS(DELAY_PS)) u_delay (.a(a), .y(y));

endmodule
