// hit_delay_module: behavioural model of the per-channel delay module used
// in front of each TDC channel for the multi-channel test: an even number
// (40..100) of cascaded NOT gates, so the common hit reaches every channel
// with its own fixed delay and the output keeps the input polarity.
// Modelled as a transport delay of N_GATES * GATE_PS.
`timescale 1ps/1fs
module hit_delay_module #(
  parameter int unsigned N_GATES = 40,
  parameter real         GATE_PS = 80.0
) (
  input  logic a,
  output logic y
);

  if ((N_GATES % 2) != 0 || N_GATES < 40 || N_GATES > 100) begin : g_bad
    $error("hit_delay_module: N_GATES must be even and within 40..100");
  end

  transport_delay #(.DELAY_PS(real'(N_GATES) * GATE_PS)) u_delay (.a(a), .y(y));

endmodule
