// pulse_width_reshaper: behavioural model of the pulse width reshaping
// module found at the input and inside the loop of every ring oscillator.
//
// A flip-flop with D tied high is clocked by the incoming pulse; its output
// returns through a short buffer chain (delay T_pos) to the flip-flop's
// asynchronous clear. Every rising edge at the input therefore leaves as a
// pulse of fixed width T_pos, TDFF_PS after the edge, so the positive
// duration of the pulse circulating in the RO cannot shrink or grow from
// lap to lap. A rising edge that arrives while the clear is still active
// (up to 2*T_pos after the previous one) is lost, as in the real circuit.
//
// The flip-flop has no reset: whatever state it powers up in, the T_pos
// feedback clears it within T_pos. yosys reports the flip-flop-to-own-clear
// path as a logic loop; that loop is the circuit (a one-shot), not a flaw.
//
// Interface: a (input pulse), y (reshaped pulse).
// Structure after the paper's drawing; the delays TPOS_PS and TDFF_PS are
// this model's choices (T_pos must exceed T_clk plus the extra delay tau_d
// for the clock extraction timing rule, and stay under half the RO period).
`timescale 1ps/1fs
module pulse_width_reshaper #(
  parameter real TPOS_PS = 2000.0,
  parameter real TDFF_PS = 100.0
) (
  input  logic a,
  output logic y
);

  logic a_d;    // input edge after the flip-flop's clock-to-output time
  logic q_fb;   // y after the T_pos buffer chain, drives the clear

  transport_delay #(.DELAY_PS(TDFF_PS)) u_tdff (.a(a), .y(a_d));

  always_ff @(posedge a_d or posedge q_fb) begin
    if (q_fb) y <= 1'b0;
    else      y <= 1'b1;
  end

  transport_delay #(.DELAY_PS(TPOS_PS)) u_tpos (.a(y), .y(q_fb));

endmodule
