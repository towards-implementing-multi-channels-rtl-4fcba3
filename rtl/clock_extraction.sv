// clock_extraction: finds the system clock edge that follows a hit and
// hands the (hit, clock edge) pair to the fine time interpolator.
//
// The hit is sampled by two flip-flops in series, both clocked by the
// system clock (the second guards against metastability of the first). The
// second flip-flop's output, delayed by the clock-path delay compensation
// unit (tau_2), is clk_syn; the same node is ctrl_1, which tells the time
// assembler to latch the coarse count. The hit itself, delayed by the
// hit-path compensation unit (tau_1), is hit_syn. hit_syn leads, clk_syn
// lags, and the gap between their rising edges is the fine interval.
//
// The gate counts HIT_GATES and CLK_GATES stand for the hand trimming done
// on the FPGA: they must keep the extra delay
//     tau_d = T_clk + tau_reg + tau_2 - tau_1
// within 0 <= tau_d <= T_pos - T_clk and as close to 0 as possible. (The
// extra T_clk appears because clk_syn leaves the second flip-flop, one
// clock after the capturing edge.) Defaults: tau_1 = 1760 ps, tau_2 + tau_reg
// = 260 ps, tau_d = 167 ps, about 6 LSB of the default fine interpolator.
//
// Interface: clk_in, hit_in; hit_syn, clk_syn, ctrl_1.
// The flip-flops have no reset, as drawn in the paper; they follow hit_in
// two clock edges after power-up. Structure after the paper's drawing; all
// delay values are this design's.
// Lint reports hit_in as used both as data and as a clock: it is the data
// of the first flip-flop and, through the hit-path delay, the clock of the
// slow RO's input one-shot. That double use is the measuring principle.
`timescale 1ps/1fs
module clock_extraction #(
  parameter int unsigned HIT_GATES = 22,
  parameter int unsigned CLK_GATES = 2,
  parameter real         GATE_PS   = 80.0,
  parameter real         TREG_PS   = 100.0
) (
  input  logic clk_in,
  input  logic hit_in,
  output logic hit_syn,
  output logic clk_syn,
  output logic ctrl_1
);

  logic q1, q2;

  always_ff @(posedge clk_in) begin
    q1 <= hit_in;
    q2 <= q1;
  end

  delay_comp_unit #(.N_GATES(HIT_GATES), .GATE_PS(GATE_PS)) u_tau1 (
    .a(hit_in), .y(hit_syn)
  );

  delay_comp_unit #(.N_GATES(CLK_GATES), .GATE_PS(GATE_PS), .EXTRA_PS(TREG_PS)) u_tau2 (
    .a(q2), .y(clk_syn)
  );

  assign ctrl_1 = clk_syn;

endmodule
