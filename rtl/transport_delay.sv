// transport_delay: simulation-only delay element shared by the behavioural
// models of the TDC (delay compensation units, carry chains, pulse width
// reshapers).
//
// Every change of a reappears on y exactly DELAY_PS later, however short
// the pulse (transport, not inertial, delay). Pending changes are kept in a
// FIFO of (due time, value) pairs; because the delay is fixed, they fall
// due in arrival order. This is what a chain of gates does to a pulse train
// that is shorter than the chain: several edges are in flight at once.
//
// Interface: a, y. No clock. Not synthesizable: it models wire and gate
// delay, which on the FPGA comes from placement, not from logic.
`timescale 1ps/1fs
module transport_delay #(
  parameter real DELAY_PS = 100.0
) (
  input  logic a,
  output logic y
);

  real  due_q[$];
  logic val_q[$];
  event pushed;

  initial y = 1'b0;

  always @(a) begin
    due_q.push_back($realtime + DELAY_PS);
    val_q.push_back(a);
    -> pushed;
  end

  initial forever begin
    if (due_q.size() == 0) @(pushed);
    #(due_q[0] - $realtime);
    y = val_q[0];
    void'(due_q.pop_front());
    void'(val_q.pop_front());
  end

endmodule
