// ctrl2_generator: tells the time assembler that the fine count is final.
//
// En comes from the ring-oscillator domain. It is brought into the system
// clock domain by a SYNC_STAGES-flop synchroniser; a falling edge of the
// synchronised En (the fast RO has caught up with the slow one, the fine
// counter has stopped) gives a one-cycle ctrl_2 pulse. By then the fine
// count has been stable for at least SYNC_STAGES clock cycles.
//
// Interface: clk, rst (synchronous), en, ctrl_2.
// Timing: ctrl_2 is high SYNC_STAGES+1 rising edges after En falls.
// The paper names this block and its inputs; the synchroniser and edge
// detector are this design's choice.
`timescale 1ps/1fs
module ctrl2_generator #(
  parameter int unsigned SYNC_STAGES = 2
) (
  input  logic clk,
  input  logic rst,
  input  logic en,
  output logic ctrl_2
);

  logic [SYNC_STAGES-1:0] sync;
  logic                   en_d;

  always_ff @(posedge clk) begin
    if (rst) begin
      sync   <= '0;
      en_d   <= 1'b0;
      ctrl_2 <= 1'b0;
    end else begin
      sync   <= {sync[SYNC_STAGES-2:0], en};
      en_d   <= sync[SYNC_STAGES-1];
      ctrl_2 <= en_d & ~sync[SYNC_STAGES-1];
    end
  end

endmodule
