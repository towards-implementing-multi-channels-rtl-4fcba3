// time_assembler: builds the timestamp from the coarse and fine counts and
// re-arms the channel.
//
// Operation, all on the system clock:
//   IDLE      a rising edge of ctrl_1 (seen one clock after clk_syn rose)
//             latches the coarse count. Because clk_syn leaves the clock
//             extraction one register delay after a clock edge, the value
//             read is the count of the clock edge that launched clk_syn.
//   WAIT_FINE on ctrl_2 the fine count is latched, the 16-bit timestamp
//             {coarse, fine} is output with a one-cycle ts_valid. If ctrl_2
//             has not come after TIMEOUT_CYCLES (400 cycles = 667 ns, more
//             than 127 laps of 5 ns: the fast RO never caught up, as with
//             a tap pair whose "fast" RO is the slower one) the timestamp
//             is output anyway with ts_timeout set.
//   CLEAR     clear is held for CLEAR_CYCLES cycles (10 ns), longer than one
//             RO lap plus one reshaped pulse (5 + 2 ns), so no pulse is left
//             to re-enter a loop; both ROs stop, fine counter and En zero.
// ctrl_1 edges during WAIT_FINE and CLEAR are ignored (dead time). Reset
// holds clear low and leaves the machine in CLEAR, so a clear pulse follows
// every reset: the fine counter and En clear on the rising edge of clear,
// which a level held through power-up would not give.
//
// Interface: clk, rst (synchronous), coarse_cnt, fine_cnt, ctrl_1, ctrl_2;
// clear, ts, ts_valid, ts_timeout.
// Widths and the latch-then-combine role follow the paper; the state
// machine, the timeout, the clear length and the bit order are this
// design's.
`timescale 1ps/1fs
module time_assembler #(
  parameter int unsigned COARSE_W       = tdc_pkg::COARSE_W,
  parameter int unsigned FINE_W         = tdc_pkg::FINE_W,
  parameter int unsigned CLEAR_CYCLES   = 6,
  parameter int unsigned TIMEOUT_CYCLES = 400
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic [COARSE_W-1:0]        coarse_cnt,
  input  logic [FINE_W-1:0]          fine_cnt,
  input  logic                       ctrl_1,
  input  logic                       ctrl_2,
  output logic                       clear,
  output logic [COARSE_W+FINE_W-1:0] ts,
  output logic                       ts_valid,
  output logic                       ts_timeout
);

  typedef enum logic [1:0] {IDLE, WAIT_FINE, CLEAR} state_t;

  state_t                            state;
  logic                              ctrl1_q;
  logic [COARSE_W-1:0]               coarse_lat;
  localparam int unsigned TIMER_W = $clog2(TIMEOUT_CYCLES + CLEAR_CYCLES + 1);
  logic [TIMER_W-1:0]                timer;

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= CLEAR;
      ctrl1_q    <= 1'b1;     // no measurement may start from a level left by reset
      coarse_lat <= '0;
      timer      <= '0;
      clear      <= 1'b0;
      ts         <= '0;
      ts_valid   <= 1'b0;
      ts_timeout <= 1'b0;
    end else begin
      ctrl1_q    <= ctrl_1;
      ts_valid   <= 1'b0;
      ts_timeout <= 1'b0;
      unique case (state)
        IDLE: begin
          clear <= 1'b0;
          if (ctrl_1 && !ctrl1_q) begin
            coarse_lat <= coarse_cnt;
            timer      <= '0;
            state      <= WAIT_FINE;
          end
        end
        WAIT_FINE: begin
          timer <= timer + 1'b1;
          if (ctrl_2 || (timer == TIMER_W'(TIMEOUT_CYCLES - 1))) begin
            ts         <= {coarse_lat, fine_cnt};
            ts_valid   <= 1'b1;
            ts_timeout <= !ctrl_2;
            timer      <= '0;
            clear      <= 1'b1;
            state      <= CLEAR;
          end
        end
        CLEAR: begin
          timer <= timer + 1'b1;
          if (timer == TIMER_W'(CLEAR_CYCLES - 1)) begin
            clear <= 1'b0;
            state <= IDLE;
          end else begin
            clear <= 1'b1;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  // a timestamp is never followed by another one on the next cycle
  assert property (@(posedge clk) disable iff (rst) ts_valid |=> !ts_valid);
  // the fine interpolator is cleared right after every timestamp
  assert property (@(posedge clk) disable iff (rst) ts_valid |-> clear);

endmodule
