// tdc_channel: one complete RO-based Vernier TDC channel.
//
// Two-step measurement. The coarse counter counts system clock cycles; the
// clock extraction module pairs each hit with the clock edge that follows
// it (two register stages later) and produces hit_syn (leading), clk_syn
// (lagging) and ctrl_1. The fine time interpolator measures the hit_syn to
// clk_syn gap as a number n of Vernier laps and raises ctrl_2 when n is
// final. The time assembler latches the coarse count on ctrl_1 and n on
// ctrl_2, outputs ts = {coarse, n}, then clears the interpolator.
//
// The hit time is recovered off line as
//     t_hit = coarse * T_clk - (n - n0) * LSB + const
// where LSB is the RO period difference and n0 the count at zero fine
// interval; both come from a code density test of the channel.
//
// Interface: clk (600 MHz), rst, hit; ts, ts_valid, ts_timeout; slow_ro and
// fast_ro (RO outputs for trimming).
// Dead time: about n * 5 ns for the laps plus a few clocks of clear.
// Wiring after the paper's block diagram; parameters are the tuning knobs
// (gate counts of the two compensation units, RO taps).
// Lint also reports hit, clk_syn and clear as mixed synchronous and
// asynchronous nets. hit and clk_syn are sampled by the system clock and
// also start the ROs; clear is made in the system clock domain and is the
// asynchronous clear of the RO-domain flip-flops. Both are inherent: the
// fine interpolator runs outside the clock domain by design, and clear is
// only raised after ctrl_2, when the RO-domain state is no longer read.
`timescale 1ps/1fs
module tdc_channel #(
  parameter int unsigned HIT_GATES = 22,
  parameter int unsigned CLK_GATES = 2,
  parameter int unsigned FAST_TAP  = 25,
  parameter int unsigned SLOW_TAP  = 30
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 hit,
  output tdc_pkg::timestamp_t  ts,
  output logic                 ts_valid,
  output logic                 ts_timeout,
  output logic                 slow_ro,
  output logic                 fast_ro
);

  import tdc_pkg::*;

  logic [COARSE_W-1:0] coarse_cnt;
  logic [FINE_W-1:0]   fine_cnt;
  logic                hit_syn, clk_syn, ctrl_1, ctrl_2, clear;

  coarse_counter #(.WIDTH(COARSE_W)) u_coarse (
    .clk(clk), .rst(rst), .cnt(coarse_cnt)
  );

  clock_extraction #(.HIT_GATES(HIT_GATES), .CLK_GATES(CLK_GATES)) u_clk_ext (
    .clk_in(clk), .hit_in(hit), .hit_syn(hit_syn), .clk_syn(clk_syn), .ctrl_1(ctrl_1)
  );

  fine_time_interpolator #(.FAST_TAP(FAST_TAP), .SLOW_TAP(SLOW_TAP), .FINE_W(FINE_W)) u_fine (
    .clk(clk), .rst(rst), .hit_syn(hit_syn), .clk_syn(clk_syn), .clear(clear),
    .fine_cnt(fine_cnt), .ctrl_2(ctrl_2), .slow_ro(slow_ro), .fast_ro(fast_ro)
  );

  time_assembler #(.COARSE_W(COARSE_W), .FINE_W(FINE_W)) u_assembler (
    .clk(clk), .rst(rst), .coarse_cnt(coarse_cnt), .fine_cnt(fine_cnt),
    .ctrl_1(ctrl_1), .ctrl_2(ctrl_2), .clear(clear),
    .ts(ts), .ts_valid(ts_valid), .ts_timeout(ts_timeout)
  );

endmodule
