// fine_time_interpolator: Vernier ring-oscillator interpolator.
//
// hit_syn starts the slow RO (period tau_s), clk_syn, which comes a fine
// interval T later, starts the fast RO (period tau_f < tau_s). Each lap the
// fast pulse gains dtau = tau_s - tau_f on the slow one. The phase sampler
// (clocked by the fast chain, data from the slow chain) holds En high while
// the fast pulse still lags; the fine counter, clocked by the slow RO,
// counts laps while En is high. When the fast RO catches up En falls, the
// count n ~ T / dtau is final and ctrl_2 is raised a few system clocks
// later. clear (from the time assembler) stops both ROs and zeroes En and
// the counter.
//
// The RO periods come from the tap pair (FAST_TAP i, SLOW_TAP j) through the
// Table-II period model in tdc_pkg. The default (25, 30) gives
// dtau = -168 + 62 + 133 = 27 ps, inside the 25..35 ps target window.
//
// Interface: clk, rst (system domain), hit_syn, clk_syn, clear; fine_cnt,
// ctrl_2; slow_ro / fast_ro (the RO outputs that are brought off chip for
// trimming with an oscilloscope).
// The RO, sampler and counter structure follows the paper; the period model
// reference and the reshaper delays are this design's.
// Lint reports slow_chain as used both as data and as a clock: it is the
// phase sampler's data and also clocks the slow RO's loop one-shot. As in
// the original circuit, the sampler's data deliberately comes from a
// free-running oscillator; the count is only read after ctrl_2, once En
// has been synchronised.
`timescale 1ps/1fs
module fine_time_interpolator #(
  parameter int unsigned FAST_TAP = 25,
  parameter int unsigned SLOW_TAP = 30,
  parameter int unsigned FINE_W   = tdc_pkg::FINE_W,
  parameter real         TREF_PS  = 5000.0,
  parameter real         TPOS_PS  = 2000.0,
  parameter real         TDFF_PS  = 100.0
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              hit_syn,
  input  logic              clk_syn,
  input  logic              clear,
  output logic [FINE_W-1:0] fine_cnt,
  output logic              ctrl_2,
  output logic              slow_ro,
  output logic              fast_ro
);

  localparam real TAU_F_PS = tdc_pkg::fast_period_ps(FAST_TAP, TREF_PS);
  localparam real TAU_S_PS = tdc_pkg::slow_period_ps(SLOW_TAP, TREF_PS);

  if (!tdc_pkg::tap_ok(FAST_TAP) || !tdc_pkg::tap_ok(SLOW_TAP)) begin : g_bad_tap
    $error("fine_time_interpolator: taps must lie in 17..32");
  end

  logic slow_chain, fast_chain, en;

  ring_oscillator #(.PERIOD_PS(TAU_S_PS), .TPOS_PS(TPOS_PS), .TDFF_PS(TDFF_PS)) u_slow_ro (
    .start(hit_syn), .clear(clear), .chain_out(slow_chain), .ro_out(slow_ro)
  );

  ring_oscillator #(.PERIOD_PS(TAU_F_PS), .TPOS_PS(TPOS_PS), .TDFF_PS(TDFF_PS)) u_fast_ro (
    .start(clk_syn), .clear(clear), .chain_out(fast_chain), .ro_out(fast_ro)
  );

  phase_sampler u_sampler (
    .slow(slow_chain), .fast(fast_chain), .clear(clear), .en(en)
  );

  fine_time_counter #(.WIDTH(FINE_W)) u_counter (
    .clk(slow_ro), .en(en), .clr(clear), .cnt(fine_cnt)
  );

  ctrl2_generator u_ctrl2 (
    .clk(clk), .rst(rst), .en(en), .ctrl_2(ctrl_2)
  );

endmodule
