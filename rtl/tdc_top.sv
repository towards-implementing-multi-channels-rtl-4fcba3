// tdc_top: 32-channel ring-oscillator Vernier TDC.
//
// NUM_CH independent tdc_channel instances share the system clock and
// reset; each has its own hit input, its own coarse counter (all reset
// together, so their counts agree) and its own tuning: the gate counts of
// the two delay compensation units and the RO tap pair, given per channel
// by the parameter arrays. Each channel delivers a 16-bit timestamp with a
// one-cycle valid; collecting and shipping them (a USB link in the
// published prototype) is left to the user.
//
// Defaults: 32 channels, every channel with the tuning found for channel
// No.1 in the published design space, taps (25, 30), 27 ps LSB.
// The per-channel hit inputs are both sampled by the clock and used to
// start ROs (reported by lint as mixed synchronous/asynchronous); see
// tdc_channel.
`timescale 1ps/1fs
module tdc_top #(
  parameter int unsigned NUM_CH              = tdc_pkg::NUM_CH,
  parameter int unsigned HIT_GATES [NUM_CH]  = '{default: 22},
  parameter int unsigned CLK_GATES [NUM_CH]  = '{default: 2},
  parameter int unsigned FAST_TAP  [NUM_CH]  = '{default: 25},
  parameter int unsigned SLOW_TAP  [NUM_CH]  = '{default: 30}
) (
  input  logic                clk,
  input  logic                rst,
  input  logic [NUM_CH-1:0]   hit,
  output tdc_pkg::timestamp_t ts         [NUM_CH],
  output logic [NUM_CH-1:0]   ts_valid,
  output logic [NUM_CH-1:0]   ts_timeout,
  output logic [NUM_CH-1:0]   slow_ro,
  output logic [NUM_CH-1:0]   fast_ro
);

  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    tdc_channel #(
      .HIT_GATES(HIT_GATES[c]), .CLK_GATES(CLK_GATES[c]),
      .FAST_TAP(FAST_TAP[c]),   .SLOW_TAP(SLOW_TAP[c])
    ) u_ch (
      .clk(clk), .rst(rst), .hit(hit[c]),
      .ts(ts[c]), .ts_valid(ts_valid[c]), .ts_timeout(ts_timeout[c]),
      .slow_ro(slow_ro[c]), .fast_ro(fast_ro[c])
    );
  end

endmodule
