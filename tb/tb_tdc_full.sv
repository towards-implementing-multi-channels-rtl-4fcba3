// tb_tdc_full: full-size test of the TDC with tdc_top at its default
// parameters (32 channels, every channel tuned to taps (25, 30)).
//
// Mirrors the 32-channel measurement set-up: one hit source drives all
// channels, each through its own delay module of an even number of NOT
// gates between 40 and 100 (80 ps per gate; channel c uses
// 40 + 2 * ((7 * c) mod 31) gates). For every hit, every channel must give
// exactly one timestamp without timeout, and the interval of each channel
// to channel 0, rebuilt as coarse * 1667 ps - n * 27 ps, must match the
// difference of the two delay modules within 3 LSB.
`timescale 1ps/1fs
module tb_tdc_full;

  localparam int  NCH   = 32;
  localparam real TCLK  = 1667.0;
  localparam real LSB   = 27.0;
  localparam real RANGE = 512.0 * 1667.0;
  localparam int  NHITS = 20;

  function automatic int unsigned gates_of(input int c);
    return 40 + 2 * ((7 * c) % 31);
  endfunction

  logic clk = 1'b0, rst = 1'b1, hit_src = 1'b0;
  logic [NCH-1:0] hit;
  tdc_pkg::timestamp_t ts [NCH];
  logic [NCH-1:0] ts_valid, ts_timeout, slow_ro, fast_ro;
  int checks = 0, failures = 0;

  for (genvar c = 0; c < NCH; c++) begin : g_dly
    hit_delay_module #(.N_GATES(gates_of(c))) u_dly (.a(hit_src), .y(hit[c]));
  end

  tdc_top dut (
    .clk(clk), .rst(rst), .hit(hit), .ts(ts), .ts_valid(ts_valid),
    .ts_timeout(ts_timeout), .slow_ro(slow_ro), .fast_ro(fast_ro)
  );

  always #833.5 clk = ~clk;

  initial begin
    #500_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int                  n_valid [NCH];
  tdc_pkg::timestamp_t last_ts [NCH];
  bit                  last_to [NCH];
  always @(posedge clk) begin
    for (int c = 0; c < NCH; c++)
      if (ts_valid[c]) begin
        n_valid[c]++;
        last_ts[c] <= ts[c];
        last_to[c] <= ts_timeout[c];
      end
  end

  function automatic real to_ps(input tdc_pkg::timestamp_t t);
    return real'(t.coarse) * TCLK - real'(t.fine) * LSB;
  endfunction

  function automatic real wrap(input real x);
    real y = x;
    while (y >  RANGE / 2.0) y -= RANGE;
    while (y < -RANGE / 2.0) y += RANGE;
    return y;
  endfunction

  initial begin
    real d, want, worst;
    int  n_before [NCH];
    worst = 0.0;
    repeat (8) @(posedge clk);
    rst = 1'b0;
    repeat (20) @(posedge clk);
    for (int i = 0; i < NHITS; i++) begin
      #(real'($urandom % 700000) + real'($urandom % 1000) / 1000.0);
      for (int c = 0; c < NCH; c++) n_before[c] = n_valid[c];
      hit_src = 1'b1; #3000.0; hit_src = 1'b0;
      repeat (500) @(posedge clk);
      for (int c = 0; c < NCH; c++) begin
        checks++;
        if (n_valid[c] != n_before[c] + 1 || last_to[c]) begin
          failures++;
          $display("FAIL hit %0d ch%0d: %0d timestamps, timeout %0b", i, c,
                   n_valid[c] - n_before[c], last_to[c]);
          continue;
        end
        if (c == 0) continue;
        d    = wrap(to_ps(last_ts[c]) - to_ps(last_ts[0]));
        want = real'(gates_of(c)) * 80.0 - real'(gates_of(0)) * 80.0;
        if (d - want > worst) worst = d - want;
        if (want - d > worst) worst = want - d;
        checks++;
        if (d - want > 3.0 * LSB || want - d > 3.0 * LSB) begin
          failures++;
          $display("FAIL hit %0d ch%0d-ch0 = %0f ps, want %0f", i, c, d, want);
        end
      end
    end
    $display("32 channels, %0d hits, worst interval error %0f ps", NHITS, worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
