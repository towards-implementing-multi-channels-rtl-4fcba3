// tb_tdc_channel: one channel end to end with hits at random times,
// uncorrelated with the 600 MHz clock (a code density run).
//
// Each timestamp {coarse, n} is turned back into a time with
//     t = coarse * 1667 ps - n * 27 ps
// (27 ps = period difference of the default RO taps, from the printed
// table). The difference t - t_hit, folded into the 512-cycle coarse range,
// must be the same for every hit within 3 LSB. Also checks that the fine
// counts stay inside one clock period's worth of codes, that no timeout
// occurs, and that the coarse count wrapped at least once during the run.
`timescale 1ps/1fs
module tb_tdc_channel;

  localparam real TCLK  = 1667.0;
  localparam real LSB   = 27.0;
  localparam real RANGE = 512.0 * 1667.0;
  localparam int  NHITS = 300;

  logic clk = 1'b0, rst = 1'b1, hit = 1'b0;
  tdc_pkg::timestamp_t ts;
  logic ts_valid, ts_timeout, slow_ro, fast_ro;
  int checks = 0, failures = 0;

  tdc_channel dut (
    .clk(clk), .rst(rst), .hit(hit), .ts(ts), .ts_valid(ts_valid),
    .ts_timeout(ts_timeout), .slow_ro(slow_ro), .fast_ro(fast_ro)
  );

  always #833.5 clk = ~clk;

  initial begin
    #1_000_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real fold(input real x);
    real y = x;
    while (y < 0.0) y += RANGE;
    while (y >= RANGE) y -= RANGE;
    return y;
  endfunction

  int hist[128];

  initial begin
    real t_hit, t_meas, err, ref_err, d;
    int  nmin = 127, nmax = 0, wraps = 0, got = 0, got_before;
    logic [8:0] last_coarse = '0;
    repeat (8) @(posedge clk);
    rst = 1'b0;
    repeat (20) @(posedge clk);
    for (int i = 0; i < NHITS; i++) begin
      // 0.9..1.4 us between hits, any phase
      #(900000.0 + real'($urandom % 500000) + real'($urandom % 1000) / 1000.0);
      t_hit = $realtime;
      got_before = got;
      hit = 1'b1;
      #(3000.0);
      hit = 1'b0;
      fork
        begin
          @(posedge clk iff ts_valid);
          got++;
        end
        begin
          repeat (700) @(posedge clk);
        end
      join_any
      disable fork;
      checks++;
      if (got != got_before + 1) begin failures++; $display("FAIL no timestamp for hit %0d", i); continue; end
      checks++;
      if (ts_timeout) begin failures++; $display("FAIL timeout on hit %0d", i); end
      hist[ts.fine]++;
      if (int'(ts.fine) < nmin) nmin = int'(ts.fine);
      if (int'(ts.fine) > nmax) nmax = int'(ts.fine);
      if (i > 0 && ts.coarse < last_coarse) wraps++;
      last_coarse = ts.coarse;
      t_meas = real'(ts.coarse) * TCLK - real'(ts.fine) * LSB;
      err = fold(t_meas - t_hit);
      if (i == 0) ref_err = err;
      d = err - ref_err;
      if (d > RANGE / 2.0) d -= RANGE;
      if (d < -RANGE / 2.0) d += RANGE;
      checks++;
      if (d > 3.0 * LSB || d < -3.0 * LSB) begin
        failures++;
        $display("FAIL hit %0d: coarse %0d n %0d off by %0f ps", i, ts.coarse, ts.fine, d);
      end
    end
    // code range: one clock period covers (nm - n0) ~ 1667 / 27 ~ 62 codes
    $display("fine codes %0d .. %0d, %0d coarse wraps", nmin, nmax, wraps);
    checks++;
    if (nmax - nmin < 58 || nmax - nmin > 66) begin failures++; $display("FAIL code range"); end
    checks++;
    if (nmin < 3 || nmin > 9) begin failures++; $display("FAIL n0 = %0d", nmin); end
    checks++;
    if (wraps == 0) begin failures++; $display("FAIL coarse counter never wrapped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
