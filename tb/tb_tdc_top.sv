// tb_tdc_top: end-to-end test of the multi-channel TDC, 4 channels.
//
// Test set-up as in the multi-channel measurement: one hit source feeds
// every channel through its own delay module of an even number of NOT
// gates (40, 58, 76, 100 gates of 80 ps). Channel 3 is deliberately tuned
// to the tap pair (21, 29), whose period difference is only 2 ps: for most
// hit phases the fast RO needs more laps than the 400-cycle limit allows,
// so the measurement ends in a timeout with the fine count saturated at
// 127. Any channel-3 result that is not a timeout must have n < 127.
//
// For channels 1 and 2 the interval to channel 0, rebuilt from the
// timestamps as coarse * 1667 ps - n * 27 ps, must equal the difference of
// the delay modules within 3 LSB. Mechanisms counted, each must occur:
// complete measurement (ctrl_2), timeout, coarse counter wrap between two
// timestamps, and a hit that falls in the dead time and is ignored.
`timescale 1ps/1fs
module tb_tdc_top;

  localparam int  NCH   = 4;
  localparam real TCLK  = 1667.0;
  localparam real LSB   = 27.0;
  localparam real RANGE = 512.0 * 1667.0;
  localparam int unsigned GATES [NCH] = '{40, 58, 76, 100};
  localparam int unsigned P_HIT [NCH]  = '{22, 22, 22, 22};
  localparam int unsigned P_CLK [NCH]  = '{2, 2, 2, 2};
  localparam int unsigned P_FT  [NCH]  = '{25, 25, 25, 21};
  localparam int unsigned P_ST  [NCH]  = '{30, 30, 30, 29};

  logic clk = 1'b0, rst = 1'b1, hit_src = 1'b0;
  logic [NCH-1:0] hit;
  tdc_pkg::timestamp_t ts [NCH];
  logic [NCH-1:0] ts_valid, ts_timeout, slow_ro, fast_ro;
  int checks = 0, failures = 0;

  for (genvar c = 0; c < NCH; c++) begin : g_dly
    hit_delay_module #(.N_GATES(GATES[c])) u_dly (.a(hit_src), .y(hit[c]));
  end

  tdc_top #(
    .NUM_CH(NCH),
    .HIT_GATES(P_HIT), .CLK_GATES(P_CLK),
    .FAST_TAP(P_FT),   .SLOW_TAP(P_ST)
  ) dut (
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

  // collect timestamps per channel
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

  int cnt_measured = 0, cnt_timeout = 0, cnt_wrap = 0, cnt_deadtime = 0;

  task automatic fire(input bit double_hit);
    int n_before [NCH];
    for (int c = 0; c < NCH; c++) n_before[c] = n_valid[c];
    hit_src = 1'b1; #3000.0; hit_src = 1'b0;
    if (double_hit) begin
      #(50000.0);
      hit_src = 1'b1; #3000.0; hit_src = 1'b0;
    end
    repeat (900) @(posedge clk);
    for (int c = 0; c < NCH; c++) begin
      checks++;
      if (n_valid[c] != n_before[c] + 1) begin
        failures++;
        $display("FAIL ch%0d: %0d timestamps", c, n_valid[c] - n_before[c]);
      end
    end
    if (double_hit && n_valid[0] == n_before[0] + 1) cnt_deadtime++;
  endtask

  initial begin
    real d, want;
    logic [8:0] prev_coarse = '0;
    repeat (8) @(posedge clk);
    rst = 1'b0;
    repeat (20) @(posedge clk);
    for (int i = 0; i < 25; i++) begin
      #(real'($urandom % 700000) + real'($urandom % 1000) / 1000.0);
      fire(i == 12);
      if (i == 12) continue;      // the disturbed event is not measured
      for (int c = 0; c < 3; c++) begin
        checks++;
        if (last_to[c]) begin failures++; $display("FAIL ch%0d timeout", c); end
        else cnt_measured++;
      end
      checks++;
      if (last_to[3]) begin
        cnt_timeout++;
        if (last_ts[3].fine != 7'd127) begin failures++; $display("FAIL ch3 timeout with n=%0d", last_ts[3].fine); end
      end else if (last_ts[3].fine == 7'd127) begin
        failures++; $display("FAIL ch3 saturated without timeout");
      end
      if (i > 0 && last_ts[0].coarse < prev_coarse) cnt_wrap++;
      prev_coarse = last_ts[0].coarse;
      for (int c = 1; c < 3; c++) begin
        d    = wrap(to_ps(last_ts[c]) - to_ps(last_ts[0]));
        want = real'(GATES[c] - GATES[0]) * 80.0;
        checks++;
        if (d - want > 3.0 * LSB || want - d > 3.0 * LSB) begin
          failures++;
          $display("FAIL hit %0d ch%0d-ch0 = %0f ps, want %0f", i, c, d, want);
        end
      end
    end
    $display("mechanisms: measured=%0d timeout=%0d coarse_wrap=%0d deadtime_ignored=%0d",
             cnt_measured, cnt_timeout, cnt_wrap, cnt_deadtime);
    checks++; if (cnt_measured == 0) begin failures++; $display("FAIL no complete measurement"); end
    checks++; if (cnt_timeout  == 0) begin failures++; $display("FAIL no timeout"); end
    checks++; if (cnt_wrap     == 0) begin failures++; $display("FAIL no coarse wrap"); end
    checks++; if (cnt_deadtime == 0) begin failures++; $display("FAIL no dead-time hit"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
