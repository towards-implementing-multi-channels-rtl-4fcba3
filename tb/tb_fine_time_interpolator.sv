// tb_fine_time_interpolator: self-checking test of the Vernier interpolator.
//
// Launches hit_syn and, F ps later, clk_syn, then waits for ctrl_2. The
// expected lap count is worked out here from the ring-oscillator periods
// (taken from the printed period-difference table, not from the design) by
// replaying the edge times: every fast chain edge samples the slow pulse
// train, En rises at the first edge that lands inside a slow pulse and falls
// at the next one that does not; the counter counts the slow loop edges in
// between. Also checks the two RO periods, the ctrl_2 latency after En
// falls, what a clock edge outside the hit pulse (Table I cases a and b)
// gives, and that clear stops both oscillators.
`timescale 1ps/1fs
module tb_fine_time_interpolator;

  localparam real TREF = 5000.0;
  localparam real TDFF = 100.0;
  localparam real TPOS = 2000.0;
  // taps (25, 30): tau_f = TREF + (-133) - 62, tau_s = TREF + (-168)
  localparam real TAU_F = TREF - 133.0 - 62.0;
  localparam real TAU_S = TREF - 168.0;

  logic clk = 1'b0, rst = 1'b1, hit_syn = 1'b0, clk_syn = 1'b0, clear = 1'b1;
  logic [6:0] fine_cnt;
  logic ctrl_2, slow_ro, fast_ro;
  int checks = 0, failures = 0;

  fine_time_interpolator dut (
    .clk(clk), .rst(rst), .hit_syn(hit_syn), .clk_syn(clk_syn), .clear(clear),
    .fine_cnt(fine_cnt), .ctrl_2(ctrl_2), .slow_ro(slow_ro), .fast_ro(fast_ro)
  );

  always #833.5 clk = ~clk;

  initial begin
    #200_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // slow pulse level at time t (hit_syn rose at 0): pulse k is high from
  // (k+1)*TAU_S for TPOS
  function automatic bit slow_high(input real t);
    for (int k = 0; k < 400; k++)
      if (t >= real'(k + 1) * TAU_S && t < real'(k + 1) * TAU_S + TPOS) return 1'b1;
    return 1'b0;
  endfunction

  // lap count predicted for fine interval f (ps): fast chain edges at
  // f + (m+1)*TAU_F are replayed against the slow pulses
  function automatic int expected_n(input real f);
    int  mr = -1, mf = -1;
    int  n = 0;
    bit  smp;
    real en_rise, en_fall, t;
    for (int m = 0; m < 400; m++) begin
      smp = slow_high(f + real'(m + 1) * TAU_F);
      if (mr < 0 && smp) mr = m;
      else if (mr >= 0 && !smp) begin
        mf = m;
        break;
      end
    end
    if (mr < 0 || mf < 0) return 0;
    en_rise = f + real'(mr + 1) * TAU_F;
    en_fall = f + real'(mf + 1) * TAU_F;
    for (int k = 0; k < 400; k++) begin
      t = real'(k + 1) * TAU_S + TDFF;
      if (t > en_rise && t < en_fall) n++;
    end
    return (n > 127) ? 127 : n;
  endfunction

  task automatic measure(input real f, output int n, output bit c2);
    clear = 1'b1;
    repeat (6) @(posedge clk);
    clear = 1'b0;
    #(1000.0);
    if (f >= 0.0) begin
      hit_syn = 1'b1;
      #(f) clk_syn = 1'b1;
      #(2500.0);
      hit_syn = 1'b0;
      clk_syn = 1'b0;
    end else begin
      clk_syn = 1'b1;
      #(-f) hit_syn = 1'b1;
      #(1500.0);
      clk_syn = 1'b0;
      hit_syn = 1'b0;
    end
    c2 = 1'b0;
    for (int cyc = 0; cyc < 800; cyc++) begin
      @(posedge clk);
      if (ctrl_2) begin
        c2 = 1'b1;
        break;
      end
    end
    n = int'(fine_cnt);
  endtask

  // RO period measurement from consecutive rising edges
  real slow_t[$], fast_t[$];
  always @(posedge slow_ro) slow_t.push_back($realtime);
  always @(posedge fast_ro) fast_t.push_back($realtime);

  // ctrl_2 latency after En falls
  real en_fall_t;
  int  lat_cycles;
  always @(negedge dut.en) en_fall_t = $realtime;

  initial begin
    int  n, e;
    bit  c2;
    real per;
    real f;
    repeat (4) @(posedge clk);
    rst = 1'b0;

    // 1. RO periods
    slow_t.delete(); fast_t.delete();
    measure(900.0, n, c2);
    check(slow_t.size() >= 10 && fast_t.size() >= 10, "ROs oscillate");
    if (slow_t.size() >= 10) begin
      per = (slow_t[9] - slow_t[1]) / 8.0;
      check(per > TAU_S - 0.5 && per < TAU_S + 0.5, $sformatf("slow period %0f", per));
      per = (fast_t[9] - fast_t[1]) / 8.0;
      check(per > TAU_F - 0.5 && per < TAU_F + 0.5, $sformatf("fast period %0f", per));
    end

    // 2. sweep of fine intervals inside the valid window (Table I case e)
    for (int s = 0; s < 40; s++) begin
      f = 100.0 + real'(s) * 43.7;
      e = expected_n(f);
      measure(f, n, c2);
      check(c2, $sformatf("ctrl_2 for f=%0f", f));
      check(n >= e - 1 && n <= e + 1, $sformatf("f=%0f n=%0d expected %0d", f, n, e));
      // ctrl_2 comes 3 system clocks after En falls (2-flop synchroniser + edge)
      lat_cycles = int'(($realtime - en_fall_t) / 1667.0);
      check(lat_cycles >= 2 && lat_cycles <= 4, $sformatf("ctrl_2 latency %0d", lat_cycles));
    end

    // 3. case (a): clock edge after the hit pulse has ended. The first fast
    // edge samples 0; the fast RO then gains on the slow pulse, enters it
    // after (f - TPOS)/dtau laps and counts about TPOS/dtau laps.
    e = expected_n(TPOS + 300.0);
    measure(TPOS + 300.0, n, c2);
    check(e > 60, $sformatf("case a model e=%0d", e));
    check(n >= e - 1 && n <= e + 1, $sformatf("case a n=%0d expected %0d", n, e));
    check(c2, "case a ctrl_2");

    // 4. case (b): clock edge before the hit. The fast RO runs ahead and only
    // meets the previous slow pulse after about (TAU_F - 400 - TPOS)/dtau
    // laps; it then counts about TPOS/dtau laps.
    e = expected_n(-400.0);
    measure(-400.0, n, c2);
    check(e > 60, $sformatf("case b model e=%0d", e));
    check(n >= e - 1 && n <= e + 1, $sformatf("case b n=%0d expected %0d", n, e));
    check(c2, "case b ctrl_2");

    // 5. clear stops both oscillators
    clear = 1'b1;
    repeat (6) @(posedge clk);
    slow_t.delete(); fast_t.delete();
    repeat (20) @(posedge clk);
    check(slow_t.size() == 0 && fast_t.size() == 0, "clear stops the ROs");
    check(fine_cnt == 0, "clear zeroes the counter");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
