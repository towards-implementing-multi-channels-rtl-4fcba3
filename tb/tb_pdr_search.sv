// tb_pdr_search: workload for the period-difference-recording (PDR)
// tuning procedure of one channel.
//
// The two RO period differences recorded with one RO held at tap 32,
// dtau(i,32) and dtau(32,j) (package tdc_pkg), give the difference for any
// tap pair as
//     dtau(i,j) = dtau(i,32) + dtau(32,j) - dtau(32,32).
// The testbench walks the 16 x 16 design space (taps 17..32), lists the
// pairs whose difference lies in the 25..35 ps target window, checks that
// the pair chosen for channel No.1, (25, 30), is among them with 27 ps, and
// then builds the two ring oscillators of that pair from ring_oscillator
// and measures their period difference from simulated edges, which must
// agree with the predicted value to 1 ps.
`timescale 1ps/1fs
module tb_pdr_search;
  import tdc_pkg::*;

  localparam int unsigned SEL_I = 25;
  localparam int unsigned SEL_J = 30;

  int checks = 0, failures = 0;

  logic start_f = 1'b0, start_s = 1'b0, clear = 1'b0;
  logic cf, cs, ro_f, ro_s;

  ring_oscillator #(.PERIOD_PS(fast_period_ps(SEL_I, 5000.0))) u_fast (
    .start(start_f), .clear(clear), .chain_out(cf), .ro_out(ro_f));
  ring_oscillator #(.PERIOD_PS(slow_period_ps(SEL_J, 5000.0))) u_slow (
    .start(start_s), .clear(clear), .chain_out(cs), .ro_out(ro_s));

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int dtau(input int unsigned i, input int unsigned j);
    return dtau_i32(i) + dtau_32j(j) - dtau_i32(32);
  endfunction

  realtime tf [$], tsl [$];
  always @(posedge ro_f) tf.push_back($realtime);
  always @(posedge ro_s) tsl.push_back($realtime);

  initial begin
    int hits = 0;
    real pf, ps;
    // the recorded identities at the corner of the table
    checks++;
    if (dtau(32, 32) != dtau_i32(32)) begin failures++; $display("FAIL dtau(32,32)"); end
    for (int unsigned i = MIN_TAP; i <= CHAIN_LEN; i++)
      for (int unsigned j = MIN_TAP; j <= CHAIN_LEN; j++) begin
        // the period model must reproduce the identity for every pair
        checks++;
        if (slow_period_ps(j, 5000.0) - fast_period_ps(i, 5000.0) != real'(dtau(i, j))) begin
          failures++; $display("FAIL period model at (%0d,%0d)", i, j);
        end
        if (dtau(i, j) >= 25 && dtau(i, j) <= 35) begin
          hits++;
          $display("candidate (i=%0d, j=%0d): %0d ps", i, j, dtau(i, j));
        end
      end
    $display("%0d of 256 tap pairs inside 25..35 ps", hits);
    checks++;
    if (hits == 0) begin failures++; $display("FAIL no candidate"); end
    checks++;
    if (dtau(SEL_I, SEL_J) != 27) begin failures++; $display("FAIL (25,30) = %0d ps", dtau(SEL_I, SEL_J)); end

    // measure the selected pair in simulation
    #10 clear = 1'b1; #100 clear = 1'b0;
    #1000;
    start_f = 1'b1; start_s = 1'b1; #3000; start_f = 1'b0; start_s = 1'b0;
    #200_000;
    clear = 1'b1;
    checks++;
    if (tf.size() < 30 || tsl.size() < 30) begin
      failures++; $display("FAIL ROs did not oscillate");
    end else begin
      pf = (tf[tf.size()-1] - tf[5]) / real'(tf.size() - 6);
      ps = (tsl[tsl.size()-1] - tsl[5]) / real'(tsl.size() - 6);
      $display("simulated: fast %0f ps, slow %0f ps, difference %0f ps", pf, ps, ps - pf);
      checks++;
      if (ps - pf - real'(dtau(SEL_I, SEL_J)) > 1.0 || real'(dtau(SEL_I, SEL_J)) - (ps - pf) > 1.0) begin
        failures++; $display("FAIL simulated difference");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
