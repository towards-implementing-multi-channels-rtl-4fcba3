// tb_pulse_width_reshaper: checks that input pulses of any width leave as
// pulses of width TPOS (2000 ps) that start TDFF (100 ps) after the input
// edge, and that an edge arriving while the one-shot is still clearing is
// dropped.
`timescale 1ps/1fs
module tb_pulse_width_reshaper;

  logic a = 1'b0;
  logic y;
  int checks = 0, failures = 0;

  pulse_width_reshaper dut (.a(a), .y(y));

  real rise_t[$], fall_t[$];
  always @(posedge y) rise_t.push_back($realtime);
  always @(negedge y) fall_t.push_back($realtime);

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pulse_and_check(input real width);
    real t0;
    rise_t.delete(); fall_t.delete();
    t0 = $realtime;
    a = 1'b1; #(width); a = 1'b0;
    #(6000.0 - width);
    checks++;
    if (rise_t.size() != 1 || fall_t.size() != 1) begin
      failures++;
      $display("FAIL width %0f: %0d rises %0d falls", width, rise_t.size(), fall_t.size());
    end else begin
      checks++;
      if (rise_t[0] - t0 < 99.9 || rise_t[0] - t0 > 100.1) begin
        failures++; $display("FAIL rise delay %0f", rise_t[0] - t0);
      end
      checks++;
      if (fall_t[0] - rise_t[0] < 1999.9 || fall_t[0] - rise_t[0] > 2000.1) begin
        failures++; $display("FAIL out width %0f for in width %0f", fall_t[0] - rise_t[0], width);
      end
    end
  endtask

  initial begin
    #5000;   // lets any power-up state clear itself
    pulse_and_check(300.0);
    pulse_and_check(1000.0);
    pulse_and_check(3500.0);
    // second edge 3000 ps after the first: the clear (active 2100..4100)
    // still holds, so only one output pulse
    rise_t.delete();
    a = 1'b1; #500; a = 1'b0; #2500; a = 1'b1; #500; a = 1'b0;
    #6000;
    checks++;
    if (rise_t.size() != 1) begin failures++; $display("FAIL dropped edge: %0d rises", rise_t.size()); end
    // edge 5000 ps later (after the clear ends) is kept
    rise_t.delete();
    a = 1'b1; #500; a = 1'b0; #4500; a = 1'b1; #500; a = 1'b0;
    #6000;
    checks++;
    if (rise_t.size() != 2) begin failures++; $display("FAIL kept edge: %0d rises", rise_t.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
