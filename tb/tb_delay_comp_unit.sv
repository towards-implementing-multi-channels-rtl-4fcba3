// tb_delay_comp_unit: checks that the compensation unit model delays every
// edge by N_GATES * GATE_PS + EXTRA_PS and keeps pulses shorter than its
// delay (transport delay), for two gate counts.
`timescale 1ps/1fs
module tb_delay_comp_unit;

  logic a = 1'b0;
  logic y22, y5;
  int checks = 0, failures = 0;

  delay_comp_unit dut (.a(a), .y(y22));                          // 22 x 80 ps
  delay_comp_unit #(.N_GATES(5), .EXTRA_PS(100.0)) dut5 (.a(a), .y(y5));  // 500 ps

  real in_t[$], out_t[$], out5_t[$];
  always @(a)   in_t.push_back($realtime);
  always @(y22) out_t.push_back($realtime);
  always @(y5)  out5_t.push_back($realtime);

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000;
    in_t.delete(); out_t.delete(); out5_t.delete();
    // pulses of 300 ps, much shorter than the 1760 ps delay
    repeat (6) begin
      a = 1'b1; #300;
      a = 1'b0; #250;
    end
    #5000;
    checks++;
    if (out_t.size() != in_t.size()) begin
      failures++;
      $display("FAIL %0d edges in, %0d out", in_t.size(), out_t.size());
    end
    for (int i = 0; i < in_t.size() && i < out_t.size(); i++) begin
      checks++;
      if (out_t[i] - in_t[i] < 1759.9 || out_t[i] - in_t[i] > 1760.1) begin
        failures++;
        $display("FAIL edge %0d delay %0f", i, out_t[i] - in_t[i]);
      end
    end
    for (int i = 0; i < in_t.size() && i < out5_t.size(); i++) begin
      checks++;
      if (out5_t[i] - in_t[i] < 499.9 || out5_t[i] - in_t[i] > 500.1) begin
        failures++;
        $display("FAIL 5-gate edge %0d delay %0f", i, out5_t[i] - in_t[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
