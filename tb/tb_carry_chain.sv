// tb_carry_chain: checks the carry chain model's fixed transport delay,
// with several pulses in flight at once as in a running ring oscillator.
`timescale 1ps/1fs
module tb_carry_chain;

  logic a = 1'b0;
  logic y;
  int checks = 0, failures = 0;

  carry_chain #(.DELAY_PS(4732.0)) dut (.a(a), .y(y));

  real in_t[$], out_t[$];
  always @(a) in_t.push_back($realtime);
  always @(y) out_t.push_back($realtime);

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000;
    in_t.delete(); out_t.delete();
    for (int i = 0; i < 8; i++) begin
      a = 1'b1; #(700 + 37 * i);
      a = 1'b0; #(500 + 11 * i);
    end
    #8000;
    checks++;
    if (in_t.size() != out_t.size()) begin
      failures++; $display("FAIL %0d in %0d out", in_t.size(), out_t.size());
    end
    for (int i = 0; i < in_t.size() && i < out_t.size(); i++) begin
      checks++;
      if (out_t[i] - in_t[i] < 4731.9 || out_t[i] - in_t[i] > 4732.1) begin
        failures++; $display("FAIL edge %0d delay %0f", i, out_t[i] - in_t[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
