// tb_phase_sampler: checks that En takes the slow level at each rising edge
// of the fast signal and is forced to 0 by clear.
`timescale 1ps/1fs
module tb_phase_sampler;

  logic slow = 1'b0, fast = 1'b0, clear = 1'b0;
  logic en;
  int checks = 0, failures = 0;

  phase_sampler dut (.slow(slow), .fast(fast), .clear(clear), .en(en));

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit v, model;
    #10 clear = 1'b1;
    #100;
    checks++; if (en != 1'b0) begin failures++; $display("FAIL clear"); end
    clear = 1'b0;
    model = 1'b0;
    for (int i = 0; i < 200; i++) begin
      v = 1'($urandom);
      slow = v; #50;
      // sometimes toggle slow without a fast edge: En must hold
      if ($urandom % 3 == 0) begin slow = ~slow; #50; end
      else begin fast = 1'b1; model = slow; #50; fast = 1'b0; end
      #20;
      checks++;
      if (en != model) begin failures++; $display("FAIL step %0d en=%0b model=%0b", i, en, model); end
    end
    slow = 1'b1; fast = 1'b1; #10; fast = 1'b0; #10;
    clear = 1'b1; #10;
    checks++; if (en != 1'b0) begin failures++; $display("FAIL async clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
