// tb_coarse_counter: checks that the 9-bit coarse counter starts at 0 after
// reset, adds one per system clock and wraps from 511 to 0.
`timescale 1ps/1fs
module tb_coarse_counter;

  logic       clk = 1'b0, rst = 1'b1;
  logic [8:0] cnt;
  int checks = 0, failures = 0;
  int unsigned model;

  coarse_counter dut (.clk(clk), .rst(rst), .cnt(cnt));

  always #833.5 clk = ~clk;

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit wrapped = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    @(posedge clk); #1;
    model = 1;
    checks++; if (cnt != 9'd1) begin failures++; $display("FAIL first count %0d", cnt); end
    for (int i = 0; i < 1100; i++) begin
      @(posedge clk); #1;
      model = (model + 1) % 512;
      if (model == 0) wrapped = 1'b1;
      checks++;
      if (cnt != 9'(model)) begin
        failures++;
        $display("FAIL cycle %0d cnt=%0d model=%0d", i, cnt, model);
      end
    end
    checks++; if (!wrapped) failures++;
    // reset in the middle of the count
    rst = 1'b1;
    @(posedge clk); #1;
    checks++; if (cnt != 0) begin failures++; $display("FAIL reset"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
