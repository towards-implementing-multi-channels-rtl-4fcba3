// tb_ctrl2_generator: checks that a falling edge of en (asynchronous to the
// clock) gives exactly one ctrl_2 pulse, one cycle wide, three clock edges
// later, and that a rising edge gives none.
`timescale 1ps/1fs
module tb_ctrl2_generator;

  logic clk = 1'b0, rst = 1'b1, en = 1'b0;
  logic ctrl_2;
  int checks = 0, failures = 0;

  ctrl2_generator dut (.clk(clk), .rst(rst), .en(en), .ctrl_2(ctrl_2));

  always #833.5 clk = ~clk;

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int pulses;
  always @(posedge clk) if (ctrl_2) pulses++;

  initial begin
    int edges_seen;
    repeat (3) @(posedge clk);
    rst = 1'b0;
    for (int t = 0; t < 30; t++) begin
      // en high for a while, then falls at a random phase
      @(posedge clk); #(100 + $urandom % 1400);
      en = 1'b1;
      pulses = 0;
      repeat (6) @(posedge clk);
      checks++; if (pulses != 0) begin failures++; $display("FAIL pulse on rising en"); end
      #(100 + $urandom % 1400);
      en = 1'b0;
      edges_seen = 0;
      while (!ctrl_2 && edges_seen < 10) begin @(posedge clk); #1; edges_seen++; end
      checks++;
      if (edges_seen != 3) begin failures++; $display("FAIL latency %0d edges", edges_seen); end
      @(posedge clk); #1;
      checks++; if (ctrl_2) begin failures++; $display("FAIL ctrl_2 wider than one cycle"); end
      repeat (4) @(posedge clk);
      checks++; if (pulses != 1) begin failures++; $display("FAIL %0d pulses", pulses); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
