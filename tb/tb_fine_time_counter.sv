// tb_fine_time_counter: checks counting only while en is high, holding when
// en is low, saturation at 127 and the asynchronous clear.
`timescale 1ps/1fs
module tb_fine_time_counter;

  logic clk = 1'b0, en = 1'b0, clr = 1'b0;
  logic [6:0] cnt;
  int checks = 0, failures = 0;
  int model;

  fine_time_counter dut (.clk(clk), .en(en), .clr(clr), .cnt(cnt));

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick;
    #2000 clk = 1'b1;
    if (en && model < 127) model++;
    #2000 clk = 1'b0;
    checks++;
    if (int'(cnt) != model) begin failures++; $display("FAIL cnt=%0d model=%0d", cnt, model); end
  endtask

  initial begin
    #10 clr = 1'b1;
    #100;
    checks++; if (cnt != 0) begin failures++; $display("FAIL clear"); end
    clr = 1'b0;
    model = 0;
    for (int i = 0; i < 300; i++) begin
      en = ($urandom % 4) != 0;
      tick();
    end
    checks++; if (cnt != 7'd127) begin failures++; $display("FAIL no saturation"); end
    clr = 1'b1; #10;
    checks++; if (cnt != 0) begin failures++; $display("FAIL async clear"); end
    clr = 1'b0; model = 0;
    en = 1'b1;
    repeat (17) tick();
    checks++; if (cnt != 7'd17) begin failures++; $display("FAIL count 17"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
