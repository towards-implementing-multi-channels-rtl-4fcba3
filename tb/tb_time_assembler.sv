// tb_time_assembler: drives ctrl_1 / ctrl_2 directly. Checks that the
// timestamp is {coarse count at the ctrl_1 edge, fine count at ctrl_2},
// that ts_valid is one cycle long, that clear follows for 6 cycles, that a
// missing ctrl_2 ends in a timeout after 400 cycles, and that ctrl_1 edges
// during a measurement are ignored.
`timescale 1ps/1fs
module tb_time_assembler;

  logic       clk = 1'b0, rst = 1'b1, ctrl_1 = 1'b0, ctrl_2 = 1'b0;
  logic [8:0] coarse = '0;
  logic [6:0] fine = '0;
  logic       clear, ts_valid, ts_timeout;
  logic [15:0] ts;
  int checks = 0, failures = 0;

  time_assembler dut (
    .clk(clk), .rst(rst), .coarse_cnt(coarse), .fine_cnt(fine), .ctrl_1(ctrl_1), .ctrl_2(ctrl_2),
    .clear(clear), .ts(ts), .ts_valid(ts_valid), .ts_timeout(ts_timeout)
  );

  always #833.5 clk = ~clk;
  always @(posedge clk) coarse <= rst ? 9'd0 : coarse + 1'b1;

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // one measurement: ctrl_1 rises 260 ps after a clock edge; ctrl_2 after
  // wait_cycles (or never if wait_cycles < 0)
  task automatic run(input int wait_cycles, input logic [6:0] n, input bit extra_ctrl1);
    logic [8:0] c_exp;
    int cyc, clr_len;
    @(posedge clk);
    #260;
    c_exp = coarse;                  // count of the edge that launched ctrl_1
    ctrl_1 = 1'b1;
    fine = n;
    cyc = 0;
    while (!ts_valid && cyc < 1000) begin
      @(posedge clk); #1;
      cyc++;
      if (cyc == 3 && extra_ctrl1) begin ctrl_1 = 1'b0; #300 ctrl_1 = 1'b1; end
      if (cyc == 10) ctrl_1 = 1'b0;
      if (wait_cycles >= 0 && cyc == wait_cycles) begin
        ctrl_2 = 1'b1; @(posedge clk); #1; ctrl_2 = 1'b0; cyc++;
      end
    end
    ctrl_1 = 1'b0;
    chk(ts_valid, $sformatf("ts_valid came (wait %0d, cyc %0d)", wait_cycles, cyc));
    chk(ts[15:7] == c_exp, $sformatf("coarse %0d expected %0d", ts[15:7], c_exp));
    chk(ts[6:0] == n, $sformatf("fine %0d expected %0d", ts[6:0], n));
    chk(ts_timeout == (wait_cycles < 0), "timeout flag");
    if (wait_cycles < 0)
      chk(cyc >= 399 && cyc <= 402, $sformatf("timeout after %0d cycles", cyc));
    clr_len = 0;
    while (clear) begin
      chk(!ts_valid || clr_len == 0, "single-cycle ts_valid");
      @(posedge clk); #1; clr_len++;
    end
    chk(clr_len == 6, $sformatf("clear held %0d cycles", clr_len));
  endtask

  int valids;
  always @(posedge clk) if (ts_valid) valids++;

  initial begin
    repeat (4) @(posedge clk);
    #1;
    rst = 1'b0;
    @(posedge clk); #1;
    chk(clear, "clear after reset");
    repeat (6) @(posedge clk);
    valids = 0;
    for (int i = 0; i < 20; i++) run(5 + $urandom % 200, 7'($urandom), 1'b0);
    run(-1, 7'd0, 1'b0);                 // no ctrl_2: timeout
    run(30, 7'd55, 1'b1);                // second ctrl_1 edge while busy
    repeat (20) @(posedge clk);
    chk(valids == 22, $sformatf("%0d timestamps for 22 measurements", valids));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
