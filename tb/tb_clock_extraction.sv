// tb_clock_extraction: hits at random clock phases. Checks that hit_syn is
// the hit delayed by tau_1 = 22 x 80 ps, that clk_syn (and ctrl_1) rises
// tau_reg + tau_2 = 260 ps after the second clock edge that sees the hit
// high, and that the resulting fine interval stays inside the window
// [tau_d, tau_d + T_clk) with tau_d = 1667 + 260 - 1760 = 167 ps.
`timescale 1ps/1fs
module tb_clock_extraction;

  localparam real TCLK = 1667.0;

  logic clk = 1'b0, hit = 1'b0;
  logic hit_syn, clk_syn, ctrl_1;
  int checks = 0, failures = 0;

  clock_extraction dut (
    .clk_in(clk), .hit_in(hit), .hit_syn(hit_syn), .clk_syn(clk_syn), .ctrl_1(ctrl_1)
  );

  always #833.5 clk = ~clk;

  real edge_t[$];
  always @(posedge clk) edge_t.push_back($realtime);
  real hs_t, cs_t;
  always @(posedge hit_syn) hs_t = $realtime;
  always @(posedge clk_syn) cs_t = $realtime;

  initial begin
    #100_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real t_hit, e2, fine, fmin = 1.0e9, fmax = -1.0e9;
    repeat (5) @(posedge clk);
    for (int i = 0; i < 100; i++) begin
      @(posedge clk);
      #(20 + ($urandom % 1620));          // stay clear of the clock edge itself
      edge_t.delete();
      t_hit = $realtime;
      hit = 1'b1;
      #(2500.0);
      hit = 1'b0;
      repeat (6) @(posedge clk);
      #1;
      // second clock edge after the hit
      e2 = edge_t[1];
      checks++;
      if (hs_t - t_hit < 1759.9 || hs_t - t_hit > 1760.1) begin
        failures++; $display("FAIL tau_1 %0f", hs_t - t_hit);
      end
      checks++;
      if (cs_t - e2 < 259.9 || cs_t - e2 > 260.1) begin
        failures++; $display("FAIL clk_syn %0f after 2nd edge", cs_t - e2);
      end
      checks++;
      if (ctrl_1 !== clk_syn) begin failures++; $display("FAIL ctrl_1 != clk_syn"); end
      fine = cs_t - hs_t;
      if (fine < fmin) fmin = fine;
      if (fine > fmax) fmax = fine;
      checks++;
      if (fine < 166.9 || fine > 167.0 + TCLK) begin
        failures++; $display("FAIL fine interval %0f", fine);
      end
    end
    $display("fine interval range %0f .. %0f ps", fmin, fmax);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
