// tb_ring_oscillator: checks that a start pulse makes the RO oscillate with
// period PERIOD_PS and pulse width TPOS, that clear stops it and that it
// does not start while clear is high.
`timescale 1ps/1fs
module tb_ring_oscillator;

  localparam real PER = 4832.0;

  logic start = 1'b0, clear = 1'b1;
  logic chain_out, ro_out;
  int checks = 0, failures = 0;

  ring_oscillator #(.PERIOD_PS(PER)) dut (
    .start(start), .clear(clear), .chain_out(chain_out), .ro_out(ro_out)
  );

  real rise_t[$], fall_t[$], chain_t[$];
  always @(posedge ro_out)    rise_t.push_back($realtime);
  always @(negedge ro_out)    fall_t.push_back($realtime);
  always @(posedge chain_out) chain_t.push_back($realtime);

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real t0;
    #10000;
    clear = 1'b0;
    #1000;
    rise_t.delete(); fall_t.delete(); chain_t.delete();
    t0 = $realtime;
    start = 1'b1; #1500; start = 1'b0;
    #(60 * PER);
    checks++;
    if (rise_t.size() < 55) begin failures++; $display("FAIL only %0d laps", rise_t.size()); end
    // first chain edge one period after the start edge
    checks++;
    if (chain_t.size() == 0 || chain_t[0] - t0 < PER - 0.1 || chain_t[0] - t0 > PER + 0.1) begin
      failures++; $display("FAIL first chain edge");
    end
    for (int i = 1; i < rise_t.size() && i < 50; i++) begin
      checks++;
      if (rise_t[i] - rise_t[i-1] < PER - 0.1 || rise_t[i] - rise_t[i-1] > PER + 0.1) begin
        failures++; $display("FAIL lap %0d period %0f", i, rise_t[i] - rise_t[i-1]);
      end
      checks++;
      if (fall_t[i] - rise_t[i] < 1999.9 || fall_t[i] - rise_t[i] > 2000.1) begin
        failures++; $display("FAIL lap %0d width %0f", i, fall_t[i] - rise_t[i]);
      end
    end
    // clear stops it
    clear = 1'b1;
    #(2 * PER);
    rise_t.delete();
    #(10 * PER);
    checks++;
    if (rise_t.size() != 0) begin failures++; $display("FAIL still running after clear"); end
    // a start pulse under clear passes the chain once and dies
    start = 1'b1; #1500; start = 1'b0;
    #(10 * PER);
    checks++;
    if (rise_t.size() > 1) begin failures++; $display("FAIL oscillates under clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
