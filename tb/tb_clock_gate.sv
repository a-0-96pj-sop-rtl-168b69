// tb_clock_gate: unit test of the latch-based clock gate.
// The enable (and the test enable) change at random times, in both clock
// phases. The gated clock must equal clk & (enable seen at the end of the
// last low phase): it may only start or stop with the clock, never cut a
// high phase short and never make an extra pulse when the enable changes
// while the clock is high. Gated-off cycles, passed cycles and enable
// changes in the high phase are all counted and must occur.
`timescale 1ns/1ps
module tb_clock_gate;
  logic clk = 0, en = 0, ten = 0, gclk;
  always #5 clk = ~clk;

  clock_gate dut (.clk_i(clk), .en_i(en), .test_en_i(ten), .gclk_o(gclk));

  int checks = 0, failures = 0, n_pass = 0, n_gated = 0, n_high_change = 0;
  logic en_l = 0;
  always @(clk or en or ten) if (!clk) en_l = en | ten;

  always @(posedge clk) begin
    #1;
    checks++;
    if (gclk !== en_l) begin failures++; $display("FAIL: at %0t gclk=%0b expected %0b", $time, gclk, en_l); end
    if (en_l) n_pass++; else n_gated++;
  end
  // during the high phase the gated clock must hold its value
  always @(en or ten) if (clk) begin
    n_high_change++;
    #0.1;
    checks++;
    if (gclk !== en_l) begin failures++; $display("FAIL: glitch at %0t", $time); end
  end
  always @(negedge clk) begin
    #1;
    checks++;
    if (gclk !== 1'b0) begin failures++; $display("FAIL: gclk high in low phase at %0t", $time); end
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      #(1 + $urandom % 13);
      if (($urandom % 10) == 0) ten = ~ten;
      else en = ~en;
    end
    checks++;
    if (n_pass == 0 || n_gated == 0 || n_high_change == 0) begin
      failures++;
      $display("FAIL: not every case seen");
    end
    $display("passed=%0d gated=%0d high_phase_changes=%0d", n_pass, n_gated, n_high_change);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
