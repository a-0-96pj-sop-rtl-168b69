// tb_clk_manager: unit test of the clock manager.
// For each of the four clocks (CPU HF, CPU HL, NoC, IDMA) and dividers 0
// (bypass) and 1..4, the rising edges over 240 system-clock cycles must be
// 240 / (2k) (240 for bypass); a clock whose gate-enable bit is cleared must
// not tick. Sleep: after cpu_sleep the HF clock stops and the asleep
// status reads 1; a timestep-switch wake or a network-done wake restarts
// it. The reset dividers (HF bypass, HL divide-by-2) are checked first.
`timescale 1ns/1ps
module tb_clk_manager;
  import snn_pkg::*;
  logic sys_clk = 0, rst_n = 1;
  initial rst_n = 0;   // a real falling edge (1 to 0) starts the asynchronous reset
  always #5 sys_clk = ~sys_clk;

  nbus_req_t bus = '0;
  nbus_rsp_t rsp;
  logic sleep = 0, wake_ts = 0, wake_done = 0, hf, hl, noc, idma, asleep;

  clk_manager dut (.sys_clk, .rst_n, .bus_i(bus), .bus_o(rsp), .cpu_sleep_i(sleep),
                   .wake_ts_i(wake_ts), .wake_done_i(wake_done), .cpu_hfclk_o(hf),
                   .cpu_hlclk_o(hl), .noc_clk_o(noc), .idma_clk_o(idma), .cpu_asleep_o(asleep));

  int checks = 0, failures = 0;
  int edges [4] = '{0, 0, 0, 0};
  always @(posedge hf)   edges[0]++;
  always @(posedge hl)   edges[1]++;
  always @(posedge noc)  edges[2]++;
  always @(posedge idma) edges[3]++;

  task automatic wr(logic [3:0] o, logic [31:0] d);
    @(negedge sys_clk);
    bus = '{req: 1'b1, we: 1'b1, addr: {SEL_CLK, 24'd0, o}, wdata: d};
    @(negedge sys_clk);
    bus = '0;
  endtask
  task automatic measure(int cycles, output int e [4]);
    repeat (8) @(negedge sys_clk);      // let dividers settle
    for (int i = 0; i < 4; i++) edges[i] = 0;
    repeat (cycles) @(negedge sys_clk);
    for (int i = 0; i < 4; i++) e[i] = edges[i];
  endtask
  function automatic bit near(int got, int want);
    return got >= want - 1 && got <= want + 1;
  endfunction

  initial begin
    int e [4];
    repeat (3) @(negedge sys_clk);
    rst_n = 1;
    measure(240, e);
    checks++;
    if (!near(e[0], 240) || !near(e[1], 120) || !near(e[2], 240) || !near(e[3], 240)) begin
      failures++; $display("FAIL: reset clocks %0d %0d %0d %0d", e[0], e[1], e[2], e[3]);
    end
    for (int k = 0; k <= 4; k++) begin
      for (int c = 0; c < 4; c++) wr(4'(c), k);
      measure(240, e);
      for (int c = 0; c < 4; c++) begin
        checks++;
        if (!near(e[c], k == 0 ? 240 : 240 / (2 * k))) begin
          failures++; $display("FAIL: clock %0d divide %0d gave %0d edges", c, k, e[c]);
        end
      end
    end
    for (int c = 0; c < 4; c++) wr(4'(c), 0);
    wr(4'd4, 4'b0101);           // gate HL and IDMA
    measure(100, e);
    checks++;
    if (!near(e[0], 100) || e[1] != 0 || !near(e[2], 100) || e[3] != 0) begin
      failures++; $display("FAIL: gating %0d %0d %0d %0d", e[0], e[1], e[2], e[3]);
    end
    wr(4'd4, 4'b1111);
    // sleep, wake by timestep switch, sleep again, wake by network done
    for (int w = 0; w < 2; w++) begin
      @(negedge sys_clk); sleep = 1; @(negedge sys_clk); sleep = 0;
      measure(50, e);
      checks++;
      if (e[0] != 0 || !asleep || !near(e[2], 50)) begin failures++; $display("FAIL: sleep (%0d edges)", e[0]); end
      @(negedge sys_clk);
      if (w == 0) wake_ts = 1; else wake_done = 1;
      @(negedge sys_clk);
      wake_ts = 0; wake_done = 0;
      measure(50, e);
      checks++;
      if (!near(e[0], 50) || asleep) begin failures++; $display("FAIL: wake %0d (%0d edges)", w, e[0]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge sys_clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
