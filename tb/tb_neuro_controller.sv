// tb_neuro_controller: unit test of the timestep scheduler.
// Core models raise done a random time after each timestep start (cleared
// by the start), the NoC and IDMA report busy at random. For several runs
// with random timestep counts and core masks: the number of timestep
// starts must equal the requested count; a start (after the first) comes
// only after every masked core was done and the NoC and IDMA were idle;
// net_done pulses once per run; and the status register reports done and
// the timestep count. Also checked: 0 timesteps finishes at once, and abort
// stops a run.
`timescale 1ns/1ps
module tb_neuro_controller;
  import snn_pkg::*;
  logic clk = 0, rst_n = 1;
  initial rst_n = 0;   // a real falling edge (1 to 0) starts the asynchronous reset
  always #5 clk = ~clk;

  nbus_req_t          bus = '0;
  nbus_rsp_t          rsp;
  logic [N_CORES-1:0] done = '0;
  logic               noc_busy = 0, idma_busy = 0, ts_start, net_done, busy;

  neuro_controller dut (.clk, .rst_n, .bus_i(bus), .bus_o(rsp), .core_done_i(done),
                        .noc_busy_i(noc_busy), .idma_busy_i(idma_busy), .ts_start_o(ts_start),
                        .net_done_o(net_done), .busy_o(busy));

  int checks = 0, failures = 0, n_start = 0, n_done = 0, n_blocked = 0;
  logic [N_CORES-1:0] mask = '0;
  int left [N_CORES];
  logic ok_prev = 0;

  // core models and the rule "switch only when all done and idle"
  always @(posedge clk) if (rst_n) begin
    if (ts_start) begin
      n_start++;
      if (n_start > 1) begin
        checks++;
        if (!ok_prev) begin failures++; $display("FAIL: timestep switch before cores done / NoC idle"); end
      end
    end
    if (net_done) n_done++;
    if (busy && (done | ~mask) == '1 && (noc_busy || idma_busy)) n_blocked++;
    ok_prev = ((done | ~mask) == '1) && !noc_busy && !idma_busy;
    for (int c = 0; c < N_CORES; c++) begin
      if (ts_start) begin done[c] <= 1'b0; left[c] = 1 + int'($urandom % 40); end
      else if (left[c] > 0) begin left[c]--; if (left[c] == 0) done[c] <= 1'b1; end
    end
  end
  always @(negedge clk) begin
    noc_busy  = ($urandom % 3) == 0;
    idma_busy = ($urandom % 5) == 0;
  end

  task automatic wr(logic [3:0] o, logic [31:0] d);
    @(negedge clk);
    bus = '{req: 1'b1, we: 1'b1, addr: {SEL_CTRL, 24'd0, o}, wdata: d};
    @(negedge clk);
    bus = '0;
  endtask
  task automatic rd(logic [3:0] o, output logic [31:0] d);
    @(negedge clk);
    bus = '{req: 1'b1, we: 1'b0, addr: {SEL_CTRL, 24'd0, o}, wdata: 32'd0};
    #1 d = rsp.rdata;
    @(negedge clk);
    bus = '0;
  endtask

  initial begin
    logic [31:0] r;
    for (int c = 0; c < N_CORES; c++) left[c] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 8; run++) begin
      int t;
      t = 1 + int'($urandom % 6);
      mask = N_CORES'($urandom);
      n_start = 0;
      n_done = 0;
      wr(4'd1, t);
      wr(4'd2, mask);
      wr(4'd0, 1);
      while (!net_done) @(negedge clk);
      repeat (3) @(negedge clk);
      checks++;
      if (n_start != t || n_done != 1) begin
        failures++;
        $display("FAIL: run %0d: %0d starts, %0d finishes for %0d timesteps", run, n_start, n_done, t);
      end
      rd(4'd3, r);
      checks++;
      if (r[0] != 1'b1 || r[1] != 1'b0 || r[31:16] != 16'(t)) begin failures++; $display("FAIL: status %h", r); end
    end
    // zero timesteps: finish without any switch
    n_start = 0; n_done = 0;
    wr(4'd1, 0);
    wr(4'd0, 1);
    repeat (5) @(negedge clk);
    checks++;
    if (n_start != 0 || n_done != 1) begin failures++; $display("FAIL: zero-timestep run"); end
    // abort in the middle of a long run
    mask = '1;
    wr(4'd2, mask);
    wr(4'd1, 1000);
    wr(4'd0, 1);
    repeat (100) @(negedge clk);
    wr(4'd0, 2);
    @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL: abort did not stop the run"); end
    checks++;
    if (n_blocked == 0) begin failures++; $display("FAIL: drain never waited"); end
    $display("drain_waits=%0d", n_blocked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
