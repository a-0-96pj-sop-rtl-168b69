// tb_async_fifo: unit test of the dual-clock FIFO (32-bit, depth 8).
// Writer on a 10 ns clock, reader on a 17 ns clock that is also stopped for
// a while (as a gated core clock is). 2000 random words are written
// whenever wready_o allows and read at random; every word must arrive once,
// in order. The write side must see the FIFO full at least once, and never
// accept more than 8 words ahead of the reader.
`timescale 1ns/1ps
module tb_async_fifo;
  logic wclk = 0, rclk = 0, rst_n = 1, rrun = 1;
  initial rst_n = 0;   // a real falling edge (1 to 0) starts the asynchronous reset
  always #5 wclk = ~wclk;
  always #8.5 if (rrun) rclk = ~rclk;

  logic        wvalid = 0, wready, rvalid, rready = 0;
  logic [31:0] wdata = '0, rdata;

  async_fifo dut (.wclk, .wrst_n(rst_n), .wvalid_i(wvalid), .wdata_i(wdata), .wready_o(wready),
                  .rclk, .rrst_n(rst_n), .rvalid_o(rvalid), .rdata_o(rdata), .rready_i(rready));

  int checks = 0, failures = 0, n_full = 0, written = 0, got = 0;
  logic [31:0] q [$];

  always @(posedge wclk) if (rst_n) begin
    if (!wready) n_full++;
    if (wvalid && wready) begin q.push_back(wdata); written++; end
    checks++;
    if (q.size() > 8) begin failures++; $display("FAIL: %0d words in flight", q.size()); end
  end
  always @(posedge rclk) if (rst_n && rvalid && rready) begin
    checks++;
    if (q.size() == 0 || rdata !== q[0]) begin failures++; $display("FAIL: read %h", rdata); end
    if (q.size() != 0) void'(q.pop_front());
    got++;
  end

  initial begin
    #50 rst_n = 1;
    fork
      forever begin
        @(negedge rclk);
        rready = ($urandom % 100) < 60;
      end
      begin
        #3000 rrun = 0;      // reader clock stopped
        #2000 rrun = 1;
      end
    join_none
    forever begin
      @(negedge wclk);
      if (written >= 2000) break;
      wvalid = ($urandom % 100) < 70;
      wdata  = $urandom;
    end
    wvalid = 0;
    while (got < written) @(negedge wclk);
    repeat (5) @(negedge wclk);
    checks++;
    if (n_full == 0) begin failures++; $display("FAIL: FIFO never full"); end
    checks++;
    if (got != 2000 || written != 2000) begin failures++; $display("FAIL: got %0d of %0d", got, written); end
    $display("written=%0d read=%0d full_cycles=%0d", written, got, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #400000;
    failures++;
    $display("FAIL: watchdog (written=%0d read=%0d)", written, got);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
