// tb_mpdma: unit test of the membrane-potential DMA. All 20 cores issue
// random reads and writes of V for random neurons (held until ack); a
// memory model answers after 1..4 cycles. Checked: each access reaches
// address core*8192 + neuron with the core's write data, each read returns
// the value last written there (or the memory's initial content), the ack
// goes to the requesting core only, and when several cores wait, the
// lowest-numbered one is served first.
`timescale 1ns/1ps
module tb_mpdma;
  import snn_pkg::*;
  logic clk = 0, rst_n = 1;
  initial rst_n = 0;   // a real falling edge (1 to 0) starts the asynchronous reset
  always #5 clk = ~clk;

  logic [N_CORES-1:0]            rd = '0, wr = '0, ack;
  logic [N_CORES-1:0][NID_W-1:0] addr = '0;
  logic [N_CORES-1:0][VW-1:0]    wdata = '0;
  logic [VW-1:0]                 rdata;
  logic                          mreq, mwe, mack = 0;
  logic [AW-1:0]                 maddr;
  logic [DW-1:0]                 mwdata, mrdata = '0;

  mpdma dut (.clk, .rst_n, .rd_req_i(rd), .wr_req_i(wr), .addr_i(addr), .wdata_i(wdata),
             .ack_o(ack), .rdata_o(rdata), .mem_req_o(mreq), .mem_we_o(mwe), .mem_addr_o(maddr),
             .mem_wdata_o(mwdata), .mem_ack_i(mack), .mem_rdata_i(mrdata));

  int checks = 0, failures = 0, n_acc = 0, n_wait = 0;
  logic [DW-1:0] mem [logic [AW-1:0]];
  function automatic logic [DW-1:0] rd_mem(logic [AW-1:0] a);
    return mem.exists(a) ? mem[a] : (DW'(a) ^ 32'h5A5A_0000);
  endfunction

  // memory: answers after a random delay
  initial begin
    forever begin
      @(negedge clk);
      if (mreq && !mack) begin
        repeat ($urandom % 4) @(negedge clk);
        if (mwe) mem[maddr] = mwdata;
        mrdata = rd_mem(maddr);
        mack   = 1;
        @(negedge clk);
        mack   = 0;
      end
    end
  end

  // lowest waiting core when an access starts
  logic [4:0] lowest;
  always @(posedge clk) if (rst_n) begin
    if (dut.st == dut.IDLE && |(rd | wr)) begin
      lowest = '0;
      for (int c = N_CORES-1; c >= 0; c--) if (rd[c] || wr[c]) lowest = 5'(c);
      if ($countones(rd | wr) > 1) n_wait++;
      checks++;
      if (dut.win != lowest) begin failures++; $display("FAIL: core %0d served before %0d", dut.win, lowest); end
    end
    if (mreq && mack) begin
      checks++;
      if (maddr != MP_BASE + AW'(dut.who) * AW'(NEURONS) + AW'(addr[dut.who]) || mwe != wr[dut.who]
          || (mwe && mwdata != wdata[dut.who])) begin
        failures++;
        $display("FAIL: core %0d access at %h", dut.who, maddr);
      end
    end
  end

  task automatic core(int c, int n);
    for (int i = 0; i < n; i++) begin
      bit w;
      logic [AW-1:0] a;
      @(negedge clk);
      repeat ($urandom % 8) @(negedge clk);
      w = ($urandom % 2) == 0;
      addr[c]  = NID_W'(($urandom % 2) ? $urandom % 16 : $urandom);
      wdata[c] = $urandom;
      a = MP_BASE + AW'(c) * AW'(NEURONS) + AW'(addr[c]);
      rd[c] = !w;
      wr[c] = w;
      @(posedge clk);
      while (!ack[c]) @(posedge clk);
      checks++;
      if ($countones(ack) != 1) begin failures++; $display("FAIL: ack %b", ack); end
      if (!w) begin
        checks++;
        if (rdata != rd_mem(a)) begin
          failures++;
          $display("FAIL: core %0d read %h got %h expected %h", c, a, rdata, rd_mem(a));
        end
      end
      n_acc++;
      @(negedge clk);
      rd[c] = 0;
      wr[c] = 0;
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < N_CORES; c++) begin
      automatic int cc = c;
      fork core(cc, 40); join_none
    end
    wait fork;
    checks++;
    if (n_wait == 0) begin failures++; $display("FAIL: never more than one core waiting"); end
    $display("accesses=%0d contended_starts=%0d", n_acc, n_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
