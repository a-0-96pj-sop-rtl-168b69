// tb_ext_mem_if: unit test of the external-memory arbiter and async-SRAM
// strobes, against the behavioural SRAM. Three requesters issue random
// reads and writes (requests held until ack) to a small shared address
// range; a reference memory predicts every read. Also checked: each access
// keeps CE# low with a stable address for WAIT+1 cycles before its ack,
// OE# and WE# are never low together, and when all three request in the
// same cycle they are served in priority order 0, 1, 2.
`timescale 1ns/1ps
module tb_ext_mem_if;
  import snn_pkg::*;
  logic clk = 0, rst_n = 1;
  initial rst_n = 0;   // a real falling edge (1 to 0) starts the asynchronous reset
  always #5 clk = ~clk;

  localparam int NM = 3, WAIT = 2;
  logic [NM-1:0]         req = '0, we = '0, ack;
  logic [NM-1:0][AW-1:0] addr = '0;
  logic [NM-1:0][DW-1:0] wdata = '0;
  logic [DW-1:0]         rdata;
  logic ce_n, oe_n, we_n, dq_oe;
  logic [AW-1:0] sa;
  logic [DW-1:0] dq_o, dq_i;

  ext_mem_if #(.NM(NM), .WAIT(WAIT)) dut (.clk, .rst_n, .req_i(req), .we_i(we), .addr_i(addr),
    .wdata_i(wdata), .ack_o(ack), .rdata_o(rdata), .sram_ce_n(ce_n), .sram_oe_n(oe_n),
    .sram_we_n(we_n), .sram_addr(sa), .sram_dq_o(dq_o), .sram_dq_oe(dq_oe), .sram_dq_i(dq_i));
  async_sram_model u_sram (.ce_n, .oe_n, .we_n, .addr(sa), .dq_i(dq_o), .dq_oe, .dq_o(dq_i));

  int checks = 0, failures = 0, n_conflict = 0, n_acc = 0;
  logic [DW-1:0] ref_mem [64];
  int ce_len = 0;
  logic [AW-1:0] ce_addr;

  always @(posedge clk) if (rst_n) begin
    if ($countones(req) > 1) n_conflict++;
    checks++;
    if (!oe_n && !we_n) begin failures++; $display("FAIL: OE# and WE# both low"); end
    if (!ce_n) begin
      if (ce_len != 0 && sa != ce_addr) begin failures++; $display("FAIL: address moved during access"); end
      ce_addr = sa;
      ce_len++;
    end
    if (|ack) begin
      int m;
      m = 0;
      for (int i = NM-1; i >= 0; i--) if (ack[i]) m = i;
      checks++;
      if ($countones(ack) != 1 || !req[m]) begin failures++; $display("FAIL: ack %b req %b", ack, req); end
      checks++;
      if (ce_len < WAIT + 1) begin failures++; $display("FAIL: strobe only %0d cycles", ce_len); end
      if (!we[m]) begin
        checks++;
        if (rdata !== ref_mem[addr[m][5:0]]) begin
          failures++;
          $display("FAIL: read %0d got %h expected %h", addr[m], rdata, ref_mem[addr[m][5:0]]);
        end
      end else ref_mem[addr[m][5:0]] = wdata[m];
      n_acc++;
    end
    if (ce_n) ce_len = 0;
  end

  // requester m: one access at a time, held until acked
  task automatic master(int m, int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      repeat ($urandom % 4) @(negedge clk);
      addr[m]  = AW'($urandom % 64);
      we[m]    = ($urandom % 2) == 0;
      wdata[m] = $urandom;
      req[m]   = 1'b1;
      @(posedge clk);
      while (!ack[m]) @(posedge clk);
      @(negedge clk);
      req[m] = 1'b0;
    end
  endtask

  initial begin
    for (int a = 0; a < 64; a++) ref_mem[a] = u_sram.dflt(AW'(a));
    repeat (3) @(negedge clk);
    rst_n = 1;
    // directed: all three in the same cycle, served 0, 1, 2
    begin
      int order [$];
      @(negedge clk);
      for (int m = 0; m < NM; m++) begin addr[m] = AW'(m); we[m] = 0; req[m] = 1; end
      while (order.size() < NM) begin
        @(posedge clk);
        for (int m = 0; m < NM; m++) if (ack[m]) order.push_back(m);
        @(negedge clk);
        for (int m = 0; m < NM; m++) if (order.size() > 0 && order[order.size()-1] == m) req[m] = 0;
      end
      checks++;
      if (order[0] != 0 || order[1] != 1 || order[2] != 2) begin
        failures++;
        $display("FAIL: priority order %0d %0d %0d", order[0], order[1], order[2]);
      end
    end
    fork
      master(0, 300);
      master(1, 300);
      master(2, 300);
    join
    checks++;
    if (n_conflict == 0) begin failures++; $display("FAIL: no contention"); end
    $display("accesses=%0d contention_cycles=%0d", n_acc, n_conflict);
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
