// tb_enu: unit test of the extended neuromorphic unit.
// A CPU model hands random instructions to the ENU whenever it requests one:
// the five neuromorphic instructions, plus wrong opcodes and unused funct3
// values. A bus-slave model acks after a random delay and returns random
// read data. The bus transactions of each instruction are compared with
// the expected list (NCFG: one write; NRD: one read; NEN: 20 writes of the
// per-core enable bits; NSTART: timestep count then start; NSTAT: read of
// the status register), and the response data and error flag are checked.
`timescale 1ns/1ps
module tb_enu;
  import snn_pkg::*;
  logic clk = 0, rst_n = 1;
  initial rst_n = 0;   // a real falling edge (1 to 0) starts the asynchronous reset
  always #5 clk = ~clk;

  logic        lsu_req, ivalid = 0, rvalid, rerr;
  logic [31:0] instr = 0, rs1 = 0, rs2 = 0, rdata;
  nbus_req_t   bus;
  nbus_rsp_t   brsp = '0;

  enu dut (.clk, .rst_n, .lsu_req_o(lsu_req), .instr_valid_i(ivalid), .instr_i(instr),
           .rs1_i(rs1), .rs2_i(rs2), .rsp_valid_o(rvalid), .rsp_data_o(rdata), .rsp_err_o(rerr),
           .bus_o(bus), .bus_i(brsp));

  int checks = 0, failures = 0;
  typedef struct { logic we; logic [31:0] addr; logic [31:0] wdata; } tr_t;
  tr_t seen [$];
  logic [31:0] last_rd;

  // bus slave: random wait, then ack for one cycle
  initial forever begin
    @(negedge clk);
    brsp = '0;
    if (bus.req) begin
      repeat ($urandom % 3) @(negedge clk);
      brsp = '{ack: 1'b1, rdata: $urandom};
      last_rd = brsp.rdata;
      @(posedge clk);
      seen.push_back('{bus.we, bus.addr, bus.wdata});
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      int f;
      bit bad;
      tr_t want [$];
      logic [31:0] a, b;
      f = int'($urandom % 8);
      bad = (f > 4) || (($urandom % 10) == 0);
      a = $urandom; b = $urandom;
      while (!lsu_req) @(negedge clk);
      instr = {17'd0, 3'(f), 5'd0, bad && f <= 4 ? 7'b0110011 : 7'b0001011};
      rs1 = a; rs2 = b; ivalid = 1;
      seen.delete();
      want.delete();
      @(negedge clk);
      ivalid = 0;
      while (!rvalid) @(negedge clk);
      if (!bad) case (f)
        0: want.push_back('{1'b1, a, b});
        1: want.push_back('{1'b0, a, 32'd0});
        2: for (int c = 0; c < N_CORES; c++) want.push_back('{1'b1, {SEL_CORE, 16'd0, 5'(c), CR_EN}, 32'(a[c])});
        3: begin want.push_back('{1'b1, {SEL_CTRL, 28'd1}, a}); want.push_back('{1'b1, {SEL_CTRL, 28'd0}, 32'd1}); end
        default: want.push_back('{1'b0, {SEL_CTRL, 28'd3}, 32'd0});
      endcase
      checks++;
      if (rerr != bad) begin failures++; $display("FAIL: instr %0d error flag %0b", i, rerr); end
      checks++;
      if (seen.size() != want.size()) begin
        failures++; $display("FAIL: instr %0d (f=%0d) made %0d bus accesses, expected %0d", i, f, seen.size(), want.size());
      end else foreach (want[k]) begin
        checks++;
        if (seen[k].we != want[k].we || seen[k].addr != want[k].addr || (want[k].we && seen[k].wdata != want[k].wdata)) begin
          failures++; $display("FAIL: instr %0d access %0d: %h %h", i, k, seen[k].addr, seen[k].wdata);
        end
      end
      if (!bad && (f == 1 || f == 4)) begin
        checks++;
        if (rdata != last_rd) begin failures++; $display("FAIL: read result %h expected %h", rdata, last_rd); end
      end
      @(negedge clk);
    end
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
