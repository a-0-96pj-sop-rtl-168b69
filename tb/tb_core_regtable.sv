// tb_core_regtable: unit test of a core's register table (core ID 13).
// Reset values are checked first (disabled, threshold 1, 16 weights of 16
// bits, reset to zero). Then 3000 random writes of random data go to random
// offsets 0..31, including the read-only ID and unused offsets. A model
// keeps each register masked to its width; after every write all registers
// are read back over the bus and the decoded configuration fields are
// compared with the model.
`timescale 1ns/1ps
module tb_core_regtable;
  import snn_pkg::*;
  logic clk = 0, rst_n = 1;
  initial rst_n = 0;   // a real falling edge (1 to 0) starts the asynchronous reset
  always #5 clk = ~clk;

  nbus_req_t bus = '0;
  nbus_rsp_t rsp;
  core_cfg_t cfg;

  core_regtable #(.CORE_ID(5'd13)) dut (.clk, .rst_n, .bus_i(bus), .bus_o(rsp), .cfg_o(cfg));

  int checks = 0, failures = 0;
  logic [31:0] model [32];

  function automatic logic [31:0] mask(int off);
    case (off)
      CR_EN: return 32'h1;            CR_TGT: return 32'h3;
      CR_LAYER: return 32'hFF;        CR_NEURONS, CR_SYN: return 32'h3FFF;
      CR_RST: return 32'h3;           CR_VTH, CR_LEAK: return 32'hFFFF_FFFF;
      CR_WCFG: return 32'hF;          CR_OUT: return 32'h7;
      default: return (off >= CR_W0 && off < CR_W0 + NW) ? 32'hFFFF : 32'h0;
    endcase
  endfunction

  task automatic check_all(string what);
    for (int o = 0; o < 32; o++) begin
      logic [31:0] d;
      bus = '{req: 1'b1, we: 1'b0, addr: {SEL_CORE, 16'd0, 5'd13, 7'(o)}, wdata: 32'd0};
      #1 d = rsp.rdata;
      checks++;
      if (d !== model[o] || !rsp.ack) begin
        failures++;
        $display("FAIL: %s offset %0d read %h expected %h", what, o, d, model[o]);
      end
    end
    bus = '0;
    checks++;
    if (cfg.enable != model[CR_EN][0] || cfg.neurons != model[CR_NEURONS][13:0]
        || cfg.synapses != model[CR_SYN][13:0] || cfg.threshold != model[CR_VTH]
        || cfg.leak != model[CR_LEAK] || cfg.target_router != model[CR_TGT][1:0]
        || cfg.wsel != qsize_e'(model[CR_WCFG][1:0]) || cfg.nsel != qsize_e'(model[CR_WCFG][3:2])
        || cfg.out_en != model[CR_OUT][0] || cfg.out_net != model[CR_OUT][2:1]
        || cfg.reset_mode != reset_mode_e'(model[CR_RST][1:0])
        || cfg.weights[5] != model[CR_W0 + 5][15:0]) begin
      failures++;
      $display("FAIL: %s decoded fields differ", what);
    end
  endtask

  initial begin
    for (int o = 0; o < 32; o++) model[o] = 0;
    model[CR_ID]   = 13;
    model[CR_VTH]  = 1;
    model[CR_WCFG] = {28'd0, SZ16, SZ16};
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check_all("reset");
    for (int i = 0; i < 3000; i++) begin
      int o;
      logic [31:0] d;
      o = int'($urandom % 32);
      d = $urandom;
      if (o == CR_RST) d[1:0] = 2'($urandom % 3);          // three reset modes
      if (o == CR_WCFG) d[3:0] = {2'($urandom % 3), 2'($urandom % 3)};
      @(negedge clk);
      bus = '{req: 1'b1, we: 1'b1, addr: {SEL_CORE, 16'd0, 5'd13, 7'(o)}, wdata: d};
      @(negedge clk);
      bus = '0;
      if (o != CR_ID) model[o] = d & mask(o);
      if (i % 50 == 0) check_all("write");
    end
    check_all("final");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
