// tb_output_buffer: unit test of the data combiner and the four output
// buffers. All 20 cores send random spikes (network 0..3, neuron 0..255,
// some above the 200-byte buffer) and hold them until accepted. Checked
// every cycle: exactly the lowest-numbered requesting core is accepted.
// A reference model counts accepted spikes with 8-bit saturation; one
// neuron is hit more than 255 times so saturation happens. All 800
// counters are then read over the bus and compared; a byte write and the
// clear-all write are checked too.
`timescale 1ns/1ps
module tb_output_buffer;
  import snn_pkg::*;
  logic clk = 0, rst_n = 1;
  initial rst_n = 0;   // a real falling edge (1 to 0) starts the asynchronous reset
  always #5 clk = ~clk;

  nbus_req_t                     bus = '0;
  nbus_rsp_t                     rsp;
  logic [N_CORES-1:0]            v = '0, rdy;
  logic [N_CORES-1:0][1:0]       net = '0;
  logic [N_CORES-1:0][NID_W-1:0] nid = '0;

  output_buffer dut (.clk, .rst_n, .bus_i(bus), .bus_o(rsp), .in_valid_i(v), .in_net_i(net),
                     .in_nid_i(nid), .in_ready_o(rdy));

  int checks = 0, failures = 0, n_sat = 0;
  int model [4][200];

  always @(posedge clk) if (rst_n) begin
    int lo;
    lo = -1;
    for (int c = N_CORES-1; c >= 0; c--) if (v[c]) lo = c;
    checks++;
    if (rdy !== ((lo < 0) ? '0 : (N_CORES'(1) << lo))) begin
      failures++;
      $display("FAIL: ready %b with valid %b", rdy, v);
    end
    if (lo >= 0 && nid[lo] < 200) begin
      if (model[net[lo]][nid[lo]] < 255) model[net[lo]][nid[lo]]++;
      else n_sat++;
    end
  end

  task automatic bus_rd(input logic [31:0] a, output logic [31:0] d);
    @(negedge clk);
    bus = '{req: 1'b1, we: 1'b0, addr: a, wdata: 32'd0};
    #1 d = rsp.rdata;
    @(negedge clk);
    bus = '0;
  endtask
  task automatic bus_wr(input logic [31:0] a, input logic [31:0] d);
    @(negedge clk);
    bus = '{req: 1'b1, we: 1'b1, addr: a, wdata: d};
    @(negedge clk);
    bus = '0;
  endtask
  task automatic compare_all(string what);
    logic [31:0] d;
    for (int n = 0; n < 4; n++) for (int i = 0; i < 200; i++) begin
      bus_rd({SEL_OBUF, 16'd0, 2'(n), 2'd0, 8'(i)}, d);
      checks++;
      if (d != 32'(model[n][i])) begin
        failures++;
        if (failures < 10) $display("FAIL: %s net%0d[%0d]=%0d expected %0d", what, n, i, d, model[n][i]);
      end
    end
  endtask

  initial begin
    for (int n = 0; n < 4; n++) for (int i = 0; i < 200; i++) model[n][i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      for (int c = 0; c < N_CORES; c++) begin
        if (!v[c] || rdy[c]) begin          // previous spike accepted: maybe send a new one
          v[c] = ($urandom % 100) < 30;
          net[c] = 2'($urandom);
          nid[c] = (t < 600 && c == 0) ? NID_W'(7) : NID_W'($urandom % 256);
          if (t < 600 && c == 0) begin v[c] = 1; net[c] = 2'd2; end
        end
      end
    end
    @(negedge clk);
    v = '0;
    @(negedge clk);
    compare_all("count");
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL: saturation never reached"); end
    bus_wr({SEL_OBUF, 16'd0, 2'd1, 2'd0, 8'd5}, 32'd77);
    model[1][5] = 77;
    compare_all("byte write");
    bus_wr({SEL_OBUF, 28'd0}, 32'h8000_0000);
    for (int n = 0; n < 4; n++) for (int i = 0; i < 200; i++) model[n][i] = 0;
    compare_all("clear");
    $display("saturated_hits=%0d", n_sat);
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
