// clk_manager: clock manager of the SoC.
//
// Derives four clocks from the system clock: the CPU high-frequency clock
// (HFCLK, main domain), the CPU low-frequency clock (HLCLK, always-on
// domain), the NoC clock and the IDMA clock. Each has a divider register
// (0 = pass the system clock through, k = divide by 2k) and a gate enable
// bit, and leaves through a clock gate. HFCLK is additionally stopped while
// the CPU sleeps: cpu_sleep_i (the CPU's sleep instruction) sets the sleep
// state and a timestep switch (wake_ts_i) or network-computing-finish
// (wake_done_i) clears it, which is the paper's low-power scheme for the
// CPU. Registers (bus, addr[31:28] = SEL_CLK, word offset addr[3:0]):
// 0..3 dividers of HF, HL, NoC, IDMA; 4 gate enables [3:0]; 5 status
// ([0] = CPU asleep). Reset: HL divides by 2, the rest pass through,
// all gates open. Dividers are meant to be changed while the clock they
// feed is gated off (the source select is not glitch-free). The
// divider/gate structure is this design's; the paper lists the clocks.
module clk_manager
  import snn_pkg::*;
(
  input  logic      sys_clk,
  input  logic      rst_n,
  input  nbus_req_t bus_i,
  output nbus_rsp_t bus_o,
  input  logic      cpu_sleep_i,
  input  logic      wake_ts_i,
  input  logic      wake_done_i,
  output logic      cpu_hfclk_o,
  output logic      cpu_hlclk_o,
  output logic      noc_clk_o,
  output logic      idma_clk_o,
  output logic      cpu_asleep_o
);
  logic [3:0][7:0] div;
  logic [3:0]      gate_en;
  logic            asleep;
  logic [3:0][7:0] cnt;
  logic [3:0]      divq, src, en;
  logic [3:0]      off;
  assign off = bus_i.addr[3:0];

  always_ff @(posedge sys_clk or negedge rst_n) begin
    if (!rst_n) begin
      div     <= {8'd0, 8'd0, 8'd1, 8'd0};
      gate_en <= '1;
      asleep  <= 1'b0;
    end else begin
      if (bus_i.req && bus_i.we) begin
        if (off < 4'd4)  div[off[1:0]] <= bus_i.wdata[7:0];
        if (off == 4'd4) gate_en <= bus_i.wdata[3:0];
      end
      if (wake_ts_i || wake_done_i) asleep <= 1'b0;
      else if (cpu_sleep_i)         asleep <= 1'b1;
    end
  end

  for (genvar i = 0; i < 4; i++) begin : g_div
    always_ff @(posedge sys_clk or negedge rst_n) begin
      if (!rst_n) begin
        cnt[i]  <= '0;
        divq[i] <= 1'b0;
      end else if (div[i] != 0) begin
        if (cnt[i] + 1'b1 >= div[i]) begin
          cnt[i]  <= '0;
          divq[i] <= ~divq[i];
        end else begin
          cnt[i] <= cnt[i] + 1'b1;
        end
      end
    end
    assign src[i] = (div[i] == 0) ? sys_clk : divq[i];
  end

  assign en = {gate_en[3], gate_en[2], gate_en[1], gate_en[0] && !asleep};

  logic [3:0] gclk;
  clock_gate u_hf   (.clk_i(src[0]), .en_i(en[0]), .test_en_i(1'b0), .gclk_o(gclk[0]));
  clock_gate u_hl   (.clk_i(src[1]), .en_i(en[1]), .test_en_i(1'b0), .gclk_o(gclk[1]));
  clock_gate u_noc  (.clk_i(src[2]), .en_i(en[2]), .test_en_i(1'b0), .gclk_o(gclk[2]));
  clock_gate u_idma (.clk_i(src[3]), .en_i(en[3]), .test_en_i(1'b0), .gclk_o(gclk[3]));

  assign cpu_hfclk_o  = gclk[0];
  assign cpu_hlclk_o  = gclk[1];
  assign noc_clk_o    = gclk[2];
  assign idma_clk_o   = gclk[3];
  assign cpu_asleep_o = asleep;

  always_comb begin
    bus_o.ack = bus_i.req;
    unique case (off)
      4'd0, 4'd1, 4'd2, 4'd3: bus_o.rdata = 32'(div[off[1:0]]);
      4'd4:                   bus_o.rdata = 32'(gate_en);
      4'd5:                   bus_o.rdata = 32'(asleep);
      default:                bus_o.rdata = '0;
    endcase
  end
endmodule
