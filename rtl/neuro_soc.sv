// neuro_soc: the heterogeneous neuromorphic SoC without its RISC-V CPU.
//
// Contents: the neuromorphic accelerator (20 cores + 12 level-1 CMRouters
// + 1 level-2 router in a fullerene-like NoC), the data combiner with four
// 0.2 KB network output buffers, the index DMA and the membrane-potential
// DMA, the external memory interface to an off-chip asynchronous SRAM, the
// neuromorphic controller, the extended neuromorphic unit (ENU), the
// neuromorphic bus, and the clock manager.
//
// The RISC-V CPU is not part of this RTL. Its connections are ports: the
// ENU's instruction port towards the CPU's load-store unit, the CPU clocks
// (HFCLK, HLCLK), its sleep request and the two wake-up events (timestep
// switch, network finished). The level-3 router port of the NoC (for
// extending the NoC off chip, and for injecting input spikes) and the SRAM
// pins are ports too.
//
// Clocking: sys_clk feeds the clock manager; everything here runs on its
// NoC clock, and each core and router additionally gates its own clock.
// The IDMA's per-core FIFOs are read in the gated core clocks. The IDMA
// clock output is provided for an IDMA clocked separately; in this RTL the
// IDMA controller shares the NoC clock.
//
// A typical run: the CPU writes core and router registers and the shared
// weights with NCFG, enables cores with NEN, puts V(0) and the index rows
// in the SRAM (directly or with NCFG to the SEL_EXT window), injects input
// spikes through the level-3 port, and issues NSTART; it may sleep until
// irq_done_o, then reads the output buffer with NRD.
module neuro_soc
  import snn_pkg::*;
(
  input  logic          sys_clk,
  input  logic          rst_n,
  // ENU <-> CPU load-store unit
  output logic          enu_lsu_req_o,
  input  logic          enu_instr_valid_i,
  input  logic [31:0]   enu_instr_i,
  input  logic [31:0]   enu_rs1_i,
  input  logic [31:0]   enu_rs2_i,
  output logic          enu_rsp_valid_o,
  output logic [31:0]   enu_rsp_data_o,
  output logic          enu_rsp_err_o,
  // CPU clocks and power management
  input  logic          cpu_sleep_i,
  output logic          cpu_hfclk_o,
  output logic          cpu_hlclk_o,
  output logic          cpu_asleep_o,
  output logic          irq_ts_o,
  output logic          irq_done_o,
  output logic          idma_clk_o,
  // level-3 router port
  input  logic          l3in_valid_i,
  input  spike_pkt_t    l3in_pkt_i,
  output logic          l3in_ready_o,
  output logic          l3out_valid_o,
  output spike_pkt_t    l3out_pkt_o,
  input  logic          l3out_ready_i,
  // asynchronous SRAM
  output logic          sram_ce_n,
  output logic          sram_oe_n,
  output logic          sram_we_n,
  output logic [AW-1:0] sram_addr,
  output logic [DW-1:0] sram_dq_o,
  output logic          sram_dq_oe,
  input  logic [DW-1:0] sram_dq_i
);
  logic clk;

  // ---------------- bus ----------------
  nbus_req_t m_req, ctrl_req, noc_req, obuf_req, clk_req;
  nbus_rsp_t m_rsp, ctrl_rsp, noc_rsp, obuf_rsp, clk_rsp;
  logic          bx_req, bx_we, bx_ack;
  logic [AW-1:0] bx_addr;
  logic [DW-1:0] bx_wdata;

  // ---------------- clock manager ----------------
  logic ts_start, net_done;
  clk_manager u_clk (
    .sys_clk, .rst_n, .bus_i(clk_req), .bus_o(clk_rsp), .cpu_sleep_i,
    .wake_ts_i(ts_start), .wake_done_i(net_done),
    .cpu_hfclk_o, .cpu_hlclk_o, .noc_clk_o(clk), .idma_clk_o, .cpu_asleep_o);

  // ---------------- ENU and bus ----------------
  enu u_enu (
    .clk, .rst_n, .lsu_req_o(enu_lsu_req_o), .instr_valid_i(enu_instr_valid_i),
    .instr_i(enu_instr_i), .rs1_i(enu_rs1_i), .rs2_i(enu_rs2_i),
    .rsp_valid_o(enu_rsp_valid_o), .rsp_data_o(enu_rsp_data_o), .rsp_err_o(enu_rsp_err_o),
    .bus_o(m_req), .bus_i(m_rsp));

  logic [DW-1:0] em_rdata;
  logic [2:0]    em_ack;

  nbus u_bus (
    .m_req_i(m_req), .m_rsp_o(m_rsp),
    .ctrl_req_o(ctrl_req), .ctrl_rsp_i(ctrl_rsp), .noc_req_o(noc_req), .noc_rsp_i(noc_rsp),
    .obuf_req_o(obuf_req), .obuf_rsp_i(obuf_rsp), .clk_req_o(clk_req), .clk_rsp_i(clk_rsp),
    .ext_req_o(bx_req), .ext_we_o(bx_we), .ext_addr_o(bx_addr), .ext_wdata_o(bx_wdata),
    .ext_ack_i(bx_ack), .ext_rdata_i(em_rdata));

  // ---------------- neuromorphic controller ----------------
  logic [N_CORES-1:0] core_done;
  logic               noc_busy, idma_busy, ctrl_busy;
  neuro_controller u_ctrl (
    .clk, .rst_n, .bus_i(ctrl_req), .bus_o(ctrl_rsp), .core_done_i(core_done),
    .noc_busy_i(noc_busy), .idma_busy_i(idma_busy), .ts_start_o(ts_start),
    .net_done_o(net_done), .busy_o(ctrl_busy));
  assign irq_ts_o   = ts_start;
  assign irq_done_o = net_done;

  // ---------------- accelerator ----------------
  logic [N_CORES-1:0]            wi_valid, wi_ready, mp_rd, mp_wr, mp_ack, ob_valid, ob_ready, core_gclk;
  logic [N_CORES-1:0][31:0]      wi_data;
  logic [N_CORES-1:0][NID_W:0]   neurons, synapses;
  logic [N_CORES-1:0][NID_W-1:0] mp_addr, ob_nid;
  logic [N_CORES-1:0][VW-1:0]    mp_wdata;
  logic [VW-1:0]                 mp_rdata;
  logic [N_CORES-1:0][1:0]       ob_net;

  fullerene_noc u_noc (
    .clk, .rst_n, .bus_i(noc_req), .bus_o(noc_rsp), .ts_start_i(ts_start),
    .done_o(core_done), .core_gclk_o(core_gclk), .busy_o(noc_busy),
    .wi_valid_i(wi_valid), .wi_data_i(wi_data), .wi_ready_o(wi_ready),
    .neurons_o(neurons), .synapses_o(synapses),
    .mp_rd_req_o(mp_rd), .mp_wr_req_o(mp_wr), .mp_addr_o(mp_addr), .mp_wdata_o(mp_wdata),
    .mp_ack_i(mp_ack), .mp_rdata_i(mp_rdata),
    .ob_valid_o(ob_valid), .ob_net_o(ob_net), .ob_nid_o(ob_nid), .ob_ready_i(ob_ready),
    .l3in_valid_i, .l3in_pkt_i, .l3in_ready_o, .l3out_valid_o, .l3out_pkt_o, .l3out_ready_i);

  output_buffer u_obuf (
    .clk, .rst_n, .bus_i(obuf_req), .bus_o(obuf_rsp),
    .in_valid_i(ob_valid), .in_net_i(ob_net), .in_nid_i(ob_nid), .in_ready_o(ob_ready));

  // ---------------- DMAs and external memory ----------------
  logic          id_req, md_req, md_we;
  logic [AW-1:0] id_addr, md_addr;
  logic [DW-1:0] md_wdata;

  idma u_idma (
    .clk, .rst_n, .ts_start_i(ts_start), .neurons_i(neurons), .synapses_i(synapses),
    .mem_req_o(id_req), .mem_addr_o(id_addr), .mem_ack_i(em_ack[1]), .mem_rdata_i(em_rdata),
    .core_clk_i(core_gclk), .wi_valid_o(wi_valid), .wi_data_o(wi_data), .wi_ready_i(wi_ready),
    .busy_o(idma_busy));

  mpdma u_mpdma (
    .clk, .rst_n, .rd_req_i(mp_rd), .wr_req_i(mp_wr), .addr_i(mp_addr), .wdata_i(mp_wdata),
    .ack_o(mp_ack), .rdata_o(mp_rdata),
    .mem_req_o(md_req), .mem_we_o(md_we), .mem_addr_o(md_addr), .mem_wdata_o(md_wdata),
    .mem_ack_i(em_ack[0]), .mem_rdata_i(em_rdata));

  assign bx_ack = em_ack[2];

  ext_mem_if u_ext (
    .clk, .rst_n,
    .req_i({bx_req, id_req, md_req}), .we_i({bx_we, 1'b0, md_we}),
    .addr_i({bx_addr, id_addr, md_addr}), .wdata_i({bx_wdata, 32'd0, md_wdata}),
    .ack_o(em_ack), .rdata_o(em_rdata),
    .sram_ce_n, .sram_oe_n, .sram_we_n, .sram_addr, .sram_dq_o, .sram_dq_oe, .sram_dq_i);
endmodule
