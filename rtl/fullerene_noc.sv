// fullerene_noc: the 20-core neuromorphic accelerator with its
// fullerene-like network-on-chip.
//
// Twenty neuromorphic cores and twelve level-1 CMRouters form one routing
// domain shaped like the surface of a fullerene: the cores are the 20
// vertices and the routers the 12 pentagonal faces of a dodecahedron, so
// every core has 3 neighbouring routers and every router 5 neighbouring
// cores (snn_pkg::FACE). The level-2 router sits at the centre and links
// the 12 level-1 routers; its level-3 port leaves the block for an
// extended off-chip router and is also where input spikes enter.
// Counting cores and level-1 routers as nodes, the average degree is
// (20*3 + 12*5)/32 = 3.75 and its variance 0.94, as the paper reports.
//
// Path lengths: a spike to a core sharing a router takes core -> L1 ->
// core; any other core in the domain is reached core -> L1 -> L2 -> L1 ->
// core.
//
// Bus: requests in the core space (addr[31:28] = SEL_CORE) and router space
// (SEL_ROUTER) are decoded here by addr[11:7]. ts_start_i is broadcast to
// all cores and routers. busy_o is high while any router holds a packet.
module fullerene_noc
  import snn_pkg::*;
#(
  parameter int AXONS_P = AXONS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  nbus_req_t                     bus_i,
  output nbus_rsp_t                     bus_o,
  input  logic                          ts_start_i,
  output logic [N_CORES-1:0]            done_o,
  output logic [N_CORES-1:0]            core_gclk_o,
  output logic                          busy_o,
  // per-core IDMA ports
  input  logic [N_CORES-1:0]            wi_valid_i,
  input  logic [N_CORES-1:0][31:0]      wi_data_i,
  output logic [N_CORES-1:0]            wi_ready_o,
  output logic [N_CORES-1:0][NID_W:0]   neurons_o,
  output logic [N_CORES-1:0][NID_W:0]   synapses_o,
  // per-core MPDMA ports
  output logic [N_CORES-1:0]            mp_rd_req_o,
  output logic [N_CORES-1:0]            mp_wr_req_o,
  output logic [N_CORES-1:0][NID_W-1:0] mp_addr_o,
  output logic [N_CORES-1:0][VW-1:0]    mp_wdata_o,
  input  logic [N_CORES-1:0]            mp_ack_i,
  input  logic [VW-1:0]                 mp_rdata_i,
  // per-core output-layer spikes (data combiner)
  output logic [N_CORES-1:0]            ob_valid_o,
  output logic [N_CORES-1:0][1:0]       ob_net_o,
  output logic [N_CORES-1:0][NID_W-1:0] ob_nid_o,
  input  logic [N_CORES-1:0]            ob_ready_i,
  // level-3 port
  input  logic                          l3in_valid_i,
  input  spike_pkt_t                    l3in_pkt_i,
  output logic                          l3in_ready_o,
  output logic                          l3out_valid_o,
  output spike_pkt_t                    l3out_pkt_o,
  input  logic                          l3out_ready_i
);
  // ---------------- bus decode ----------------
  nbus_req_t [N_CORES-1:0] core_req;
  nbus_rsp_t [N_CORES-1:0] core_rsp;
  nbus_req_t [N_L1-1:0]    rt_req;
  nbus_rsp_t [N_L1-1:0]    rt_rsp;

  always_comb begin
    bus_o = '0;
    for (int c = 0; c < N_CORES; c++) begin
      core_req[c]     = bus_i;
      core_req[c].req = bus_i.req && bus_i.addr[31:28] == SEL_CORE && int'(bus_i.addr[11:7]) == c;
      if (core_req[c].req) bus_o = core_rsp[c];
    end
    for (int f = 0; f < N_L1; f++) begin
      rt_req[f]     = bus_i;
      rt_req[f].req = bus_i.req && bus_i.addr[31:28] == SEL_ROUTER && int'(bus_i.addr[11:7]) == f;
      if (rt_req[f].req) bus_o = rt_rsp[f];
    end
    if (bus_i.req && !(|core_req) && !(|rt_req)) bus_o.ack = 1'b1;   // unmapped: ack, read 0
  end

  // ---------------- cores ----------------
  logic       [N_CORES-1:0][RPC-1:0] c_rin_valid, c_rin_ready, c_rout_valid, c_rout_ready;
  spike_pkt_t [N_CORES-1:0][RPC-1:0] c_rin_pkt;
  spike_pkt_t [N_CORES-1:0]          c_rout_pkt;
  logic       [N_CORES-1:0][TSW-1:0] c_ts;

  for (genvar c = 0; c < N_CORES; c++) begin : g_core
    neuro_core #(.CORE_ID(WCID'(c)), .AXONS_P(AXONS_P)) u_core (
      .clk, .rst_n, .bus_i(core_req[c]), .bus_o(core_rsp[c]), .ts_start_i,
      .done_o(done_o[c]), .ts_o(c_ts[c]),
      .rin_valid_i(c_rin_valid[c]), .rin_pkt_i(c_rin_pkt[c]), .rin_ready_o(c_rin_ready[c]),
      .rout_valid_o(c_rout_valid[c]), .rout_pkt_o(c_rout_pkt[c]), .rout_ready_i(c_rout_ready[c]),
      .obuf_valid_o(ob_valid_o[c]), .obuf_net_o(ob_net_o[c]), .obuf_nid_o(ob_nid_o[c]),
      .obuf_ready_i(ob_ready_i[c]),
      .wi_valid_i(wi_valid_i[c]), .wi_data_i(wi_data_i[c]), .wi_ready_o(wi_ready_o[c]),
      .mp_rd_req_o(mp_rd_req_o[c]), .mp_wr_req_o(mp_wr_req_o[c]), .mp_addr_o(mp_addr_o[c]),
      .mp_wdata_o(mp_wdata_o[c]), .mp_ack_i(mp_ack_i[c]), .mp_rdata_i(mp_rdata_i),
      .neurons_o(neurons_o[c]), .synapses_o(synapses_o[c]), .gclk_o(core_gclk_o[c]));
  end

  // ---------------- level-1 routers ----------------
  logic       [N_L1-1:0][NC-1:0] r_cin_valid, r_cin_ready, r_cout_valid, r_cout_ready;
  spike_pkt_t [N_L1-1:0][NC-1:0] r_cin_pkt, r_cout_pkt;
  logic       [N_L1-1:0][NC-1:0][TSW-1:0] r_nbr_ts;
  logic       [N_L1-1:0]         r_l2in_valid, r_l2in_ready, r_l2out_valid, r_l2out_ready, r_busy;
  spike_pkt_t [N_L1-1:0]         r_l2in_pkt, r_l2out_pkt;

  for (genvar f = 0; f < N_L1; f++) begin : g_rt
    for (genvar k = 0; k < NC; k++) begin : g_port
      localparam int C = int'(FACE[f][k]);
      localparam int R = router_index(C, f);
      assign r_cin_valid[f][k]  = c_rout_valid[C][R];
      assign r_cin_pkt[f][k]    = c_rout_pkt[C];
      assign c_rout_ready[C][R] = r_cin_ready[f][k];
      assign c_rin_valid[C][R]  = r_cout_valid[f][k];
      assign c_rin_pkt[C][R]    = r_cout_pkt[f][k];
      assign r_cout_ready[f][k] = c_rin_ready[C][R];
      assign r_nbr_ts[f][k]     = c_ts[C];
    end
    cmrouter #(
      .RID_DEF(4'(f)),
      .NBR_DEF(FACE[f])
    ) u_rt (
      .clk, .rst_n, .bus_i(rt_req[f]), .bus_o(rt_rsp[f]), .ts_start_i, .nbr_ts_i(r_nbr_ts[f]),
      .cin_valid_i(r_cin_valid[f]), .cin_pkt_i(r_cin_pkt[f]), .cin_ready_o(r_cin_ready[f]),
      .cout_valid_o(r_cout_valid[f]), .cout_pkt_o(r_cout_pkt[f]), .cout_ready_i(r_cout_ready[f]),
      .l2in_valid_i(r_l2in_valid[f]), .l2in_pkt_i(r_l2in_pkt[f]), .l2in_ready_o(r_l2in_ready[f]),
      .l2out_valid_o(r_l2out_valid[f]), .l2out_pkt_o(r_l2out_pkt[f]),
      .l2out_ready_i(r_l2out_ready[f]), .busy_o(r_busy[f]));
  end

  // ---------------- level-2 router ----------------
  logic l2_busy;
  l2_router u_l2 (
    .clk, .rst_n,
    .in_valid_i(r_l2out_valid), .in_pkt_i(r_l2out_pkt), .in_ready_o(r_l2out_ready),
    .out_valid_o(r_l2in_valid), .out_pkt_o(r_l2in_pkt), .out_ready_i(r_l2in_ready),
    .l3in_valid_i, .l3in_pkt_i, .l3in_ready_o, .l3out_valid_o, .l3out_pkt_o, .l3out_ready_i,
    .busy_o(l2_busy));

  assign busy_o = (|r_busy) || l2_busy;
endmodule
