// l2_router: the level-2 (global) router at the centre of the fullerene-like
// routing domain.
//
// It links the 12 level-1 routers with each other and with an off-chip
// level-3 router, following the routing steps the paper gives: a packet the
// level-1 router cannot deliver locally comes here; if its target core is
// in this domain it is sent to a level-1 router next to that core
// ("send(PKG, target L1 router)"), otherwise to the level-3 port ("higher
// level routing"). Packets from the level-3 port are routed the same way,
// which is how input spikes enter the chip in this design.
//
// Each port has an input and an output buffer; one packet per cycle is
// routed, chosen by fixed priority (L1 port 0 first, L3 last). The target
// router of core c is home_router(c), the lowest-numbered face containing
// c; core IDs of N_CORES and above leave through the level-3 port. The
// buffering, priority and choice of router are this design's.
module l2_router
  import snn_pkg::*;
#(
  parameter int BUF_DEPTH = 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [N_L1-1:0]         in_valid_i,
  input  spike_pkt_t [N_L1-1:0]   in_pkt_i,
  output logic [N_L1-1:0]         in_ready_o,
  output logic [N_L1-1:0]         out_valid_o,
  output spike_pkt_t [N_L1-1:0]   out_pkt_o,
  input  logic [N_L1-1:0]         out_ready_i,
  input  logic                    l3in_valid_i,
  input  spike_pkt_t              l3in_pkt_i,
  output logic                    l3in_ready_o,
  output logic                    l3out_valid_o,
  output spike_pkt_t              l3out_pkt_o,
  input  logic                    l3out_ready_i,
  output logic                    busy_o
);
  localparam int NP = N_L1 + 1;   // port N_L1 = level 3

  logic [NP-1:0]       ib_valid, ib_pop;
  spike_pkt_t [NP-1:0] ib_data;
  logic [NP-1:0]       ob_ready, ob_push, ob_valid, ob_out_ready;
  spike_pkt_t [NP-1:0] ob_data;
  logic [NP-1:0]       in_v, in_r;
  spike_pkt_t [NP-1:0] in_d;
  spike_pkt_t [NP-1:0] ob_data_q;

  assign in_v = {l3in_valid_i, in_valid_i};
  assign in_d = {l3in_pkt_i, in_pkt_i};
  assign {l3in_ready_o, in_ready_o} = in_r;
  assign ob_out_ready = {l3out_ready_i, out_ready_i};
  assign out_valid_o   = ob_valid[N_L1-1:0];
  assign l3out_valid_o = ob_valid[N_L1];

  for (genvar p = 0; p < NP; p++) begin : g_port
    sync_fifo #(.T(spike_pkt_t), .DEPTH(BUF_DEPTH)) u_ib (
      .clk, .rst_n, .in_valid_i(in_v[p]), .in_data_i(in_d[p]), .in_ready_o(in_r[p]),
      .out_valid_o(ib_valid[p]), .out_data_o(ib_data[p]), .out_ready_i(ib_pop[p]),
      .count_o(/* unused */));
    sync_fifo #(.T(spike_pkt_t), .DEPTH(BUF_DEPTH)) u_ob (
      .clk, .rst_n, .in_valid_i(ob_push[p]), .in_data_i(ob_data[p]), .in_ready_o(ob_ready[p]),
      .out_valid_o(ob_valid[p]), .out_data_o(ob_data_q[p]), .out_ready_i(ob_out_ready[p]),
      .count_o(/* unused */));
  end

  assign out_pkt_o   = ob_data_q[N_L1-1:0];
  assign l3out_pkt_o = ob_data_q[N_L1];

  function automatic logic [3:0] dest_port(logic [WCID-1:0] dst);
    if (int'(dst) >= N_CORES) return 4'(N_L1);
    return 4'(home_router(int'(dst)));
  endfunction

  logic [3:0] win, dp;
  always_comb begin
    win     = 4'hF;
    dp      = '0;
    ib_pop  = '0;
    ob_push = '0;
    ob_data = '0;
    for (int p = NP-1; p >= 0; p--) if (ib_valid[p]) win = 4'(p);
    if (win != 4'hF) begin
      dp = dest_port(ib_data[win].dst);
      if (ob_ready[dp]) begin
        ib_pop[win]  = 1'b1;
        ob_push[dp]  = 1'b1;
        ob_data[dp]  = ib_data[win];
      end
    end
  end

  assign busy_o = (|ib_valid) || (|ob_valid);
endmodule
