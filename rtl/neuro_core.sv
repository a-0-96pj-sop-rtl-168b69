// neuro_core: one neuromorphic core of the 20-core array.
//
// Structure (as in the paper's core diagram): a register table on the
// neuromorphic bus; a clock gate that runs the compute logic only while the
// core is enabled and not in reset; the ping-pong spike and weight-index
// caches; the zero-skip sparse process engine (ZSPE); the dual synapse
// process engine (SPE) with the 16 shared weights; the neuron updater; and
// the core controller that sequences them.
//
// Router input: three ports, one per neighbouring level-1 router. One
// packet per cycle is accepted (lowest port first) and sets bit pkt.nid of
// the spike cache's write bank, i.e. the spike is used in the next timestep.
// Router output: a fired neuron leaves as a packet {dst=0, src=CORE_ID,
// nid=n} on the port selected by the "target router" register, or, when
// the core is configured as an output layer (out_en), on the output-buffer
// port. Index rows arrive on the widx port (32-bit words of 8 indices),
// membrane potentials through the MP port (one word per request).
// ts_start_i starts a timestep; done_o rises when all active neurons are
// updated; ts_o counts timesteps (the "neighbour core state" the routers
// compare). Register table and timestep counter run on the ungated clock.
module neuro_core
  import snn_pkg::*;
#(
  parameter logic [WCID-1:0] CORE_ID = '0,
  parameter int              AXONS_P = AXONS
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  nbus_req_t              bus_i,
  output nbus_rsp_t              bus_o,
  input  logic                   ts_start_i,
  output logic                   done_o,
  output logic [TSW-1:0]         ts_o,
  // router input / output (3 neighbour routers)
  input  logic [RPC-1:0]         rin_valid_i,
  input  spike_pkt_t [RPC-1:0]   rin_pkt_i,
  output logic [RPC-1:0]         rin_ready_o,
  output logic [RPC-1:0]         rout_valid_o,
  output spike_pkt_t             rout_pkt_o,
  input  logic [RPC-1:0]         rout_ready_i,
  // output-layer spikes to the data combiner
  output logic                   obuf_valid_o,
  output logic [1:0]             obuf_net_o,
  output logic [NID_W-1:0]       obuf_nid_o,
  input  logic                   obuf_ready_i,
  // weight-index rows from the IDMA
  input  logic                   wi_valid_i,
  input  logic [31:0]            wi_data_i,
  output logic                   wi_ready_o,
  // membrane potentials through the MPDMA
  output logic                   mp_rd_req_o,
  output logic                   mp_wr_req_o,
  output logic [NID_W-1:0]       mp_addr_o,
  output logic signed [VW-1:0]   mp_wdata_o,
  input  logic                   mp_ack_i,
  input  logic signed [VW-1:0]   mp_rdata_i,
  output logic [NID_W:0]         neurons_o,    // configured neuron count (IDMA)
  output logic [NID_W:0]         synapses_o,   // configured synapse count (IDMA)
  output logic                   gclk_o        // gated core clock (IDMA FIFO read side)
);
  localparam int GA = $clog2(AXONS_P/GRP);

  core_cfg_t cfg;
  logic      gclk;

  core_regtable #(.CORE_ID(CORE_ID)) u_regs (
    .clk, .rst_n, .bus_i, .bus_o, .cfg_o(cfg));

  // "Core enable && !Reset"
  clock_gate u_cg (.clk_i(clk), .en_i(cfg.enable && rst_n), .test_en_i(1'b0), .gclk_o(gclk));
  assign gclk_o = gclk;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ts_o <= '0;
    else if (ts_start_i) ts_o <= ts_o + 1'b1;
  end

  assign neurons_o  = cfg.neurons;
  assign synapses_o = cfg.synapses;

  // ---- router input: fixed priority, one spike per cycle ----
  logic             sp_we;
  logic [NID_W-1:0] sp_waddr;
  always_comb begin
    rin_ready_o = '0;
    sp_we       = 1'b0;
    sp_waddr    = '0;
    if (cfg.enable && !ts_start_i) begin
      for (int p = RPC-1; p >= 0; p--) begin
        if (rin_valid_i[p]) begin
          rin_ready_o = '0;
          rin_ready_o[p] = 1'b1;
          sp_we    = 1'b1;
          sp_waddr = rin_pkt_i[p].nid;
        end
      end
    end
  end

  // ---- caches ----
  logic [GA-1:0]        grp_addr;
  logic [GRP-1:0]       sp_rdata;
  logic [GRP*IDXW-1:0]  wi_rdata;
  logic                 wi_rfull, rd_release;

  core_cache #(.AXONS_P(AXONS_P)) u_cache (
    .clk(gclk), .rst_n, .synapses_i(cfg.synapses), .swap_i(ts_start_i),
    .sp_we_i(sp_we), .sp_waddr_i(sp_waddr),
    .sp_raddr_i(grp_addr), .sp_rdata_o(sp_rdata),
    .wi_wvalid_i(wi_valid_i), .wi_wdata_i(wi_data_i), .wi_wready_o(wi_ready_o),
    .wi_raddr_i(grp_addr), .wi_rdata_o(wi_rdata), .wi_rfull_o(wi_rfull),
    .rd_release_i(rd_release));

  // ---- ZSPE ----
  logic                 z_valid, z_empty;
  logic [1:0]           z_free;
  logic [2:0]           z_cnt;
  logic [3:0][IDXW-1:0] z_idx;
  logic                 spe_ready;

  zspe u_zspe (
    .clk(gclk), .rst_n, .in_valid_i(z_valid), .in_spike_i(sp_rdata), .in_idx_i(wi_rdata),
    .in_free_o(z_free), .out_cnt_o(z_cnt), .out_idx_o(z_idx), .out_ready_i(spe_ready),
    .empty_o(z_empty));

  // ---- dual SPE ----
  logic                 spe_busy, spe_load;
  logic signed [VW-1:0] spe_load_val, vmp;
  logic [1:0]           spe_free;

  dual_spe u_spe (
    .clk(gclk), .rst_n, .weights_i(cfg.weights), .wsel_i(cfg.wsel), .nsel_i(cfg.nsel),
    .in_cnt_i(z_cnt), .in_idx_i(z_idx), .in_ready_o(spe_ready), .spe_free_o(spe_free),
    .load_i(spe_load), .load_val_i(spe_load_val), .vmp_o(vmp), .busy_o(spe_busy));

  // ---- neuron updater ----
  logic signed [VW-1:0] v_new;
  logic                 spike;
  neuron_updater u_nu (
    .v_int_i(vmp), .leak_i(cfg.leak), .threshold_i(cfg.threshold),
    .reset_mode_i(cfg.reset_mode), .v_new_o(v_new), .spike_o(spike));

  // ---- controller ----
  logic             spk_valid, spk_ready, ctl_busy;
  logic [NID_W-1:0] spk_nid;

  core_controller #(.AXONS_P(AXONS_P)) u_ctl (
    .clk(gclk), .rst_n, .ts_start_i(ts_start_i), .neurons_i(cfg.neurons),
    .synapses_i(cfg.synapses), .grp_addr_o(grp_addr), .wi_rfull_i(wi_rfull),
    .rd_release_o(rd_release), .z_valid_o(z_valid), .z_free_i(z_free), .z_empty_i(z_empty),
    .spe_busy_i(spe_busy), .spe_load_o(spe_load), .spe_load_val_o(spe_load_val),
    .v_new_i(v_new), .spike_i(spike),
    .mp_rd_req_o, .mp_wr_req_o, .mp_addr_o, .mp_wdata_o, .mp_ack_i, .mp_rdata_i,
    .spk_valid_o(spk_valid), .spk_nid_o(spk_nid), .spk_ready_i(spk_ready),
    .done_o, .busy_o(ctl_busy));

  // ---- spike output ----
  always_comb begin
    rout_valid_o      = '0;
    rout_pkt_o        = '0;
    rout_pkt_o.src    = CORE_ID;
    rout_pkt_o.nid    = spk_nid;
    obuf_valid_o      = 1'b0;
    obuf_net_o        = cfg.out_net;
    obuf_nid_o        = spk_nid;
    spk_ready         = 1'b0;
    if (cfg.out_en) begin
      obuf_valid_o = spk_valid;
      spk_ready    = obuf_ready_i;
    end else if (cfg.target_router < 2'(RPC)) begin
      rout_valid_o[cfg.target_router] = spk_valid;
      spk_ready = rout_ready_i[cfg.target_router];
    end
  end

  // A spike is only written while the core is enabled.
  always_ff @(posedge clk) if (rst_n) assert (!sp_we || cfg.enable);
endmodule
