// core_regtable: register table of one neuromorphic core.
//
// Holds what the paper lists for the core's register table: a read-only
// (locked) core ID, core enable, target router, layer ID, number of neurons
// and synapses, reset mode, threshold and the shared quantised weights, plus
// a leak value and an output-buffer selection, which are this design's
// additions (the paper's figure ends the list with "..."). The register
// offsets are this design's (see snn_pkg).
//
// Interface: a neuromorphic-bus slave. bus_i.req must only be raised when the
// address selects this core; the slave acks in the same cycle, writes take
// effect at the clock edge, reads are combinational. cfg_o is the decoded
// configuration. Runs on the ungated system clock so that a disabled core can
// still be configured.
module core_regtable
  import snn_pkg::*;
#(
  parameter logic [WCID-1:0] CORE_ID = '0
) (
  input  logic      clk,
  input  logic      rst_n,
  input  nbus_req_t bus_i,
  output nbus_rsp_t bus_o,
  output core_cfg_t cfg_o
);
  core_cfg_t cfg;
  logic [6:0] off;
  assign off = bus_i.addr[6:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg <= '0;
      cfg.reset_mode <= RST_ZERO;
      cfg.wsel <= SZ16;
      cfg.nsel <= SZ16;
      cfg.threshold <= 32'sd1;
    end else if (bus_i.req && bus_i.we) begin
      unique case (off)
        CR_EN:      cfg.enable        <= bus_i.wdata[0];
        CR_TGT:     cfg.target_router <= bus_i.wdata[1:0];
        CR_LAYER:   cfg.layer_id      <= bus_i.wdata[7:0];
        CR_NEURONS: cfg.neurons       <= bus_i.wdata[NID_W:0];
        CR_SYN:     cfg.synapses      <= bus_i.wdata[NID_W:0];
        CR_RST:     cfg.reset_mode    <= reset_mode_e'(bus_i.wdata[1:0]);
        CR_VTH:     cfg.threshold     <= bus_i.wdata;
        CR_LEAK:    cfg.leak          <= bus_i.wdata;
        CR_WCFG:    begin
                      cfg.wsel <= qsize_e'(bus_i.wdata[1:0]);
                      cfg.nsel <= qsize_e'(bus_i.wdata[3:2]);
                    end
        CR_OUT:     begin
                      cfg.out_en  <= bus_i.wdata[0];
                      cfg.out_net <= bus_i.wdata[2:1];
                    end
        default: if (off >= CR_W0 && off < CR_W0 + 7'(NW))
                   cfg.weights[off[3:0]] <= bus_i.wdata[WW-1:0];
      endcase
    end
  end

  always_comb begin
    bus_o.ack   = bus_i.req;
    bus_o.rdata = '0;
    unique case (off)
      CR_ID:      bus_o.rdata = 32'(CORE_ID);
      CR_EN:      bus_o.rdata = 32'(cfg.enable);
      CR_TGT:     bus_o.rdata = 32'(cfg.target_router);
      CR_LAYER:   bus_o.rdata = 32'(cfg.layer_id);
      CR_NEURONS: bus_o.rdata = 32'(cfg.neurons);
      CR_SYN:     bus_o.rdata = 32'(cfg.synapses);
      CR_RST:     bus_o.rdata = 32'(cfg.reset_mode);
      CR_VTH:     bus_o.rdata = cfg.threshold;
      CR_LEAK:    bus_o.rdata = cfg.leak;
      CR_WCFG:    bus_o.rdata = {28'd0, cfg.nsel, cfg.wsel};
      CR_OUT:     bus_o.rdata = {29'd0, cfg.out_net, cfg.out_en};
      default:    if (off >= CR_W0 && off < CR_W0 + 7'(NW))
                    bus_o.rdata = 32'(cfg.weights[off[3:0]]);
    endcase
  end

  assign cfg_o = cfg;
endmodule
