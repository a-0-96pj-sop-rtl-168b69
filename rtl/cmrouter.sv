// cmrouter: connection-matrix-based level-1 router (CMRouter).
//
// A level-1 router serves the 5 cores around one face of the fullerene-like
// topology and has one link to the level-2 (global) router.
//
// Datapath: each neighbour-core input has its own buffer; a fixed-priority
// arbiter (core port 0 highest, L2 input lowest) picks the next packet into
// the "spike data" register. The reconfigurable connection matrix holds, for
// every input core port i, a row of NC entries of WCID bits, each naming a
// target core (CID_NONE = empty): NC x NC x WCID = 125 bits, as in the paper.
// The routing-mode selector decides how many entries of the row are used:
// P2P uses entry 0 only, broadcast uses every valid entry. Merge needs no
// mode of its own: it is several rows naming the same target. A target that
// is one of the 5 neighbour cores goes to that core's output buffer; any
// other target goes to the L2 router with pkt.dst set to it ("send(PKG, L2
// router)"). A packet arriving from the L2 router already carries dst and is
// delivered to the neighbour core with that ID. Local targets whose output
// buffers have room are served in the same cycle, at most one per output
// buffer (two entries naming the same core go out in successive cycles),
// and at most one remote target per cycle; the packet stays in the spike-data register until every
// target is served, and the next packet is taken in the cycle the last
// target goes out.
//
// Link controller: an input port is hung up (ready low) when its buffer is
// full, its link is disabled, or the timestep of its neighbour core
// (neighbour core state) differs from the router's own timestep.
// Register table (on the bus): router ID and its valid bit, link enables
// (bit 5 = L2 link), routing mode, neighbour core IDs, connection-matrix
// rows, and, read-only, the router timestep and the neighbour core states.
// Clock gating: the datapath clock runs only while "valid RID && neighbour
// link enable" holds. Reset values of RID and neighbour IDs are parameters so
// that a freshly reset NoC already knows its wiring. Buffer depths, the
// priority order and the serving rules are this design's.
module cmrouter
  import snn_pkg::*;
#(
  parameter logic [3:0]                    RID_DEF = '0,
  parameter logic [NC-1:0][WCID-1:0]       NBR_DEF = '1,
  parameter int                            BUF_DEPTH = 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  nbus_req_t               bus_i,
  output nbus_rsp_t               bus_o,
  input  logic                    ts_start_i,
  input  logic [NC-1:0][TSW-1:0]  nbr_ts_i,
  // neighbour cores
  input  logic [NC-1:0]           cin_valid_i,
  input  spike_pkt_t [NC-1:0]     cin_pkt_i,
  output logic [NC-1:0]           cin_ready_o,
  output logic [NC-1:0]           cout_valid_o,
  output spike_pkt_t [NC-1:0]     cout_pkt_o,
  input  logic [NC-1:0]           cout_ready_i,
  // level-2 router
  input  logic                    l2in_valid_i,
  input  spike_pkt_t              l2in_pkt_i,
  output logic                    l2in_ready_o,
  output logic                    l2out_valid_o,
  output spike_pkt_t              l2out_pkt_o,
  input  logic                    l2out_ready_i,
  output logic                    busy_o
);
  // ---------------- register table ----------------
  logic                        rid_valid;
  logic [3:0]                  rid;
  logic [NC:0]                 link_en;
  route_mode_e                 mode;
  logic [NC-1:0][WCID-1:0]     nbr;
  logic [NC-1:0][NC-1:0][WCID-1:0] cm;
  logic [TSW-1:0]              ts;
  logic [6:0]                  off;
  assign off = bus_i.addr[6:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rid_valid <= 1'b1;
      rid       <= RID_DEF;
      link_en   <= '1;
      mode      <= MODE_P2P;
      nbr       <= NBR_DEF;
      cm        <= '1;
      ts        <= '0;
    end else begin
      if (ts_start_i) ts <= ts + 1'b1;
      if (bus_i.req && bus_i.we) begin
        unique case (off)
          RR_RID:  {rid_valid, rid} <= bus_i.wdata[4:0];
          RR_LINK: link_en <= bus_i.wdata[NC:0];
          RR_MODE: mode <= route_mode_e'(bus_i.wdata[0]);
          RR_NBR:  nbr <= bus_i.wdata[NC*WCID-1:0];
          default: if (off >= RR_CM0 && off < RR_CM0 + 7'(NC))
                     cm[off - RR_CM0] <= bus_i.wdata[NC*WCID-1:0];
        endcase
      end
    end
  end

  always_comb begin
    bus_o.ack   = bus_i.req;
    bus_o.rdata = '0;
    unique case (off)
      RR_RID:   bus_o.rdata = 32'({rid_valid, rid});
      RR_LINK:  bus_o.rdata = 32'(link_en);
      RR_MODE:  bus_o.rdata = 32'(mode);
      RR_NBR:   bus_o.rdata = 32'(nbr);
      RR_STATE: begin
                  bus_o.rdata[TSW-1:0] = ts;
                  for (int i = 0; i < NC; i++)
                    bus_o.rdata[8+i] = (nbr_ts_i[i] == ts);   // neighbour in sync
                end
      default:  if (off >= RR_CM0 && off < RR_CM0 + 7'(NC))
                  bus_o.rdata = 32'(cm[off - RR_CM0]);
    endcase
  end

  // ---------------- clock gating ----------------
  logic gclk;
  clock_gate u_cg (.clk_i(clk), .en_i(rid_valid && (|link_en)), .test_en_i(1'b0), .gclk_o(gclk));

  // ---------------- input buffers + link controller ----------------
  logic [NC:0]           ib_valid, ib_pop, ib_in_ready;
  spike_pkt_t [NC:0]     ib_data;
  logic [NC:0]           hang;

  for (genvar i = 0; i <= NC; i++) begin : g_ib
    logic       v;
    spike_pkt_t d;
    assign v = (i < NC) ? cin_valid_i[i % NC] : l2in_valid_i;
    assign d = (i < NC) ? cin_pkt_i[i % NC]   : l2in_pkt_i;
    sync_fifo #(.T(spike_pkt_t), .DEPTH(BUF_DEPTH)) u_fifo (
      .clk(gclk), .rst_n, .in_valid_i(v && !hang[i]), .in_data_i(d), .in_ready_o(ib_in_ready[i]),
      .out_valid_o(ib_valid[i]), .out_data_o(ib_data[i]), .out_ready_i(ib_pop[i]), .count_o(/* unused */));
  end

  always_comb begin
    for (int i = 0; i <= NC; i++) begin
      hang[i] = !link_en[i] || !ib_in_ready[i];
      if (i < NC && nbr_ts_i[i % NC] != ts) hang[i] = 1'b1;
    end
  end
  assign cin_ready_o  = ~hang[NC-1:0];
  assign l2in_ready_o = ~hang[NC];

  // ---------------- spike-data register and connection matrix ----------------
  logic              cur_valid;
  spike_pkt_t        cur_pkt;
  logic [2:0]        cur_port;     // NC = from L2
  logic [NC-1:0]     pend;         // matrix entries (or bit 0 for an L2 packet) still to serve

  logic [NC-1:0]     ob_ready, ob_push;
  spike_pkt_t [NC-1:0] ob_data;
  logic              l2_ready, l2_push;
  spike_pkt_t        l2_data;
  logic [NC-1:0]     served;

  // local port of a core ID, NC if it is not a neighbour
  function automatic logic [2:0] local_port(logic [WCID-1:0] id, logic [NC-1:0][WCID-1:0] nb);
    for (int j = 0; j < NC; j++) if (nb[j] == id) return 3'(j);
    return 3'(NC);
  endfunction

  logic [2:0]      rj;
  logic [WCID-1:0] rt;
  always_comb begin
    rj      = '0;
    rt      = '0;
    ob_push = '0;
    ob_data = '0;
    l2_push = 1'b0;
    l2_data = cur_pkt;
    served  = '0;
    if (cur_valid) begin
      if (cur_port == 3'(NC)) begin
        rj = local_port(cur_pkt.dst, nbr);
        if (rj == 3'(NC)) served[0] = 1'b1;                 // not ours: dropped
        else if (ob_ready[rj]) begin
          ob_push[rj] = 1'b1;
          ob_data[rj] = cur_pkt;
          served[0]  = 1'b1;
        end
      end else begin
        for (int e = 0; e < NC; e++) begin
          if (pend[e]) begin
            rt = cm[cur_port][e];
            rj = local_port(rt, nbr);
            if (rj != 3'(NC)) begin
              if (ob_ready[rj] && !ob_push[rj]) begin   // one push per buffer per cycle
                ob_push[rj]     = 1'b1;
                ob_data[rj]     = cur_pkt;
                ob_data[rj].dst = rt;
                served[e]      = 1'b1;
              end
            end else if (!l2_push && l2_ready && link_en[NC]) begin
              l2_push     = 1'b1;
              l2_data.dst = rt;
              served[e]   = 1'b1;
            end
          end
        end
      end
    end
  end

  // fixed-priority arbitration of the next packet
  logic          take;
  logic [2:0]    win;
  logic [NC-1:0] pend_left;
  assign pend_left = pend & ~served;
  assign take = !cur_valid || (pend_left == '0);

  always_comb begin
    win    = 3'd7;
    ib_pop = '0;
    for (int i = NC; i >= 0; i--) if (ib_valid[i]) win = 3'(i);
    if (take && win != 3'd7) ib_pop[win] = 1'b1;
  end

  function automatic logic [NC-1:0] row_mask(logic [NC-1:0][WCID-1:0] row, route_mode_e m);
    logic [NC-1:0] r;
    for (int e = 0; e < NC; e++) r[e] = (row[e] != CID_NONE) && (e == 0 || m == MODE_BCAST);
    return r;
  endfunction

  always_ff @(posedge gclk or negedge rst_n) begin
    if (!rst_n) begin
      cur_valid <= 1'b0;
      cur_pkt   <= '0;
      cur_port  <= '0;
      pend      <= '0;
    end else if (take) begin
      cur_valid <= (win != 3'd7);
      if (win != 3'd7) begin
        cur_pkt  <= ib_data[win];
        cur_port <= win;
        pend     <= (win == 3'(NC)) ? NC'(1) : row_mask(cm[win], mode);
      end
    end else begin
      pend <= pend_left;
    end
  end

  // ---------------- output buffers ----------------
  for (genvar j = 0; j < NC; j++) begin : g_ob
    sync_fifo #(.T(spike_pkt_t), .DEPTH(BUF_DEPTH)) u_fifo (
      .clk(gclk), .rst_n, .in_valid_i(ob_push[j]), .in_data_i(ob_data[j]), .in_ready_o(ob_ready[j]),
      .out_valid_o(cout_valid_o[j]), .out_data_o(cout_pkt_o[j]), .out_ready_i(cout_ready_i[j]),
      .count_o(/* unused */));
  end

  sync_fifo #(.T(spike_pkt_t), .DEPTH(BUF_DEPTH)) u_l2_ob (
    .clk(gclk), .rst_n, .in_valid_i(l2_push), .in_data_i(l2_data), .in_ready_o(l2_ready),
    .out_valid_o(l2out_valid_o), .out_data_o(l2out_pkt_o), .out_ready_i(l2out_ready_i),
    .count_o(/* unused */));

  assign busy_o = cur_valid || (|ib_valid) || (|cout_valid_o) || l2out_valid_o;
endmodule
