// snn_pkg: constants and types shared by the whole neuromorphic SoC.
//
// Sizes follow the paper where it prints them: 20 cores and 12 level-1
// routers per fullerene-like routing domain, 5 neighbour cores per router
// (Nc = 5), 5-bit core IDs (Wcid = 5), 16 shared weights of up to 16 bits,
// 16-synapse sparse groups, an 18-bit synapse adder tree and a 32-bit
// membrane potential. AXONS/NEURONS = 8192 follow from the 2 KB ping-pong
// spike cache (2 x 8192 bits) and from 160 K neurons over 20 cores.
//
// The spike packet format, the bus, the register maps and the vertex
// numbering of the topology are this design's own choices: the paper only
// says that the connection matrix avoids packet encoding and decoding.
//
// Topology: the 20 cores sit on the vertices and the 12 level-1 routers on
// the faces of a dodecahedron, which gives exactly 3 routers per core and
// 5 cores per router. FACE[f][k] is the core on port k of router f, listed
// in cyclic order around the face.
package snn_pkg;

  localparam int N_CORES   = 20;
  localparam int N_L1      = 12;
  localparam int NC        = 5;     // neighbour cores per L1 router
  localparam int RPC       = 3;     // neighbour routers per core
  localparam int WCID      = 5;     // core-id width
  localparam int NID_W     = 13;    // neuron / axon index width (8192)
  localparam int AXONS     = 8192;
  localparam int NEURONS   = 8192;
  localparam int GRP       = 16;    // synapses per ZSPE group
  localparam int IDXW      = 4;     // weight-index width (N = 16)
  localparam int NW        = 16;    // shared weights per core
  localparam int WW        = 16;    // max weight width
  localparam int DVW       = 18;    // SPE adder-tree width
  localparam int VW        = 32;    // membrane potential width
  localparam int TSW       = 8;     // timestep counter width
  localparam int AW        = 28;    // external-memory word address width
  localparam int DW        = 32;    // external-memory data width
  localparam logic [WCID-1:0] CID_NONE = '1;  // empty connection-matrix entry

  // External memory layout (word addresses).
  localparam logic [AW-1:0] MP_BASE   = 28'h000_0000;  // core*NEURONS + n
  localparam logic [AW-1:0] WIDX_BASE = 28'h010_0000;  // (core*NEURONS + n)*ROW_STRIDE + w
  localparam int            ROW_STRIDE = AXONS / 8;     // 8 indices per word

  typedef struct packed {
    logic [WCID-1:0]  dst;   // target core (filled in by the router)
    logic [WCID-1:0]  src;   // source core
    logic [NID_W-1:0] nid;   // source neuron = target axon
  } spike_pkt_t;

  // Neuromorphic bus: one master, request held until ack.
  typedef struct packed {
    logic        req;
    logic        we;
    logic [31:0] addr;
    logic [31:0] wdata;
  } nbus_req_t;

  typedef struct packed {
    logic        ack;
    logic [31:0] rdata;
  } nbus_rsp_t;

  // Bus slave select, addr[31:28].
  localparam logic [3:0] SEL_CTRL = 4'h0, SEL_CORE = 4'h1, SEL_ROUTER = 4'h2,
                         SEL_OBUF = 4'h3, SEL_EXT  = 4'h4, SEL_CLK    = 4'h5;

  // Core register table offsets, addr[6:0]; core index in addr[11:7].
  localparam logic [6:0] CR_ID = 7'h00, CR_EN = 7'h01, CR_TGT = 7'h02, CR_LAYER = 7'h03,
                         CR_NEURONS = 7'h04, CR_SYN = 7'h05, CR_RST = 7'h06, CR_VTH = 7'h07,
                         CR_LEAK = 7'h08, CR_WCFG = 7'h09, CR_OUT = 7'h0A, CR_W0 = 7'h10;

  // Router register table offsets, addr[6:0]; router index in addr[11:7].
  localparam logic [6:0] RR_RID = 7'h00, RR_LINK = 7'h01, RR_MODE = 7'h02, RR_NBR = 7'h03,
                         RR_STATE = 7'h04, RR_CM0 = 7'h08;

  typedef enum logic [1:0] { RST_ZERO = 2'd0, RST_SUB = 2'd1, RST_NONE = 2'd2 } reset_mode_e;
  typedef enum logic [1:0] { SZ4 = 2'd0, SZ8 = 2'd1, SZ16 = 2'd2 } qsize_e;
  typedef enum logic       { MODE_P2P = 1'b0, MODE_BCAST = 1'b1 } route_mode_e;

  typedef struct packed {
    logic                    enable;
    logic [1:0]              target_router;  // which of the 3 neighbour routers
    logic [7:0]              layer_id;
    logic [NID_W:0]          neurons;        // active neurons (0..8192)
    logic [NID_W:0]          synapses;       // active axons   (0..8192)
    reset_mode_e             reset_mode;
    logic signed [VW-1:0]    threshold;
    logic signed [VW-1:0]    leak;
    qsize_e                  wsel;           // weight width W
    qsize_e                  nsel;           // weight number N
    logic                    out_en;         // spikes go to the output buffer
    logic [1:0]              out_net;        // which of the 4 network buffers
    logic [NW-1:0][WW-1:0]   weights;        // shared weights W0..W15
  } core_cfg_t;

  // Packed so that FACE[f][k] is a constant expression everywhere.
  localparam logic [N_L1-1:0][NC-1:0][WCID-1:0] FACE = {
    {5'd18, 5'd7, 5'd19, 5'd16, 5'd6},
    {5'd19, 5'd7, 5'd17, 5'd11, 5'd5},
    {5'd16, 5'd6, 5'd14, 5'd8, 5'd4},
    {5'd16, 5'd19, 5'd5, 5'd15, 5'd4},
    {5'd17, 5'd7, 5'd18, 5'd12, 5'd3},
    {5'd14, 5'd6, 5'd18, 5'd12, 5'd2},
    {5'd12, 5'd3, 5'd13, 5'd10, 5'd2},
    {5'd11, 5'd5, 5'd15, 5'd9, 5'd1},
    {5'd13, 5'd3, 5'd17, 5'd11, 5'd1},
    {5'd9, 5'd15, 5'd4, 5'd8, 5'd0},
    {5'd10, 5'd2, 5'd14, 5'd8, 5'd0},
    {5'd10, 5'd13, 5'd1, 5'd9, 5'd0}};

  // r-th router (in increasing face order) of core c.
  function automatic int core_router(int c, int r);
    int n = 0;
    for (int f = 0; f < N_L1; f++)
      for (int k = 0; k < NC; k++)
        if (int'(FACE[f][k]) == c) begin
          if (n == r) return f;
          n++;
        end
    return -1;
  endfunction

  // Port of router f that core c is attached to.
  function automatic int core_port(int f, int c);
    for (int k = 0; k < NC; k++) if (int'(FACE[f][k]) == c) return k;
    return -1;
  endfunction

  // Which of its 3 routers (0..2) router f is for core c.
  function automatic int router_index(int c, int f);
    for (int r = 0; r < RPC; r++) if (core_router(c, r) == f) return r;
    return -1;
  endfunction

  // Lowest-numbered router next to core c (used by the L2 router).
  function automatic int home_router(int c);
    return core_router(c, 0);
  endfunction

  // Number of 16-synapse groups for a synapse count.
  function automatic logic [NID_W:0] n_groups(logic [NID_W:0] syn);
    return (syn + (NID_W+1)'(GRP - 1)) >> 4;
  endfunction

endpackage
