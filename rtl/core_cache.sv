// core_cache: the two ping-pong caches of a neuromorphic core.
//
// Spike cache (2 x AXONS bits, 2 KB at the default size): one bank collects
// the spikes that arrive from the routers during a timestep (axon index ->
// bit set), the other is read by the zero-skip engine 16 axons per word.
// swap_i (the timestep start) exchanges the banks and empties the new write
// bank at once: each 16-bit word has a valid bit, and a word whose valid bit
// is clear reads as zero and is overwritten rather than ORed on write.
//
// Weight-index cache (2 x AXONS 4-bit indices, 8 KB): each bank holds the
// index row of one neuron (index of the shared weight used by each of its
// synapses). The IDMA writes 32-bit words (8 indices) into the fill bank
// until the row (n_groups(synapses) 16-index words) is complete; the bank is
// then full and the fill side moves to the other bank once it is free. The
// zero-skip engine reads 64-bit words (16 indices) from the full read bank
// and frees it with rd_release_i. This per-neuron ping-pong is this design's
// reading of the paper's "double ping-pong caches".
//
// Reads are synchronous: address in cycle t, data in cycle t+1. The spike
// write port is a read-modify-write of one word per cycle.
module core_cache
  import snn_pkg::*;
#(
  parameter int AXONS_P = AXONS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [NID_W:0]          synapses_i,   // active axons (row length)
  input  logic                    swap_i,       // timestep start
  // spike write (from router input)
  input  logic                    sp_we_i,
  input  logic [NID_W-1:0]        sp_waddr_i,   // axon index
  // spike read (ZSPE)
  input  logic [$clog2(AXONS_P/GRP)-1:0] sp_raddr_i,  // group index
  output logic [GRP-1:0]          sp_rdata_o,
  // weight-index write (IDMA)
  input  logic                    wi_wvalid_i,
  input  logic [31:0]             wi_wdata_i,
  output logic                    wi_wready_o,
  // weight-index read (ZSPE)
  input  logic [$clog2(AXONS_P/GRP)-1:0] wi_raddr_i,
  output logic [GRP*IDXW-1:0]     wi_rdata_o,
  output logic                    wi_rfull_o,   // read bank holds a full row
  input  logic                    rd_release_i  // row consumed
);
  localparam int WORDS = AXONS_P / GRP;
  localparam int WA    = $clog2(WORDS);

  // ---------------- spike cache ----------------
  logic [GRP-1:0] sp_mem [2][WORDS];
  logic [WORDS-1:0] sp_wv [2];
  logic sp_rbank;
  logic [WA-1:0] sp_wword;
  logic [3:0]    sp_wbit;
  assign sp_wword = sp_waddr_i[WA+3:4];
  assign sp_wbit  = sp_waddr_i[3:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sp_rbank <= 1'b0;
      sp_wv[0] <= '0;
      sp_wv[1] <= '0;
    end else begin
      if (swap_i) begin
        sp_rbank <= ~sp_rbank;
        sp_wv[sp_rbank] <= '0;          // old read bank becomes write bank
      end else if (sp_we_i) begin
        sp_wv[~sp_rbank][sp_wword] <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!swap_i && sp_we_i) begin
      logic [GRP-1:0] w;
      w = sp_wv[~sp_rbank][sp_wword] ? sp_mem[~sp_rbank][sp_wword] : '0;
      w[sp_wbit] = 1'b1;
      sp_mem[~sp_rbank][sp_wword] <= w;
    end
  end

  logic [GRP-1:0] sp_rd_q;
  logic           sp_rv_q;
  always_ff @(posedge clk) begin
    sp_rd_q <= sp_mem[sp_rbank][sp_raddr_i];
    sp_rv_q <= sp_wv[sp_rbank][sp_raddr_i] && !swap_i;
  end
  assign sp_rdata_o = sp_rv_q ? sp_rd_q : '0;

  // ---------------- weight-index cache ----------------
  logic [31:0] wi_lo [2][WORDS];
  logic [31:0] wi_hi [2][WORDS];
  logic [1:0]  wi_full;
  logic        wi_wbank, wi_rbank;
  logic [WA:0] wi_wptr;                 // 32-bit word pointer in the fill bank
  logic [WA+1:0] row_words;
  assign row_words = (WA+2)'(n_groups(synapses_i)) << 1;

  assign wi_wready_o = !wi_full[wi_wbank];

  logic       row_last;
  logic [1:0] full_n;
  assign row_last = (WA+2)'(wi_wptr) + 1 >= row_words;
  always_comb begin
    full_n = wi_full;
    if (rd_release_i && wi_full[wi_rbank]) full_n[wi_rbank] = 1'b0;
    if (wi_wvalid_i && wi_wready_o && row_last) full_n[wi_wbank] = 1'b1;
  end
  assign wi_rfull_o  = wi_full[wi_rbank];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wi_full  <= '0;
      wi_wbank <= 1'b0;
      wi_rbank <= 1'b0;
      wi_wptr  <= '0;
    end else begin
      if (rd_release_i && wi_full[wi_rbank]) wi_rbank <= ~wi_rbank;
      if (wi_wvalid_i && wi_wready_o) begin
        if (row_last) begin
          wi_wptr  <= '0;
          wi_wbank <= ~wi_wbank;
        end else begin
          wi_wptr <= wi_wptr + 1'b1;
        end
      end
      wi_full <= full_n;
    end
  end

  always_ff @(posedge clk) begin
    if (wi_wvalid_i && wi_wready_o) begin
      if (wi_wptr[0]) wi_hi[wi_wbank][wi_wptr[WA:1]] <= wi_wdata_i;
      else            wi_lo[wi_wbank][wi_wptr[WA:1]] <= wi_wdata_i;
    end
  end

  always_ff @(posedge clk) begin
    wi_rdata_o <= {wi_hi[wi_rbank][wi_raddr_i], wi_lo[wi_rbank][wi_raddr_i]};
  end
endmodule
