// idma: index DMA, feeding weight-index rows from external memory to the
// 20 cores.
//
// After each timestep start every core needs, in order, the index row of
// each of its active neurons: n_groups(synapses) x 2 words of 32 bits
// (8 four-bit indices per word), stored at
//   WIDX_BASE + (core*NEURONS + neuron)*ROW_STRIDE + word.
// The IDMA controller keeps a row counter per core, picks the next core
// with rows left in round-robin order, and copies one whole row word by
// word: it issues an external-memory read only when that core's FIFO has
// room, and pushes the returned word. Each core has its own dual-clock
// FIFO (the paper's "Async FIFO x20"), read by the core's weight-index
// cache in the core's gated clock domain.
// Copying is armed by a timestep start and disarms itself once every row of
// that timestep has been fetched, so no row is fetched before the cores
// run (configuration writes cannot start a stream early). The network
// controller waits for busy_o to fall before the next timestep start, so a
// row is never cut by the counter reset.
// The paper names the IDMA controller and the 20 async FIFOs; the memory
// layout, row order and scheduling are this design's.
module idma
  import snn_pkg::*;
#(
  parameter int NEURONS_P = NEURONS,
  parameter int FIFO_DEPTH = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          ts_start_i,
  input  logic [N_CORES-1:0][NID_W:0]   neurons_i,
  input  logic [N_CORES-1:0][NID_W:0]   synapses_i,
  // external memory (read only)
  output logic                          mem_req_o,
  output logic [AW-1:0]                 mem_addr_o,
  input  logic                          mem_ack_i,
  input  logic [DW-1:0]                 mem_rdata_i,
  // to the cores
  input  logic [N_CORES-1:0]            core_clk_i,
  output logic [N_CORES-1:0]            wi_valid_o,
  output logic [N_CORES-1:0][31:0]      wi_data_o,
  input  logic [N_CORES-1:0]            wi_ready_i,
  output logic                          busy_o
);
  logic [N_CORES-1:0][NID_W:0] rows;
  logic [4:0]                  cur;
  logic                        active;
  logic                        armed;
  logic [NID_W+1:0]            word;
  logic [N_CORES-1:0]          f_wready, f_push;

  logic [NID_W+1:0] nwords;
  assign nwords = (NID_W+2)'(n_groups(synapses_i[cur])) << 1;

  // next core with rows left, round robin after cur
  logic [4:0] nxt;
  logic       nxt_ok;
  always_comb begin
    nxt    = '0;
    nxt_ok = 1'b0;
    for (int i = N_CORES; i >= 1; i--) begin
      int c;
      c = (int'(cur) + i) % N_CORES;
      if (armed && rows[c] < neurons_i[c] && neurons_i[c] != 0 && synapses_i[c] != 0) begin
        nxt    = 5'(c);
        nxt_ok = 1'b1;
      end
    end
  end

  assign mem_req_o  = active && f_wready[cur];
  assign mem_addr_o = WIDX_BASE
                    + AW'((AW'(cur) * AW'(NEURONS_P) + AW'(rows[cur])) * AW'(ROW_STRIDE))
                    + AW'(word);
  always_comb begin
    f_push = '0;
    if (active && mem_ack_i) f_push[cur] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rows   <= '0;
      cur    <= 5'(N_CORES - 1);
      active <= 1'b0;
      armed  <= 1'b0;
      word   <= '0;
    end else if (ts_start_i) begin
      rows   <= '0;
      active <= 1'b0;
      armed  <= 1'b1;
      word   <= '0;
    end else if (!active) begin
      if (!nxt_ok) armed <= 1'b0;
      if (nxt_ok) begin
        cur    <= nxt;
        active <= 1'b1;
        word   <= '0;
      end
    end else if (mem_ack_i) begin
      if (word + 1'b1 >= nwords) begin
        rows[cur] <= rows[cur] + 1'b1;
        active    <= 1'b0;
      end else begin
        word <= word + 1'b1;
      end
    end
  end

  for (genvar c = 0; c < N_CORES; c++) begin : g_fifo
    async_fifo #(.DW(32), .DEPTH(FIFO_DEPTH)) u_fifo (
      .wclk(clk), .wrst_n(rst_n), .wvalid_i(f_push[c]), .wdata_i(mem_rdata_i),
      .wready_o(f_wready[c]),
      .rclk(core_clk_i[c]), .rrst_n(rst_n), .rvalid_o(wi_valid_o[c]), .rdata_o(wi_data_o[c]),
      .rready_i(wi_ready_i[c]));
  end

  assign busy_o = active || nxt_ok;
endmodule
