// mpdma: membrane-potential DMA between the cores and external memory.
//
// Membrane potentials are not kept in the cores: before integrating neuron
// n a core reads V(t-1) through this DMA, and afterwards it writes V(t)
// back. The word of core c, neuron n lives at MP_BASE + c*NEURONS + n.
// The MPDMA controller serves one request at a time, lowest core first:
// it copies the core's request into its output buffer, performs the
// external-memory access, holds read data in its input buffer and then
// acknowledges the core for one cycle (which also carries the read data).
// The paper names the controller and the two buffers; the fixed-priority
// service and the one-word transfers are this design's.
module mpdma
  import snn_pkg::*;
#(
  parameter int NEURONS_P = NEURONS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [N_CORES-1:0]            rd_req_i,
  input  logic [N_CORES-1:0]            wr_req_i,
  input  logic [N_CORES-1:0][NID_W-1:0] addr_i,
  input  logic [N_CORES-1:0][VW-1:0]    wdata_i,
  output logic [N_CORES-1:0]            ack_o,
  output logic [VW-1:0]                 rdata_o,
  // external memory
  output logic                          mem_req_o,
  output logic                          mem_we_o,
  output logic [AW-1:0]                 mem_addr_o,
  output logic [DW-1:0]                 mem_wdata_o,
  input  logic                          mem_ack_i,
  input  logic [DW-1:0]                 mem_rdata_i
);
  typedef enum logic [1:0] { IDLE, MEM, RESP } st_e;
  st_e         st;
  logic [4:0]  who;
  logic        obuf_we;
  logic [AW-1:0] obuf_addr;
  logic [DW-1:0] obuf_data, ibuf;

  logic [4:0] win;
  logic       any;
  always_comb begin
    win = '0;
    any = 1'b0;
    for (int c = N_CORES-1; c >= 0; c--)
      if (rd_req_i[c] || wr_req_i[c]) begin win = 5'(c); any = 1'b1; end
  end

  assign mem_req_o   = (st == MEM);
  assign mem_we_o    = obuf_we;
  assign mem_addr_o  = obuf_addr;
  assign mem_wdata_o = obuf_data;
  assign rdata_o     = ibuf;
  always_comb begin
    ack_o = '0;
    if (st == RESP) ack_o[who] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= IDLE;
      who       <= '0;
      obuf_we   <= 1'b0;
      obuf_addr <= '0;
      obuf_data <= '0;
      ibuf      <= '0;
    end else begin
      unique case (st)
        IDLE: if (any) begin
          who       <= win;
          obuf_we   <= wr_req_i[win];
          obuf_addr <= MP_BASE + AW'(AW'(win) * AW'(NEURONS_P) + AW'(addr_i[win]));
          obuf_data <= wdata_i[win];
          st        <= MEM;
        end
        MEM: if (mem_ack_i) begin
          ibuf <= mem_rdata_i;
          st   <= RESP;
        end
        default: st <= IDLE;
      endcase
    end
  end
endmodule
