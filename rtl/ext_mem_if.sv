// ext_mem_if: external memory interface to an off-chip asynchronous SRAM.
//
// Three requesters share the SRAM: the MPDMA, the IDMA and the
// neuromorphic bus (CPU access), served by a fixed-priority arbiter in that
// order. A request is copied into the output buffer (address, write data,
// direction); the async-SRAM interface logic then drives CE#, OE# (read) or
// WE# (write) low for WAIT+1 cycles with address and data stable, samples
// the data pins into the input buffer at the end of a read, releases the
// strobes (the rising WE# edge writes the SRAM) and acknowledges the
// requester for one cycle. A requester holds req, we, addr and wdata until
// its ack. The paper names the arbiter, buffers and async-SRAM logic; the
// priority order and timing are this design's.
module ext_mem_if
  import snn_pkg::*;
#(
  parameter int NM   = 3,
  parameter int WAIT = 2
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [NM-1:0]          req_i,
  input  logic [NM-1:0]          we_i,
  input  logic [NM-1:0][AW-1:0]  addr_i,
  input  logic [NM-1:0][DW-1:0]  wdata_i,
  output logic [NM-1:0]          ack_o,
  output logic [DW-1:0]          rdata_o,
  // asynchronous SRAM pins
  output logic                   sram_ce_n,
  output logic                   sram_oe_n,
  output logic                   sram_we_n,
  output logic [AW-1:0]          sram_addr,
  output logic [DW-1:0]          sram_dq_o,
  output logic                   sram_dq_oe,
  input  logic [DW-1:0]          sram_dq_i
);
  typedef enum logic [1:0] { IDLE, ACC, DONE } st_e;
  st_e            st;
  logic [1:0]     who;
  logic           we_q;
  logic [AW-1:0]  addr_q;
  logic [DW-1:0]  wdata_q, ibuf;
  logic [3:0]     tmr;

  logic [1:0] win;
  logic       any;
  always_comb begin
    win = '0;
    any = 1'b0;
    for (int m = NM-1; m >= 0; m--) if (req_i[m]) begin win = 2'(m); any = 1'b1; end
  end

  assign sram_ce_n  = !(st == ACC);
  assign sram_oe_n  = !(st == ACC && !we_q);
  assign sram_we_n  = !(st == ACC && we_q);
  assign sram_addr  = addr_q;
  assign sram_dq_o  = wdata_q;
  assign sram_dq_oe = (st != IDLE) && we_q;
  assign rdata_o    = ibuf;
  always_comb begin
    ack_o = '0;
    if (st == DONE) ack_o[who] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= IDLE;
      who     <= '0;
      we_q    <= 1'b0;
      addr_q  <= '0;
      wdata_q <= '0;
      ibuf    <= '0;
      tmr     <= '0;
    end else begin
      unique case (st)
        IDLE: if (any) begin
          who     <= win;
          we_q    <= we_i[win];
          addr_q  <= addr_i[win];
          wdata_q <= wdata_i[win];
          tmr     <= 4'(WAIT);
          st      <= ACC;
        end
        ACC: begin
          if (tmr == 0) begin
            if (!we_q) ibuf <= sram_dq_i;
            st <= DONE;
          end else begin
            tmr <= tmr - 1'b1;
          end
        end
        default: st <= IDLE;
      endcase
    end
  end
endmodule
