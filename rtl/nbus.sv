// nbus: the neuromorphic bus that connects the ENU (the only master) to the
// neuromorphic processor.
//
// addr[31:28] selects the slave: SEL_CTRL neuromorphic controller,
// SEL_CORE / SEL_ROUTER the register tables inside the accelerator,
// SEL_OBUF output buffer, SEL_EXT external memory (word address
// addr[AW-1:0], through the external memory interface), SEL_CLK clock
// manager. The request is passed to the selected slave only; that slave's
// response (ack and read data) goes back to the master. An unmapped address
// is acknowledged at once and reads as zero. The master holds its request
// until ack. The decoding scheme is this design's.
module nbus
  import snn_pkg::*;
(
  input  nbus_req_t   m_req_i,
  output nbus_rsp_t   m_rsp_o,
  output nbus_req_t   ctrl_req_o,
  input  nbus_rsp_t   ctrl_rsp_i,
  output nbus_req_t   noc_req_o,
  input  nbus_rsp_t   noc_rsp_i,
  output nbus_req_t   obuf_req_o,
  input  nbus_rsp_t   obuf_rsp_i,
  output nbus_req_t   clk_req_o,
  input  nbus_rsp_t   clk_rsp_i,
  // external memory requester port
  output logic        ext_req_o,
  output logic        ext_we_o,
  output logic [AW-1:0] ext_addr_o,
  output logic [DW-1:0] ext_wdata_o,
  input  logic        ext_ack_i,
  input  logic [DW-1:0] ext_rdata_i
);
  logic [3:0] sel;
  assign sel = m_req_i.addr[31:28];

  always_comb begin
    ctrl_req_o = m_req_i;  ctrl_req_o.req = m_req_i.req && sel == SEL_CTRL;
    noc_req_o  = m_req_i;  noc_req_o.req  = m_req_i.req && (sel == SEL_CORE || sel == SEL_ROUTER);
    obuf_req_o = m_req_i;  obuf_req_o.req = m_req_i.req && sel == SEL_OBUF;
    clk_req_o  = m_req_i;  clk_req_o.req  = m_req_i.req && sel == SEL_CLK;
    ext_req_o   = m_req_i.req && sel == SEL_EXT;
    ext_we_o    = m_req_i.we;
    ext_addr_o  = m_req_i.addr[AW-1:0];
    ext_wdata_o = m_req_i.wdata;
    unique case (sel)
      SEL_CTRL:              m_rsp_o = ctrl_rsp_i;
      SEL_CORE, SEL_ROUTER:  m_rsp_o = noc_rsp_i;
      SEL_OBUF:              m_rsp_o = obuf_rsp_i;
      SEL_CLK:               m_rsp_o = clk_rsp_i;
      SEL_EXT:               m_rsp_o = '{ack: ext_ack_i, rdata: ext_rdata_i};
      default:               m_rsp_o = '{ack: m_req_i.req, rdata: 32'd0};
    endcase
  end
endmodule
