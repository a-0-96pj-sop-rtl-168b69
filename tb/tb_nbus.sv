// tb_nbus: unit test of the neuromorphic bus decoder.
// Random requests with random select fields addr[31:28] (all 16 values) and
// random slave responses: exactly the selected slave must see req (cores
// and routers share the NoC port; select 4 goes to the external-memory
// port with the low 28 address bits), every slave sees the master's
// address, write flag and data, and the master gets the selected slave's
// ack and read data; an unmapped select acks with 0.
`timescale 1ns/1ps
module tb_nbus;
  import snn_pkg::*;
  nbus_req_t m, c, n, o, k;
  nbus_rsp_t mr, cr, nr, orsp, kr;
  logic ereq, ewe, eack;
  logic [AW-1:0] eaddr;
  logic [DW-1:0] ewdata, erdata;

  nbus dut (.m_req_i(m), .m_rsp_o(mr), .ctrl_req_o(c), .ctrl_rsp_i(cr), .noc_req_o(n), .noc_rsp_i(nr),
            .obuf_req_o(o), .obuf_rsp_i(orsp), .clk_req_o(k), .clk_rsp_i(kr),
            .ext_req_o(ereq), .ext_we_o(ewe), .ext_addr_o(eaddr), .ext_wdata_o(ewdata),
            .ext_ack_i(eack), .ext_rdata_i(erdata));

  int checks = 0, failures = 0;
  initial begin
    for (int i = 0; i < 4000; i++) begin
      logic [3:0] s;
      logic [4:0] want;     // one-hot {ext, clk, obuf, noc, ctrl}
      nbus_rsp_t  exp;
      m  = '{req: ($urandom % 4) != 0, we: 1'($urandom), addr: $urandom, wdata: $urandom};
      cr = '{ack: 1'($urandom), rdata: $urandom};
      nr = '{ack: 1'($urandom), rdata: $urandom};
      orsp = '{ack: 1'($urandom), rdata: $urandom};
      kr = '{ack: 1'($urandom), rdata: $urandom};
      eack = 1'($urandom); erdata = $urandom;
      s = m.addr[31:28];
      #1;
      case (s)
        SEL_CTRL:             begin want = 5'b00001; exp = cr; end
        SEL_CORE, SEL_ROUTER: begin want = 5'b00010; exp = nr; end
        SEL_OBUF:             begin want = 5'b00100; exp = orsp; end
        SEL_CLK:              begin want = 5'b01000; exp = kr; end
        SEL_EXT:              begin want = 5'b10000; exp = '{ack: eack, rdata: erdata}; end
        default:              begin want = 5'b00000; exp = '{ack: m.req, rdata: 32'd0}; end
      endcase
      if (!m.req) want = '0;
      checks++;
      if ({ereq, k.req, o.req, n.req, c.req} != want) begin
        failures++; $display("FAIL: select %0d req %b -> %b", s, m.req, {ereq, k.req, o.req, n.req, c.req});
      end
      checks++;
      if (mr != exp) begin failures++; $display("FAIL: select %0d response", s); end
      checks++;
      if (c.addr != m.addr || n.wdata != m.wdata || o.we != m.we || k.addr != m.addr
          || eaddr != m.addr[AW-1:0] || ewdata != m.wdata || ewe != m.we) begin
        failures++; $display("FAIL: fields not forwarded");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
