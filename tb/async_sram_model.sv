// async_sram_model: behavioural model of the off-chip asynchronous SRAM,
// for testbenches only.
//
// Reads are combinational while CE# and OE# are low; a write happens on
// the rising edge of WE#, using the
// address and data present at that edge. Words never written read as
// dflt(addr): zero below snn_pkg::WIDX_BASE (initial membrane
// potentials) and a fixed hash of the address above it (weight-index rows),
// so that testbenches can predict the contents without loading them.
module async_sram_model
  import snn_pkg::*;
(
  input  logic          ce_n,
  input  logic          oe_n,
  input  logic          we_n,
  input  logic [AW-1:0] addr,
  input  logic [DW-1:0] dq_i,     // data from the chip
  input  logic          dq_oe,
  output logic [DW-1:0] dq_o      // data to the chip
);
  logic [DW-1:0] mem [logic [AW-1:0]];
  int unsigned   writes = 0;

  function automatic logic [DW-1:0] dflt(logic [AW-1:0] a);
    logic [31:0] x;
    if (a < WIDX_BASE) return '0;
    x = 32'(a) * 32'h9E37_79B1;
    x = x ^ (x >> 15);
    x = x * 32'h85EB_CA6B;
    return x ^ (x >> 13);
  endfunction

  function automatic logic [DW-1:0] peek(logic [AW-1:0] a);
    return mem.exists(a) ? mem[a] : dflt(a);
  endfunction

  assign dq_o = (!ce_n && !oe_n) ? peek(addr) : '0;

  always @(posedge we_n) begin
    if (dq_oe) begin
      mem[addr] = dq_i;
      writes++;
    end
  end
endmodule
