// async_fifo: dual-clock FIFO, one per core inside the IDMA.
//
// Carries weight-index words from the IDMA side to a core whose clock is
// gated independently. Classic design: binary read/write pointers with one
// extra wrap bit, converted to Gray code and passed through two flip-flops
// into the other clock domain; full and empty are computed from the
// synchronised Gray pointers and are therefore conservative. Reads show the
// head word combinationally. DEPTH must be a power of two (default 8, this
// design's choice; the paper only names "Async FIFO x20").
module async_fifo #(
  parameter int DW    = 32,
  parameter int DEPTH = 8
) (
  input  logic          wclk,
  input  logic          wrst_n,
  input  logic          wvalid_i,
  input  logic [DW-1:0] wdata_i,
  output logic          wready_o,
  input  logic          rclk,
  input  logic          rrst_n,
  output logic          rvalid_o,
  output logic [DW-1:0] rdata_o,
  input  logic          rready_i
);
  localparam int AW = $clog2(DEPTH);

  logic [DW-1:0] mem [DEPTH];
  logic [AW:0]   wbin, rbin, wgray, rgray;
  logic [AW:0]   rgray_w1, rgray_w2, wgray_r1, wgray_r2;

  function automatic logic [AW:0] b2g(logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // write side
  logic [AW:0] wbin_n;
  assign wbin_n   = wbin + (AW+1)'(wvalid_i && wready_o);
  assign wready_o = (wgray != {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin     <= '0;
      wgray    <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
    end else begin
      wbin     <= wbin_n;
      wgray    <= b2g(wbin_n);
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
    end
  end

  always_ff @(posedge wclk) if (wvalid_i && wready_o) mem[wbin[AW-1:0]] <= wdata_i;

  // read side
  logic [AW:0] rbin_n;
  assign rvalid_o = (rgray != wgray_r2);
  assign rdata_o  = mem[rbin[AW-1:0]];
  assign rbin_n   = rbin + (AW+1)'(rvalid_o && rready_i);

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin     <= '0;
      rgray    <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      rbin     <= rbin_n;
      rgray    <= b2g(rbin_n);
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
    end
  end
endmodule
