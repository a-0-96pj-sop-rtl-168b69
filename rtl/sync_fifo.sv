// sync_fifo: small single-clock FIFO used as router input and output
// buffer. Parameterised type T and depth; push when valid and not full,
// pop when ready and not empty; data is shown from the head combinationally.
// count_o gives the fill level. Depth 4 is this design's choice.
module sync_fifo #(
  parameter type T     = logic [31:0],
  parameter int  DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid_i,
  input  T     in_data_i,
  output logic in_ready_o,
  output logic out_valid_o,
  output T     out_data_o,
  input  logic out_ready_i,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);
  localparam int PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  T                mem [DEPTH];
  logic [PW-1:0]   wp, rp;
  logic [$clog2(DEPTH+1)-1:0] cnt;

  assign in_ready_o  = (cnt != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid_o = (cnt != 0);
  assign out_data_o  = mem[rp];
  assign count_o     = cnt;

  logic push, pop;
  assign push = in_valid_i && in_ready_o;
  assign pop  = out_ready_i && out_valid_o;

  function automatic logic [PW-1:0] inc(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (push) wp <= inc(wp);
      if (pop)  rp <= inc(rp);
      cnt <= cnt + $bits(cnt)'(push) - $bits(cnt)'(pop);
    end
  end

  always_ff @(posedge clk) if (push) mem[wp] <= in_data_i;
endmodule
