// zspe: zero-skip sparse process engine.
//
// Input: groups of 16 (spike bit, weight index) pairs, one group per cycle,
// into a two-entry input buffer (the ping-pong data buffer of depth 16). The
// engine looks at the oldest group, keeps the weight indices whose spike is
// 1 (zero-skip), and writes them in order into a 19-entry output FIFO at the
// address pointer; a group with no spike costs one cycle and writes nothing.
// A group is moved only when the FIFO has room for all its valid pairs,
// otherwise the engine waits.
//
// Output: up to 4 indices per cycle (one synapse-engine group, lane 0 first);
// out_cnt_o says how many are valid and out_ready_i pops them all.
// Depth 16 and 19 are the paper's; the all-or-nothing push and the
// 4-wide pop are this design's choices. empty_o is high when nothing is
// buffered. in_free_o is the number of free input-buffer entries.
module zspe
  import snn_pkg::*;
#(
  parameter int DEPTH = 19
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid_i,
  input  logic [GRP-1:0]         in_spike_i,
  input  logic [GRP*IDXW-1:0]    in_idx_i,
  output logic [1:0]             in_free_o,
  output logic [2:0]             out_cnt_o,
  output logic [3:0][IDXW-1:0]   out_idx_o,
  input  logic                   out_ready_i,
  output logic                   empty_o
);
  localparam int PW = $clog2(DEPTH);

  // two-entry input buffer
  logic [GRP-1:0]      buf_sp  [2];
  logic [GRP*IDXW-1:0] buf_idx [2];
  logic [1:0]          buf_cnt;
  logic                buf_head;   // index of the oldest entry

  // output FIFO
  logic [IDXW-1:0] fifo [DEPTH];
  logic [PW-1:0]   wr_ptr, rd_ptr;
  logic [PW:0]     count;

  logic [4:0]  pop_n;      // number of valid pairs in head group
  logic        take;       // head group moves into the FIFO
  logic [2:0]  pop_cnt;

  always_comb begin
    pop_n = '0;
    for (int k = 0; k < GRP; k++) pop_n += 5'(buf_sp[buf_head][k]);
  end

  assign take      = (buf_cnt != 0) && ((PW+1)'(DEPTH) - count >= (PW+1)'(pop_n));
  assign pop_cnt   = (count >= 4) ? 3'd4 : 3'(count);
  assign out_cnt_o = pop_cnt;
  assign in_free_o = 2'd2 - buf_cnt;
  assign empty_o   = (buf_cnt == 0) && (count == 0);

  function automatic logic [PW-1:0] wrap(logic [PW:0] p);
    return (p >= (PW+1)'(DEPTH)) ? PW'(p - (PW+1)'(DEPTH)) : PW'(p);
  endfunction

  always_comb begin
    for (int l = 0; l < 4; l++) out_idx_o[l] = fifo[wrap((PW+1)'(rd_ptr) + (PW+1)'(l))];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_cnt  <= '0;
      buf_head <= 1'b0;
      wr_ptr   <= '0;
      rd_ptr   <= '0;
      count    <= '0;
    end else begin
      buf_cnt <= buf_cnt + 2'(in_valid_i && buf_cnt < 2) - 2'(take);
      if (take) begin
        wr_ptr   <= wrap((PW+1)'(wr_ptr) + (PW+1)'(pop_n));
        buf_head <= ~buf_head;
      end
      if (out_ready_i && pop_cnt != 0) begin
        rd_ptr <= wrap((PW+1)'(rd_ptr) + (PW+1)'(pop_cnt));
      end
      count <= count + (take ? (PW+1)'(pop_n) : '0)
                     - ((out_ready_i && pop_cnt != 0) ? (PW+1)'(pop_cnt) : '0);
    end
  end

  // storage (no reset)
  always_ff @(posedge clk) begin
    if (in_valid_i && buf_cnt < 2) begin
      buf_sp [buf_head ^ buf_cnt[0]] <= in_spike_i;
      buf_idx[buf_head ^ buf_cnt[0]] <= in_idx_i;
    end
    if (take) begin
      logic [PW:0] pos;
      pos = '0;
      for (int k = 0; k < GRP; k++) begin
        if (buf_sp[buf_head][k]) begin
          fifo[wrap((PW+1)'(wr_ptr) + pos)] <= buf_idx[buf_head][k*IDXW +: IDXW];
          pos = pos + 1'b1;
        end
      end
    end
  end

  // The FIFO never holds more than DEPTH entries.
  always_ff @(posedge clk) if (rst_n) assert (count <= (PW+1)'(DEPTH));
endmodule
