// dual_spe: two synapse process engines sharing one membrane-potential
// accumulator.
//
// Each engine (SPE-A, SPE-B) takes a group of up to four weight indices.
// In its first cycle it looks the indices up in the shared weight register
// (16 quantised weights, W0..W15) and holds the four weights; in its second
// cycle it sums them in an 18-bit adder tree (two adders, then one) and the
// 32-bit adder adds that partial sum dV to the V_MP register. An engine is
// therefore occupied for two cycles (the cycle the group is handed over and
// the cycle it holds the weights), and a new group goes to whichever engine is
// free (spe_free_o: bit 0 = SPE-A, bit 1 = SPE-B, 1 = free; SPE-A first when
// both are). With groups arriving every cycle the two engines alternate, so
// the pair sustains 4 synapses per cycle and at most one engine adds to
// V_MP in a given cycle.
//
// Weight quantisation: wsel_i picks the weight width W in {4, 8, 16} (the
// low W bits of each shared weight, sign-extended); nsel_i picks the number
// of weights N in {4, 8, 16} by masking the index to 2, 3 or 4 bits. The
// paper gives N, W in {4,8,16}, the two-engine structure, the adder widths
// and spe_free; the two-cycle engine and the masking are this design's.
//
// load_i writes load_val_i (V(t-1) of the neuron about to be integrated)
// into V_MP; vmp_o is the running V_MP; busy_o is high while an engine holds
// a group.
module dual_spe
  import snn_pkg::*;
(
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [NW-1:0][WW-1:0]      weights_i,
  input  qsize_e                     wsel_i,
  input  qsize_e                     nsel_i,
  input  logic [2:0]                 in_cnt_i,      // valid lanes (0..4)
  input  logic [3:0][IDXW-1:0]       in_idx_i,
  output logic                       in_ready_o,
  output logic [1:0]                 spe_free_o,
  input  logic                       load_i,
  input  logic signed [VW-1:0]       load_val_i,
  output logic signed [VW-1:0]       vmp_o,
  output logic                       busy_o
);
  logic                              s_busy [2];
  logic signed [3:0][WW-1:0]         s_w    [2];   // held weights
  logic signed [VW-1:0]              vmp;

  function automatic logic signed [WW-1:0] qweight(logic [WW-1:0] w, qsize_e sel);
    unique case (sel)
      SZ4:     return WW'(signed'(w[3:0]));
      SZ8:     return WW'(signed'(w[7:0]));
      default: return w;
    endcase
  endfunction

  function automatic logic [IDXW-1:0] qindex(logic [IDXW-1:0] i, qsize_e sel);
    unique case (sel)
      SZ4:     return i & 4'h3;
      SZ8:     return i & 4'h7;
      default: return i;
    endcase
  endfunction

  assign spe_free_o = {!s_busy[1], !s_busy[0]};
  assign in_ready_o = !s_busy[0] || !s_busy[1];
  assign busy_o     = s_busy[0] || s_busy[1];
  assign vmp_o      = vmp;

  logic start;
  logic sel;            // engine that takes the group
  assign start = in_ready_o && (in_cnt_i != 0);
  assign sel   = s_busy[0];   // A if free, else B

  // 18-bit adder trees of the two engines
  logic signed [DVW-1:0] dv [2];
  always_comb begin
    for (int e = 0; e < 2; e++) begin
      logic signed [DVW-1:0] a, b;
      a = DVW'(signed'(s_w[e][0])) + DVW'(signed'(s_w[e][1]));
      b = DVW'(signed'(s_w[e][2])) + DVW'(signed'(s_w[e][3]));
      dv[e] = a + b;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_busy[0] <= 1'b0;
      s_busy[1] <= 1'b0;
      vmp       <= '0;
    end else begin
      for (int e = 0; e < 2; e++) if (s_busy[e]) s_busy[e] <= 1'b0;
      if (start) s_busy[sel] <= 1'b1;
      if (load_i)         vmp <= load_val_i;
      else if (s_busy[0]) vmp <= vmp + VW'(dv[0]);
      else if (s_busy[1]) vmp <= vmp + VW'(dv[1]);
    end
  end

  always_ff @(posedge clk) begin
    if (start) begin
      for (int l = 0; l < 4; l++)
        s_w[sel][l] <= (3'(l) < in_cnt_i)
                       ? qweight(weights_i[qindex(in_idx_i[l], nsel_i)], wsel_i) : '0;
    end
  end

  // A group goes to a free engine only, so the engines are never both busy
  // and never both add to V_MP in one cycle.
  always_ff @(posedge clk) if (rst_n) assert (!(s_busy[0] && s_busy[1]));
endmodule
