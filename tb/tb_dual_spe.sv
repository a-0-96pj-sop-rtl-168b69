// tb_dual_spe: unit test of the two synapse process engines and the V_MP
// accumulator. For 200 neurons: random 16 shared weights, random weight
// width W and weight count N (4/8/16), a random V(t-1) loaded, then 1..30
// groups of 0..4 indices offered back to back. The expected V_MP is the
// load value plus the sum of the selected weights, each sign-extended from
// its low W bits and chosen by the index masked to log2(N) bits. Also
// checked: offered groups are accepted one per cycle (the engines
// alternate), and the state SPE-A busy / SPE-B free (spe_free = 2'b10) is
// seen.
`timescale 1ns/1ps
module tb_dual_spe;
  import snn_pkg::*;
  logic clk = 0, rst_n = 1;
  initial rst_n = 0;   // a real falling edge (1 to 0) starts the asynchronous reset
  always #5 clk = ~clk;

  logic [NW-1:0][WW-1:0] weights = '0;
  qsize_e                wsel = SZ16, nsel = SZ16;
  logic [2:0]            in_cnt = '0;
  logic [3:0][IDXW-1:0]  in_idx = '0;
  logic                  in_ready, load = 0, busy;
  logic [1:0]            spe_free;
  logic signed [VW-1:0]  load_val = '0, vmp;

  dual_spe dut (.clk, .rst_n, .weights_i(weights), .wsel_i(wsel), .nsel_i(nsel),
                .in_cnt_i(in_cnt), .in_idx_i(in_idx), .in_ready_o(in_ready), .spe_free_o(spe_free),
                .load_i(load), .load_val_i(load_val), .vmp_o(vmp), .busy_o(busy));

  int checks = 0, failures = 0, n_a_busy_b_free = 0, offered = 0, stalled = 0;
  always @(posedge clk) if (rst_n && spe_free == 2'b10) n_a_busy_b_free++;

  function automatic longint wval(int i);
    logic [WW-1:0] w;
    int k;
    k = (nsel == SZ4) ? (i & 3) : (nsel == SZ8) ? (i & 7) : i;
    w = weights[k];
    case (wsel)
      SZ4:     return longint'($signed(w[3:0]));
      SZ8:     return longint'($signed(w[7:0]));
      default: return longint'($signed(w));
    endcase
  endfunction

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      longint exp_v;
      int ng;
      for (int i = 0; i < NW; i++) weights[i] = WW'($urandom);
      wsel = qsize_e'($urandom % 3);
      nsel = qsize_e'($urandom % 3);
      @(negedge clk);
      load = 1; load_val = VW'(int'($urandom % 100000) - 50000);
      exp_v = longint'(load_val);
      @(negedge clk);
      load = 0;
      ng = 1 + int'($urandom % 30);
      for (int g = 0; g < ng; g++) begin
        in_cnt = 3'($urandom % 5);
        for (int l = 0; l < 4; l++) in_idx[l] = IDXW'($urandom);
        for (int l = 0; l < int'(in_cnt); l++) exp_v += wval(int'(in_idx[l]));
        offered++;
        if (!in_ready && in_cnt != 0) stalled++;
        @(negedge clk);
      end
      in_cnt = 0;
      while (busy) @(negedge clk);
      checks++;
      if (longint'(vmp) != exp_v) begin
        failures++;
        $display("FAIL: neuron %0d V=%0d expected %0d", n, vmp, exp_v);
      end
    end
    checks++;
    if (stalled != 0) begin failures++; $display("FAIL: %0d of %0d groups found no free engine", stalled, offered); end
    checks++;
    if (n_a_busy_b_free == 0) begin failures++; $display("FAIL: SPE-A busy / SPE-B free never seen"); end
    $display("groups=%0d a_busy_b_free=%0d", offered, n_a_busy_b_free);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
