// tb_cmrouter: unit test of a level-1 connection-matrix router (face 0,
// cores {0, 9, 1, 13, 10} on ports 0..4).
// Four phases with random connection matrices (each entry a core of this
// face, another core, or empty) alternate P2P and broadcast mode. The five
// core ports and the level-2 port inject packets with unique ids, outputs
// accept at random. Expected deliveries are worked out from the matrix:
// P2P uses entry 0 of the input port's row, broadcast every valid entry; a
// local target leaves on its core port with dst set, any other core leaves
// on the level-2 port; a level-2 packet goes to its dst core port, or is
// dropped if that core is not on this face. Every delivery must be expected
// and every expected delivery must happen exactly once. Hang-up: a
// neighbour whose timestep differs from the router's is not accepted until
// it catches up, and a disabled link is not accepted.
`timescale 1ns/1ps
module tb_cmrouter;
  import snn_pkg::*;
  logic clk = 0, rst_n = 1;
  initial rst_n = 0;   // a real falling edge (1 to 0) starts the asynchronous reset
  always #5 clk = ~clk;

  localparam logic [NC-1:0][WCID-1:0] NBR = FACE[0];
  nbus_req_t                bus = '0;
  nbus_rsp_t                rsp;
  logic                     ts_start = 0;
  logic [NC-1:0][TSW-1:0]   nts = '0;
  logic [NC-1:0]            civ = '0, cir, cov, cor = '0;
  spike_pkt_t [NC-1:0]      cip = '0, cop;
  logic                     liv = 0, lir, lov, lor = 0, busy;
  spike_pkt_t               lip = '0, lop;

  cmrouter #(.RID_DEF(4'd0), .NBR_DEF(NBR)) dut (
    .clk, .rst_n, .bus_i(bus), .bus_o(rsp), .ts_start_i(ts_start), .nbr_ts_i(nts),
    .cin_valid_i(civ), .cin_pkt_i(cip), .cin_ready_o(cir), .cout_valid_o(cov), .cout_pkt_o(cop),
    .cout_ready_i(cor), .l2in_valid_i(liv), .l2in_pkt_i(lip), .l2in_ready_o(lir),
    .l2out_valid_o(lov), .l2out_pkt_o(lop), .l2out_ready_i(lor), .busy_o(busy));

  int checks = 0, failures = 0, n_bcast = 0, n_hang = 0, n_drop = 0;
  logic [NC-1:0][NC-1:0][WCID-1:0] cm;
  bit bmode;
  int exp_cnt [int];           // key: id*64 + output (0..4 core port, 5 = L2) * 32... see key()
  int seq = 0;

  function automatic int key(int id, int outp, int dst);
    return (id * 8 + outp) * 32 + dst;
  endfunction
  function automatic int local_port(int d);
    for (int k = 0; k < NC; k++) if (int'(NBR[k]) == d) return k;
    return -1;
  endfunction

  task automatic expect_from(int port, int id);
    int n;
    n = 0;
    for (int e = 0; e < NC; e++) begin
      int d;
      d = int'(cm[port][e]);
      if (d == 31 || (!bmode && e != 0)) continue;
      n++;
      if (local_port(d) >= 0) exp_cnt[key(id, local_port(d), d)] += 1;
      else exp_cnt[key(id, 5, d)] += 1;
    end
    if (n > 1) n_bcast++;
  endtask

  task automatic deliver(int outp, spike_pkt_t p);
    int k;
    k = key(int'(p.nid), outp, int'(p.dst));
    checks++;
    if (!exp_cnt.exists(k) || exp_cnt[k] == 0) begin
      failures++;
      $display("FAIL: unexpected packet id %0d dst %0d on output %0d", p.nid, p.dst, outp);
    end else exp_cnt[k] -= 1;
  endtask

  // acceptance is recorded at the clock edge
  logic [NC-1:0] cacc = '0;
  logic          lacc = 0;
  always @(posedge clk) if (rst_n) begin
    cacc <= civ & cir;
    lacc <= liv && lir;
    for (int k = 0; k < NC; k++) if (cov[k] && cor[k]) deliver(k, cop[k]);
    if (lov && lor) deliver(5, lop);
    for (int k = 0; k < NC; k++) if (civ[k] && !cir[k] && nts[k] != dut.ts) n_hang++;
  end

  task automatic wr(logic [6:0] o, logic [31:0] d);
    @(negedge clk);
    bus = '{req: 1'b1, we: 1'b1, addr: {SEL_ROUTER, 16'd0, 5'd0, o}, wdata: d};
    @(negedge clk);
    bus = '0;
  endtask

  function automatic spike_pkt_t newpkt(int port);
    spike_pkt_t p;
    p.dst = '0;
    p.src = NBR[port];
    p.nid = NID_W'(seq);
    seq++;
    return p;
  endfunction

  task automatic traffic(int n, bit lagging);
    int sent;
    sent = 0;
    while (sent < n) begin
      @(negedge clk);
      for (int k = 0; k < NC; k++) begin
        if (cacc[k]) begin civ[k] = 0; expect_from(k, int'(cip[k].nid)); sent++; end
        if (!civ[k] && ($urandom % 100) < 25 && sent < n) begin civ[k] = 1; cip[k] = newpkt(k); end
      end
      if (lacc) begin
        int lp;
        liv = 0;
        lp = local_port(int'(lip.dst));
        if (lp >= 0) exp_cnt[key(int'(lip.nid), lp, int'(lip.dst))] += 1; else n_drop++;
        sent++;
      end
      if (!liv && ($urandom % 100) < 15 && sent < n) begin
        liv = 1;
        lip = newpkt(0);
        lip.src = 5'd31;
        lip.dst = ($urandom % 2) ? NBR[$urandom % NC] : WCID'($urandom % 20);
      end
      cor = NC'($urandom);
      lor = ($urandom % 2) == 0;
      if (lagging && sent > n / 2) nts[2] = dut.ts;     // core 1 catches up
    end
    // drain: stop injecting, accept everything
    cor = '1; lor = 1;
    nts = {NC{dut.ts}};
    repeat (3) begin
      @(negedge clk);
      for (int k = 0; k < NC; k++) if (cacc[k]) begin civ[k] = 0; expect_from(k, int'(cip[k].nid)); end
      if (lacc) begin
        int lp;
        liv = 0;
        lp = local_port(int'(lip.dst));
        if (lp >= 0) exp_cnt[key(int'(lip.nid), lp, int'(lip.dst))] += 1; else n_drop++;
      end
    end
    while (civ != '0 || liv) begin
      @(negedge clk);
      for (int k = 0; k < NC; k++) if (cacc[k]) begin civ[k] = 0; expect_from(k, int'(cip[k].nid)); end
      if (lacc) begin
        int lp;
        liv = 0;
        lp = local_port(int'(lip.dst));
        if (lp >= 0) exp_cnt[key(int'(lip.nid), lp, int'(lip.dst))] += 1; else n_drop++;
      end
    end
    while (busy) @(negedge clk);
    repeat (5) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int ph = 0; ph < 4; ph++) begin
      bmode = ph % 2;
      for (int r = 0; r < NC; r++) begin
        for (int e = 0; e < NC; e++) begin
          int x;
          x = int'($urandom % 3);
          cm[r][e] = (x == 0) ? NBR[$urandom % NC] : (x == 1) ? WCID'($urandom % 20) : 5'd31;
        end
        cm[r][0] = NBR[(r + 1 + $urandom % 4) % NC];    // entry 0 always valid
        wr(RR_CM0 + 7'(r), 32'(cm[r]));
      end
      wr(RR_MODE, 32'(bmode));
      if (ph == 2) begin
        // router moves to timestep 1; the core on port 2 is still at 0
        @(negedge clk); ts_start = 1; @(negedge clk); ts_start = 0;
        for (int k = 0; k < NC; k++) nts[k] = dut.ts;
        nts[2] = dut.ts - 1'b1;
      end
      traffic(1500, ph == 2);
    end
    // a disabled link is not accepted
    wr(RR_LINK, 32'b111110);
    @(negedge clk);
    civ[0] = 1; cip[0] = newpkt(0);
    repeat (5) @(negedge clk);
    checks++;
    if (cir[0] || cacc[0]) begin failures++; $display("FAIL: disabled link accepted a packet"); end
    civ[0] = 0;
    wr(RR_LINK, 32'b111111);
    foreach (exp_cnt[k]) begin
      checks++;
      if (exp_cnt[k] != 0) begin
        failures++;
        if (failures < 10) $display("FAIL: id %0d output %0d dst %0d missing", k / 256, (k / 32) % 8, k % 32);
      end
    end
    checks++;
    if (n_bcast == 0 || n_hang == 0 || n_drop == 0) begin
      failures++; $display("FAIL: broadcast %0d hang-up %0d drop %0d", n_bcast, n_hang, n_drop);
    end
    $display("packets=%0d broadcasts=%0d hang_up_cycles=%0d dropped=%0d", seq, n_bcast, n_hang, n_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
