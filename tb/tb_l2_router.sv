// tb_l2_router: unit test of the centre (level-2) router.
// All 12 face ports and the off-chip port inject random packets (any
// destination 0..31, each tagged with a unique id in nid) while the outputs
// accept at random. Every packet must leave exactly once: to the face port
// of the lowest-numbered face that contains its destination core (found by
// scanning the face table here), or off chip for destinations >= 20; and
// packets from one input to one output keep their order.
`timescale 1ns/1ps
module tb_l2_router;
  import snn_pkg::*;
  logic clk = 0, rst_n = 1;
  initial rst_n = 0;   // a real falling edge (1 to 0) starts the asynchronous reset
  always #5 clk = ~clk;

  logic [N_L1-1:0]       iv = '0, ir, ov, ordy = '0;
  spike_pkt_t [N_L1-1:0] ip = '0, op;
  logic                  l3iv = 0, l3ir, l3ov, l3ordy = 0, busy;
  spike_pkt_t            l3ip = '0, l3op;

  l2_router dut (.clk, .rst_n, .in_valid_i(iv), .in_pkt_i(ip), .in_ready_o(ir),
                 .out_valid_o(ov), .out_pkt_o(op), .out_ready_i(ordy),
                 .l3in_valid_i(l3iv), .l3in_pkt_i(l3ip), .l3in_ready_o(l3ir),
                 .l3out_valid_o(l3ov), .l3out_pkt_o(l3op), .l3out_ready_i(l3ordy), .busy_o(busy));

  int checks = 0, failures = 0, sent = 0, recv = 0;
  int exp_port [8192];
  int seq = 0;

  function automatic int home(int d);
    if (d >= N_CORES) return N_L1;
    for (int f = 0; f < N_L1; f++)
      for (int k = 0; k < NC; k++) if (int'(FACE[f][k]) == d) return f;
    return -1;
  endfunction

  function automatic spike_pkt_t newpkt(int src);
    spike_pkt_t p;
    p.dst = WCID'($urandom % 32);
    p.src = WCID'(src);
    p.nid = NID_W'(seq);
    exp_port[seq] = home(int'(p.dst));
    seq++;
    return p;
  endfunction

  int last_id [N_L1+1][N_L1+1];
  task automatic got(int port, spike_pkt_t p);
    int id;
    id = int'(p.nid);
    checks++;
    recv++;
    if (exp_port[id] != port) begin
      failures++;
      $display("FAIL: packet %0d (dst %0d) left on port %0d, expected %0d", id, p.dst, port, exp_port[id]);
    end
    exp_port[id] = -2;
    checks++;
    if (id <= last_id[p.src % (N_L1+1)][port]) begin failures++; $display("FAIL: order on port %0d", port); end
    last_id[p.src % (N_L1+1)][port] = id;
  endtask

  logic [N_L1-1:0] acc = '0;
  logic            l3acc = 0;
  always @(posedge clk) if (rst_n) begin
    acc   <= iv & ir;
    l3acc <= l3iv && l3ir;
    for (int f = 0; f < N_L1; f++) if (ov[f] && ordy[f]) got(f, op[f]);
    if (l3ov && l3ordy) got(N_L1, l3op);
  end

  initial begin
    for (int i = 0; i <= N_L1; i++) for (int j = 0; j <= N_L1; j++) last_id[i][j] = -1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (seq < 6000) begin
      @(negedge clk);
      for (int f = 0; f < N_L1; f++) begin
        if (acc[f]) sent++;
        if (!iv[f] || acc[f]) begin
          iv[f] = ($urandom % 100) < 20 && seq < 6000;
          if (iv[f]) ip[f] = newpkt(f);
        end
      end
      if (l3acc) sent++;
      if (!l3iv || l3acc) begin
        l3iv = ($urandom % 100) < 20 && seq < 6000;
        if (l3iv) l3ip = newpkt(N_L1);
      end
      ordy   = N_L1'({$urandom} | {$urandom});
      l3ordy = ($urandom % 2) == 0;
    end
    // finish sending, then drain
    ordy = '1; l3ordy = 1;
    forever begin
      for (int f = 0; f < N_L1; f++) if (acc[f]) iv[f] = 1'b0;
      if (l3acc) l3iv = 1'b0;
      if (iv == '0 && !l3iv) break;
      @(negedge clk);
    end
    ordy = '1; l3ordy = 1;
    repeat (100) @(negedge clk);
    checks++;
    if (recv != seq) begin failures++; $display("FAIL: %0d packets sent, %0d received", seq, recv); end
    $display("packets=%0d received=%0d", seq, recv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog iv=%b l3iv=%b ir=%b recv=%0d seq=%0d busy=%b ov=%b l3ov=%b", iv, l3iv, ir, recv, seq, busy, ov, l3ov);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
