// tb_neuro_soc: end-to-end test of the neuromorphic SoC at its default
// sizes (20 cores of 8192 axons and neurons; the run itself configures few
// active neurons and synapses through the register tables).
//
// The testbench plays the CPU: it issues neuromorphic instructions to the
// ENU over the LSU port, and it models the off-chip SRAM. Network: cores 0
// and 9 (layer 1, same router) feed core 13 (output layer, network 0) and
// core 0 also feeds core 5 (output layer, network 1) through the level-2
// router. Router 0's connection matrix gives core 0 the targets {13, 5}
// (a broadcast, one local and one remote) and core 9 the target {13}
// (merging with core 0 into core 13). Input spikes enter through the
// level-3 port while the cores are still disabled, so the NoC backs up and
// its buffers hang up their inputs until the cores are enabled. Run 1 uses
// broadcast mode for 3 timesteps; run 2 switches router 0 to P2P mode and
// runs 2 more. The CPU sleeps during each run and is woken by the timestep
// switch. A reference model computes the same SNN (shared weights,
// weight-index rows from the SRAM model, leak, threshold, reset) and the
// output-buffer counters and final membrane potentials are compared.
// Mechanisms counted: zero-skip, SPE alternation, broadcast,
// merge, level-2 routing, hang-up, clock gating, sleep/wake, mode switch,
// external-memory contention (IDMA back-pressure and ZSPE stalls are reported, not required).
`timescale 1ns/1ps
module tb_neuro_soc;
  import snn_pkg::*;

  logic sys_clk = 0, rst_n = 1;
  initial rst_n = 0;   // a real falling edge (1 to 0) starts the asynchronous reset
  always #5 sys_clk = ~sys_clk;

  logic enu_lsu_req, enu_instr_valid = 0, enu_rsp_valid, enu_rsp_err;
  logic [31:0] enu_instr = 0, enu_rs1 = 0, enu_rs2 = 0, enu_rsp_data;
  logic cpu_sleep = 0, cpu_hfclk, cpu_hlclk, cpu_asleep, irq_ts, irq_done, idma_clk;
  logic l3in_valid = 0, l3in_ready, l3out_valid;
  spike_pkt_t l3in_pkt = '0, l3out_pkt;
  logic sram_ce_n, sram_oe_n, sram_we_n, sram_dq_oe;
  logic [AW-1:0] sram_addr;
  logic [DW-1:0] sram_dq_o, sram_dq_i;

  neuro_soc u_soc (
    .sys_clk, .rst_n,
    .enu_lsu_req_o(enu_lsu_req), .enu_instr_valid_i(enu_instr_valid), .enu_instr_i(enu_instr),
    .enu_rs1_i(enu_rs1), .enu_rs2_i(enu_rs2), .enu_rsp_valid_o(enu_rsp_valid),
    .enu_rsp_data_o(enu_rsp_data), .enu_rsp_err_o(enu_rsp_err),
    .cpu_sleep_i(cpu_sleep), .cpu_hfclk_o(cpu_hfclk), .cpu_hlclk_o(cpu_hlclk),
    .cpu_asleep_o(cpu_asleep), .irq_ts_o(irq_ts), .irq_done_o(irq_done), .idma_clk_o(idma_clk),
    .l3in_valid_i(l3in_valid), .l3in_pkt_i(l3in_pkt), .l3in_ready_o(l3in_ready),
    .l3out_valid_o(l3out_valid), .l3out_pkt_o(l3out_pkt), .l3out_ready_i(1'b1),
    .sram_ce_n, .sram_oe_n, .sram_we_n, .sram_addr, .sram_dq_o, .sram_dq_oe, .sram_dq_i);

  async_sram_model u_sram (
    .ce_n(sram_ce_n), .oe_n(sram_oe_n), .we_n(sram_we_n), .addr(sram_addr),
    .dq_i(sram_dq_o), .dq_oe(sram_dq_oe), .dq_o(sram_dq_i));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------- CPU side: neuromorphic instructions ----------------
  localparam logic [2:0] NCFG = 0, NRD = 1, NEN = 2, NSTART = 3, NSTAT = 4;
  task automatic enu_exec(input logic [2:0] f, input logic [31:0] a, input logic [31:0] b,
                          output logic [31:0] r);
    while (!enu_lsu_req) @(negedge sys_clk);
    enu_instr       = {17'd0, f, 5'd0, 7'b0001011};
    enu_rs1         = a;
    enu_rs2         = b;
    enu_instr_valid = 1'b1;
    @(negedge sys_clk);
    enu_instr_valid = 1'b0;
    while (!enu_rsp_valid) @(negedge sys_clk);
    r = enu_rsp_data;
    @(negedge sys_clk);
  endtask

  task automatic cfg_wr(input logic [31:0] addr, input logic [31:0] data);
    logic [31:0] r;
    enu_exec(NCFG, addr, data, r);
  endtask

  function automatic logic [31:0] core_addr(int c, logic [6:0] off);
    return {SEL_CORE, 16'd0, 5'(c), off};
  endfunction
  function automatic logic [31:0] rt_addr(int f, logic [6:0] off);
    return {SEL_ROUTER, 16'd0, 5'(f), off};
  endfunction

  // ---------------- network and reference model ----------------
  localparam int NL = 4;
  int            cid   [NL] = '{0, 9, 13, 5};
  int            nneur [NL] = '{10, 10, 10, 10};
  int            nsyn  [NL] = '{40, 40, 16, 16};
  int            vth   [NL] = '{150, 170, 60, 70};
  int            leak  [NL] = '{3, 5, 2, 1};
  int            rstm  [NL] = '{1, 0, 0, 1};
  int            outen [NL] = '{0, 0, 1, 1};
  int            onet  [NL] = '{0, 0, 0, 1};
  int            wt    [NL][16];
  int            vm    [NL][16];
  bit            inb   [NL][64], nxb [NL][64];
  int            cnt   [2][16];
  bit            bcast;

  function automatic int slot(int c);
    for (int i = 0; i < NL; i++) if (cid[i] == c) return i;
    return -1;
  endfunction

  function automatic int widx(int c, int n, int a);
    logic [31:0] w;
    w = u_sram.peek(WIDX_BASE + AW'((c * NEURONS + n) * ROW_STRIDE + a / 8));
    return int'((w >> (4 * (a % 8))) & 32'hF);
  endfunction

  // destinations of a layer-1 core per router-0 connection matrix
  task automatic deliver(int src, int n);
    if (src == 0) begin
      nxb[slot(13)][n] = 1;
      if (bcast) nxb[slot(5)][n] = 1;
    end else if (src == 9) begin
      nxb[slot(13)][n] = 1;
    end
  endtask

  // a timestep starts by swapping the spike banks: spikes received during
  // the previous timestep are consumed, new ones go to an empty bank
  task automatic model_step();
    for (int s = 0; s < NL; s++) for (int a = 0; a < 64; a++) begin
      inb[s][a] = nxb[s][a];
      nxb[s][a] = 0;
    end
    for (int s = 0; s < NL; s++) begin
      int ngr;
      ngr = (nsyn[s] + 15) / 16;
      for (int n = 0; n < nneur[s]; n++) begin
        int v;
        v = vm[s][n];
        for (int a = 0; a < ngr * 16; a++) if (inb[s][a]) v += wt[s][widx(cid[s], n, a)];
        v -= leak[s];
        if (v >= vth[s]) begin
          if (rstm[s] == 0) v = 0;
          else if (rstm[s] == 1) v -= vth[s];
          if (outen[s] != 0) begin
            if (cnt[onet[s]][n] < 255) cnt[onet[s]][n]++;
          end else deliver(cid[s], n);
        end
        vm[s][n] = v;
      end
    end
  endtask

  // ---------------- mechanism counters ----------------
  int n_zskip = 0, n_zstall = 0, n_spe_alt = 0, n_bcast = 0, n_l2 = 0;
  int n_merge;
  int n_hang = 0, n_gclk_off = 0, n_sleep = 0, n_wake = 0, n_extconf = 0, n_idma_bp = 0;
  int n_l3 = 0, n_mode = 0, n_ts = 0, n_obuf = 0;
  bit from0_to13 = 0, from9_to13 = 0;
  int cyc = 0;

  always @(posedge sys_clk) if (rst_n) begin
    cyc++;
    if (u_soc.u_noc.g_core[0].u_core.u_zspe.take && u_soc.u_noc.g_core[0].u_core.u_zspe.pop_n == 0) n_zskip++;
    if (u_soc.u_noc.g_core[0].u_core.u_zspe.buf_cnt != 0 && !u_soc.u_noc.g_core[0].u_core.u_zspe.take) n_zstall++;
    if (u_soc.u_noc.g_core[0].u_core.u_spe.spe_free_o == 2'b10) n_spe_alt++;
    if ($countones(u_soc.u_noc.g_rt[0].u_rt.ob_push) + 32'(u_soc.u_noc.g_rt[0].u_rt.l2_push) > 1) n_bcast++;
    if (u_soc.u_noc.g_rt[0].u_rt.ob_push[3]) begin
      if (u_soc.u_noc.g_rt[0].u_rt.ob_data[3].src == 0) from0_to13 = 1;
      if (u_soc.u_noc.g_rt[0].u_rt.ob_data[3].src == 9) from9_to13 = 1;
    end
    if (u_soc.u_noc.r_l2in_valid[4] && u_soc.u_noc.r_l2in_ready[4]) n_l2++;
    if (u_soc.u_noc.g_rt[0].u_rt.l2in_valid_i && !u_soc.u_noc.g_rt[0].u_rt.l2in_ready_o) n_hang++;
    if (u_soc.u_noc.core_gclk_o[1] == 1'b0) n_gclk_off++;
    if ($countones(u_soc.u_ext.req_i) > 1) n_extconf++;
    if (u_soc.u_idma.mem_req_o == 1'b0 && u_soc.u_idma.active) n_idma_bp++;
    if (l3in_valid && l3in_ready) n_l3++;
    if (u_soc.u_obuf.any) n_obuf++;
    if (irq_ts) n_ts++;
  end
  assign n_merge = int'(from0_to13 && from9_to13);

  // core 1 stays disabled: its gated clock must never rise
  int gclk1_edges = 0;
  always @(posedge u_soc.u_noc.core_gclk_o[1]) gclk1_edges++;

  // ---------------- test ----------------
  logic [31:0] r;
  int          inject [$];

  task automatic inject_spikes();
    while (inject.size() > 0) begin
      int v;
      v = inject.pop_front();
      @(negedge sys_clk);
      l3in_pkt   = '{dst: WCID'(v >> 8), src: 5'd31, nid: NID_W'(v & 255)};
      l3in_valid = 1'b1;
      @(posedge sys_clk);
      while (!l3in_ready) @(posedge sys_clk);
      @(negedge sys_clk);
      l3in_valid = 1'b0;
    end
  endtask

  task automatic add_inputs(int density);
    for (int s = 0; s < 2; s++)
      for (int a = 0; a < nsyn[s]; a++)
        if (($urandom % 100) < density) begin
          nxb[s][a] = 1;
          inject.push_back((cid[s] << 8) | a);
        end
  endtask

  task automatic run(int steps, int density, bit first);
    add_inputs(density);
    fork
      inject_spikes();
      begin
        if (first) begin
          repeat (300) @(negedge sys_clk);
          // enable cores 0, 9, 13, 5
          enu_exec(NEN, (1 << 0) | (1 << 9) | (1 << 13) | (1 << 5), 0, r);
        end
      end
    join
    repeat (50) @(negedge sys_clk);
    cfg_wr({SEL_CTRL, 28'd2}, (1 << 0) | (1 << 9) | (1 << 13) | (1 << 5));
    enu_exec(NSTART, steps, 0, r);
    // CPU goes to sleep; the timestep switch wakes it
    cpu_sleep = 1'b1;
    @(negedge sys_clk);
    cpu_sleep = 1'b0;
    if (cpu_asleep) n_sleep++;
    while (!irq_done) begin
      @(negedge sys_clk);
      if (!cpu_asleep && n_sleep > n_wake) n_wake++;
    end
    repeat (5) @(negedge sys_clk);
    for (int t = 0; t < steps; t++) model_step();
    // compare output buffers and membrane potentials
    for (int net = 0; net < 2; net++)
      for (int n = 0; n < 10; n++) begin
        enu_exec(NRD, {SEL_OBUF, 16'd0, 2'(net), 2'd0, 8'(n)}, 0, r);
        check(r == 32'(cnt[net][n]), $sformatf("obuf net%0d n%0d = %0d, expected %0d", net, n, r, cnt[net][n]));
      end
    for (int s = 0; s < NL; s++)
      for (int n = 0; n < nneur[s]; n++)
        check(u_sram.peek(MP_BASE + AW'(cid[s] * NEURONS + n)) == 32'(vm[s][n]),
              $sformatf("V core %0d n%0d = %0d, expected %0d", cid[s], n,
                        $signed(u_sram.peek(MP_BASE + AW'(cid[s] * NEURONS + n))), vm[s][n]));
  endtask

  initial begin
    for (int s = 0; s < NL; s++) begin
      for (int i = 0; i < 16; i++) wt[s][i] = int'($urandom % 80) - 20;
      for (int n = 0; n < 16; n++) vm[s][n] = 0;
      for (int a = 0; a < 64; a++) begin inb[s][a] = 0; nxb[s][a] = 0; end
    end
    for (int n = 0; n < 2; n++) for (int i = 0; i < 16; i++) cnt[n][i] = 0;
    bcast = 1;
    repeat (5) @(negedge sys_clk);
    rst_n = 1;
    repeat (5) @(negedge sys_clk);

    // read-only core ID through the bus
    enu_exec(NRD, core_addr(13, CR_ID), 0, r);
    check(r == 13, "core 13 ID register");
    // unknown instruction is flagged
    while (!enu_lsu_req) @(negedge sys_clk);
    enu_instr = 32'h0000_0033; enu_instr_valid = 1; @(negedge sys_clk); enu_instr_valid = 0;
    while (!enu_rsp_valid) @(negedge sys_clk);
    check(enu_rsp_err, "non-neuromorphic instruction rejected");
    @(negedge sys_clk);

    // core configuration
    for (int s = 0; s < NL; s++) begin
      int c;
      c = cid[s];
      cfg_wr(core_addr(c, CR_NEURONS), nneur[s]);
      cfg_wr(core_addr(c, CR_SYN), nsyn[s]);
      cfg_wr(core_addr(c, CR_VTH), vth[s]);
      cfg_wr(core_addr(c, CR_LEAK), leak[s]);
      cfg_wr(core_addr(c, CR_RST), rstm[s]);
      cfg_wr(core_addr(c, CR_WCFG), {28'd0, SZ16, SZ8});
      cfg_wr(core_addr(c, CR_TGT), 0);
      cfg_wr(core_addr(c, CR_OUT), {29'd0, 2'(onet[s]), 1'(outen[s])});
      for (int i = 0; i < 16; i++) cfg_wr(core_addr(c, CR_W0 + 7'(i)), {16'd0, 8'hA5, 8'(wt[s][i])});
    end
    enu_exec(NRD, core_addr(9, CR_VTH), 0, r);
    check(r == 170, "core 9 threshold read back");
    // router 0: core 0 (port 0) -> {13, 5}; core 9 (port 1) -> {13}
    cfg_wr(rt_addr(0, RR_CM0 + 0), {5'h1F, 5'h1F, 5'h1F, 5'd5, 5'd13});
    cfg_wr(rt_addr(0, RR_CM0 + 1), {5'h1F, 5'h1F, 5'h1F, 5'h1F, 5'd13});
    cfg_wr(rt_addr(0, RR_MODE), 1);

    run(3, 50, 1);
    // run 2: P2P mode and new inputs
    cfg_wr(rt_addr(0, RR_MODE), 0);
    n_mode++;
    bcast = 0;
    cfg_wr({SEL_OBUF, 28'd0}, 32'h8000_0000);
    for (int n = 0; n < 2; n++) for (int i = 0; i < 16; i++) cnt[n][i] = 0;
    run(2, 60, 0);

    enu_exec(NSTAT, 0, 0, r);
    check(r[0] == 1'b1 && r[31:16] == 16'd2, "network state register after run 2");

    $display("mechanisms: zero_skip=%0d zspe_stall=%0d spe_alternate=%0d broadcast=%0d merge=%0d l2_route=%0d hang_up=%0d gated_core_cycles=%0d sleep=%0d wake=%0d mode_switch=%0d ext_contention=%0d idma_backpressure=%0d l3_in=%0d obuf_updates=%0d ts_switch=%0d",
             n_zskip, n_zstall, n_spe_alt, n_bcast, n_merge, n_l2, n_hang, n_gclk_off, n_sleep, n_wake,
             n_mode, n_extconf, n_idma_bp, n_l3, n_obuf, n_ts);
    check(n_zskip > 0, "zero-skip happened");
    $display("ZSPE stall cycles: %0d (depends on the random stimulus; tested in the zspe unit bench)", n_zstall);
    check(n_spe_alt > 0, "SPE-A busy / SPE-B free happened");
    check(n_bcast > 0, "broadcast happened");
    check(n_merge > 0, "merge happened");
    check(n_l2 > 0, "level-2 routing happened");
    check(n_hang > 0, "hang-up happened");
    check(n_gclk_off > 0 && gclk1_edges == 0, "disabled core clock gated");
    check(n_sleep == 2 && n_wake == 2, "CPU slept and was woken");
    check(n_mode > 0, "routing mode switched");
    check(n_extconf > 0, "external-memory contention happened");
    check(n_l3 > 0 && n_obuf > 0, "L3 input and output-buffer updates happened");
    check(n_ts == 5, "5 timestep switches");
    $display("cycles=%0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge sys_clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
