// tb_zspe: unit test of the zero-skip engine.
// Random 16-axon groups (spike density varied from empty to full) are
// pushed whenever the input buffer has room; the consumer pops at random.
// A reference queue holds, in order, the weight index of every axon whose
// spike bit is 1; each popped lane is compared with it. Also checked: an
// all-zero group produces nothing and costs one cycle (16 empty groups are
// consumed in at most 16 + 3 cycles), and the engine stalls (input waits)
// when the 19-entry FIFO cannot take a full group.
`timescale 1ns/1ps
module tb_zspe;
  import snn_pkg::*;
  logic clk = 0, rst_n = 1;
  initial rst_n = 0;   // a real falling edge (1 to 0) starts the asynchronous reset
  always #5 clk = ~clk;

  logic                 in_valid = 0, out_ready = 0;
  logic [GRP-1:0]       in_spike = '0;
  logic [GRP*IDXW-1:0]  in_idx = '0;
  logic [1:0]           in_free;
  logic [2:0]           out_cnt;
  logic [3:0][IDXW-1:0] out_idx;
  logic                 empty;

  zspe dut (.clk, .rst_n, .in_valid_i(in_valid), .in_spike_i(in_spike), .in_idx_i(in_idx),
            .in_free_o(in_free), .out_cnt_o(out_cnt), .out_idx_o(out_idx),
            .out_ready_i(out_ready), .empty_o(empty));

  int checks = 0, failures = 0;
  logic [IDXW-1:0] exp_q [$];
  int n_stall = 0, popped = 0;

  // consumer: compare every popped lane with the reference order
  always @(posedge clk) if (rst_n && out_ready && out_cnt != 0) begin
    for (int l = 0; l < int'(out_cnt); l++) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL: unexpected output %0h", out_idx[l]);
      end else begin
        logic [IDXW-1:0] e;
        e = exp_q.pop_front();
        if (out_idx[l] !== e) begin
          failures++;
          $display("FAIL: lane %0d got %0h expected %0h", l, out_idx[l], e);
        end
      end
      popped++;
    end
  end
  // a buffered group that cannot move into the FIFO: a stall
  always @(posedge clk) if (rst_n && dut.buf_cnt != 0 && !dut.take) n_stall++;

  task automatic push_group(int density, bit wait_room);
    logic [GRP-1:0] sp;
    logic [GRP*IDXW-1:0] ix;
    for (int k = 0; k < GRP; k++) sp[k] = (($urandom % 100) < density);
    ix = {$urandom, $urandom};
    @(negedge clk);
    while (wait_room && in_free == 0) @(negedge clk);
    in_valid = 1; in_spike = sp; in_idx = ix;
    for (int k = 0; k < GRP; k++) if (sp[k]) exp_q.push_back(ix[k*IDXW +: IDXW]);
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // 1) 16 empty groups, consumer always ready: one group per cycle
    begin
      int t0, t1;
      out_ready = 1;
      @(negedge clk);
      t0 = $time / 10;
      for (int g = 0; g < 16; g++) begin
        in_valid = 1; in_spike = '0; in_idx = {$urandom, $urandom};
        @(negedge clk);
        while (in_free == 0) @(negedge clk);
      end
      in_valid = 0;
      while (!empty) @(negedge clk);
      t1 = $time / 10;
      checks++;
      if (t1 - t0 > 19) begin failures++; $display("FAIL: 16 empty groups took %0d cycles", t1 - t0); end
      checks++;
      if (popped != 0) begin failures++; $display("FAIL: empty groups produced output"); end
    end
    // 2) random traffic with a slow, random consumer
    fork
      begin
        for (int g = 0; g < 300; g++) push_group(g % 3 == 0 ? 100 : int'($urandom % 100), 1);
      end
      begin
        repeat (4000) begin
          @(negedge clk);
          out_ready = ($urandom % 4) == 0;
        end
        out_ready = 1;
      end
    join_any
    out_ready = 1;
    while (!empty) @(negedge clk);
    repeat (3) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d indices never came out", exp_q.size()); end
    checks++;
    if (n_stall == 0) begin failures++; $display("FAIL: no stall happened"); end
    $display("popped=%0d stalls=%0d", popped, n_stall);
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
