// tb_sync_fifo: unit test of the router buffer FIFO (default 32-bit data,
// depth 4). Random push and pop; every popped word is compared with a
// reference queue; in_ready_o must fall exactly when 4 words are held and
// count_o must always match the queue length. Full and empty are both
// reached.
`timescale 1ns/1ps
module tb_sync_fifo;
  logic clk = 0, rst_n = 1;
  initial rst_n = 0;   // a real falling edge (1 to 0) starts the asynchronous reset
  always #5 clk = ~clk;

  logic        in_valid = 0, out_ready = 0, in_ready, out_valid;
  logic [31:0] in_data = '0, out_data;
  logic [2:0]  count;

  sync_fifo dut (.clk, .rst_n, .in_valid_i(in_valid), .in_data_i(in_data), .in_ready_o(in_ready),
                 .out_valid_o(out_valid), .out_data_o(out_data), .out_ready_i(out_ready),
                 .count_o(count));

  int checks = 0, failures = 0, n_full = 0, n_empty = 0;
  logic [31:0] q [$];

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (int'(count) != q.size() || in_ready != (q.size() < 4) || out_valid != (q.size() > 0)) begin
      failures++;
      $display("FAIL: count=%0d ready=%0b valid=%0b, queue holds %0d", count, in_ready, out_valid, q.size());
    end
    if (q.size() == 4) n_full++;
    if (q.size() == 0) n_empty++;
    if (out_valid && out_ready) begin
      checks++;
      if (q.size() == 0 || out_data !== q[0]) begin
        failures++;
        $display("FAIL: popped %h", out_data);
      end
      if (q.size() != 0) void'(q.pop_front());
    end
    if (in_valid && in_ready) q.push_back(in_data);
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      // phases biased towards filling and towards draining
      in_valid  = ($urandom % 100) < ((i / 300) % 2 ? 80 : 30);
      out_ready = ($urandom % 100) < ((i / 300) % 2 ? 30 : 80);
      in_data   = $urandom;
    end
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (n_full == 0 || n_empty == 0) begin failures++; $display("FAIL: full or empty never reached"); end
    $display("full=%0d empty=%0d", n_full, n_empty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
