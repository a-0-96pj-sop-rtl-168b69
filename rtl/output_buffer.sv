// output_buffer: data combiner and the four network output buffers.
//
// Cores configured as an output layer (out_en) send their spikes here
// instead of into the NoC, tagged with one of four network numbers. The
// data combiner accepts one spike per cycle from the 20 cores (lowest core
// first) and increments the 8-bit saturating counter of that output neuron
// in the network's 0.2 KB buffer (200 counters, neuron index < 200; higher
// indices are accepted and ignored). The paper gives four independent
// 0.2 KB buffers that store the results of different networks; what a byte
// holds (a spike count) is this design's choice.
//
// Bus (addr[31:28] = SEL_OBUF): read returns the counter at network
// addr[11:10], neuron addr[7:0]; a write with wdata[31] set clears all four
// buffers, any other write sets that counter to wdata[7:0].
module output_buffer
  import snn_pkg::*;
#(
  parameter int NNET  = 4,
  parameter int BYTES = 200
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  nbus_req_t                     bus_i,
  output nbus_rsp_t                     bus_o,
  input  logic [N_CORES-1:0]            in_valid_i,
  input  logic [N_CORES-1:0][1:0]       in_net_i,
  input  logic [N_CORES-1:0][NID_W-1:0] in_nid_i,
  output logic [N_CORES-1:0]            in_ready_o
);
  logic [7:0] cnt [NNET][BYTES];

  // data combiner: fixed priority
  logic [4:0] win;
  logic       any;
  always_comb begin
    win = '0;
    any = 1'b0;
    in_ready_o = '0;
    for (int c = N_CORES-1; c >= 0; c--) if (in_valid_i[c]) begin win = 5'(c); any = 1'b1; end
    if (any) in_ready_o[win] = 1'b1;
  end

  logic [1:0] bnet;
  logic [7:0] bidx;
  assign bnet = bus_i.addr[11:10];
  assign bidx = bus_i.addr[7:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < NNET; n++) for (int b = 0; b < BYTES; b++) cnt[n][b] <= '0;
    end else if (bus_i.req && bus_i.we && bus_i.wdata[31]) begin
      for (int n = 0; n < NNET; n++) for (int b = 0; b < BYTES; b++) cnt[n][b] <= '0;
    end else begin
      if (bus_i.req && bus_i.we && int'(bidx) < BYTES && int'(bnet) < NNET)
        cnt[bnet][bidx] <= bus_i.wdata[7:0];
      if (any && int'(in_nid_i[win]) < BYTES && int'(in_net_i[win]) < NNET
          && cnt[in_net_i[win]][in_nid_i[win][7:0]] != 8'hFF)
        cnt[in_net_i[win]][in_nid_i[win][7:0]] <= cnt[in_net_i[win]][in_nid_i[win][7:0]] + 1'b1;
    end
  end

  always_comb begin
    bus_o.ack   = bus_i.req;
    bus_o.rdata = (int'(bidx) < BYTES && int'(bnet) < NNET) ? 32'(cnt[bnet][bidx]) : '0;
  end
endmodule
