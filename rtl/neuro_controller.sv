// neuro_controller: neuromorphic controller that runs a network for a
// number of timesteps.
//
// Configuration registers (bus, addr[31:28] = SEL_CTRL, word offset
// addr[3:0]): 0 CTRL (write 1 to start, 2 to abort), 1 TIMESTEPS,
// 2 CORE_MASK (cores whose completion is awaited), 3 STATUS (read only:
// [0] done, [1] busy, [4:2] state, [31:16] timesteps run) - the network
// state register.
// State machine and scheduling logic: START -> SWITCH (one-cycle ts_start
// to every core and router: spike banks swap, cores begin the timestep)
// -> RUN (until every masked core reports done) -> DRAIN (until the NoC and
// the IDMA are idle, so that every spike of this timestep has reached its
// destination bank) -> SWITCH again, or FINISH after TIMESTEPS timesteps,
// which pulses net_done_o. ts_start_o and net_done_o are also the wake-up
// events of the CPU. The paper names the register groups and a state
// machine; the states and their order are this design's.
module neuro_controller
  import snn_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  nbus_req_t          bus_i,
  output nbus_rsp_t          bus_o,
  input  logic [N_CORES-1:0] core_done_i,
  input  logic               noc_busy_i,
  input  logic               idma_busy_i,
  output logic               ts_start_o,
  output logic               net_done_o,
  output logic               busy_o
);
  typedef enum logic [2:0] { IDLE, SWITCH, RUN, DRAIN, FINISH } st_e;
  st_e                st;
  logic [15:0]        timesteps, ts_cnt;
  logic [N_CORES-1:0] mask;
  logic               done_flag;
  logic [3:0]         off;
  assign off = bus_i.addr[3:0];

  logic wr_ctrl;
  assign wr_ctrl = bus_i.req && bus_i.we && off == 4'd0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= IDLE;
      timesteps <= 16'd1;
      ts_cnt    <= '0;
      mask      <= '0;
      done_flag <= 1'b0;
    end else begin
      if (bus_i.req && bus_i.we && off == 4'd1) timesteps <= bus_i.wdata[15:0];
      if (bus_i.req && bus_i.we && off == 4'd2) mask      <= bus_i.wdata[N_CORES-1:0];
      if (wr_ctrl && bus_i.wdata[1]) begin
        st <= IDLE;
      end else begin
        unique case (st)
          IDLE: if (wr_ctrl && bus_i.wdata[0]) begin
            ts_cnt    <= '0;
            done_flag <= 1'b0;
            st        <= (timesteps == 0) ? FINISH : SWITCH;
          end
          SWITCH: begin
            ts_cnt <= ts_cnt + 1'b1;
            st     <= RUN;
          end
          RUN:    if ((core_done_i | ~mask) == '1) st <= DRAIN;
          DRAIN:  if (!noc_busy_i && !idma_busy_i) st <= (ts_cnt >= timesteps) ? FINISH : SWITCH;
          FINISH: begin
            done_flag <= 1'b1;
            st        <= IDLE;
          end
          default: st <= IDLE;
        endcase
      end
    end
  end

  assign ts_start_o = (st == SWITCH);
  assign net_done_o = (st == FINISH);
  assign busy_o     = (st != IDLE);

  always_comb begin
    bus_o.ack = bus_i.req;
    unique case (off)
      4'd1:    bus_o.rdata = 32'(timesteps);
      4'd2:    bus_o.rdata = 32'(mask);
      4'd3:    bus_o.rdata = {ts_cnt, 11'd0, st, busy_o, done_flag};
      default: bus_o.rdata = '0;
    endcase
  end
endmodule
