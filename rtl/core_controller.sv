// core_controller: sequencer of one neuromorphic core for a timestep.
//
// On ts_start_i the core works through its active neurons n = 0 ..
// neurons-1. For each neuron it
//   1. reads V(t-1) through the membrane-potential DMA port and loads it into
//      the V_MP register of the synapse engines (MPRD),
//   2. waits until the weight-index cache holds the neuron's index row (WAITW),
//   3. streams the 16-axon groups g = 0 .. n_groups(synapses)-1 from the
//      spike and weight-index caches into the zero-skip engine, one group per
//      cycle while the engine's input buffer has room (STREAM),
//   4. waits until the zero-skip engine and both synapse engines are empty,
//      then frees the index row (DRAIN),
//   5. registers the neuron updater's result (UPD) and
//   6. writes V(t) back and, if the neuron fired, sends its spike to the
//      router or output buffer (WB).
// Steps 3 to 5 form the caches -> ZSPE -> SPE -> neuron-updater pipeline;
// only one neuron is in flight, which is this design's simplification of the
// paper's four-level pipeline (the IDMA meanwhile fills the next index row).
// done_o is high from the end of the last neuron to the next ts_start_i.
// Cache reads are synchronous, so a group issued in cycle t enters the
// zero-skip engine in cycle t+1.
module core_controller
  import snn_pkg::*;
#(
  parameter int AXONS_P = AXONS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      ts_start_i,
  input  logic [NID_W:0]            neurons_i,
  input  logic [NID_W:0]            synapses_i,
  // caches
  output logic [$clog2(AXONS_P/GRP)-1:0] grp_addr_o,
  input  logic                      wi_rfull_i,
  output logic                      rd_release_o,
  // zero-skip engine
  output logic                      z_valid_o,
  input  logic [1:0]                z_free_i,
  input  logic                      z_empty_i,
  // synapse engines
  input  logic                      spe_busy_i,
  output logic                      spe_load_o,
  output logic signed [VW-1:0]      spe_load_val_o,
  // neuron updater
  input  logic signed [VW-1:0]      v_new_i,
  input  logic                      spike_i,
  // membrane-potential port
  output logic                      mp_rd_req_o,
  output logic                      mp_wr_req_o,
  output logic [NID_W-1:0]          mp_addr_o,
  output logic signed [VW-1:0]      mp_wdata_o,
  input  logic                      mp_ack_i,
  input  logic signed [VW-1:0]      mp_rdata_i,
  // spike output
  output logic                      spk_valid_o,
  output logic [NID_W-1:0]          spk_nid_o,
  input  logic                      spk_ready_i,
  output logic                      done_o,
  output logic                      busy_o
);
  typedef enum logic [2:0] { IDLE, MPRD, WAITW, STREAM, DRAIN, UPD, WB } st_e;
  localparam int GA = $clog2(AXONS_P/GRP);

  st_e              st;
  logic [NID_W:0]   n;
  logic [GA:0]      g;
  logic [GA:0]      ngrp;
  logic             issued_q;
  logic signed [VW-1:0] v_q;
  logic             spk_q, mp_done, spk_done;

  assign ngrp = (GA+1)'(n_groups(synapses_i));

  logic issue;
  assign issue = (st == STREAM) && (g < ngrp) && (2'(z_free_i) > 2'(issued_q));

  assign grp_addr_o     = g[GA-1:0];
  assign z_valid_o      = issued_q;
  assign spe_load_o     = (st == MPRD) && mp_ack_i;
  assign spe_load_val_o = mp_rdata_i;
  assign mp_rd_req_o    = (st == MPRD);
  assign mp_wr_req_o    = (st == WB) && !mp_done;
  assign mp_addr_o      = n[NID_W-1:0];
  assign mp_wdata_o     = v_q;
  assign spk_valid_o    = (st == WB) && spk_q && !spk_done;
  assign spk_nid_o      = n[NID_W-1:0];
  assign busy_o         = (st != IDLE);

  logic md, sd;
  assign md = mp_done  || mp_ack_i;
  assign sd = spk_done || !spk_q || spk_ready_i;

  logic drained;
  assign drained = !issued_q && z_empty_i && !spe_busy_i;
  assign rd_release_o = (st == DRAIN) && drained;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= IDLE;
      n        <= '0;
      g        <= '0;
      issued_q <= 1'b0;
      v_q      <= '0;
      spk_q    <= 1'b0;
      mp_done  <= 1'b0;
      spk_done <= 1'b0;
      done_o   <= 1'b0;
    end else begin
      issued_q <= issue;
      unique case (st)
        IDLE: if (ts_start_i) begin
          done_o <= 1'b0;
          n      <= '0;
          st     <= (neurons_i == 0) ? IDLE : MPRD;
          if (neurons_i == 0) done_o <= 1'b1;
        end
        MPRD:   if (mp_ack_i) st <= WAITW;
        WAITW:  if (wi_rfull_i) begin g <= '0; st <= STREAM; end
        STREAM: begin
          if (issue) g <= g + 1'b1;
          if (g >= ngrp) st <= DRAIN;
        end
        DRAIN:  if (drained) st <= UPD;
        UPD: begin
          v_q      <= v_new_i;
          spk_q    <= spike_i;
          mp_done  <= 1'b0;
          spk_done <= 1'b0;
          st       <= WB;
        end
        WB: begin
          mp_done  <= md;
          spk_done <= sd;
          if (md && sd) begin
            if (n + 1'b1 >= neurons_i) begin
              st     <= IDLE;
              done_o <= 1'b1;
            end else begin
              st <= MPRD;
            end
            n <= n + 1'b1;
          end
        end
        default: st <= IDLE;
      endcase
    end
  end
endmodule
