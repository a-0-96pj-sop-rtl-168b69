// neuron_updater: leak, threshold, fire and reset of one neuron.
//
// Takes the integrated membrane potential V = V(t-1) + sum of synaptic
// weights of the neuron's active inputs (from the V_MP register of the
// synapse engines), subtracts the leak, and fires when the result reaches
// the threshold. After a spike the potential is reset according to the
// reset mode: to zero, by subtracting the threshold, or not at all.
// Purely combinational; the core controller registers the result. The
// paper names integration, leaking, resetting and firing; the subtractive
// leak and the three reset modes are this design's choice.
module neuron_updater
  import snn_pkg::*;
(
  input  logic signed [VW-1:0] v_int_i,
  input  logic signed [VW-1:0] leak_i,
  input  logic signed [VW-1:0] threshold_i,
  input  reset_mode_e          reset_mode_i,
  output logic signed [VW-1:0] v_new_o,
  output logic                 spike_o
);
  logic signed [VW-1:0] v_leak;
  always_comb begin
    v_leak  = v_int_i - leak_i;
    spike_o = (v_leak >= threshold_i);
    v_new_o = v_leak;
    if (spike_o) begin
      unique case (reset_mode_i)
        RST_ZERO: v_new_o = '0;
        RST_SUB:  v_new_o = v_leak - threshold_i;
        default:  v_new_o = v_leak;
      endcase
    end
  end
endmodule
