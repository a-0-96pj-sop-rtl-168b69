// tb_neuron_updater: unit test of leak, threshold compare and the three
// reset modes. Random membrane potentials around the threshold (including
// exact equality and negative values) are applied and the outputs are
// compared with an integer model: v = V - leak; spike = v >= threshold;
// reset to 0, subtract threshold, or keep v.
`timescale 1ns/1ps
module tb_neuron_updater;
  import snn_pkg::*;
  logic signed [VW-1:0] v_int, leak, vth, v_new;
  reset_mode_e          mode;
  logic                 spike;

  neuron_updater dut (.v_int_i(v_int), .leak_i(leak), .threshold_i(vth), .reset_mode_i(mode),
                      .v_new_o(v_new), .spike_o(spike));

  int checks = 0, failures = 0;
  int n_fire = 0, n_eq = 0;

  initial begin
    for (int i = 0; i < 3000; i++) begin
      longint v, e;
      bit fire;
      vth   = VW'(int'($urandom % 2000) - 200);
      leak  = VW'(int'($urandom % 50));
      case (i % 4)
        0: v_int = vth + leak;                                  // exactly at threshold
        default: v_int = vth + leak + VW'(int'($urandom % 400) - 200);
      endcase
      mode  = reset_mode_e'($urandom % 3);
      #1;
      v     = longint'(v_int) - longint'(leak);
      fire  = v >= longint'(vth);
      e     = !fire ? v : (mode == RST_ZERO) ? 0 : (mode == RST_SUB) ? v - longint'(vth) : v;
      if (fire) n_fire++;
      if (v == longint'(vth)) n_eq++;
      checks++;
      if (spike !== fire || longint'(v_new) != e) begin
        failures++;
        if (failures < 10)
          $display("FAIL: V=%0d leak=%0d th=%0d mode=%0d -> %0d/%0b, expected %0d/%0b",
                   v_int, leak, vth, mode, v_new, spike, e, fire);
      end
    end
    $display("fired=%0d at_threshold=%0d", n_fire, n_eq);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
