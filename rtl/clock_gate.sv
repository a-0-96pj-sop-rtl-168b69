// clock_gate: integrated clock-gating cell used by the cores and routers.
//
// The core clock is enabled by "core enable && !reset" and the router clock
// by "valid router ID && neighbour link enable"; this cell turns such an
// enable into a gated clock. The enable is captured by a latch that is
// transparent while the clock is low, and the latched value is ANDed with
// the clock, so a change of en_i can never cut a high phase short. The
// latch is intended: it is the standard glitch-free gate, and it is the one
// latch in the design. test_en_i forces the clock on (scan/test).
// Timing: gclk_o follows clk_i from the first rising edge after en_i was
// high during the preceding low phase.
module clock_gate (
  input  logic clk_i,
  input  logic en_i,
  input  logic test_en_i,
  output logic gclk_o
);
  logic en_latched;

  always_latch begin
    if (!clk_i) en_latched = en_i | test_en_i;
  end

  assign gclk_o = clk_i & en_latched;
endmodule
