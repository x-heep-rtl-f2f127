// clock_gate: technology-independent integrated clock gate.
//
// The enable is captured by a latch that is transparent while the clock is
// low, so the gated clock only ever shows whole high pulses. In an ASIC flow
// this module is replaced by the library's clock-gating cell; the latch
// reported by lint tools is that intended latch. test_en_i forces the clock
// on (scan).
module clock_gate (
  input  logic clk_i,
  input  logic en_i,
  input  logic test_en_i,
  output logic clk_o
);
  logic en_latched;

  always_latch begin
    if (!clk_i) en_latched = en_i | test_en_i;
  end

  assign clk_o = clk_i & en_latched;
endmodule
