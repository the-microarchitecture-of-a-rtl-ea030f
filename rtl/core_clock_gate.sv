// core_clock_gate: clock gate of the core, driven by clock_en_i.
//
// The Pulpino core interface has a clock_en_i pin (with test_en_i to force
// the clock on during scan test): the platform stops the core clock with it
// when the core is idle. This is the usual latch-based gate: the enable is
// captured by a latch that is transparent while the clock is low, and ANDed
// with the clock, so the gated clock has no glitches and no truncated pulses.
// The latch is intended (the standard glitch-free gate); a technology library
// would replace this module by its integrated clock-gating cell.
// Follows the paper: the two pins exist. Own choice: everything else; the
// paper only lists the pins.
module core_clock_gate (
  input  logic clk_i,
  input  logic en_i,
  input  logic test_en_i,
  output logic clk_o
);
  logic en_latched;

  always_latch begin
    if (!clk_i) en_latched <= en_i || test_en_i;
  end

  assign clk_o = clk_i && en_latched;
endmodule
