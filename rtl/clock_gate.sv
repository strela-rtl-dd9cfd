// clock_gate: glitch-free clock gate used at three levels of the accelerator
// (whole PE array, single PE, single Elastic Buffer).
//
// The enable is captured by a latch that is transparent while the clock is
// low, and the latched enable is ANDed with the clock, so the gated clock can
// only start or stop while the clock is low and never produces a short pulse.
// This is the usual integrated clock-gating cell; an ASIC flow would map it to
// the library's own cell. The paper states that clock gates are placed at
// these hierarchy levels; the structure of the gate is this design's choice.
//
// Timing: en_i sampled during the low phase before a rising edge decides
// whether that edge reaches clk_o.
module clock_gate (
  input  logic clk_i,
  input  logic en_i,
  output logic clk_o
);
  logic en_latched;

  always_latch begin
    if (!clk_i) en_latched = en_i;
  end

  assign clk_o = clk_i & en_latched;
endmodule
