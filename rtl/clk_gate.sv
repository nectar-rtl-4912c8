// clk_gate: integrated clock gate for one core's clock.
//
// The enable is captured by a latch that is transparent while clk_in is low
// and the gated clock is clk_in AND the latched enable, so the output never
// glitches when the enable changes. The latch is intended: it is the standard
// clock-gating cell, and in a real flow this module maps to the library ICG.
// Interface: clk_in, en, clk_out; clk_out follows clk_in from the first
// rising edge after en was high during the preceding low phase.
//
// The paper shows a clock gate after each core's divider; its insides are not
// described and the latch-based form is this design's choice.
module clk_gate (
  input  logic clk_in,
  input  logic en,
  output logic clk_out
);

  logic en_l;

  always_latch begin
    if (!clk_in) en_l = en;
  end

  assign clk_out = clk_in & en_l;

endmodule
