// clock_gate: integrated clock-gating cell.
//
// Fig. 2 of the paper shows clock-gating cells on the cluster clock and the
// text gates core and accelerator clocks. This is the usual latch-based
// cell: the enable is sampled while the clock is low and ANDed with the
// clock, so the gated clock has no glitches. test_en_i forces the clock on.
// The enable must be stable around the rising edge; it may change while
// the clock is high without effect until the next low phase.
module clock_gate (
  input  logic clk_i,
  input  logic en_i,
  input  logic test_en_i,
  output logic clk_o
);
  logic en_l;
  always_latch if (!clk_i) en_l = en_i || test_en_i;
  assign clk_o = clk_i && en_l;
endmodule
