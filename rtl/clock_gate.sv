// clock_gate: latch-based integrated clock gate.
//
// The enable is captured by a latch that is transparent while the clock is
// low, so it can only change the gated clock between pulses: clk_o =
// clk_i & en_latched, free of glitches. test_en_i forces the clock on.
// One gate per power domain (SNE, CUTIE, cluster) as in the paper's clock
// gating block; the circuit is the usual standard-cell ICG, written in RTL.
// The latch is intentional.
module clock_gate (
  input  logic clk_i,
  input  logic en_i,
  input  logic test_en_i,
  output logic clk_o
);
  logic en_l;
  always_latch begin
    if (!clk_i) en_l = en_i | test_en_i;
  end
  assign clk_o = clk_i & en_l;
endmodule
