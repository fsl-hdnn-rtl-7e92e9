// clk_gate: behavioural model of an integrated clock-gating cell.
//
// Not synthesisable logic in the usual sense: on silicon this is a library
// ICG cell. The model is the standard latch-and-AND gate: the enable is
// captured by a latch that is transparent while clk is low, so gclk can only
// start or stop on a whole clock pulse, without glitches. test_en forces the
// clock on (scan). The published chip names clock gating among its
// peripherals; the cell type is this design's assumption.
module clk_gate (
  input  logic clk,
  input  logic en,
  input  logic test_en,
  output logic gclk
);
  logic en_l;
  always_latch
    if (!clk) en_l = en || test_en;
  assign gclk = clk && en_l;
endmodule
