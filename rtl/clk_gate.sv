// Glitch-free clock gate (the integrated clock-gating cell of a standard
// cell library, written out). The enable is captured by a latch that is
// transparent while the clock is low, so it can only change the gated clock
// at the next rising edge. The latch is intended; it is the cell's function.
// Used to gate the compute groups, the D2D link and the HBM subsystem from
// memory-mapped registers.
module clk_gate (
  input  logic clk_i,
  input  logic en_i,
  input  logic test_en_i,
  output logic clk_o
);
  logic en_latch;
  always_latch begin
    if (!clk_i) en_latch = en_i | test_en_i;
  end
  assign clk_o = clk_i & en_latch;
endmodule
