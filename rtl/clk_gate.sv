// clk_gate -- latch-based integrated clock gate.
//
// The enable is captured by a latch that is transparent while the clock is
// low, so it can only change the gated clock between rising edges and no
// glitch reaches gclk_o.  test_en_i forces the clock on.  This is the usual
// standard-cell ICG structure; an ASIC flow maps it to the library cell.
module clk_gate (
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
