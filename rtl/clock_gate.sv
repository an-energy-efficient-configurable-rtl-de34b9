// Integrated clock gate: the enable is captured by a latch that is
// transparent while the clock is low and ANDed with the clock, so the gated
// clock has no glitches. The source gives each of the polynomial cache /
// arithmetic, Keccak and sampler blocks a configurable clock gate; the
// latch-and-AND cell is the usual standard-cell structure, chosen here.
// The latch is intended, and synthesis reports it as one latch bit.
module clock_gate (
  input  logic clk,
  input  logic en,
  output logic gclk
);

  logic en_l;

  always_latch begin
    if (!clk) en_l = en;
  end

  assign gclk = clk & en_l;

endmodule
