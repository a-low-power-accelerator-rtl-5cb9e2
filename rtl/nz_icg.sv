// nz_icg: integrated clock gate.
//
// Passes the clock to gclk only in cycles whose enable was high before the
// rising edge. The enable is captured by a latch that is transparent while
// clk is low, so it cannot change while clk is high and gclk has no glitches;
// gclk = clk AND latched enable. This is the standard latch-and-AND
// clock-gating cell; a synthesis flow maps it onto the library's integrated
// clock-gating cell. The latch is intended.
//
// The Processing Lanes use it where the paper's lane diagram draws its "CG"
// gates: on the clock of the buffer counter and data registers (enabled by a
// kept pair) and on the clock of the operand registers and the accumulator
// (enabled by a full word). The cell structure is this design's choice.
module nz_icg (
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
