// nz_abs: absolute value of a 16-bit two's-complement operand.
//
// First stage of the Near-Zero Approximation Unit: each operand is turned
// into its magnitude before its leading zeros are counted. The result is
// unsigned and one bit wider in range than a signed value would be, so the
// most negative input, -2^(W-1), gives the exact magnitude 2^(W-1).
// Purely combinational. The paper gives the function (ABS box of its NZAU
// diagram); the two's-complement encoding is this design's assumption.
module nz_abs #(
  parameter int unsigned W = 16
) (
  input  logic [W-1:0] x,    // signed operand
  output logic [W-1:0] mag   // unsigned |x|
);
  always_comb begin
    if (x[W-1]) mag = W'(~x + 1'b1);
    else        mag = x;
  end
endmodule
