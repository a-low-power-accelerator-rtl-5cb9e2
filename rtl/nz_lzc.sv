// nz_lzc: leading-zero counter for a W-bit unsigned word.
//
// Returns the number of zero bits above the most significant one, and W when
// the word is zero. The paper uses a shared-carry-propagate counter from the
// literature without describing it; this is a plain balanced tree of the same
// function. Every bit starts as a group of one whose count is 1 if the bit is
// zero. At each level two neighbouring groups of size g merge: if the upper
// group is all zero (count g), the count is g plus the lower group's count,
// otherwise it is the upper group's count. W must be a power of two.
// Combinational, log2(W) levels of 2:1 muxes and small adders.
module nz_lzc #(
  parameter int unsigned W  = 16,
  parameter int unsigned CW = $clog2(W) + 1
) (
  input  logic [W-1:0]  x,
  output logic [CW-1:0] lz
);
  always_comb begin
    logic [CW-1:0] c [W];   // c[j]: count of group j (bits j*g .. j*g+g-1)
    for (int i = 0; i < W; i++)
      c[i] = CW'(!x[i]);
    for (int g = 1; g < W; g = 2 * g)
      for (int k = 0; k < W / (2 * g); k++)
        c[k] = (c[2*k+1] == CW'(g)) ? CW'(g) + c[2*k] : c[2*k+1];
    lz = c[0];
  end
endmodule
