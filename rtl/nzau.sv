// nzau: Near-Zero Approximation Unit.
//
// Decides, for one column of the weight matrix, which of the LANES products
// W[i][j] * x[j] are worth computing. For operands with leading-zero counts
// lA and lB the product has lA+lB or lA+lB+1 leading zeros, so the summed
// count l_total predicts the product's size without multiplying. A lane whose
// l_total exceeds the threshold th is skipped (its product is taken as 0);
// otherwise data_ld is raised and the pair goes into that lane's buffer.
// Zero operands count 16 leading zeros and so are skipped as well.
//
// Structure as in the paper: the shared neuron input a passes one ABS and one
// 16-bit LZC; each of the LANES weights has its own ABS and LZC, an adder and
// a comparator against the 5-bit threshold (17 counters in all).
// Combinational; valid qualifies data_ld. Reading the paper's "exceed" as a
// strict comparison (skip when l_total > th) is the paper's text; doing the
// compare in the same cycle as the buffer write is this design's choice.
module nzau
  import nz_pkg::*;
#(
  parameter int unsigned LANES = 16
) (
  input  logic                  valid,           // a column is present
  input  logic [TH_W-1:0]       th,              // threshold on l_total
  input  word_t                 a,               // shared neuron input
  input  word_t [LANES-1:0]     b,               // one weight per lane
  output logic  [LANES-1:0]     data_ld,         // keep pair of lane i
  output logic  [LANES-1:0][LT_W-1:0] l_total    // summed leading zeros
);
  mag_t            a_mag;
  logic [LZ_W-1:0] a_lz;

  nz_abs #(.W(W)) u_abs_a (.x(a), .mag(a_mag));
  nz_lzc #(.W(W)) u_lzc_a (.x(a_mag), .lz(a_lz));

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    mag_t            b_mag;
    logic [LZ_W-1:0] b_lz;
    nz_abs #(.W(W)) u_abs_b (.x(b[i]), .mag(b_mag));
    nz_lzc #(.W(W)) u_lzc_b (.x(b_mag), .lz(b_lz));
    always_comb begin
      l_total[i] = LT_W'(a_lz) + LT_W'(b_lz);
      // skip when th < l_total, i.e. the total exceeds the threshold
      data_ld[i] = valid && !(LT_W'(th) < l_total[i]);
    end
  end
endmodule
