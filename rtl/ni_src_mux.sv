// ni_src_mux: source select for the shared neuron input.
//
// The NZAU's shared operand comes either from the neuron input memory
// (sel = 0, a layer whose input was loaded from off-chip) or from the neuron
// output memory (sel = 1, a layer that consumes the previous layer's outputs
// without leaving the chip). Combinational. The mux and its two sources are
// the paper's; the select encoding is this design's.
module ni_src_mux
  import nz_pkg::*;
(
  input  logic  sel,
  input  word_t ni_mem,
  input  word_t no_mem,
  output word_t x
);
  always_comb x = sel ? no_mem : ni_mem;
endmodule
