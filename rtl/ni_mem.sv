// ni_mem: neuron input memory.
//
// Holds the input vector x of a layer, one 16-bit neuron input per word.
// One synchronous read per cycle (data one cycle after re) feeds the shared
// NZAU operand; the write port loads the vector from off-chip memory.
// Read and write of the same address in one cycle return the old word.
// The paper names the memory; its depth (9216, the largest fully-connected
// input of AlexNet) and ports are this design's choices. Written as an array,
// it maps to an SRAM macro.
module ni_mem
  import nz_pkg::*;
#(
  parameter int unsigned DEPTH = 9216,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  word_t         wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output word_t         rdata
);
  word_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
