// no_mem: neuron output memory.
//
// Receives the 16-bit output neurons from the output mux. It has two
// synchronous read ports: port a feeds the outputs back through the input
// mux as the next layer's input vector, port b reads them out to off-chip
// memory. Read data appears one cycle after the read enable; a read of the
// address being written returns the old word. The paper shows both outgoing
// paths; the depth (4096, the largest fully-connected output of AlexNet) and
// the port arrangement are this design's choices.
module no_mem
  import nz_pkg::*;
#(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  word_t         wdata,
  input  logic          re_a,
  input  logic [AW-1:0] raddr_a,
  output word_t         rdata_a,
  input  logic          re_b,
  input  logic [AW-1:0] raddr_b,
  output word_t         rdata_b
);
  word_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we)   mem[waddr] <= wdata;
    if (re_a) rdata_a <= mem[raddr_a];
    if (re_b) rdata_b <= mem[raddr_b];
  end
endmodule
