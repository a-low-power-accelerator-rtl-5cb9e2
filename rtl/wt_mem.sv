// wt_mem: weight memory.
//
// Each word is one column of the weight tile: LANES 16-bit weights, one per
// Processing Lane (256 bits for 16 lanes), so a single read per cycle
// supplies every lane. Synchronous read, data one cycle after re; the write
// port loads weights from off-chip memory. Same-address read and write return
// the old word. The paper names the memory and its one-column-per-cycle read;
// the depth (9216 columns, one 16-neuron pass of AlexNet FC6) is this
// design's choice. Written as an array, it maps to an SRAM macro.
module wt_mem
  import nz_pkg::*;
#(
  parameter int unsigned LANES = 16,
  parameter int unsigned DEPTH = 9216,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  word_t [LANES-1:0] wdata,
  input  logic              re,
  input  logic [AW-1:0]     raddr,
  output word_t [LANES-1:0] rdata
);
  logic [LANES*W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
