// processing_lane: one of the sixteen Processing Lanes.
//
// A lane computes one output neuron's dot product from the (neuron input,
// weight) pairs that the Near-Zero Approximation Unit lets through. The pairs
// are gathered in pl_buffer until sixteen are held, then handed to pl_mac's
// sixteen multipliers and adder tree as one word. mac_active shows the cycles
// in which the computational unit is enabled; in all others it is idle
// (clock-gated). The pairing of buffer and multiplier array is
// the paper's; the flush at the end of a neuron is this design's.
//
// Timing: the result appears with res_valid three cycles after the cycle in
// which flush is high (overflow flag, OP_reg, ACC_reg).
module processing_lane
  import nz_pkg::*;
#(
  parameter int unsigned SLOTS = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  data_ld,
  input  word_t ni_in,
  input  word_t wt_in,
  input  logic  flush,
  output logic  res_valid,
  output acc_t  result,
  output logic  mac_active
);
  logic              op_valid, op_last;
  word_t [SLOTS-1:0] op_ni, op_wt;

  pl_buffer #(.SLOTS(SLOTS)) u_buf (
    .clk, .rst_n, .data_ld, .ni_in, .wt_in, .flush,
    .op_valid, .op_last, .op_ni, .op_wt
  );

  pl_mac #(.MULTS(SLOTS)) u_mac (
    .clk, .rst_n, .op_valid, .op_last, .op_ni, .op_wt,
    .res_valid, .result
  );

  assign mac_active = op_valid;
endmodule
