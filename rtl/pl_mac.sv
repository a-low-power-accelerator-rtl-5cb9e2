// pl_mac: computational unit of one Processing Lane.
//
// Sixteen signed 16x16 multipliers take the operand registers of the lane,
// a binary adder tree sums the sixteen 32-bit products, and ACC_reg adds the
// sum to the running total of the neuron. On the neuron's last word the total
// (including that word) is presented on result with res_valid for one cycle
// and ACC_reg restarts from zero.
//
// The multipliers, adder tree and ACC_reg are the paper's. ACC_reg and the
// result register run on a clock gated by op_valid, as in the paper, so the
// unit is idle in every cycle in which no operand word arrives (its inputs,
// OP_reg, do not change either). Full-precision products
// and sums, the ACC_W-bit accumulator and the restart are this design's
// choices. Timing: the word in OP_reg at cycle k is accumulated at edge k+1;
// result is valid in cycle k+1.
module pl_mac
  import nz_pkg::*;
#(
  parameter int unsigned MULTS = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              op_valid,
  input  logic              op_last,
  input  word_t [MULTS-1:0] op_ni,
  input  word_t [MULTS-1:0] op_wt,
  output logic              res_valid,
  output acc_t              result
);
  acc_t acc_q;
  acc_t tree_sum;

  // multipliers and adder tree
  always_comb begin
    acc_t lvl [MULTS];
    logic signed [2*W-1:0] prod;
    for (int m = 0; m < MULTS; m++) begin
      prod   = $signed(op_ni[m]) * $signed(op_wt[m]);
      lvl[m] = ACC_W'(prod);
    end
    for (int n = MULTS / 2; n >= 1; n = n / 2)
      for (int k = 0; k < n; k++)
        lvl[k] = lvl[2*k] + lvl[2*k+1];
    tree_sum = lvl[0];
  end

  logic gclk_acc;
  // the gate stays open during reset, so the gated registers see it
  nz_icg u_cg_acc (.clk, .en(op_valid || !rst_n), .gclk(gclk_acc));

  // ACC_reg and result: clocked only when an operand word is present
  always_ff @(posedge gclk_acc or negedge rst_n) begin
    if (!rst_n) begin
      acc_q  <= '0;
      result <= '0;
    end else if (op_last) begin
      result <= acc_q + tree_sum;
      acc_q  <= '0;
    end else begin
      acc_q  <= acc_q + tree_sum;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) res_valid <= 1'b0;
    else        res_valid <= op_valid && op_last;
  end
endmodule
