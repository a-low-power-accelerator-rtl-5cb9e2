// pl_buffer: operand buffers of one Processing Lane.
//
// Each kept (neuron input, weight) pair is written into the next of SLOTS
// 16-bit data registers, addressed by a 4-bit counter through a 4-to-16
// decoder; the counter only advances on data_ld (its clock gate in the
// paper). When the counter wraps after the 16th pair, an overflow flag is
// registered and on the next clock edge the 16 registers of each buffer are
// copied as one 256-bit word into the operand registers OP_reg (the second
// clock gate). OP_reg isolates the multipliers from the buffers: slot 0 may
// already be refilled on the same edge, so buffering never stalls.
//
// The counter, decoder, data registers, overflow compare and OP_reg follow
// the paper. The flush input is this design's own: with the last column of a
// neuron it sends the partly filled word, its unused slots cleared to zero,
// restarts the counter, and marks the word op_last (a word of zeros if
// nothing was pending), so the lane always reports a result.
// Clock gating as in the paper: the counter and data registers run on a
// clock gated by data_ld (or flush), OP_reg on a clock gated by the
// registered overflow flag; the small flags run on the free clock.
//
// Timing: pair loaded at edge k (slot 15, or flush) -> op_valid high after
// edge k+1, for one cycle.
module pl_buffer
  import nz_pkg::*;
#(
  parameter int unsigned SLOTS = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              data_ld,  // keep this cycle's pair
  input  word_t             ni_in,    // neuron input
  input  word_t             wt_in,    // weight
  input  logic              flush,    // this column ends the neuron
  output logic              op_valid, // OP_reg loaded this cycle
  output logic              op_last,  // ... with the neuron's last word
  output word_t [SLOTS-1:0] op_ni,    // OP_reg: neuron inputs
  output word_t [SLOTS-1:0] op_wt     // OP_reg: weights
);
  localparam int unsigned CNT_W = $clog2(SLOTS);

  logic [CNT_W-1:0] cnt;          // next free slot
  logic [SLOTS-1:0] dec;          // decoder output: write strobe per slot
  word_t [SLOTS-1:0] ni_buf, wt_buf;
  logic             full_q;       // registered overflow / flush flag
  logic             last_q;
  logic [CNT_W:0]   nvalid_q;     // slots holding data when full_q was set
  logic             ovf;
  logic             gclk_buf, gclk_op;

  // the gates stay open during reset, so the gated registers see it
  nz_icg u_cg_buf (.clk, .en(data_ld || flush || !rst_n), .gclk(gclk_buf));
  nz_icg u_cg_op  (.clk, .en(full_q || !rst_n),           .gclk(gclk_op));

  // 4-to-16 decoder, gated by data_ld
  always_comb begin
    dec = '0;
    dec[cnt] = data_ld;
  end

  // counter reaches 1111 and one more pair arrives
  assign ovf = data_ld && (cnt == CNT_W'(SLOTS - 1));

  // 4-bit counter, clocked only when a pair is kept or a neuron ends
  always_ff @(posedge gclk_buf or negedge rst_n) begin
    if (!rst_n)     cnt <= '0;
    else if (flush) cnt <= '0;
    else            cnt <= cnt + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full_q   <= 1'b0;
      last_q   <= 1'b0;
      nvalid_q <= '0;
    end else begin
      full_q   <= ovf || flush;
      last_q   <= flush;
      nvalid_q <= (CNT_W+1)'(cnt) + (CNT_W+1)'(data_ld);
    end
  end

  // data registers: on the gated buffer clock, written on their decoder strobe
  for (genvar s = 0; s < SLOTS; s++) begin : g_slot
    always_ff @(posedge gclk_buf or negedge rst_n) begin
      if (!rst_n) begin
        ni_buf[s] <= '0;
        wt_buf[s] <= '0;
      end else if (dec[s]) begin
        ni_buf[s] <= ni_in;
        wt_buf[s] <= wt_in;
      end
    end
  end

  // word flags on the free clock
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      op_valid <= 1'b0;
      op_last  <= 1'b0;
    end else begin
      op_valid <= full_q;
      op_last  <= full_q && last_q;
    end
  end

  // operand registers: clocked only one cycle after overflow or flush
  always_ff @(posedge gclk_op or negedge rst_n) begin
    if (!rst_n) begin
      op_ni <= '0;
      op_wt <= '0;
    end else begin
      for (int s = 0; s < SLOTS; s++) begin
        if (s < int'(nvalid_q)) begin
          op_ni[s] <= ni_buf[s];
          op_wt[s] <= wt_buf[s];
        end else begin
          op_ni[s] <= '0;
          op_wt[s] <= '0;
        end
      end
    end
  end
endmodule
