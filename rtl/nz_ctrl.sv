// nz_ctrl: layer sequencer.
//
// A layer of n_pass x 16 output neurons over an input vector of n_cols
// words is run as n_pass passes. In each pass the controller reads one
// column per cycle: neuron input in_base + c and weight column p*n_cols + c
// (the weight tiles of all passes are stored back to back). The read of the
// last column of a pass carries last, which makes every lane flush its
// partial word and report its result.
//
// The one-column-per-cycle schedule is the paper's; the controller itself is
// not described there. Passes follow each other without a gap. The only
// hold-up is this design's guard on the result holding registers: the last
// column of a pass is not issued while the previous pass's results are still
// in flight or being written (pending), which only happens when n_cols is
// shorter than the lanes' latency plus the 16-cycle write-back.
// done pulses once the final pass has been written back.
module nz_ctrl #(
  parameter int unsigned CW = 14,   // column / address width
  parameter int unsigned PW = 12    // pass count width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [CW-1:0] n_cols,     // >= 1
  input  logic [PW-1:0] n_pass,     // >= 1
  input  logic [CW-1:0] in_base,
  input  logic          wb_done,    // last write of a pass
  output logic          rd_en,
  output logic [CW-1:0] ni_addr,
  output logic [CW-1:0] wt_addr,
  output logic          last,
  output logic          stall,      // a last column held back this cycle
  output logic          busy,
  output logic          done
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_t;
  state_t        state;
  logic [CW-1:0] col;
  logic [PW-1:0] pass;
  logic          pending;
  logic          at_last;

  assign at_last = (col == n_cols - 1'b1);
  assign stall   = (state == S_RUN) && at_last && pending;
  assign rd_en   = (state == S_RUN) && !stall;
  assign last    = rd_en && at_last;
  assign ni_addr = in_base + col;
  assign busy    = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      col     <= '0;
      pass    <= '0;
      wt_addr <= '0;
      pending <= 1'b0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (last)         pending <= 1'b1;
      else if (wb_done) pending <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state   <= S_RUN;
          col     <= '0;
          pass    <= '0;
          wt_addr <= '0;
        end
        S_RUN: if (rd_en) begin
          wt_addr <= wt_addr + 1'b1;
          if (at_last) begin
            col  <= '0;
            pass <= pass + 1'b1;
            if (pass == n_pass - 1'b1) state <= S_DRAIN;
          end else begin
            col <= col + 1'b1;
          end
        end
        S_DRAIN: if (!pending || wb_done) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
