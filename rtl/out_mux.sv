// out_mux: output multiplexer and write-back into the neuron output memory.
//
// When the lanes of a pass report their results (all in the same cycle),
// the results are captured in a holding register per lane. The mux then
// writes them one per cycle, lane 0 first, to consecutive addresses of the
// neuron output memory, starting at the address loaded by init and carrying
// on from pass to pass. Each result is rectified (ReLU, as in the neuron
// equation y = ReLU(sum W*x)), arithmetically shifted right by out_shift and
// saturated to 16 bits so it can serve as the next layer's input.
//
// The mux itself and the ReLU are the paper's; where ReLU sits, the shift,
// the saturation and the sequential write are this design's choices.
// Timing: results captured at edge k; writes in cycles k+1 .. k+LANES;
// wb_done high with the last write. busy is high from capture to last write;
// new results must not arrive while busy (checked by an assertion).
module out_mux
  import nz_pkg::*;
#(
  parameter int unsigned LANES = 16,
  parameter int unsigned AW    = 12
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 init,       // load the write pointer
  input  logic [AW-1:0]        out_base,
  input  logic [SH_W-1:0]      out_shift,
  input  logic [LANES-1:0]     res_valid,
  input  acc_t [LANES-1:0]     result,
  output logic                 we,
  output logic [AW-1:0]        waddr,
  output word_t                wdata,
  output logic                 busy,
  output logic                 wb_done
);
  localparam int unsigned IW = $clog2(LANES);
  localparam acc_t MAXV = acc_t'((1 << (W - 1)) - 1);

  acc_t [LANES-1:0] hold;
  logic [IW-1:0]    idx;
  logic [AW-1:0]    ptr;
  acc_t             sel, shifted;

  // ReLU, scale and saturate the selected lane's result
  always_comb begin
    sel     = hold[idx];
    shifted = sel >>> out_shift;
    if (shifted < 0)         wdata = '0;
    else if (shifted > MAXV) wdata = word_t'(MAXV);
    else                     wdata = word_t'(shifted);
  end

  assign we      = busy;
  assign waddr   = ptr;
  assign wb_done = busy && (idx == IW'(LANES - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold <= '0;
      idx  <= '0;
      ptr  <= '0;
      busy <= 1'b0;
    end else begin
      if (|res_valid) begin
        for (int l = 0; l < LANES; l++)
          if (res_valid[l]) hold[l] <= result[l];
        busy <= 1'b1;
        idx  <= '0;
      end else if (busy) begin
        idx  <= idx + 1'b1;
        if (idx == IW'(LANES - 1)) busy <= 1'b0;
      end
      if (init)      ptr <= out_base;
      else if (busy) ptr <= ptr + 1'b1;
    end
  end

  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    (|res_valid) |-> !busy)
    else $error("out_mux: new results while the previous pass is being written");
  a_lanes_together: assert property (@(posedge clk) disable iff (!rst_n)
    (|res_valid) |-> (&res_valid))
    else $error("out_mux: lanes finished in different cycles");
endmodule
