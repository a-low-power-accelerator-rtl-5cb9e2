// nz_accel: low-power matrix-vector accelerator with near-zero skipping.
//
// Computes y[i] = ReLU(sum_j W[i][j] * x[j]) for a layer, sixteen output
// neurons at a time. Each cycle the controller reads one neuron input x[j]
// (from the neuron input memory, or from the neuron output memory when a
// layer consumes the previous one's outputs) and one column of sixteen
// weights. The Near-Zero Approximation Unit compares, per lane, the summed
// leading-zero counts of the two operands with the threshold th and lets
// only the products that may be large into the Processing Lanes. Each lane
// buffers the pairs it receives and starts its sixteen multipliers only when
// a full word of sixteen pairs has gathered, so the multipliers stay idle
// (clock-gated) for the skipped products. After the last column the lanes
// report their sums, and the output mux rectifies, scales and writes them to
// the neuron output memory, from which the host (off-chip SDRAM side) reads.
//
// Structure (memories, input mux, NZAU, 16 lanes, output mux, output
// memory) follows the paper's block diagram. The controller, host ports,
// result scaling and memory depths are this design's.
//
// Timing: column read at cycle t, NZAU and buffer write at t+1; a pass's
// results are written t+5 .. t+20 after its last column is read. A layer of
// n_pass passes over n_cols columns takes about n_pass*n_cols + 21 cycles.
// Configuration inputs must be held stable while busy.
module nz_accel
  import nz_pkg::*;
#(
  parameter int unsigned NI_DEPTH = 9216,
  parameter int unsigned WT_DEPTH = 9216,
  parameter int unsigned NO_DEPTH = 4096,
  localparam int unsigned NIA = $clog2(NI_DEPTH),
  localparam int unsigned WTA = $clog2(WT_DEPTH),
  localparam int unsigned NOA = $clog2(NO_DEPTH),
  localparam int unsigned CW  = (NIA > WTA) ? NIA : WTA
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // loading from off-chip memory
  input  logic                  ni_we,
  input  logic [NIA-1:0]        ni_waddr,
  input  word_t                 ni_wdata,
  input  logic                  wt_we,
  input  logic [WTA-1:0]        wt_waddr,
  input  word_t [NUM_LANES-1:0]     wt_wdata,
  // read-out to off-chip memory
  input  logic                  no_re,
  input  logic [NOA-1:0]        no_raddr,
  output word_t                 no_rdata,
  // layer configuration
  input  logic                  start,
  input  logic [CW-1:0]         n_cols,
  input  logic [11:0]           n_pass,
  input  logic [CW-1:0]         in_base,
  input  logic [NOA-1:0]        out_base,
  input  logic                  src_sel,   // 1: input vector from output memory
  input  logic [TH_W-1:0]       th,
  input  logic [SH_W-1:0]       out_shift,
  // status
  output logic                  busy,
  output logic                  done,
  output logic                  stall,     // last column held for write-back
  output logic [NUM_LANES-1:0]      mac_active // lanes whose multipliers run
);
  // controller
  logic          rd_en, last, wb_done;
  logic [CW-1:0] ni_addr, wt_addr;

  nz_ctrl #(.CW(CW), .PW(12)) u_ctrl (
    .clk, .rst_n, .start, .n_cols, .n_pass, .in_base, .wb_done,
    .rd_en, .ni_addr, .wt_addr, .last, .stall, .busy, .done
  );

  // memories
  word_t             ni_rdata, fb_rdata, x;
  word_t [NUM_LANES-1:0] wt_rdata;
  logic              no_we;
  logic [NOA-1:0]    no_waddr;
  word_t             no_wdata;

  ni_mem #(.DEPTH(NI_DEPTH)) u_ni_mem (
    .clk, .we(ni_we), .waddr(ni_waddr), .wdata(ni_wdata),
    .re(rd_en && !src_sel), .raddr(NIA'(ni_addr)), .rdata(ni_rdata)
  );

  wt_mem #(.LANES(NUM_LANES), .DEPTH(WT_DEPTH)) u_wt_mem (
    .clk, .we(wt_we), .waddr(wt_waddr), .wdata(wt_wdata),
    .re(rd_en), .raddr(WTA'(wt_addr)), .rdata(wt_rdata)
  );

  no_mem #(.DEPTH(NO_DEPTH)) u_no_mem (
    .clk, .we(no_we), .waddr(no_waddr), .wdata(no_wdata),
    .re_a(rd_en && src_sel), .raddr_a(NOA'(ni_addr)), .rdata_a(fb_rdata),
    .re_b(no_re), .raddr_b(no_raddr), .rdata_b(no_rdata)
  );

  // read data is valid one cycle after the read
  logic col_valid, col_last;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col_valid <= 1'b0;
      col_last  <= 1'b0;
    end else begin
      col_valid <= rd_en;
      col_last  <= last;
    end
  end

  ni_src_mux u_in_mux (.sel(src_sel), .ni_mem(ni_rdata), .no_mem(fb_rdata), .x);

  // near-zero approximation
  logic [NUM_LANES-1:0] data_ld;

  nzau #(.LANES(NUM_LANES)) u_nzau (
    .valid(col_valid), .th, .a(x), .b(wt_rdata), .data_ld, .l_total()
  );

  // processing lanes
  logic [NUM_LANES-1:0] res_valid;
  acc_t [NUM_LANES-1:0] result;

  for (genvar i = 0; i < NUM_LANES; i++) begin : g_pl
    processing_lane #(.SLOTS(NUM_SLOTS)) u_pl (
      .clk, .rst_n, .data_ld(data_ld[i]), .ni_in(x), .wt_in(wt_rdata[i]),
      .flush(col_valid && col_last), .res_valid(res_valid[i]),
      .result(result[i]), .mac_active(mac_active[i])
    );
  end

  // output mux into the neuron output memory
  out_mux #(.LANES(NUM_LANES), .AW(NOA)) u_out_mux (
    .clk, .rst_n, .init(start && !busy), .out_base, .out_shift,
    .res_valid, .result, .we(no_we), .waddr(no_waddr), .wdata(no_wdata),
    .busy(), .wb_done
  );
endmodule
