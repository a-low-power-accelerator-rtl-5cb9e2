// tb_alexnet_fc: the three fully-connected layers of AlexNet, FC6 (9216
// inputs, 4096 outputs), FC7 (4096 -> 4096) and FC8 (4096 -> 1000), on the
// accelerator at its default sizes, with synthetic data.
//
// FC6 fills the input and weight memories to their full depth (9216) and
// the output memory too (4096). Its input vector is non-negative with many
// zeros, as after a ReLU. Each following layer takes the previous layer's
// outputs, read out through the off-chip port and written back into the
// neuron input memory, as an external memory would. The weights come from a
// hash of (layer, row, column), so the testbench need not store them:
// about 30% are zero and the magnitudes of the rest spread over all bit
// positions. The weight memory holds floor(9216 / n_in) passes, so each
// layer runs as several runs, each after a weight load through the host port.
//
// Checked: every output against a model using the rule "keep a product
// when lz(|W|) + lz(|x|) <= th"; the compute cycles of each run
// (n_pass * n_in + 20). Reported per layer: compute time at 500 MHz, kept
// products and the multiplier duty cycle. A threshold sweep over the first
// two passes of FC8 checks that lowering the threshold never keeps more
// products and never makes the multipliers busier.
module tb_alexnet_fc;
  import nz_pkg::*;
  localparam int L = 16, NMAX = 9216, WT_DEPTH = 9216;
  localparam int NIA = 14, WTA = 14, NOA = 12;
  int SHIFT = 13;
  int N = 4096, M = 1000, LAYER = 0;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic ni_we = 0, wt_we = 0, no_re = 0;
  logic [NIA-1:0] ni_waddr = '0;
  logic [WTA-1:0] wt_waddr = '0;
  logic [NOA-1:0] no_raddr = '0;
  word_t ni_wdata = '0, no_rdata;
  word_t [L-1:0] wt_wdata = '0;
  logic start = 0, src_sel = 0;
  logic [13:0] n_cols = '0, in_base = '0;
  logic [11:0] n_pass = '0;
  logic [NOA-1:0] out_base = '0;
  logic [TH_W-1:0] th = '0;
  logic [SH_W-1:0] out_shift = '0;
  logic busy, done, stall;
  logic [L-1:0] mac_active;

  nz_accel dut (
    .clk, .rst_n, .ni_we, .ni_waddr, .ni_wdata, .wt_we, .wt_waddr, .wt_wdata,
    .no_re, .no_raddr, .no_rdata, .start, .n_cols, .n_pass, .in_base, .out_base,
    .src_sel, .th, .out_shift, .busy, .done, .stall, .mac_active
  );

  always #1 clk = ~clk;

  word_t x_vec [NMAX];
  word_t expect_y [4096];

  // weight W[r][c]: integer hash, about 30% zeros, log-spread magnitudes
  function automatic word_t weight(int r, int c);
    int unsigned h = (r * 32'h9E3779B1) ^ (c * 32'h85EBCA77) ^ (LAYER * 32'h2545F491);
    h ^= h >> 15; h *= 32'h2C1B3C6D; h ^= h >> 12; h *= 32'h297A2D39; h ^= h >> 15;
    if (r >= M) return '0;
    if (h[31:24] < 77) return '0;
    return word_t'($signed(h[15:0]) >>> h[19:16]);
  endfunction

  function automatic int lz16(word_t v);
    int m = (v < 0) ? -int'(v) : int'(v);
    for (int b = 15; b >= 0; b--)
      if (m[b]) return 15 - b;
    return 16;
  endfunction

  // model of rows r0 .. r0+nr-1 at threshold thr; returns kept products
  function automatic longint model_rows(int r0, int nr, int thr, int obase);
    longint kept = 0;
    int lzx [NMAX];
    for (int c = 0; c < N; c++) lzx[c] = lz16(x_vec[c]);
    for (int r = r0; r < r0 + nr; r++) begin
      longint sum = 0;
      for (int c = 0; c < N; c++) begin
        word_t w = weight(r, c);
        if (lzx[c] + lz16(w) <= thr) begin
          sum += longint'(x_vec[c]) * longint'(w);
          kept++;
        end
      end
      sum = sum >>> SHIFT;
      if (sum < 0) sum = 0;
      if (sum > 32767) sum = 32767;
      expect_y[obase + r - r0] = word_t'(sum);
    end
    return kept;
  endfunction

  task automatic load_weights(int pass0, int np);
    for (int q = 0; q < np; q++)
      for (int c = 0; c < N; c++) begin
        @(negedge clk);
        wt_we = 1;
        wt_waddr = WTA'(q * N + c);
        for (int l = 0; l < L; l++) wt_wdata[l] = weight((pass0 + q) * L + l, c);
      end
    @(negedge clk);
    wt_we = 0;
  endtask

  // run np passes over the loaded weights; returns compute cycles
  task automatic run(input int np, input int obase, input int thr,
                     output int cycles, output longint macs);
    cycles = 0;
    macs = 0;
    @(negedge clk);
    n_cols = 14'(N); n_pass = 12'(np); in_base = '0; out_base = NOA'(obase);
    src_sel = 0; th = TH_W'(thr); out_shift = SH_W'(SHIFT);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done && cycles < 20000) begin
      for (int l = 0; l < L; l++) if (mac_active[l]) macs++;
      @(negedge clk);
      cycles++;
    end
  endtask

  task automatic check_outputs(int obase, int count, int ebase);
    for (int r = 0; r < count; r++) begin
      @(negedge clk);
      no_re = 1;
      no_raddr = NOA'(obase + r);
      @(negedge clk);
      no_re = 0;
      checks++;
      if (no_rdata != expect_y[ebase + r]) begin
        failures++;
        if (failures < 20) $display("FAIL output %0d = %0d, expected %0d", obase + r, no_rdata,
                                    expect_y[ebase + r]);
      end
    end
  endtask

  // one layer of n_in inputs and n_out outputs; x_vec holds its input
  task automatic run_layer(input int lay, input int n_in, input int n_out, input int thr,
                           input int shift);
    int passes = (n_out + L - 1) / L;
    int per_load = WT_DEPTH / n_in;
    int cycles, total_cycles = 0;
    longint macs, total_macs = 0, kept_total = 0;
    LAYER = lay; N = n_in; M = n_out; SHIFT = shift;
    for (int c = 0; c < n_in; c++) begin
      @(negedge clk);
      ni_we = 1; ni_waddr = NIA'(c); ni_wdata = x_vec[c];
    end
    @(negedge clk);
    ni_we = 0;
    for (int p0 = 0; p0 < passes; p0 += per_load) begin
      int np = (passes - p0 < per_load) ? passes - p0 : per_load;
      load_weights(p0, np);
      run(np, p0 * L, thr, cycles, macs);
      checks++;
      if (cycles != np * n_in + 20) begin
        failures++;
        $display("FAIL run at pass %0d took %0d cycles, expected %0d", p0, cycles, np * n_in + 20);
      end
      total_cycles += cycles;
      total_macs += macs;
      kept_total += model_rows(p0 * L, np * L, thr, 0);
      check_outputs(p0 * L, (p0 * L + np * L <= n_out) ? np * L : n_out - p0 * L, 0);
    end
    $display("FC%0d %0d -> %0d, th=%0d: %0d passes, %0d compute cycles = %0d.%0d us at 500 MHz",
             lay, n_in, n_out, thr, passes, total_cycles, total_cycles / 500, (total_cycles % 500) / 5);
    $display("  kept products %0d of %0d; multiplier duty %0d of %0d lane-cycles",
             kept_total, longint'(n_out) * n_in, total_macs, longint'(passes) * n_in * L);
  endtask

  // the layer's outputs become the next input vector, through the host ports
  task automatic outputs_to_inputs(input int n);
    for (int r = 0; r < n; r++) begin
      @(negedge clk);
      no_re = 1;
      no_raddr = NOA'(r);
      @(negedge clk);
      no_re = 0;
      x_vec[r] = no_rdata;
    end
  endtask

  initial begin
    int cycles;
    longint macs;
    automatic int thr_list [4] = '{31, 22, 18, 14};
    automatic longint prev_kept = -1, prev_macs = -1;

    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 9216; c++) begin
      automatic int unsigned u = $urandom;
      x_vec[c] = (u[7:0] < 140) ? '0 : word_t'({1'b0, u[30:16]} >> u[11:8]);
    end
    run_layer(6, 9216, 4096, 18, 13);
    outputs_to_inputs(4096);
    run_layer(7, 4096, 4096, 18, 13);
    outputs_to_inputs(4096);
    run_layer(8, 4096, 1000, 18, 13);

    // threshold sweep on the first two passes of FC8 (weights reloaded)
    load_weights(0, 2);
    foreach (thr_list[t]) begin
      longint kept;
      run(2, 2048, thr_list[t], cycles, macs);
      kept = model_rows(0, 2 * L, thr_list[t], 0);
      check_outputs(2048, 2 * L, 0);
      $display("sweep FC8 th=%0d: kept %0d of %0d products, multipliers busy %0d lane-cycles",
               thr_list[t], kept, 2 * L * N, macs);
      checks++;
      if (prev_kept >= 0 && (kept > prev_kept || macs > prev_macs)) begin
        failures++;
        $display("FAIL lower threshold kept more");
      end
      prev_kept = kept;
      prev_macs = macs;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #40000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
