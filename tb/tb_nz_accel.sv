// tb_nz_accel: end-to-end test of the accelerator at its default sizes.
//
// Loads input vectors and weight tiles through the host ports, runs layers
// and reads the neuron output memory back through its off-chip read port.
// Every output is compared with a model that works from the definition:
// a product W*x counts only if lz(|W|) + lz(|x|) <= th (lz by a bit scan),
// y = min(max(sum >>> shift, 0), 32767). Layers covered:
//   1. 3 passes x 150 columns from the input memory, mid threshold
//      (near-zero and zero skipping, full and partial operand words,
//      ReLU clamping, saturation)
//   2. a layer reading layer 1's outputs back through the input mux
//   3. 4 passes x 5 columns (the write-back hold-up)
//   4. one pass of 4096 columns with two 16-neuron tiles, the shape of
//      AlexNet's FC8 layer (4096 inputs)
// The run time of each layer is checked against n_pass*n_cols + holds + 20
// cycles, and the cycles with multipliers running against the model's count
// of operand words. Each mechanism must occur at least once.
module tb_nz_accel;
  import nz_pkg::*;
  localparam int L = 16;
  localparam int NIA = 14, WTA = 14, NOA = 12;

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

  // mechanism counters
  int n_nz_skip = 0, n_zero_skip = 0, n_kept = 0, n_full_words = 0, n_partial = 0;
  int n_mid = 0, n_relu = 0, n_sat = 0, n_stall = 0, n_feedback = 0, n_multipass = 0;
  longint mac_cycles = 0, mac_slots = 0;

  // model state
  word_t x_vec [];          // input vector of the current layer
  word_t wts   [][];        // [neuron][column]
  word_t no_model [4096];   // expected contents of the output memory

  function automatic int lz16(word_t v);
    int m = (v < 0) ? -int'(v) : int'(v);
    for (int b = 15; b >= 0; b--)
      if (m[b]) return 15 - b;
    return 16;
  endfunction

  function automatic word_t rnd_word(int zero_pct);
    int sh;
    word_t v;
    if ($urandom_range(0, 99) < zero_pct) return '0;
    sh = $urandom_range(0, 15);
    v = word_t'($urandom) >>> sh;
    return v;
  endfunction

  task automatic run_layer(input int n, input int p, input int ibase, input int obase,
                           input bit src, input int thr, input int sh);
    int cycles = 0, stalls = 0, macs = 0, exp_macs = 0;
    bit got_done = 0;
    // model
    for (int r = 0; r < p * L; r++) begin
      longint sum = 0;
      int held = 0;
      for (int c = 0; c < n; c++) begin
        word_t xv = x_vec[c];
        word_t wv = wts[r][c];
        if (lz16(xv) + lz16(wv) <= thr) begin
          sum += longint'(xv) * longint'(wv);
          n_kept++;
          held++;
        end else if (xv == 0 || wv == 0) n_zero_skip++;
        else n_nz_skip++;
        if (held == 16 || c == n - 1) begin
          exp_macs++;
          if (c == n - 1 && held != 16 && held != 0) n_partial++;
          if (held == 16) n_full_words++;
          held = 0;
        end
      end
      sum = sum >>> sh;
      if (sum < 0) begin sum = 0; n_relu++; end
      if (sum > 32767) begin sum = 32767; n_sat++; end
      no_model[(obase + r) % 4096] = word_t'(sum);
      if (sum > 0 && sum < 32767) n_mid++;
    end
    // run
    @(negedge clk);
    n_cols = 14'(n); n_pass = 12'(p); in_base = 14'(ibase); out_base = NOA'(obase);
    src_sel = src; th = TH_W'(thr); out_shift = SH_W'(sh);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!got_done && cycles < 100000) begin
      if (stall) stalls++;
      for (int l = 0; l < L; l++) if (mac_active[l]) macs++;
      @(negedge clk);
      cycles++;
      if (done) got_done = 1;
    end
    checks++;
    if (!got_done) begin failures++; $display("FAIL layer never finished"); end
    checks++;
    if (cycles != n * p + stalls + 20) begin
      failures++;
      $display("FAIL layer took %0d cycles, expected %0d", cycles, n * p + stalls + 20);
    end
    checks++;
    if (macs != exp_macs) begin
      failures++;
      $display("FAIL multipliers ran %0d lane-cycles, expected %0d", macs, exp_macs);
    end
    n_stall += stalls;
    if (src) n_feedback++;
    if (p > 1) n_multipass++;
    mac_cycles += macs;
    mac_slots  += longint'(n) * p * L;
    $display("layer n=%0d passes=%0d th=%0d: %0d cycles, %0d holds, multiplier duty %0d/%0d",
             n, p, thr, cycles, stalls, macs, n * p * L);
    // read back
    for (int r = 0; r < p * L; r++) begin
      @(negedge clk);
      no_re = 1;
      no_raddr = NOA'(obase + r);
      @(negedge clk);
      no_re = 0;
      checks++;
      if (no_rdata != no_model[(obase + r) % 4096]) begin
        failures++;
        if (failures < 20) $display("FAIL output %0d = %0d, expected %0d", obase + r, no_rdata,
                                    no_model[(obase + r) % 4096]);
      end
    end
  endtask

  task automatic load_inputs(input int n, input int ibase, input int zero_pct);
    x_vec = new[n];
    for (int c = 0; c < n; c++) begin
      x_vec[c] = rnd_word(zero_pct);
      @(negedge clk);
      ni_we = 1; ni_waddr = NIA'(ibase + c); ni_wdata = x_vec[c];
    end
    @(negedge clk);
    ni_we = 0;
  endtask

  task automatic load_weights(input int n, input int p, input int zero_pct);
    wts = new[p * L];
    for (int r = 0; r < p * L; r++) begin
      wts[r] = new[n];
      for (int c = 0; c < n; c++) wts[r][c] = rnd_word(zero_pct);
    end
    for (int q = 0; q < p; q++)
      for (int c = 0; c < n; c++) begin
        @(negedge clk);
        wt_we = 1;
        wt_waddr = WTA'(q * n + c);
        for (int l = 0; l < L; l++) wt_wdata[l] = wts[q * L + l][c];
      end
    @(negedge clk);
    wt_we = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1: three passes from the input memory
    load_inputs(150, 40, 20);
    load_weights(150, 3, 25);
    run_layer(150, 3, 40, 0, 1'b0, 17, 17);

    // 2: layer 1's 48 outputs as input, through the feedback path
    x_vec = new[48];
    for (int c = 0; c < 48; c++) x_vec[c] = no_model[c];
    load_weights(48, 2, 10);
    run_layer(48, 2, 0, 1000, 1'b1, 20, 14);

    // 3: short vectors: passes wait for the write-back
    load_inputs(5, 0, 10);
    load_weights(5, 4, 10);
    run_layer(5, 4, 0, 2000, 1'b0, 24, 0);

    // 4: FC8-shaped pass: 4096 inputs, two tiles of 16 neurons
    load_inputs(4096, 4096, 30);
    load_weights(4096, 2, 30);
    run_layer(4096, 2, 4096, 3000, 1'b0, 18, 12);

    $display("kept=%0d near-zero skips=%0d zero skips=%0d full words=%0d partial words=%0d",
             n_kept, n_nz_skip, n_zero_skip, n_full_words, n_partial);
    $display("outputs in range=%0d", n_mid);
    $display("relu clamps=%0d saturations=%0d holds=%0d feedback layers=%0d multi-pass layers=%0d",
             n_relu, n_sat, n_stall, n_feedback, n_multipass);
    $display("multiplier duty %0d of %0d lane-cycles", mac_cycles, mac_slots);
    // every mechanism must have happened
    checks += 10;
    if (n_kept == 0)       begin failures++; $display("FAIL no kept products"); end
    if (n_nz_skip == 0)    begin failures++; $display("FAIL no near-zero skip"); end
    if (n_zero_skip == 0)  begin failures++; $display("FAIL no zero skip"); end
    if (n_full_words == 0) begin failures++; $display("FAIL no full operand word"); end
    if (n_partial == 0)    begin failures++; $display("FAIL no partial operand word"); end
    if (n_relu == 0)       begin failures++; $display("FAIL no ReLU clamp"); end
    if (n_sat == 0)        begin failures++; $display("FAIL no saturation"); end
    if (n_stall == 0)      begin failures++; $display("FAIL no write-back hold"); end
    if (n_feedback == 0)   begin failures++; $display("FAIL no feedback layer"); end
    if (n_multipass == 0)  begin failures++; $display("FAIL no multi-pass layer"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
