// tb_nz_ctrl: runs layers of random size against a model of the write-back,
// which answers each last column with wb_done 20 cycles later (the lanes'
// and output mux's latency in the full design). The issued reads must be
// in_base + c and p*n_cols + c in order, last on every pass's final column,
// with no gap when n_cols leaves room for the write-back, and done must pulse
// once, on the final wb_done.
module tb_nz_ctrl;
  localparam int CW = 14, PW = 12, WB_LAT = 20;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic start = 0;
  logic [CW-1:0] n_cols = '0, in_base = '0;
  logic [PW-1:0] n_pass = '0;
  logic wb_done = 0;
  logic rd_en, last, stall, busy, done;
  logic [CW-1:0] ni_addr, wt_addr;
  int n_stalls = 0;

  nz_ctrl #(.CW(CW), .PW(PW)) dut (.clk, .rst_n, .start, .n_cols, .n_pass, .in_base, .wb_done,
    .rd_en, .ni_addr, .wt_addr, .last, .stall, .busy, .done);

  always #5 clk = ~clk;

  int cyc = 0;
  int wb_due[$];

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int layer = 0; layer < 12; layer++) begin
      automatic int c = 0, p = 0, issued = 0, cycles = 0, stalls = 0;
      automatic bit got_done = 0;
      n_cols  = CW'((layer % 3 == 0) ? $urandom_range(1, 12) : $urandom_range(25, 200));
      n_pass  = PW'($urandom_range(1, 6));
      in_base = CW'($urandom_range(0, 1000));
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      while (!got_done) begin
        // outputs for this cycle
        wb_done = (wb_due.size() > 0 && wb_due[0] == cyc);
        if (wb_done) void'(wb_due.pop_front());
        #1;
        if (stall) stalls++;
        if (rd_en) begin
          checks++;
          if (int'(ni_addr) != int'(in_base) + c || int'(wt_addr) != p * int'(n_cols) + c ||
              last != (c == int'(n_cols) - 1)) begin
            failures++;
            if (failures < 10) $display("FAIL layer %0d: ni=%0d wt=%0d last=%b, expected c=%0d p=%0d",
                                        layer, ni_addr, wt_addr, last, c, p);
          end
          if (last) wb_due.push_back(cyc + WB_LAT);
          issued++;
          c++;
          if (c == int'(n_cols)) begin c = 0; p++; end
        end
        @(negedge clk);
        cyc++;
        cycles++;
        if (done) got_done = 1;
        if (cycles > 5000) break;
      end
      wb_done = 0;
      checks++;
      if (!got_done || issued != int'(n_cols) * int'(n_pass) || wb_due.size() != 0) begin
        failures++;
        $display("FAIL layer %0d: done=%b issued=%0d of %0d", layer, got_done, issued, n_cols * n_pass);
      end
      // with n_cols >= 21 the passes stream without any hold-up
      checks++;
      if (n_cols >= 21 && stalls != 0) begin failures++; $display("FAIL layer %0d stalled", layer); end
      if (n_cols < 21 && n_pass > 1 && stalls == 0) begin failures++; $display("FAIL layer %0d never held", layer); end
      checks++;
      if (cycles != int'(n_cols) * int'(n_pass) + stalls + WB_LAT) begin
        failures++;
        $display("FAIL layer %0d took %0d cycles, expected %0d", layer, cycles, n_cols * n_pass + stalls + WB_LAT);
      end
      n_stalls += stalls;
      @(negedge clk); cyc++;
      checks++;
      if (busy) begin failures++; $display("FAIL still busy"); end
    end
    $display("stall cycles=%0d", n_stalls);
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
