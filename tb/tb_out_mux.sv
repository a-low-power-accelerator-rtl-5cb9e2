// tb_out_mux: presents passes of 16 random results (negative, small, large)
// with random shifts. Each pass must be written as 16 consecutive writes,
// lane 0 first, starting the cycle after capture, to consecutive addresses
// continuing from out_base, with value min(max(result >>> shift, 0), 32767);
// wb_done must mark the 16th write.
module tb_out_mux;
  import nz_pkg::*;
  localparam int L = 16;
  localparam int AW = 12;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic init = 0;
  logic [AW-1:0] out_base = '0;
  logic [SH_W-1:0] out_shift = '0;
  logic [L-1:0] res_valid = '0;
  acc_t [L-1:0] result;
  logic we, busy, wb_done;
  logic [AW-1:0] waddr;
  word_t wdata;
  int n_relu = 0, n_sat = 0;

  out_mux #(.LANES(L), .AW(AW)) dut (.clk, .rst_n, .init, .out_base, .out_shift,
    .res_valid, .result, .we, .waddr, .wdata, .busy, .wb_done);

  always #5 clk = ~clk;

  function automatic acc_t rnd_acc();
    case ($urandom_range(0, 3))
      0: return -acc_t'($urandom);
      1: return acc_t'($urandom_range(0, 40000));
      2: return acc_t'({$urandom, $urandom});
      default: return acc_t'($urandom);
    endcase
  endfunction

  initial begin
    int addr;
    result = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    out_base = 12'd100;
    init = 1;
    @(negedge clk);
    init = 0;
    addr = 100;
    for (int p = 0; p < 40; p++) begin
      longint expv [L];
      out_shift = SH_W'($urandom_range(0, 20));
      for (int l = 0; l < L; l++) begin
        longint v;
        result[l] = rnd_acc();
        v = longint'(result[l]) >>> out_shift;
        if (v < 0) begin v = 0; n_relu++; end
        if (v > 32767) begin v = 32767; n_sat++; end
        expv[l] = v;
      end
      res_valid = '1;
      @(negedge clk);
      res_valid = '0;
      result = '0;   // results are held inside
      for (int l = 0; l < L; l++) begin
        checks++;
        if (!we || int'(waddr) != addr || longint'(wdata) != expv[l] ||
            wb_done != (l == L - 1) || !busy) begin
          failures++;
          if (failures < 10) $display("FAIL pass %0d lane %0d we=%b addr=%0d(%0d) data=%0d(%0d) done=%b",
                                      p, l, we, waddr, addr, wdata, expv[l], wb_done);
        end
        addr++;
        @(negedge clk);
      end
      checks++;
      if (we || busy) begin failures++; $display("FAIL write after the 16th"); end
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    checks++;
    if (n_relu == 0 || n_sat == 0) failures++;
    $display("relu clamps=%0d saturations=%0d", n_relu, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
