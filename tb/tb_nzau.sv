// tb_nzau: drives random columns (with many zero and small operands) and
// every threshold, and checks data_ld and the summed leading-zero counts
// against a model: keep lane i when lz(|a|) + lz(|b_i|) <= th and valid.
// Also checks the bound that motivates the unit: for a kept or skipped pair,
// the product's leading-zero count (32-bit) is l_total or l_total + 1.
module tb_nzau;
  import nz_pkg::*;
  localparam int L = 16;
  int checks = 0, failures = 0;
  logic              valid;
  logic [TH_W-1:0]   th;
  word_t             a;
  word_t [L-1:0]     b;
  logic  [L-1:0]     data_ld;
  logic  [L-1:0][LT_W-1:0] l_total;
  int n_kept = 0, n_skipped = 0;

  nzau #(.LANES(L)) dut (.valid, .th, .a, .b, .data_ld, .l_total);

  function automatic int lz_n(longint unsigned v, int n);
    for (int k = n - 1; k >= 0; k--)
      if (v[k]) return n - 1 - k;
    return n;
  endfunction

  function automatic word_t rnd_word();
    int unsigned r = $urandom;
    int unsigned sh = $urandom_range(0, 15);
    word_t v;
    if (r[3:0] == 0) return '0;
    v = word_t'($urandom) >>> sh;          // spread over magnitudes
    return v;
  endfunction

  initial begin
    for (int it = 0; it < 4000; it++) begin
      int la, lb;
      valid = ($urandom_range(0, 7) != 0);
      th    = TH_W'($urandom_range(0, 31));
      a     = rnd_word();
      for (int i = 0; i < L; i++) b[i] = rnd_word();
      #1;
      la = lz_n(longint'(a < 0 ? -int'(a) : int'(a)), 16);
      for (int i = 0; i < L; i++) begin
        int ab, bb, lt, lp;
        logic exp_ld;
        ab = (a < 0) ? -int'(a) : int'(a);
        bb = (b[i] < 0) ? -int'(b[i]) : int'(b[i]);
        lb = lz_n(longint'(bb), 16);
        lt = la + lb;
        exp_ld = valid && (lt <= int'(th));
        checks++;
        if (int'(l_total[i]) != lt || data_ld[i] != exp_ld) begin
          failures++;
          if (failures < 10)
            $display("FAIL a=%0d b=%0d th=%0d l_total=%0d(exp %0d) ld=%b(exp %b)",
                     a, b[i], th, l_total[i], lt, data_ld[i], exp_ld);
        end
        if (ab != 0 && bb != 0) begin
          lp = lz_n(longint'(ab) * longint'(bb), 32);
          checks++;
          if (lp != lt && lp != lt + 1) begin
            failures++;
            $display("FAIL bound a=%0d b=%0d lz(prod)=%0d l_total=%0d", a, b[i], lp, lt);
          end
        end
        if (valid) begin
          if (exp_ld) n_kept++; else n_skipped++;
        end
      end
    end
    // both outcomes must have occurred
    checks++;
    if (n_kept == 0 || n_skipped == 0) failures++;
    $display("kept=%0d skipped=%0d", n_kept, n_skipped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
