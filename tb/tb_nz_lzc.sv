// tb_nz_lzc: checks the leading-zero count of every 16-bit word against a
// bit-by-bit scan from the top, including the all-zero word (count 16).
module tb_nz_lzc;
  int checks = 0, failures = 0;
  logic [15:0] x;
  logic [4:0]  lz;

  nz_lzc #(.W(16)) dut (.x, .lz);

  function automatic int ref_lz(logic [15:0] v);
    for (int b = 15; b >= 0; b--)
      if (v[b]) return 15 - b;
    return 16;
  endfunction

  initial begin
    for (int v = 0; v < 65536; v++) begin
      x = 16'(v);
      #1;
      checks++;
      if (int'(lz) != ref_lz(x)) begin
        failures++;
        if (failures < 10) $display("FAIL x=%h lz=%0d expected=%0d", x, lz, ref_lz(x));
      end
    end
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
