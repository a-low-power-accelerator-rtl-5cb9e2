// tb_nz_abs: checks the magnitude of every 16-bit input against an integer
// absolute value computed in the testbench.
module tb_nz_abs;
  int checks = 0, failures = 0;
  logic [15:0] x, mag;

  nz_abs #(.W(16)) dut (.x, .mag);

  initial begin
    for (int v = -32768; v < 32768; v++) begin
      int expected;
      x = 16'(v);
      expected = (v < 0) ? -v : v;
      #1;
      checks++;
      if (int'(mag) != expected) begin
        failures++;
        if (failures < 10) $display("FAIL x=%0d mag=%0d expected=%0d", v, mag, expected);
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
