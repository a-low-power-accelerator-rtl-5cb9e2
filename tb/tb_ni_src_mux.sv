// tb_ni_src_mux: random words on both sources and a random select; the
// output must be the output-memory word when sel is 1, else the input-memory
// word.
module tb_ni_src_mux;
  import nz_pkg::*;
  int checks = 0, failures = 0;
  logic sel;
  word_t a, b, x;

  ni_src_mux dut (.sel, .ni_mem(a), .no_mem(b), .x);

  initial begin
    for (int it = 0; it < 2000; it++) begin
      sel = 1'($urandom);
      a = word_t'($urandom);
      b = word_t'($urandom);
      #1;
      checks++;
      if (x != (sel ? b : a)) begin
        failures++;
        $display("FAIL sel=%b a=%h b=%h x=%h", sel, a, b, x);
      end
    end
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
