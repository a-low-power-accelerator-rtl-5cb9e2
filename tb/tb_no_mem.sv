// tb_no_mem: random writes and reads on both read ports of the neuron
// output memory, each read checked one cycle later against a shadow array.
module tb_no_mem;
  import nz_pkg::*;
  localparam int D = 200;
  localparam int AW = $clog2(D);
  int checks = 0, failures = 0;
  logic clk = 0;
  logic we = 0, re_a = 0, re_b = 0;
  logic [AW-1:0] waddr = '0, raddr_a = '0, raddr_b = '0;
  word_t wdata = '0, rdata_a, rdata_b;
  word_t shadow [D];
  word_t exp_a, exp_b;
  logic  chk_a = 0, chk_b = 0;

  no_mem #(.DEPTH(D)) dut (.clk, .we, .waddr, .wdata, .re_a, .raddr_a, .rdata_a,
                           .re_b, .raddr_b, .rdata_b);

  always #5 clk = ~clk;

  initial begin
    for (int it = 0; it < 4000; it++) begin
      @(negedge clk);
      if (chk_a) begin
        checks++;
        if (rdata_a != exp_a) begin failures++; $display("FAIL port a %0d expected %0d", rdata_a, exp_a); end
      end
      if (chk_b) begin
        checks++;
        if (rdata_b != exp_b) begin failures++; $display("FAIL port b %0d expected %0d", rdata_b, exp_b); end
      end
      we      = (it < D) || ($urandom_range(0, 1) == 1);
      waddr   = (it < D) ? AW'(it) : AW'($urandom_range(0, D - 1));
      wdata   = word_t'($urandom);
      re_a    = (it >= D) && ($urandom_range(0, 1) == 1);
      re_b    = (it >= D) && ($urandom_range(0, 1) == 1);
      raddr_a = AW'($urandom_range(0, D - 1));
      raddr_b = ($urandom_range(0, 3) == 0) ? waddr : AW'($urandom_range(0, D - 1));
      chk_a = re_a; exp_a = shadow[raddr_a];
      chk_b = re_b; exp_b = shadow[raddr_b];
      if (we) shadow[waddr] = wdata;
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
