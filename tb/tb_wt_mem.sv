// tb_wt_mem: writes random 16-weight columns to random addresses of the
// weight memory while reading others, and checks each read against a shadow array
// one cycle after the read (old data on a same-address read and write).
module tb_wt_mem;
  import nz_pkg::*;
  localparam int D = 300;
  localparam int AW = $clog2(D);
  int checks = 0, failures = 0;
  logic clk = 0;
  logic we = 0, re = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  word_t [15:0] wdata = '0, rdata;
  word_t [15:0] shadow [D];
  logic written [D];
  word_t [15:0] exp_data; logic exp_valid = 0;

  wt_mem #(.LANES(16), .DEPTH(D)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin
    for (int i = 0; i < D; i++) written[i] = 0;
    for (int it = 0; it < 4000; it++) begin
      @(negedge clk);
      if (exp_valid) begin
        checks++;
        if (rdata != exp_data) begin
          failures++;
          if (failures < 10) $display("FAIL read %h expected %h", rdata, exp_data);
        end
      end
      we    = ($urandom_range(0, 1) == 1) || it < D;
      waddr = (it < D) ? AW'(it) : AW'($urandom_range(0, D - 1));
      for (int l = 0; l < 16; l++) wdata[l] = word_t'($urandom);
      re    = (it >= D) && ($urandom_range(0, 2) != 0);
      raddr = ($urandom_range(0, 3) == 0) ? waddr : AW'($urandom_range(0, D - 1));
      exp_valid = re && written[raddr];
      exp_data  = shadow[raddr];
      if (we) begin shadow[waddr] = wdata; written[waddr] = 1; end
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
