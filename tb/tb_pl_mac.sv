// tb_pl_mac: random operand words, grouped into neurons of random length,
// including the extreme values -32768 and 32767. The expected result is the
// sum of all 16-bit x 16-bit products of the neuron, computed with 64-bit
// integers; it must appear one cycle after the neuron's last word, and
// nothing may appear otherwise.
module tb_pl_mac;
  import nz_pkg::*;
  localparam int M = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic op_valid = 0, op_last = 0;
  word_t [M-1:0] op_ni, op_wt;
  logic res_valid;
  acc_t result;

  pl_mac #(.MULTS(M)) dut (.clk, .rst_n, .op_valid, .op_last, .op_ni, .op_wt, .res_valid, .result);

  always #5 clk = ~clk;

  function automatic word_t rnd();
    case ($urandom_range(0, 9))
      0: return 16'sh8000;
      1: return 16'sh7fff;
      2: return '0;
      default: return word_t'($urandom);
    endcase
  endfunction

  longint sum = 0;
  longint expected = 0;
  logic   exp_valid = 0;

  initial begin
    op_ni = '0; op_wt = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      // result of the previous edge
      checks++;
      if (res_valid != exp_valid || (exp_valid && longint'(result) != expected)) begin
        failures++;
        if (failures < 10) $display("FAIL it=%0d res_valid=%b result=%0d expected %b %0d",
                                    it, res_valid, result, exp_valid, expected);
      end
      op_valid = ($urandom_range(0, 2) != 0);
      op_last  = op_valid && ($urandom_range(0, 5) == 0);
      for (int m = 0; m < M; m++) begin
        op_ni[m] = rnd();
        op_wt[m] = rnd();
      end
      exp_valid = 0;
      if (op_valid) begin
        for (int m = 0; m < M; m++) sum += longint'(op_ni[m]) * longint'(op_wt[m]);
        if (op_last) begin
          expected  = sum;
          exp_valid = 1;
          sum       = 0;
        end
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
