// tb_processing_lane: feeds one lane random neurons of random length with a
// random keep pattern, as the NZAU would. The result must equal the sum of
// the kept products only, three cycles after the neuron's last column, and
// the multipliers must be active once for every 16 kept pairs plus once for
// the word that closes each neuron, and in no other cycle.
module tb_processing_lane;
  import nz_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic data_ld = 0, flush = 0;
  word_t ni_in = '0, wt_in = '0;
  logic res_valid, mac_active;
  acc_t result;

  processing_lane #(.SLOTS(16)) dut (.clk, .rst_n, .data_ld, .ni_in, .wt_in, .flush,
                                     .res_valid, .result, .mac_active);

  always #5 clk = ~clk;

  longint exp_q[$];
  int     due_q[$];
  int     cyc = 0, active_cycles = 0, exp_active = 0, held = 0;

  // results and multiplier activity of the previous edge
  task automatic mon();
    if (mac_active) active_cycles++;
    if (res_valid) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL unexpected result");
      end else begin
        longint e = exp_q.pop_front();
        int d = due_q.pop_front();
        if (longint'(result) != e || d != cyc) begin
          failures++;
          $display("FAIL result=%0d expected=%0d at cyc %0d due %0d", result, e, cyc, d);
        end
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      automatic int len = $urandom_range(1, 120);
      automatic int kept = 0;
      automatic longint sum = 0;
      automatic int density = $urandom_range(0, 100);
      for (int c = 0; c < len; c++) begin
        @(negedge clk);
        cyc++;
        mon();
        data_ld = ($urandom_range(0, 99) < density);
        flush   = (c == len - 1);
        ni_in   = word_t'($urandom);
        wt_in   = word_t'($urandom);
        if (data_ld) begin
          sum += longint'(ni_in) * longint'(wt_in);
          kept++;
          held++;
        end
        // one operand word per 16 pairs held, and one at the neuron's end
        if (held == 16 || flush) begin
          exp_active++;
          held = 0;
        end
        if (flush) begin
          exp_q.push_back(sum);
          due_q.push_back(cyc + 3);
        end
      end
    end
    @(negedge clk); cyc++; mon();
    data_ld = 0; flush = 0;
    repeat (6) begin @(negedge clk); cyc++; mon(); end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d results missing", exp_q.size()); end
    checks++;
    if (active_cycles != exp_active) begin
      failures++;
      $display("FAIL multiplier active cycles %0d expected %0d", active_cycles, exp_active);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #300000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
