// tb_pl_buffer: random streams of kept pairs with random neuron ends.
// A model gathers the pairs, emits a word when sixteen are held or at a
// flush (unused slots zero), and expects it on OP_reg exactly two cycles
// after the cycle of the 16th pair or the flush, with op_last on flushes.
module tb_pl_buffer;
  import nz_pkg::*;
  localparam int S = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic data_ld = 0, flush = 0;
  word_t ni_in = '0, wt_in = '0;
  logic op_valid, op_last;
  word_t [S-1:0] op_ni, op_wt;
  int n_full = 0, n_flush = 0, n_back2back = 0;

  pl_buffer #(.SLOTS(S)) dut (.clk, .rst_n, .data_ld, .ni_in, .wt_in, .flush,
                              .op_valid, .op_last, .op_ni, .op_wt);

  always #5 clk = ~clk;

  typedef struct {
    int due;
    logic last;
    word_t ni [S];
    word_t wt [S];
  } exp_t;
  exp_t q[$];
  word_t cur_ni[$], cur_wt[$];
  int cyc = 0;
  int last_emit = -10;

  task automatic check_out();
    if (q.size() > 0 && q[0].due == cyc) begin
      exp_t e = q.pop_front();
      checks++;
      if (!op_valid || op_last != e.last) begin
        failures++;
        $display("FAIL cyc=%0d op_valid=%b op_last=%b expected last=%b", cyc, op_valid, op_last, e.last);
      end else begin
        for (int s = 0; s < S; s++)
          if (op_ni[s] != e.ni[s] || op_wt[s] != e.wt[s]) begin
            failures++;
            $display("FAIL cyc=%0d slot %0d ni=%0d/%0d wt=%0d/%0d", cyc, s, op_ni[s], e.ni[s], op_wt[s], e.wt[s]);
            break;
          end
      end
    end else begin
      checks++;
      if (op_valid) begin
        failures++;
        $display("FAIL cyc=%0d unexpected op_valid", cyc);
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 6000; it++) begin
      @(negedge clk);
      cyc++;
      check_out();
      // new inputs for the coming edge
      data_ld = ($urandom_range(0, 99) < ((it / 1000) % 2 ? 90 : 30));
      flush   = ($urandom_range(0, 99) < 4);
      ni_in   = word_t'($urandom);
      wt_in   = word_t'($urandom);
      if (data_ld) begin
        cur_ni.push_back(ni_in);
        cur_wt.push_back(wt_in);
      end
      if (cur_ni.size() == S || flush) begin
        exp_t e;
        e.due  = cyc + 2;
        e.last = flush;
        for (int s = 0; s < S; s++) begin
          e.ni[s] = (s < cur_ni.size()) ? cur_ni[s] : '0;
          e.wt[s] = (s < cur_wt.size()) ? cur_wt[s] : '0;
        end
        if (flush) n_flush++; else n_full++;
        if (cyc == last_emit + 1) n_back2back++;
        last_emit = cyc;
        q.push_back(e);
        cur_ni.delete();
        cur_wt.delete();
      end
    end
    data_ld = 0; flush = 0;
    repeat (4) begin @(negedge clk); cyc++; check_out(); end
    checks++;
    if (q.size() != 0 || n_full == 0 || n_flush == 0) failures++;
    $display("full words=%0d flushes=%0d back-to-back=%0d", n_full, n_flush, n_back2back);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
