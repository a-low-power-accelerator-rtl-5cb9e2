// tb_nz_icg: a free-running counter on clk feeds a register on the gated
// clock. With a random enable, the gated register must take the counter's
// value of the edge (the old value, no race) exactly in the cycles whose
// enable was high before the edge, and hold otherwise; the number of gated
// clock pulses must equal the number of enabled cycles.
module tb_nz_icg;
  int checks = 0, failures = 0;
  logic clk = 0, en = 0, gclk;
  logic [15:0] cnt = '0, held = '0;
  int pulses = 0, enabled = 0;

  nz_icg dut (.clk, .en, .gclk);

  always #5 clk = ~clk;
  always_ff @(posedge clk)  cnt <= cnt + 1'b1;
  always_ff @(posedge gclk) held <= cnt;
  always @(posedge gclk) pulses++;

  initial begin
    logic [15:0] expect_held;
    logic        en_now;
    expect_held = '0;
    held = '0;
    @(negedge clk);
    for (int it = 0; it < 2000; it++) begin
      en_now = ($urandom_range(0, 2) == 0);
      en = en_now;
      if (en_now) begin
        expect_held = cnt;
        enabled++;
      end
      // a glitch on en while clk is high must not reach gclk
      @(posedge clk);
      #1 en = ~en_now;
      @(negedge clk);
      en = 0;
      checks++;
      if (held != expect_held) begin
        failures++;
        if (failures < 10) $display("FAIL it=%0d held=%0d expected=%0d", it, held, expect_held);
      end
    end
    checks++;
    if (pulses != enabled) begin
      failures++;
      $display("FAIL %0d gated pulses for %0d enabled cycles", pulses, enabled);
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
