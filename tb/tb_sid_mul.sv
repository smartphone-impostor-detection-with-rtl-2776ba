// tb_sid_mul: checks the Q16.16 multiplier: known products, random products
// against 64-bit integer arithmetic, one cycle of latency and hold when en is
// low.
module tb_sid_mul;
  import sid_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic en = 0;
  word_t a = '0, b = '0, p;
  sid_mul dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(word_t x, word_t y, word_t exp);
    @(negedge clk); en = 1; a = x; b = y;
    @(negedge clk); en = 0; a = $urandom; b = $urandom;
    checks++;
    if (p !== exp) begin failures++; $display("FAIL %0d * %0d = %0d, expected %0d", x, y, p, exp); end
    @(negedge clk);
    checks++;
    if (p !== exp) begin failures++; $display("FAIL product did not hold"); end
  endtask

  initial begin
    one(32'h0001_8000, 32'h0002_0000, 32'h0003_0000);   // 1.5 * 2 = 3
    one(32'hFFFF_8000, 32'h0000_8000, 32'hFFFF_C000);   // -0.5 * 0.5 = -0.25
    one(32'h0000_0001, 32'h0000_0001, 32'h0000_0000);   // truncation
    one(32'hFFFF_FFFF, 32'h0000_0001, 32'hFFFF_FFFF);   // floor of -2^-32
    for (int i = 0; i < 300; i++) begin
      word_t x, y;
      longint pr;
      x = $urandom; y = $urandom;
      if (i % 2 == 0) begin x = x >>> 12; y = y >>> 12; end
      pr = longint'(x) * longint'(y);
      one(x, y, word_t'(pr >>> 16));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
