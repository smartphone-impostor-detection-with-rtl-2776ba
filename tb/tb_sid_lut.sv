// tb_sid_lut: loads a table whose entries encode their own function and
// segment, then checks that inputs across and beyond the covered range
// [-8, 8) select segment clamp(floor(4x) + 32) of the requested function.
module tb_sid_lut;
  import sid_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  lut_fn_e fn = F_SIG, cfg_fn = F_SIG;
  word_t x = '0, k, b, cfg_k = '0, cfg_b = '0;
  logic cfg_we = 0;
  logic [5:0] cfg_seg = '0;
  sid_lut dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int f = 0; f < 3; f++)
      for (int s = 0; s < 64; s++) begin
        @(negedge clk);
        cfg_we = 1; cfg_fn = lut_fn_e'(f); cfg_seg = 6'(s);
        cfg_k = 1000 * f + s; cfg_b = -(1000 * f + s);
      end
    @(negedge clk); cfg_we = 0;
    for (int t = 0; t < 2000; t++) begin
      real xr;
      int  es, f;
      xr = ($itor($urandom_range(0, 40000)) - 20000.0) / 1000.0;   // -20 .. 20
      if (t < 3) xr = (t == 0) ? -8.0 : (t == 1) ? 7.99 : -0.01;
      f = t % 3;
      @(negedge clk);
      x = word_t'($rtoi($floor(xr * 65536.0)));
      fn = lut_fn_e'(f);
      #1;
      es = $rtoi($floor($itor(x) / 16384.0)) + 32;
      if (es < 0) es = 0;
      if (es > 63) es = 63;
      checks++;
      if (k !== word_t'(1000 * f + es) || b !== word_t'(-(1000 * f + es))) begin
        failures++; $display("FAIL x=%f fn=%0d: k=%0d b=%0d, expected segment %0d", xr, f, k, b, es);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
