// tb_sid_data_ram: checks the banked data RAM (4 banks, 1000 words so that the
// last bank row is partly out of range) against a model array. Random traffic
// mixes single-word host writes, N-wide pipeline writes with random lane masks
// at unaligned addresses, and N-wide reads of x and y at unaligned addresses,
// each with one cycle of read latency. A host write and a pipeline write to the
// same word in one cycle must leave the host's value.
module tb_sid_data_ram;
  import sid_pkg::*;
  localparam int N = 4, WORDS = 1000;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rx_en = 0, ry_en = 0, a_en = 0, a_we = 0;
  logic [31:0] rx_addr = '0, ry_addr = '0, w_addr = '0, a_addr = '0;
  word_t rx_data [N], ry_data [N], w_data [N], a_wdata = '0, a_rdata;
  logic [N-1:0] w_mask = '0;
  sid_data_ram #(.N(N), .WORDS(WORDS)) dut (.*);

  int checks = 0, failures = 0;
  word_t model [WORDS + 8];
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t mrd(int a); return (a < WORDS) ? model[a] : '0; endfunction

  task automatic chk(string w, word_t got, word_t exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %h vs %h", w, got, exp); end
  endtask

  initial begin
    // fill through the host port
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk); a_en = 1; a_we = 1; a_addr = i; a_wdata = $urandom; model[i] = a_wdata;
    end
    @(negedge clk); a_en = 0; a_we = 0;
    for (int t = 0; t < 3000; t++) begin
      int xa, ya;
      word_t ex [N], ey [N];
      @(negedge clk);
      // reads
      xa = $urandom_range(0, WORDS + 2); ya = $urandom_range(0, WORDS - 1);
      rx_en = 1; ry_en = 1; rx_addr = xa; ry_addr = ya;
      for (int i = 0; i < N; i++) begin ex[i] = mrd(xa + i); ey[i] = mrd(ya + i); end
      // a pipeline write and maybe a host write, possibly to the same word
      w_addr = $urandom_range(0, WORDS - 1);
      w_mask = N'($urandom);
      for (int i = 0; i < N; i++) w_data[i] = $urandom;
      a_en = $urandom_range(0, 1); a_we = a_en;
      a_addr = (t % 4 == 0) ? w_addr + $urandom_range(0, N - 1) : $urandom_range(0, WORDS - 1);
      a_wdata = $urandom;
      for (int i = 0; i < N; i++) if (w_mask[i] && w_addr + i < WORDS) model[w_addr + i] = w_data[i];
      if (a_en && a_addr < WORDS) model[a_addr] = a_wdata;
      @(negedge clk);
      rx_en = 0; ry_en = 0; w_mask = '0; a_en = 0; a_we = 0;
      for (int i = 0; i < N; i++) begin
        chk($sformatf("x lane %0d addr %0d", i, xa), rx_data[i], ex[i]);
        chk($sformatf("y lane %0d addr %0d", i, ya), ry_data[i], ey[i]);
      end
      // host read back of a random word
      a_en = 1; a_addr = $urandom_range(0, WORDS - 1);
      @(negedge clk); a_en = 0;
      chk($sformatf("host read %0d", a_addr), a_rdata, mrd(a_addr));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
