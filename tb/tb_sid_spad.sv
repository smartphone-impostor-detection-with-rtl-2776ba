// tb_sid_spad: checks the 64-word local scratchpad: a write is visible to the
// combinational read in the next cycle, and random write/read traffic matches
// a model array.
module tb_sid_spad;
  import sid_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [5:0] raddr = '0, waddr = '0;
  logic we = 0;
  word_t rdata, wdata = '0;
  sid_spad dut (.*);

  int checks = 0, failures = 0;
  word_t model [64];
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 64; i++) begin
      @(negedge clk); we = 1; waddr = 6'(i); wdata = $urandom; model[i] = wdata;
    end
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      raddr = 6'($urandom);
      #1;
      checks++;
      if (rdata !== model[raddr]) begin failures++; $display("FAIL read %0d", raddr); end
      we = $urandom_range(0, 1); waddr = 6'($urandom); wdata = $urandom;
      if (we) model[waddr] = wdata;
    end
    @(negedge clk); we = 0; raddr = waddr; #1;
    checks++;
    if (rdata !== model[waddr]) begin failures++; $display("FAIL last write"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
