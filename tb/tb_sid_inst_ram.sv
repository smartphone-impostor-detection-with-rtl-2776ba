// tb_sid_inst_ram: checks the instruction RAM at its default depth (8192).
// Random instructions are written through the host port at random addresses,
// then read back through the fetch port with one cycle of latency; the output
// must hold while re is low.
module tb_sid_inst_ram;
  import sid_pkg::*;
  localparam int DEPTH = 8192;
  logic clk = 0;
  always #5 clk = ~clk;
  logic re = 0, host_we = 0;
  logic [12:0] pc = '0, host_addr = '0;
  inst_t inst, host_wdata = '0;
  sid_inst_ram dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  inst_t model [int];
  function automatic inst_t rnd_inst();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  initial begin
    int addrs [$];
    for (int i = 0; i < 200; i++) begin
      int a;
      a = (i < 2) ? i * (DEPTH - 1) : $urandom_range(0, DEPTH - 1);
      @(negedge clk);
      host_we = 1; host_addr = 13'(a); host_wdata = rnd_inst();
      model[a] = host_wdata;
      addrs.push_back(a);
    end
    @(negedge clk); host_we = 0;
    foreach (addrs[i]) begin
      @(negedge clk); re = 1; pc = 13'(addrs[i]);
      @(negedge clk); re = 0; pc = 13'($urandom);
      checks++;
      if (inst !== model[addrs[i]]) begin
        failures++; $display("FAIL addr %0d: %h vs %h", addrs[i], inst, model[addrs[i]]);
      end
      @(negedge clk);
      checks++;
      if (inst !== model[addrs[i]]) begin failures++; $display("FAIL output did not hold"); end
    end
    // field positions of the format
    begin
      inst_t t;
      t = {4'hA, 14'd5, 14'd3, 32'h11, 32'h22, 32'h33};
      checks++;
      if (t.mode != mode_e'(4'hA) || t.length != 14'd5 || t.width != 14'd3 || t.addr_x != 32'h11 || t.addr_y != 32'h22 || t.addr_z != 32'h33) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
