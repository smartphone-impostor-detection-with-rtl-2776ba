// tb_sid_add: checks the EXE2 adders in every operation against values
// computed here: element-wise add, subtract and set-greater-than (including
// operands whose difference overflows 32 bits), the chained sum of the N
// products and the scratchpad partial sum, and the chained maximum.
module tb_sid_add;
  import sid_pkg::*;
  localparam int N = 4;
  add_op_e op = A_ADD;
  word_t p [N], c [N], s [N], psum, acc;
  sid_add #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string w, word_t got, word_t exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %0d vs %0d", w, got, exp); end
  endtask

  initial begin
    for (int t = 0; t < 400; t++) begin
      word_t esum, emax;
      longint lp, lc;
      for (int i = 0; i < N; i++) begin
        p[i] = (t % 3 == 0) ? $urandom : word_t'($urandom) >>> 8;
        c[i] = (t % 3 == 0) ? $urandom : word_t'($urandom) >>> 8;
      end
      psum = word_t'($urandom) >>> 4;
      op = add_op_e'(t % 5);
      #1;
      esum = psum; emax = psum;
      for (int i = 0; i < N; i++) begin
        esum += p[i];
        if (p[i] > emax) emax = p[i];
        lp = longint'(p[i]); lc = longint'(c[i]);
        case (op)
          A_ADD: chk("add", s[i], p[i] + c[i]);
          A_SUB: chk("sub", s[i], p[i] - c[i]);
          A_SGT: chk("sgt", s[i], (lp > lc) ? 32'h10000 : 32'h0);
          default: ;
        endcase
      end
      if (op == A_SUM) chk("sum", acc, esum);
      if (op == A_MAX) chk("max", acc, emax);
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
