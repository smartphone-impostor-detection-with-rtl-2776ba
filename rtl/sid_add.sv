// sid_add: the N adders of the EXE2 stage.
//
// In element-wise modes adder i works on track i alone: s[i] = p[i] + c[i],
// p[i] - c[i], or the set-greater-than result (1.0 if p[i] > c[i], else 0,
// decided by the sign of a 33-bit difference). In reduction modes the same N
// adders are chained instead of adding an adder tree (paper): adder 0 combines
// p[0] and p[1], adder i folds in p[i+1], and the last adder folds in psum, the
// partial result read from the local scratchpad. The chain either adds
// (MVmul, Vsqnorm) or keeps the larger operand, using the adder's difference
// as a comparison (Vmaxabs). Purely combinational; sums wrap.
// The chaining and the reuse for comparisons follow the paper; the chain order
// is this design's.
module sid_add
  import sid_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  add_op_e op,
  input  word_t   p    [N],   // products from EXE1
  input  word_t   c    [N],   // second operands (element-wise modes)
  input  word_t   psum,       // scratchpad partial result (reduction modes)
  output word_t   s    [N],   // element-wise results
  output word_t   acc         // reduction result
);

  // One adder: sum or difference, with the sign of the exact difference.
  function automatic word_t fold(add_op_e o, word_t a, word_t b);
    logic signed [DATA_W:0] d;
    d = {a[DATA_W-1], a} - {b[DATA_W-1], b};
    if (o == A_MAX) return (d > 0) ? a : b;
    return a + b;
  endfunction

  always_comb begin
    for (int unsigned i = 0; i < N; i++) begin
      logic signed [DATA_W:0] d;
      d = {p[i][DATA_W-1], p[i]} - {c[i][DATA_W-1], c[i]};
      unique case (op)
        A_SUB:   s[i] = p[i] - c[i];
        A_SGT:   s[i] = (d > 0) ? FX_ONE : '0;
        default: s[i] = p[i] + c[i];
      endcase
    end
    acc = p[0];
    for (int unsigned i = 1; i < N; i++) acc = fold(op, acc, p[i]);
    acc = fold(op, acc, psum);
  end

endmodule
