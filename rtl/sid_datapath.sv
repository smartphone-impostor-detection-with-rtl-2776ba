// sid_datapath: the N parallel tracks of SID, stages EXE0, EXE1, EXE2 and WR.
//
// Each track has a look-up table (EXE0), a multiplier (EXE1) and an adder
// (EXE2); a local scratchpad sits in EXE2 (paper, Fig. 1). Every cycle one
// iteration of a macro-instruction (a uop from the control unit) enters EXE0
// together with the N-word operands x and y read from the data RAM. The
// iteration moves one stage per cycle and its result is written back to the
// data RAM in WR, four cycles after it entered EXE0. There is no back-pressure.
//
// How each mode uses the tracks (lane i; m = multiplier, a = adder):
//   Vadd/Vsub    m: x*1.0        a: +/- y
//   Vmul         m: x*y          a: +0
//   Vsgt/VSsgt   m: x*1.0        a: compare with y (y[0] broadcast for VSsgt)
//   Vsig/Vtanh/Vexp  LUT gives k,b for x;  m: k*x   a: +b   (paper)
//   MVmul        m: X[r][j+i]*y[j+i]; adders chained, plus scratchpad row r
//   Vsqnorm      m: x*x; adders chained, plus scratchpad entry 0
//   Vmaxabs      m: x*(+/-1.0) = |x|; adders chained as comparators with the
//                scratchpad maximum
// Lanes past the iteration's lane count get zero operands, the identity of
// both the sum and the max of absolute values. In reduction modes the result
// goes back to the scratchpad until the last column tile, where it is written
// to memory (one word, at uop.waddr); otherwise lane i writes waddr + i.
// Using the multiplier for |x| and the exact operand routing are this design's.
module sid_datapath
  import sid_pkg::*;
#(
  parameter int unsigned N          = 4,
  parameter int unsigned SPAD_WORDS = 64,
  parameter int unsigned LUT_SEGS   = 64,
  parameter int unsigned LUT_FRAC   = 2,
  localparam int unsigned SPW       = $clog2(SPAD_WORDS),
  localparam int unsigned LSW       = $clog2(LUT_SEGS)
) (
  input  logic              clk,
  input  logic              rst_n,
  // EXE0 inputs
  input  uop_t              uop,
  input  word_t             x [N],
  input  word_t             y [N],
  // WR outputs to the data RAM write port
  output logic [N-1:0]      w_mask,
  output logic [ADDR_W-1:0] w_addr,
  output word_t             w_data [N],
  // a uop is in EXE0..WR
  output logic              busy,
  // LUT load port (broadcast to every track)
  input  logic              lut_we,
  input  lut_fn_e           lut_fn,
  input  logic [LSW-1:0]    lut_seg,
  input  word_t             lut_k,
  input  word_t             lut_b
);

  // ---------------- EXE0: LUT and operand routing ----------------
  lut_fn_e fn0;
  always_comb begin
    unique case (uop.mode)
      M_VTANH: fn0 = F_TANH;
      M_VEXP:  fn0 = F_EXP;
      default: fn0 = F_SIG;
    endcase
  end

  word_t lk [N];
  word_t lb [N];
  for (genvar i = 0; i < N; i++) begin : g_lut
    sid_lut #(.SEGS(LUT_SEGS), .SEG_FRAC(LUT_FRAC)) u_lut (
      .clk, .fn(fn0), .x(x[i]), .k(lk[i]), .b(lb[i]),
      .cfg_we(lut_we), .cfg_fn(lut_fn), .cfg_seg(lut_seg), .cfg_k(lut_k), .cfg_b(lut_b)
    );
  end

  word_t ma0 [N];
  word_t mb0 [N];
  word_t c0  [N];
  always_comb begin
    for (int unsigned i = 0; i < N; i++) begin
      ma0[i] = x[i];
      mb0[i] = FX_ONE;
      c0[i]  = y[i];
      unique case (uop.mode)
        M_VMUL, M_MVMUL: begin mb0[i] = y[i]; c0[i] = '0; end
        M_VSSGT:         c0[i] = y[0];
        M_VSIG, M_VTANH, M_VEXP: begin mb0[i] = lk[i]; c0[i] = lb[i]; end
        M_VSQNORM:       begin mb0[i] = x[i]; c0[i] = '0; end
        M_VMAXABS:       begin mb0[i] = x[i][DATA_W-1] ? FX_MONE : FX_ONE; c0[i] = '0; end
        default: ;
      endcase
      if (i >= 32'(uop.lanes)) begin
        ma0[i] = '0; mb0[i] = '0; c0[i] = '0;
      end
    end
  end

  // ---------------- EXE1: multipliers ----------------
  uop_t  uop1, uop2;
  logic  valid3;
  word_t ma1 [N];
  word_t mb1 [N];
  word_t c1  [N];
  word_t c2  [N];
  word_t p2  [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      uop1 <= '0;
      uop2 <= '0;
    end else begin
      uop1 <= uop;
      uop2 <= uop1;
    end
  end

  always_ff @(posedge clk) begin
    ma1 <= ma0;
    mb1 <= mb0;
    c1  <= c0;
    c2  <= c1;
  end

  for (genvar i = 0; i < N; i++) begin : g_mul
    sid_mul u_mul (.clk, .en(1'b1), .a(ma1[i]), .b(mb1[i]), .p(p2[i]));
  end

  // ---------------- EXE2: adders and scratchpad ----------------
  add_op_e aop;
  always_comb begin
    unique case (uop2.mode)
      M_VSUB:               aop = A_SUB;
      M_VSGT, M_VSSGT:      aop = A_SGT;
      M_MVMUL, M_VSQNORM:   aop = A_SUM;
      M_VMAXABS:            aop = A_MAX;
      default:              aop = A_ADD;
    endcase
  end

  word_t sp_rdata, psum, s2 [N], acc2;
  logic  red2;
  assign red2 = is_reduction(uop2.mode);
  assign psum = uop2.first ? '0 : sp_rdata;

  sid_add #(.N(N)) u_add (.op(aop), .p(p2), .c(c2), .psum, .s(s2), .acc(acc2));

  sid_spad #(.WORDS(SPAD_WORDS)) u_spad (
    .clk,
    .raddr(uop2.row[SPW-1:0]),
    .rdata(sp_rdata),
    .we(uop2.valid && red2 && !uop2.last),
    .waddr(uop2.row[SPW-1:0]),
    .wdata(acc2)
  );

  // ---------------- WR ----------------
  logic [N-1:0] mask2;
  always_comb begin
    mask2 = '0;
    if (uop2.valid) begin
      if (red2) mask2[0] = uop2.last;
      else for (int unsigned i = 0; i < N; i++) mask2[i] = (i < 32'(uop2.lanes));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid3 <= 1'b0;
      w_mask <= '0;
    end else begin
      valid3 <= uop2.valid;
      w_mask <= mask2;
    end
  end

  always_ff @(posedge clk) begin
    w_addr <= uop2.waddr;
    for (int unsigned i = 0; i < N; i++) w_data[i] <= red2 ? ((i == 0) ? acc2 : '0) : s2[i];
  end

  assign busy = uop.valid | uop1.valid | uop2.valid | valid3;

endmodule
