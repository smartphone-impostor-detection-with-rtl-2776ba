// sid_pkg: types and constants shared by the Smartphone Impostor Detector (SID).
//
// SID runs macro-instructions: one instruction is a whole vector or matrix
// operation whose operands and result live in the data RAM. The 128-bit
// instruction layout (mode 127:124, length 123:110, width 109:96, addr_x 95:64,
// addr_y 63:32, addr_z 31:0) and the list of eleven supported operations follow
// the paper. The numeric mode encoding, the HALT mode that ends a program, the
// Q16.16 fixed-point format and the micro-operation record passed down the
// pipeline are choices of this design.
package sid_pkg;

  localparam int unsigned DATA_W = 32;           // 32-bit fixed point (paper)
  localparam int unsigned FRAC   = 16;           // Q16.16 (design choice)
  localparam int unsigned INST_W = 128;          // macro-instruction width (paper)
  localparam int unsigned LEN_W  = 14;           // Length / Width fields (paper)
  localparam int unsigned ADDR_W = 32;           // Addr_x/y/z fields (paper)

  typedef logic signed [DATA_W-1:0] word_t;

  localparam word_t FX_ONE  = word_t'(1 << FRAC);
  localparam word_t FX_MONE = word_t'(-(1 << FRAC));

  // Operation modes. Names from the paper; encodings are this design's.
  typedef enum logic [3:0] {
    M_VADD    = 4'd0,   // z[i] = x[i] + y[i]
    M_VSUB    = 4'd1,   // z[i] = x[i] - y[i]
    M_VMUL    = 4'd2,   // z[i] = x[i] * y[i]
    M_VSGT    = 4'd3,   // z[i] = (x[i] > y[i]) ? 1.0 : 0
    M_VSIG    = 4'd4,   // z[i] = sigmoid(x[i])   (piecewise linear)
    M_VTANH   = 4'd5,   // z[i] = tanh(x[i])      (piecewise linear)
    M_VEXP    = 4'd6,   // z[i] = exp(x[i])       (piecewise linear)
    M_MVMUL   = 4'd7,   // z[r] = sum_j X[r][j] * y[j], X is width x length
    M_VSSGT   = 4'd8,   // z[i] = (x[i] > y[0]) ? 1.0 : 0
    M_VMAXABS = 4'd9,   // z[0] = max_i |x[i]|
    M_VSQNORM = 4'd10,  // z[0] = sum_i x[i]^2
    M_HALT    = 4'd15   // end of program
  } mode_e;

  typedef struct packed {
    mode_e             mode;    // 127:124
    logic [LEN_W-1:0]  length;  // 123:110
    logic [LEN_W-1:0]  width;   // 109:96
    logic [ADDR_W-1:0] addr_x;  // 95:64
    logic [ADDR_W-1:0] addr_y;  // 63:32
    logic [ADDR_W-1:0] addr_z;  // 31:0
  } inst_t;

  // Non-linear function selector of the look-up tables.
  typedef enum logic [1:0] {
    F_SIG  = 2'd0,
    F_TANH = 2'd1,
    F_EXP  = 2'd2
  } lut_fn_e;

  // Operation of the EXE2 adders.
  typedef enum logic [2:0] {
    A_ADD   = 3'd0,   // s[i] = p[i] + c[i]
    A_SUB   = 3'd1,   // s[i] = p[i] - c[i]
    A_SGT   = 3'd2,   // s[i] = (p[i] > c[i]) ? 1.0 : 0
    A_SUM   = 3'd3,   // chain: acc = p[0] + ... + p[N-1] + psum
    A_MAX   = 3'd4    // chain: acc = max(p[0], ..., p[N-1], psum)
  } add_op_e;

  // One iteration of a macro-instruction as it travels EXE0 -> WR.
  typedef struct packed {
    logic              valid;
    mode_e             mode;
    logic [7:0]        lanes;   // active tracks this iteration (1..N)
    logic              first;   // first column tile: partial sum starts at 0
    logic              last;    // last column tile: result goes to memory
    logic [LEN_W-1:0]  row;     // scratchpad entry (matrix row)
    logic [ADDR_W-1:0] waddr;   // result address of lane 0
  } uop_t;

  function automatic logic is_reduction(mode_e m);
    return (m == M_MVMUL) || (m == M_VMAXABS) || (m == M_VSQNORM);
  endfunction

  // Fixed-point product, truncated toward minus infinity.
  function automatic word_t fx_mul(word_t a, word_t b);
    logic signed [2*DATA_W-1:0] p;
    p = a * b;
    return word_t'(p >>> FRAC);
  endfunction

endpackage
