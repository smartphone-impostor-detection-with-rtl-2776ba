// tb_sid_datapath: drives iterations (uops) with their x/y operands straight
// into EXE0, one per cycle, and checks every data RAM write coming out of WR:
// its lane mask, address and data, and that it appears three clock edges after
// the uop entered EXE0 (EXE0 -> EXE1 -> EXE2 -> WR). Covers all eleven modes,
// partial iterations, reductions over two iterations through the scratchpad
// (Vsqnorm, Vmaxabs) and a two-row, two-tile MVmul. Expected values are
// computed here from the operation definitions.
module tb_sid_datapath;
  import sid_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  uop_t uop = '0;
  word_t x [N], y [N], w_data [N];
  logic [N-1:0] w_mask;
  logic [31:0] w_addr;
  logic busy;
  logic lut_we = 0; lut_fn_e lut_fn = F_SIG; logic [5:0] lut_seg = '0; word_t lut_k = '0, lut_b = '0;
  sid_datapath #(.N(N)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t qmul(word_t a, word_t b);
    longint p; p = longint'(a) * longint'(b); return word_t'(p >>> 16);
  endfunction
  word_t tk [3][64], tbb [3][64];
  function automatic word_t lut(int f, word_t v);
    int s; s = (v >>> 14) + 32; if (s < 0) s = 0; if (s > 63) s = 63;
    return qmul(tk[f][s], v) + tbb[f][s];
  endfunction

  typedef struct { logic [N-1:0] mask; logic [31:0] addr; word_t d [N]; int at; } wr_t;
  wr_t expq [$];
  int seen = 0;

  always @(negedge clk) if (rst_n && w_mask != '0) begin
    wr_t e;
    checks++;
    if (expq.size() == 0) begin failures++; $display("FAIL unexpected write"); end
    else begin
      e = expq.pop_front();
      if (w_mask !== e.mask || w_addr !== e.addr || cyc != e.at + 3) begin
        failures++;
        $display("FAIL write mask %b addr %0d at %0d, expected %b %0d at %0d", w_mask, w_addr, cyc, e.mask, e.addr, e.at + 3);
      end
      for (int i = 0; i < N; i++) if (e.mask[i]) begin
        checks++;
        if (w_data[i] !== e.d[i]) begin failures++; $display("FAIL lane %0d data %0d vs %0d (addr %0d)", i, w_data[i], e.d[i], e.addr); end
      end
      seen++;
    end
  end

  // scratchpad-free running values for the reductions
  word_t red [64];

  task automatic issue(mode_e m, int lanes, logic first, logic last, int row, int waddr);
    wr_t e;
    word_t ys;
    @(negedge clk);
    uop.valid = 1; uop.mode = m; uop.lanes = 8'(lanes); uop.first = first; uop.last = last;
    uop.row = 14'(row); uop.waddr = waddr;
    for (int i = 0; i < N; i++) begin x[i] = word_t'($urandom) >>> 10; y[i] = word_t'($urandom) >>> 10; end
    if (m == M_VEXP) for (int i = 0; i < N; i++) x[i] = x[i] >>> 3;
    e.mask = '0; e.addr = waddr; e.at = cyc;
    for (int i = 0; i < N; i++) e.d[i] = '0;
    ys = y[0];
    if (is_reduction(m)) begin
      word_t acc;
      acc = first ? '0 : red[row];
      for (int i = 0; i < lanes; i++) begin
        word_t a;
        a = x[i] < 0 ? -x[i] : x[i];
        case (m)
          M_MVMUL:   acc += qmul(x[i], y[i]);
          M_VSQNORM: acc += qmul(x[i], x[i]);
          default:   if (a > acc) acc = a;
        endcase
      end
      red[row] = acc;
      if (last) begin e.mask[0] = 1; e.d[0] = acc; end
    end else begin
      for (int i = 0; i < lanes; i++) begin
        e.mask[i] = 1;
        case (m)
          M_VADD:  e.d[i] = x[i] + y[i];
          M_VSUB:  e.d[i] = x[i] - y[i];
          M_VMUL:  e.d[i] = qmul(x[i], y[i]);
          M_VSGT:  e.d[i] = (x[i] > y[i]) ? 32'h10000 : 0;
          M_VSSGT: e.d[i] = (x[i] > ys) ? 32'h10000 : 0;
          M_VSIG:  e.d[i] = lut(0, x[i]);
          M_VTANH: e.d[i] = lut(1, x[i]);
          default: e.d[i] = lut(2, x[i]);
        endcase
      end
    end
    if (e.mask != '0) expq.push_back(e);
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin x[i] = '0; y[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 3; f++) for (int s = 0; s < 64; s++) begin
      @(negedge clk);
      lut_we = 1; lut_fn = lut_fn_e'(f); lut_seg = 6'(s);
      lut_k = word_t'($urandom) >>> 14; lut_b = word_t'($urandom) >>> 12;
      tk[f][s] = lut_k; tbb[f][s] = lut_b;
    end
    @(negedge clk); lut_we = 0;
    for (int rep = 0; rep < 20; rep++) begin
      for (int m = 0; m <= 8; m++) if (m != 7) issue(mode_e'(m), (rep % 4) + 1, 1, 1, 0, 100 * m + rep);
      // Vsqnorm and Vmaxabs over two iterations
      issue(M_VSQNORM, 4, 1, 0, 0, 900);
      issue(M_VSQNORM, 3, 0, 1, 0, 900);
      issue(M_VMAXABS, 4, 1, 0, 0, 901);
      issue(M_VMAXABS, 2, 0, 1, 0, 901);
      // 2 x 6 MVmul: tile 0 (rows 0, 1), tile 1 (rows 0, 1, two lanes)
      issue(M_MVMUL, 4, 1, 0, 0, 950);
      issue(M_MVMUL, 4, 1, 0, 1, 951);
      issue(M_MVMUL, 2, 0, 1, 0, 950);
      issue(M_MVMUL, 2, 0, 1, 1, 951);
    end
    @(negedge clk); uop = '0;
    checks++;
    if (!busy) begin failures++; $display("FAIL busy low while draining"); end
    repeat (5) @(negedge clk);
    checks++;
    if (busy || expq.size() != 0) begin failures++; $display("FAIL %0d writes missing", expq.size()); end
    $display("writes checked: %0d", seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
