// tb_sid_scaling: one program, unchanged, on SID modules with 2, 4 and 8
// parallel tracks.
//
// The design's programs name whole vector and matrix operations, and the
// controller works out the iterations from the number of tracks it was built
// with. This testbench checks that claim. Three modules (N = 2, 4, 8, with a
// 64K-word data RAM to keep the simulation short; everything else at its
// default) get the same data and the same program and run side by side. The
// program is an LSTM step (6 inputs, 30 hidden units, so a 120 x 36 gate
// matrix split into MVmul instructions of 64 and 56 rows), its prediction and
// squared error, a PED update over 13 bins and a KS vote against 3 references,
// an MLP layer with ReLU and a Gaussian-kernel term: all eleven modes, with
// vector lengths that are not multiples of 8 so that last iterations are
// partial. Results do not depend on N (sums wrap around, so their order does
// not matter): every result word of every module is compared bit-exactly
// with a sequential model of the instruction set. The cycle count of each
// module is checked against its iteration count (at least one cycle per
// iteration, at most 10 cycles of overhead per instruction), and more tracks
// must take fewer cycles.
module tb_sid_scaling;
  import sid_pkg::*;

  localparam int SEGS = 64;
  localparam int ND = 3;
  localparam int NT [ND] = '{2, 4, 8};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0;
  logic imem_we = 0; logic [12:0] imem_addr = '0; inst_t imem_wdata = '0;
  logic dmem_en = 0, dmem_we = 0; logic [31:0] dmem_addr = '0;
  word_t dmem_wdata = '0;
  logic lut_we = 0; lut_fn_e lut_fn = F_SIG; logic [5:0] lut_seg = '0; word_t lut_k = '0, lut_b = '0;
  logic  done_v [ND];
  word_t rdata_v [ND];

  for (genvar d = 0; d < ND; d++) begin : g_dut
    logic running, stalled, gnt;
    sid_top #(.N(NT[d]), .DMEM_WORDS(65536)) dut (
      .clk, .rst_n, .start, .running, .done(done_v[d]), .stalled,
      .imem_we, .imem_addr, .imem_wdata,
      .dmem_en, .dmem_we, .dmem_addr, .dmem_wdata, .dmem_rdata(rdata_v[d]), .dmem_gnt(gnt),
      .lut_we, .lut_fn, .lut_seg, .lut_k, .lut_b,
      .sensor_valid(1'b0), .sensor_data('0), .sensor_last(1'b0), .sensor_base('0)
    );
  end

  int checks = 0, failures = 0;
  int cycles = 0;
  always @(posedge clk) cycles <= cycles + 1;

  // watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- fixed-point helpers (independent of the RTL) ----------------
  function automatic word_t q(real r); return word_t'($rtoi(r * 65536.0 + (r >= 0 ? 0.5 : -0.5))); endfunction
  function automatic real  rl(word_t w); return $itor(w) / 65536.0; endfunction
  function automatic word_t qmul(word_t a, word_t b);
    longint p; p = longint'(a) * longint'(b); return word_t'(p >>> 16);
  endfunction
  function automatic word_t rnd(real amp);
    return q(amp * ($itor($urandom_range(0, 2000)) / 1000.0 - 1.0));
  endfunction

  // ---------------- LUT contents: chords of f on 0.25-wide segments ----------------
  word_t tk [3][SEGS];
  word_t tb_ [3][SEGS];
  function automatic real fref(int f, real x);
    if (f == 0) return 1.0 / (1.0 + $exp(-x));
    if (f == 1) return (1.0 - $exp(-2.0 * x)) / (1.0 + $exp(-2.0 * x));
    return $exp(x);
  endfunction
  task automatic load_luts();
    for (int f = 0; f < 3; f++)
      for (int s = 0; s < SEGS; s++) begin
        real x0, x1, k, b;
        x0 = (s - SEGS / 2) * 0.25; x1 = x0 + 0.25;
        k = (fref(f, x1) - fref(f, x0)) / 0.25;
        b = fref(f, x0) - k * x0;
        if (s == 0 || s == SEGS - 1) begin
          k = 0.0; b = fref(f, (s == 0) ? x0 : x1);
        end
        tk[f][s] = q(k); tb_[f][s] = q(b);
        @(negedge clk);
        lut_we = 1; lut_fn = lut_fn_e'(f); lut_seg = 6'(s); lut_k = tk[f][s]; lut_b = tb_[f][s];
      end
    @(negedge clk); lut_we = 0;
  endtask
  function automatic word_t lut_eval(int f, word_t x);
    int s;
    s = (x >>> 14) + SEGS / 2;
    if (s < 0) s = 0;
    if (s > SEGS - 1) s = SEGS - 1;
    return qmul(tk[f][s], x) + tb_[f][s];
  endfunction

  // ---------------- golden memory model and host access ----------------
  word_t gm [int];
  function automatic word_t rd(int a); return gm.exists(a) ? gm[a] : '0; endfunction

  // one word per cycle; wr_end closes a burst
  task automatic wr(int a, word_t v);
    @(negedge clk);
    dmem_en = 1; dmem_we = 1; dmem_addr = a; dmem_wdata = v;
    gm[a] = v;
  endtask
  task automatic wr_end();
    @(negedge clk);
    dmem_en = 0; dmem_we = 0;
  endtask
  task automatic host_rd(int d, int a, output word_t v);
    @(negedge clk);
    dmem_en = 1; dmem_we = 0; dmem_addr = a;
    @(negedge clk);
    dmem_en = 0;
    v = rdata_v[d];
  endtask

  int nxt = 'h100;
  function automatic int alloc(int n);
    int a; a = nxt; nxt += (n + 15) / 16 * 16; return a;
  endfunction

  inst_t prog [$];
  function automatic inst_t mk(mode_e m, int len, int wid, int ax, int ay, int az);
    inst_t i;
    i.mode = m; i.length = 14'(len); i.width = 14'(wid);
    i.addr_x = ax; i.addr_y = ay; i.addr_z = az;
    return i;
  endfunction
  // a matrix of any height, as MVmul instructions of at most 64 rows
  task automatic mvmul(int cols, int rows, int ax, int ay, int az);
    for (int r0 = 0; r0 < rows; r0 += 64) begin
      int h; h = (rows - r0 > 64) ? 64 : rows - r0;
      prog.push_back(mk(M_MVMUL, cols, h, ax + r0 * cols, ay, az + r0));
    end
  endtask

  // Sequential model of one macro-instruction.
  function automatic void gexec(inst_t in);
    int L, W, ax, ay, az;
    word_t acc, t;
    L = int'(in.length); W = int'(in.width); ax = in.addr_x; ay = in.addr_y; az = in.addr_z;
    case (in.mode)
      M_VADD:  for (int i = 0; i < L; i++) gm[az+i] = rd(ax+i) + rd(ay+i);
      M_VSUB:  for (int i = 0; i < L; i++) gm[az+i] = rd(ax+i) - rd(ay+i);
      M_VMUL:  for (int i = 0; i < L; i++) gm[az+i] = qmul(rd(ax+i), rd(ay+i));
      M_VSGT:  for (int i = 0; i < L; i++) gm[az+i] = (rd(ax+i) > rd(ay+i)) ? 32'h10000 : 0;
      M_VSSGT: begin t = rd(ay); for (int i = 0; i < L; i++) gm[az+i] = (rd(ax+i) > t) ? 32'h10000 : 0; end
      M_VSIG:  for (int i = 0; i < L; i++) gm[az+i] = lut_eval(0, rd(ax+i));
      M_VTANH: for (int i = 0; i < L; i++) gm[az+i] = lut_eval(1, rd(ax+i));
      M_VEXP:  for (int i = 0; i < L; i++) gm[az+i] = lut_eval(2, rd(ax+i));
      M_MVMUL: for (int r = 0; r < W; r++) begin
        acc = 0;
        for (int j = 0; j < L; j++) acc += qmul(rd(ax + r*L + j), rd(ay + j));
        gm[az+r] = acc;
      end
      M_VMAXABS: begin
        acc = 0;
        for (int i = 0; i < L; i++) begin t = rd(ax+i); if (t < 0) t = -t; if (t > acc) acc = t; end
        gm[az] = acc;
      end
      M_VSQNORM: begin
        acc = 0;
        for (int i = 0; i < L; i++) acc += qmul(rd(ax+i), rd(ax+i));
        gm[az] = acc;
      end
      default: ;
    endcase
  endfunction

  // iterations the program needs on n tracks
  function automatic int iterations(int n);
    int it; it = 0;
    foreach (prog[i]) begin
      int c; c = (int'(prog[i].length) + n - 1) / n;
      it += (prog[i].mode == M_MVMUL) ? c * int'(prog[i].width) : c;
    end
    return it;
  endfunction

  task automatic load_prog();
    foreach (prog[i]) begin
      @(negedge clk);
      imem_we = 1; imem_addr = 13'(i); imem_wdata = prog[i];
    end
    @(negedge clk);
    imem_we = 1; imem_addr = 13'(prog.size()); imem_wdata = mk(M_HALT, 0, 0, 0, 0, 0);
    @(negedge clk);
    imem_we = 0;
  endtask

  // cycles from start to done, per module
  int took [ND] = '{default: 0};
  for (genvar d = 0; d < ND; d++) begin : g_time
    int t0;
    always @(posedge clk) begin
      if (start) t0 <= cycles;
      if (done_v[d]) took[d] <= cycles - t0;
    end
  end

  task automatic check_region(string what, int base, int len);
    word_t v;
    for (int d = 0; d < ND; d++)
      for (int i = 0; i < len; i++) begin
        host_rd(d, base + i, v);
        checks++;
        if (v !== rd(base + i)) begin
          failures++;
          $display("FAIL N=%0d %s[%0d]: got %0d (%f) expected %0d (%f)", NT[d], what, i, v, rl(v),
                   rd(base + i), rl(rd(base + i)));
        end
      end
  endtask

  localparam int I = 6, H = 30, G = 4 * H, R = 3, K = 13;

  initial begin
    int V, W, BIAS, GATE, CST, T1, T2, TC, WP, PRED, DIF, ERR;
    int BINS, HIST, BITS, REFS, KD, MD, TH, VOTE, VOTES, HALF, ABN;
    int W1, HID, ZERO, MASK, RELU, SV, KDIF, KSQ, NGAM, KARG, KEXP;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_luts();

    V = alloc(I + H); W = alloc(G * (I + H)); BIAS = alloc(G); GATE = alloc(G);
    CST = alloc(H); T1 = alloc(H); T2 = alloc(H); TC = alloc(H);
    WP = alloc(I * H); PRED = alloc(I); DIF = alloc(I); ERR = alloc(1);
    BINS = alloc(K); HIST = alloc(K); BITS = alloc(K); REFS = alloc(R * K); KD = alloc(R * K);
    MD = alloc(R); TH = alloc(1); VOTE = alloc(R); VOTES = alloc(1); HALF = alloc(1); ABN = alloc(1);
    W1 = alloc(10 * I); HID = alloc(10); ZERO = alloc(10); MASK = alloc(10); RELU = alloc(10);
    SV = alloc(I); KDIF = alloc(I); KSQ = alloc(1); NGAM = alloc(1); KARG = alloc(1); KEXP = alloc(1);

    for (int i = 0; i < I; i++) wr(V + i, q(0.4 * (i - 3)));
    for (int i = 0; i < H; i++) wr(V + I + i, rnd(0.5));
    for (int i = 0; i < H; i++) wr(CST + i, rnd(0.5));
    for (int i = 0; i < G * (I + H); i++) wr(W + i, rnd(0.3));
    for (int i = 0; i < G; i++) wr(BIAS + i, rnd(0.2));
    for (int i = 0; i < I * H; i++) wr(WP + i, rnd(0.3));
    for (int i = 0; i < I; i++) wr(PRED + i, rnd(1.0));
    for (int i = 0; i < K; i++) begin wr(BINS + i, q(0.1 * (i + 1) * (i + 1))); wr(HIST + i, q(real'(i / 4))); end
    for (int j = 0; j < R; j++) for (int i = 0; i < K; i++) wr(REFS + j*K + i, q(real'((i + 2*j) / 3)));
    wr(TH, q(1.5)); wr(HALF, q(real'(R) / 2.0));
    for (int i = 0; i < 10 * I; i++) wr(W1 + i, rnd(1.0));
    for (int i = 0; i < 10; i++) wr(ZERO + i, 0);
    for (int i = 0; i < I; i++) wr(SV + i, rnd(1.0));
    wr(NGAM, q(-0.25));
    wr_end();

    prog.delete();
    prog.push_back(mk(M_VSUB,    I, 0, V, PRED, DIF));
    prog.push_back(mk(M_VSQNORM, I, 0, DIF, 0, ERR));
    prog.push_back(mk(M_VSSGT,   K, 0, BINS, ERR, BITS));
    prog.push_back(mk(M_VADD,    K, 0, HIST, BITS, HIST));
    mvmul(I + H, G, W, V, GATE);
    prog.push_back(mk(M_VADD,    G, 0, GATE, BIAS, GATE));
    prog.push_back(mk(M_VSIG,    3 * H, 0, GATE, 0, GATE));
    prog.push_back(mk(M_VTANH,   H, 0, GATE + 3*H, 0, GATE + 3*H));
    prog.push_back(mk(M_VMUL,    H, 0, GATE, CST, T1));
    prog.push_back(mk(M_VMUL,    H, 0, GATE + H, GATE + 3*H, T2));
    prog.push_back(mk(M_VADD,    H, 0, T1, T2, CST));
    prog.push_back(mk(M_VTANH,   H, 0, CST, 0, TC));
    prog.push_back(mk(M_VMUL,    H, 0, GATE + 2*H, TC, V + I));
    mvmul(H, I, WP, V + I, PRED);
    for (int j = 0; j < R; j++) begin
      prog.push_back(mk(M_VSUB,    K, 0, HIST, REFS + j*K, KD + j*K));
      prog.push_back(mk(M_VMAXABS, K, 0, KD + j*K, 0, MD + j));
    end
    prog.push_back(mk(M_VSSGT,   R, 0, MD, TH, VOTE));
    prog.push_back(mk(M_VSQNORM, R, 0, VOTE, 0, VOTES));
    prog.push_back(mk(M_VSSGT,   1, 0, VOTES, HALF, ABN));
    prog.push_back(mk(M_MVMUL,   I, 10, W1, V, HID));
    prog.push_back(mk(M_VSGT,    10, 0, HID, ZERO, MASK));
    prog.push_back(mk(M_VMUL,    10, 0, HID, MASK, RELU));
    prog.push_back(mk(M_VSUB,    I, 0, V, SV, KDIF));
    prog.push_back(mk(M_VSQNORM, I, 0, KDIF, 0, KSQ));
    prog.push_back(mk(M_VMUL,    1, 0, KSQ, NGAM, KARG));
    prog.push_back(mk(M_VEXP,    1, 0, KARG, 0, KEXP));
    load_prog();

    @(negedge clk); start = 1; @(negedge clk); start = 0;
    foreach (prog[i]) gexec(prog[i]);
    begin
      bit all_done;
      all_done = 0;
      while (!all_done) begin
        @(negedge clk);
        all_done = 1;
        for (int d = 0; d < ND; d++) if (took[d] == 0) all_done = 0;
      end
    end
    for (int d = 0; d < ND; d++) begin
      int it;
      it = iterations(NT[d]);
      $display("N=%0d: %0d instructions, %0d iterations, %0d cycles", NT[d], prog.size(), it, took[d]);
      checks++;
      if (took[d] < it || took[d] > it + 10 * prog.size()) begin
        failures++;
        $display("FAIL N=%0d took %0d cycles for %0d iterations", NT[d], took[d], it);
      end
      if (d > 0) begin
        checks++;
        if (took[d] >= took[d-1]) begin
          failures++;
          $display("FAIL N=%0d is not faster than N=%0d", NT[d], NT[d-1]);
        end
      end
    end

    check_region("dif", DIF, I);      check_region("err", ERR, 1);
    check_region("bits", BITS, K);    check_region("hist", HIST, K);
    check_region("gate", GATE, G);    check_region("c", CST, H);
    check_region("h", V + I, H);      check_region("pred", PRED, I);
    check_region("kd", KD, R * K);    check_region("md", MD, R);
    check_region("vote", VOTE, R);    check_region("votes", VOTES, 1);
    check_region("abnormal", ABN, 1);
    check_region("hid", HID, 10);     check_region("mask", MASK, 10);
    check_region("relu", RELU, 10);   check_region("ksq", KSQ, 1);
    check_region("kexp", KEXP, 1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
