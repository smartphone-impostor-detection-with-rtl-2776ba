// tb_sid_workloads: the detection models of the design documentation, run at
// full size on the SID module with every parameter at its default.
//
// 1. PED-LSTM-Vote with a 200-unit LSTM, the configuration whose execution
//    time is evaluated: two sensor readings of 6 values (3-axis accelerometer
//    and gyroscope) arrive through the sensor port. Each reading restarts the
//    detection program, which
//      * computes the squared prediction error of the reading against the
//        previous prediction,
//      * folds it into the test cumulative histogram (KS steps 1 and 2),
//      * runs one LSTM step: an 800 x 206 gate matrix split into 13 MVmul
//        instructions of at most 64 rows, then the cell and hidden updates,
//      * predicts the next reading (a 6 x 200 layer),
//      * runs KS steps 3 to 5 against 10 reference distributions of 32 bins
//        and takes the majority vote.
// 2. MLP-200-100 on a 64-reading window (384 inputs), sigmoid hidden layers,
//    one output compared with 0.
// 3. A Gaussian-kernel SVM on the same window with 8 support vectors.
//
// The number of references, bins and support vectors and the activation
// choice are not given by the published evaluation and are picked here.
// Every result word is compared bit-exactly with a sequential model of the
// instruction set; the LSTM hidden state after the first reading and the MLP
// output are also compared with real arithmetic. The cycle count of every run
// is checked against the iteration count the instruction definitions give:
// at least one cycle per iteration and at most 10 cycles of overhead per
// instruction.
module tb_sid_workloads;
  import sid_pkg::*;

  localparam int N = 4;
  localparam int SEGS = 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, running, done, stalled;
  logic imem_we = 0; logic [12:0] imem_addr = '0; inst_t imem_wdata = '0;
  logic dmem_en = 0, dmem_we = 0, dmem_gnt; logic [31:0] dmem_addr = '0;
  word_t dmem_wdata = '0, dmem_rdata;
  logic lut_we = 0; lut_fn_e lut_fn = F_SIG; logic [5:0] lut_seg = '0; word_t lut_k = '0, lut_b = '0;
  logic sensor_valid = 0, sensor_last = 0; word_t sensor_data = '0; logic [31:0] sensor_base = '0;

  sid_top dut (.*);

  int checks = 0, failures = 0;
  int cycles = 0;
  always @(posedge clk) cycles <= cycles + 1;

  // watchdog
  initial begin
    repeat (3000000) @(posedge clk);
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
  task automatic host_rd(int a, output word_t v);
    @(negedge clk);
    dmem_en = 1; dmem_we = 0; dmem_addr = a;
    @(negedge clk);
    dmem_en = 0;
    v = dmem_rdata;
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

  // iterations the program needs on N tracks
  function automatic int iterations();
    int it; it = 0;
    foreach (prog[i]) begin
      int c; c = (int'(prog[i].length) + N - 1) / N;
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

  task automatic wait_done(string what);
    int t0, took, it;
    t0 = cycles;
    @(posedge clk);
    while (!done) @(posedge clk);
    took = cycles - t0;
    it = iterations();
    $display("%s: %0d instructions, %0d iterations, %0d cycles (%0.3f ms at 115 MHz)",
             what, prog.size(), it, took, $itor(took) / 115.0e3);
    checks++;
    if (took < it || took > it + 10 * prog.size()) begin
      failures++;
      $display("FAIL %s took %0d cycles for %0d iterations", what, took, it);
    end
  endtask

  task automatic check_region(string what, int base, int len);
    word_t v;
    for (int i = 0; i < len; i++) begin
      host_rd(base + i, v);
      checks++;
      if (v !== rd(base + i)) begin
        failures++;
        $display("FAIL %s[%0d]: got %0d (%f) expected %0d (%f)", what, i, v, rl(v),
                 rd(base + i), rl(rd(base + i)));
      end
    end
  endtask

  task automatic check_real(string what, real got, real exp, real tol);
    checks++;
    if (got - exp > tol || exp - got > tol) begin
      failures++;
      $display("FAIL %s = %f, real arithmetic gives %f", what, got, exp);
    end
  endtask

  // ---------------- 1. PED-LSTM-Vote, 200 hidden units ----------------
  localparam int I = 6, H = 200, G = 4 * H, R = 10, K = 32;
  real wr_ [G][I+H];
  real br_ [G];

  task automatic ped_lstm_vote();
    int V, W, BIAS, GATE, CST, T1, T2, TC, WP, PRED, DIF, ERR;
    int BINS, HIST, BITS, REFS, KD, MD, TH, VOTE, VOTES, HALF, ABN;
    real x [I], h0 [H], c0 [H];
    word_t v;
    V = alloc(I + H); W = alloc(G * (I + H)); BIAS = alloc(G); GATE = alloc(G);
    CST = alloc(H); T1 = alloc(H); T2 = alloc(H); TC = alloc(H);
    WP = alloc(I * H); PRED = alloc(I); DIF = alloc(I); ERR = alloc(1);
    BINS = alloc(K); HIST = alloc(K); BITS = alloc(K); REFS = alloc(R * K); KD = alloc(R * K);
    MD = alloc(R); TH = alloc(1); VOTE = alloc(R); VOTES = alloc(1); HALF = alloc(1); ABN = alloc(1);

    for (int i = 0; i < H; i++) begin wr(V + I + i, rnd(0.5)); h0[i] = rl(gm[V+I+i]); end
    for (int i = 0; i < H; i++) begin wr(CST + i, rnd(0.5)); c0[i] = rl(gm[CST+i]); end
    for (int r = 0; r < G; r++)
      for (int j = 0; j < I + H; j++) begin
        wr(W + r*(I+H) + j, rnd(0.1)); wr_[r][j] = rl(gm[W + r*(I+H) + j]);
      end
    for (int r = 0; r < G; r++) begin wr(BIAS + r, rnd(0.2)); br_[r] = rl(gm[BIAS+r]); end
    for (int i = 0; i < I * H; i++) wr(WP + i, rnd(0.1));
    for (int i = 0; i < I; i++) wr(PRED + i, rnd(1.0));
    for (int i = 0; i < K; i++) begin wr(BINS + i, q(0.02 * (i + 1) * (i + 1))); wr(HIST + i, 0); end
    for (int j = 0; j < R; j++)
      for (int i = 0; i < K; i++) wr(REFS + j*K + i, q(real'((i * (j + 1)) / 16)));
    wr(TH, q(1.5)); wr(HALF, q(real'(R) / 2.0));
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
    load_prog();

    sensor_base = V;
    for (int rd_i = 0; rd_i < 2; rd_i++) begin
      for (int i = 0; i < I; i++) begin
        x[i] = 0.3 * (i - 2) + 0.5 * rd_i;
        @(negedge clk);
        sensor_valid = 1; sensor_last = (i == I - 1); sensor_data = q(x[i]);
        gm[V + i] = q(x[i]);
      end
      @(negedge clk);
      sensor_valid = 0; sensor_last = 0;
      foreach (prog[i]) gexec(prog[i]);
      wait_done($sformatf("PED-LSTM-Vote H=%0d reading %0d", H, rd_i));

      check_region("lstm err", ERR, 1);    check_region("lstm hist", HIST, K);
      check_region("lstm gate", GATE, G);  check_region("lstm c", CST, H);
      check_region("lstm h", V + I, H);    check_region("lstm pred", PRED, I);
      check_region("lstm md", MD, R);      check_region("lstm vote", VOTE, R);
      check_region("lstm votes", VOTES, 1); check_region("lstm abnormal", ABN, 1);

      if (rd_i == 0)
        for (int k = 0; k < H; k++) begin
          real a [4], cr, hr;
          for (int g = 0; g < 4; g++) begin
            a[g] = br_[g*H + k];
            for (int j = 0; j < I; j++) a[g] += wr_[g*H + k][j] * x[j];
            for (int j = 0; j < H; j++) a[g] += wr_[g*H + k][I + j] * h0[j];
          end
          cr = fref(0, a[0]) * c0[k] + fref(0, a[1]) * fref(1, a[3]);
          hr = fref(0, a[2]) * fref(1, cr);
          host_rd(V + I + k, v);
          check_real($sformatf("LSTM h[%0d]", k), rl(v), hr, 0.03);
        end
    end
  endtask

  // ---------------- 2. MLP-200-100 on a 384-value window ----------------
  localparam int X = 384, H1 = 200, H2 = 100;
  real xm [X];
  real w1_ [H1][X];

  task automatic mlp();
    int XI, W1, B1, A1, W2, B2, A2, W3, B3, O, ZERO, DEC;
    real w2_ [H2][H1], w3_ [H2], b1_ [H1], b2_ [H2], b3_, a1 [H1], a2 [H2], o;
    word_t v;
    XI = alloc(X); W1 = alloc(H1 * X); B1 = alloc(H1); A1 = alloc(H1);
    W2 = alloc(H2 * H1); B2 = alloc(H2); A2 = alloc(H2);
    W3 = alloc(H2); B3 = alloc(1); O = alloc(1); ZERO = alloc(1); DEC = alloc(1);
    for (int i = 0; i < X; i++) begin wr(XI + i, rnd(1.0)); xm[i] = rl(gm[XI+i]); end
    for (int r = 0; r < H1; r++)
      for (int j = 0; j < X; j++) begin wr(W1 + r*X + j, rnd(0.08)); w1_[r][j] = rl(gm[W1 + r*X + j]); end
    for (int r = 0; r < H1; r++) begin wr(B1 + r, rnd(0.2)); b1_[r] = rl(gm[B1+r]); end
    for (int r = 0; r < H2; r++)
      for (int j = 0; j < H1; j++) begin wr(W2 + r*H1 + j, rnd(0.15)); w2_[r][j] = rl(gm[W2 + r*H1 + j]); end
    for (int r = 0; r < H2; r++) begin wr(B2 + r, rnd(0.2)); b2_[r] = rl(gm[B2+r]); end
    for (int j = 0; j < H2; j++) begin wr(W3 + j, rnd(0.3)); w3_[j] = rl(gm[W3+j]); end
    wr(B3, rnd(0.5)); b3_ = rl(gm[B3]);
    wr(ZERO, 0);
    wr_end();

    prog.delete();
    mvmul(X, H1, W1, XI, A1);
    prog.push_back(mk(M_VADD, H1, 0, A1, B1, A1));
    prog.push_back(mk(M_VSIG, H1, 0, A1, 0, A1));
    mvmul(H1, H2, W2, A1, A2);
    prog.push_back(mk(M_VADD, H2, 0, A2, B2, A2));
    prog.push_back(mk(M_VSIG, H2, 0, A2, 0, A2));
    prog.push_back(mk(M_MVMUL, H2, 1, W3, A2, O));
    prog.push_back(mk(M_VADD, 1, 0, O, B3, O));
    prog.push_back(mk(M_VSGT, 1, 0, O, ZERO, DEC));
    load_prog();
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    foreach (prog[i]) gexec(prog[i]);
    wait_done("MLP-200-100");
    check_region("mlp a1", A1, H1); check_region("mlp a2", A2, H2);
    check_region("mlp out", O, 1);  check_region("mlp decision", DEC, 1);

    for (int r = 0; r < H1; r++) begin
      a1[r] = b1_[r];
      for (int j = 0; j < X; j++) a1[r] += w1_[r][j] * xm[j];
      a1[r] = fref(0, a1[r]);
    end
    for (int r = 0; r < H2; r++) begin
      a2[r] = b2_[r];
      for (int j = 0; j < H1; j++) a2[r] += w2_[r][j] * a1[j];
      a2[r] = fref(0, a2[r]);
    end
    o = b3_;
    for (int j = 0; j < H2; j++) o += w3_[j] * a2[j];
    host_rd(O, v);
    check_real("MLP output", rl(v), o, 0.05);
  endtask

  // ---------------- 3. Gaussian-kernel SVM, 8 support vectors ----------------
  localparam int S = 8;
  int mlp_x;   // address of the MLP's input window
  task automatic svm();
    int SV, D, KSQ, NG, KA, KE, AL, SC, B, ZERO, DEC;
    SV = alloc(S * X); D = alloc(S * X); KSQ = alloc(S); NG = alloc(S); KA = alloc(S);
    KE = alloc(S); AL = alloc(S); SC = alloc(1); B = alloc(1); ZERO = alloc(1); DEC = alloc(1);
    for (int s = 0; s < S; s++)
      for (int j = 0; j < X; j++) wr(SV + s*X + j, q(xm[j] + rl(rnd(0.05 * (s + 1)))));
    for (int s = 0; s < S; s++) begin wr(NG + s, q(-0.02)); wr(AL + s, rnd(1.0)); end
    wr(B, rnd(0.3)); wr(ZERO, 0);
    wr_end();
    // the input is the window of the MLP run
    prog.delete();
    for (int s = 0; s < S; s++) begin
      prog.push_back(mk(M_VSUB,    X, 0, mlp_x, SV + s*X, D + s*X));
      prog.push_back(mk(M_VSQNORM, X, 0, D + s*X, 0, KSQ + s));
    end
    prog.push_back(mk(M_VMUL,  S, 0, KSQ, NG, KA));
    prog.push_back(mk(M_VEXP,  S, 0, KA, 0, KE));
    prog.push_back(mk(M_MVMUL, S, 1, AL, KE, SC));
    prog.push_back(mk(M_VADD,  1, 0, SC, B, SC));
    prog.push_back(mk(M_VSGT,  1, 0, SC, ZERO, DEC));
    load_prog();
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    foreach (prog[i]) gexec(prog[i]);
    wait_done("SVM, Gaussian kernel, 8 support vectors");
    check_region("svm sqdist", KSQ, S); check_region("svm kernel", KE, S);
    check_region("svm score", SC, 1);   check_region("svm decision", DEC, 1);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_luts();
    ped_lstm_vote();
    mlp_x = nxt;
    mlp();
    svm();
    $display("data RAM words used: %0d of 458752", nxt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
