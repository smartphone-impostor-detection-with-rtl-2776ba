// tb_sid_top: end-to-end test of the SID module at its default sizes
// (4 tracks, 1.75 MB data RAM, 8192-entry instruction RAM, 64-word scratchpad).
//
// Part A replays the five-step KS-test example of the design documentation:
// reference bins {1.2, 1.6, 3.0, 4.3, 5.0}, reference cumulative histogram
// {0, 1, 2, 3, 4}, and test errors 4.5, 3.5, 9.5, 0.5, 4.9 arriving one by one
// through the sensor input, each reading restarting the program. The test
// cumulative histogram after every reading, the final difference vector
// {1, 0, -1, -1, 0}, the maximum difference 1 and the threshold decision are
// checked.
//
// Part B runs one step of an LSTM impostor detector (6 inputs, 16 hidden
// units, so the 64-row gate matrix fills the scratchpad), its prediction
// error, the PED update and a KS vote against four reference PEDs, followed by
// an MLP layer with ReLU (Vsgt) and a Gaussian-kernel term (Vexp). Every result
// word is compared with a sequential model of the instruction set written in
// this testbench. The LSTM state is also compared, loosely, with real-number
// arithmetic.
//
// Mechanisms counted (each must occur): drain stalls, multi-tile MVmul,
// partial last iteration, full-scratchpad MVmul, sensor-triggered restart,
// restart during a running program, every one of the eleven modes, done.
module tb_sid_top;
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
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  int n_stall = 0, n_mode [16], n_multitile = 0, n_partial = 0, n_fullspad = 0;
  int n_sensor_restart = 0, n_restart_running = 0, n_done = 0;
  initial foreach (n_mode[i]) n_mode[i] = 0;
  always @(posedge clk) if (rst_n) begin
    if (stalled) n_stall++;
    if (dut.u_ctrl.uop.valid && dut.u_ctrl.uop.first && dut.u_ctrl.uop.row == 0)
      n_mode[dut.u_ctrl.uop.mode]++;
    if (dut.u_ctrl.uop.valid && dut.u_ctrl.uop.mode == M_MVMUL && !dut.u_ctrl.uop.first
        && dut.u_ctrl.uop.row == 0) n_multitile++;
    if (dut.u_ctrl.uop.valid && dut.u_ctrl.uop.lanes != 8'(N) && dut.u_ctrl.uop.row == 0) n_partial++;
    if (dut.u_ctrl.uop.valid && dut.u_ctrl.uop.mode == M_MVMUL && dut.u_ctrl.uop.row == 63) n_fullspad++;
    if (sensor_valid && sensor_last) n_sensor_restart++;
    if ((start || (sensor_valid && sensor_last)) && running) n_restart_running++;
    if (done) n_done++;
  end

  // ---------------- fixed-point helpers (independent of the RTL) ----------------
  function automatic word_t q(real r); return word_t'($rtoi(r * 65536.0 + (r >= 0 ? 0.5 : -0.5))); endfunction
  function automatic real  rl(word_t w); return $itor(w) / 65536.0; endfunction
  function automatic word_t qmul(word_t a, word_t b);
    longint p; p = longint'(a) * longint'(b); return word_t'(p >>> 16);
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

  // ---------------- golden memory model ----------------
  word_t gm [int];
  function automatic word_t rd(int a); return gm.exists(a) ? gm[a] : '0; endfunction

  task automatic host_wr(int a, word_t v);
    @(negedge clk);
    dmem_en = 1; dmem_we = 1; dmem_addr = a; dmem_wdata = v;
    @(negedge clk);
    dmem_en = 0; dmem_we = 0;
    gm[a] = v;
  endtask
  task automatic host_rd(int a, output word_t v);
    @(negedge clk);
    dmem_en = 1; dmem_we = 0; dmem_addr = a;
    @(negedge clk);
    dmem_en = 0;
    v = dmem_rdata;
  endtask

  inst_t prog [$];
  function automatic inst_t mk(mode_e m, int len, int wid, int ax, int ay, int az);
    inst_t i;
    i.mode = m; i.length = 14'(len); i.width = 14'(wid);
    i.addr_x = ax; i.addr_y = ay; i.addr_z = az;
    return i;
  endfunction

  // Sequential model of one macro-instruction.
  function automatic void gexec(inst_t in);
    int L, W, ax, ay, az;
    word_t acc, t;
    L = in.length; W = in.width; ax = in.addr_x; ay = in.addr_y; az = in.addr_z;
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

  task automatic wait_done(output int took);
    int t0;
    t0 = cycles;
    @(posedge clk);
    while (!done) @(posedge clk);
    took = cycles - t0;
  endtask

  task automatic check(string what, word_t got, word_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d (%f) expected %0d (%f)", what, got, rl(got), exp, rl(exp));
    end
  endtask

  task automatic check_region(string what, int base, int len);
    word_t v;
    for (int i = 0; i < len; i++) begin
      host_rd(base + i, v);
      check($sformatf("%s[%0d]", what, i), v, rd(base + i));
    end
  endtask

  // ---------------- Part A: KS test example ----------------
  localparam int A_BINS = 'h1000, A_REF = 'h1010, A_HIST = 'h1020, A_BITS = 'h1030;
  localparam int A_DIFF = 'h1040, A_MD = 'h1050, A_T = 'h1051, A_ABN = 'h1052, A_ERR = 'h1060;

  task automatic part_a();
    real binv [5] = '{1.2, 1.6, 3.0, 4.3, 5.0};
    real errs [5] = '{4.5, 3.5, 9.5, 0.5, 4.9};
    int  exp_hist [5][5] = '{'{0,0,0,0,1}, '{0,0,0,1,2}, '{0,0,0,1,2}, '{1,1,1,2,3}, '{1,1,1,2,4}};
    int  exp_diff [5] = '{1, 0, -1, -1, 0};
    word_t v;
    int took;
    for (int i = 0; i < 5; i++) begin
      host_wr(A_BINS + i, q(binv[i]));
      host_wr(A_REF + i, q(real'(i)));
      host_wr(A_HIST + i, 0);
    end
    // T = n * c(alpha) * sqrt((n+m)/(n*m)) with n = m = 5, c(0.10) = 1.22
    host_wr(A_T, q(5.0 * 1.22 * $sqrt(10.0 / 25.0)));
    prog.delete();
    prog.push_back(mk(M_VSSGT,   5, 0, A_BINS, A_ERR, A_BITS));   // step 1
    prog.push_back(mk(M_VADD,    5, 0, A_HIST, A_BITS, A_HIST));  // step 2
    prog.push_back(mk(M_VSUB,    5, 0, A_HIST, A_REF, A_DIFF));   // step 3
    prog.push_back(mk(M_VMAXABS, 5, 0, A_DIFF, 0, A_MD));         // step 4
    prog.push_back(mk(M_VSSGT,   1, 0, A_MD, A_T, A_ABN));        // step 5
    load_prog();
    sensor_base = A_ERR;
    for (int r = 0; r < 5; r++) begin
      @(negedge clk);
      sensor_valid = 1; sensor_last = 1; sensor_data = q(errs[r]);
      @(negedge clk);
      sensor_valid = 0; sensor_last = 0;
      wait_done(took);
      checks++;
      if (took > 200) begin failures++; $display("FAIL part A run took %0d cycles", took); end
      for (int i = 0; i < 5; i++) begin
        host_rd(A_HIST + i, v);
        check($sformatf("A hist[%0d] after %0d", i, r), v, q(real'(exp_hist[r][i])));
      end
    end
    for (int i = 0; i < 5; i++) begin
      host_rd(A_DIFF + i, v);
      check($sformatf("A diff[%0d]", i), v, q(real'(exp_diff[i])));
    end
    host_rd(A_MD, v);  check("A max diff", v, q(1.0));
    host_rd(A_ABN, v); check("A abnormal", v, 0);   // 1 < T = 3.86
  endtask

  // ---------------- Part B: LSTM step, PED vote, MLP and kernel ----------------
  localparam int I = 6, H = 16, G = 4 * H, R = 4, K = 8;
  localparam int V    = 'h2000;               // [x (I) ; h (H)]
  localparam int W    = 'h3000;               // G x (I+H) gate weights, rows f,i,o,cand
  localparam int BIAS = 'h3800, GATE = 'h3880, CST = 'h3900, T1 = 'h3920, T2 = 'h3940, TC = 'h3960;
  localparam int WP   = 'h3a00, PRED = 'h3a80, DIF = 'h3a90, ERR = 'h3aa0;
  localparam int BINS = 'h3b00, HIST = 'h3b10, BITS = 'h3b20, REFS = 'h3c00, KD = 'h3c80;
  localparam int MD   = 'h3d00, TH = 'h3d10, VOTE = 'h3d20, VOTES = 'h3d21, HALF = 'h3d22, ABN = 'h3d23;
  localparam int W1   = 'h4000, HID = 'h4100, ZERO = 'h4120, MASK = 'h4140, RELU = 'h4160;
  localparam int SV   = 'h4200, KDIF = 'h4210, KSQ = 'h4220, NGAM = 'h4221, KARG = 'h4222, KEXP = 'h4223;

  function automatic word_t rnd(real amp);
    return q(amp * ($itor($urandom_range(0, 2000)) / 1000.0 - 1.0));
  endfunction

  task automatic part_b();
    int took;
    word_t v;
    real x [I], h0 [H], c0 [H], wr [G][I+H], br [G], hr [H], cr [H];
    for (int i = 0; i < I; i++)  begin x[i] = 0.5 * (i - 2); host_wr(V + i, q(x[i])); end
    for (int i = 0; i < H; i++)  begin host_wr(V + I + i, rnd(0.5)); h0[i] = rl(gm[V+I+i]); end
    for (int i = 0; i < H; i++)  begin host_wr(CST + i, rnd(0.5)); c0[i] = rl(gm[CST+i]); end
    for (int r = 0; r < G; r++)
      for (int j = 0; j < I + H; j++) begin host_wr(W + r*(I+H) + j, rnd(0.3)); wr[r][j] = rl(gm[W + r*(I+H) + j]); end
    for (int r = 0; r < G; r++) begin host_wr(BIAS + r, rnd(0.2)); br[r] = rl(gm[BIAS+r]); end
    for (int r = 0; r < I; r++) for (int j = 0; j < H; j++) host_wr(WP + r*H + j, rnd(0.3));
    for (int i = 0; i < I; i++) host_wr(PRED + i, rnd(1.0));      // previous prediction
    for (int i = 0; i < K; i++) begin host_wr(BINS + i, q(0.5 * (i + 1) * (i + 1))); host_wr(HIST + i, q(real'(i / 3))); end
    for (int j = 0; j < R; j++) for (int i = 0; i < K; i++) host_wr(REFS + j*K + i, q(real'((i + j) / 2)));
    host_wr(TH, q(1.5)); host_wr(HALF, q(real'(R) / 2.0));
    for (int r = 0; r < 8; r++) for (int j = 0; j < I; j++) host_wr(W1 + r*I + j, rnd(1.0));
    for (int i = 0; i < 8; i++) host_wr(ZERO + i, 0);
    for (int i = 0; i < I; i++) host_wr(SV + i, rnd(1.0));
    host_wr(NGAM, q(-0.25));

    prog.delete();
    // prediction error of the new reading against the previous prediction
    prog.push_back(mk(M_VSUB,    I, 0, V, PRED, DIF));
    prog.push_back(mk(M_VSQNORM, I, 0, DIF, 0, ERR));
    // PED update (KS steps 1 and 2)
    prog.push_back(mk(M_VSSGT,   K, 0, BINS, ERR, BITS));
    prog.push_back(mk(M_VADD,    K, 0, HIST, BITS, HIST));
    // LSTM step: gates = W [x;h] + b
    prog.push_back(mk(M_MVMUL,   I + H, G, W, V, GATE));
    prog.push_back(mk(M_VADD,    G, 0, GATE, BIAS, GATE));
    prog.push_back(mk(M_VSIG,    3 * H, 0, GATE, 0, GATE));
    prog.push_back(mk(M_VTANH,   H, 0, GATE + 3*H, 0, GATE + 3*H));
    prog.push_back(mk(M_VMUL,    H, 0, GATE, CST, T1));                 // f * c
    prog.push_back(mk(M_VMUL,    H, 0, GATE + H, GATE + 3*H, T2));      // i * cand
    prog.push_back(mk(M_VADD,    H, 0, T1, T2, CST));                   // c
    prog.push_back(mk(M_VTANH,   H, 0, CST, 0, TC));
    prog.push_back(mk(M_VMUL,    H, 0, GATE + 2*H, TC, V + I));         // h = o * tanh(c)
    // prediction of the next reading
    prog.push_back(mk(M_MVMUL,   H, I, WP, V + I, PRED));
    // KS steps 3 and 4 against R reference PEDs, step 5 and the vote
    for (int j = 0; j < R; j++) begin
      prog.push_back(mk(M_VSUB,    K, 0, HIST, REFS + j*K, KD + j*K));
      prog.push_back(mk(M_VMAXABS, K, 0, KD + j*K, 0, MD + j));
    end
    prog.push_back(mk(M_VSSGT,   R, 0, MD, TH, VOTE + 16));
    prog.push_back(mk(M_VSQNORM, R, 0, VOTE + 16, 0, VOTES));
    prog.push_back(mk(M_VSSGT,   1, 0, VOTES, HALF, ABN));
    // MLP layer with ReLU, and a Gaussian kernel term exp(-gamma |x - sv|^2)
    prog.push_back(mk(M_MVMUL,   I, 8, W1, V, HID));
    prog.push_back(mk(M_VSGT,    8, 0, HID, ZERO, MASK));
    prog.push_back(mk(M_VMUL,    8, 0, HID, MASK, RELU));
    prog.push_back(mk(M_VSUB,    I, 0, V, SV, KDIF));
    prog.push_back(mk(M_VSQNORM, I, 0, KDIF, 0, KSQ));
    prog.push_back(mk(M_VMUL,    1, 0, KSQ, NGAM, KARG));
    prog.push_back(mk(M_VEXP,    1, 0, KARG, 0, KEXP));
    load_prog();

    // start, then restart while the first instructions run
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    repeat (4) @(posedge clk);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    foreach (prog[i]) gexec(prog[i]);
    wait_done(took);
    $display("part B program: %0d instructions, %0d cycles", prog.size(), took);

    check_region("B dif", DIF, I);     check_region("B err", ERR, 1);
    check_region("B bits", BITS, K);   check_region("B hist", HIST, K);
    check_region("B gate", GATE, G);   check_region("B c", CST, H);
    check_region("B h", V + I, H);     check_region("B pred", PRED, I);
    check_region("B kd", KD, R * K);   check_region("B md", MD, R);
    check_region("B vote", VOTE + 16, R); check_region("B votes", VOTES, 1);
    check_region("B abn", ABN, 1);
    check_region("B hid", HID, 8);     check_region("B mask", MASK, 8);
    check_region("B relu", RELU, 8);   check_region("B ksq", KSQ, 1);
    check_region("B kexp", KEXP, 1);

    // loose check of the LSTM cell against real arithmetic
    for (int k = 0; k < H; k++) begin
      real a [4];
      for (int g = 0; g < 4; g++) begin
        a[g] = br[g*H + k];
        for (int j = 0; j < I; j++) a[g] += wr[g*H + k][j] * x[j];
        for (int j = 0; j < H; j++) a[g] += wr[g*H + k][I + j] * h0[j];
      end
      cr[k] = fref(0, a[0]) * c0[k] + fref(0, a[1]) * fref(1, a[3]);
      hr[k] = fref(0, a[2]) * fref(1, cr[k]);
      host_rd(V + I + k, v);
      checks++;
      if ((rl(v) - hr[k]) > 0.02 || (hr[k] - rl(v)) > 0.02) begin
        failures++;
        $display("FAIL LSTM h[%0d] = %f, real arithmetic gives %f", k, rl(v), hr[k]);
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_luts();
    part_a();
    part_b();

    // every mechanism must have happened
    begin
      string names [5] = '{"stall", "multi-tile MVmul", "partial iteration", "full scratchpad", "sensor restart"};
      int    counts [5];
      counts = '{n_stall, n_multitile, n_partial, n_fullspad, n_sensor_restart};
      for (int i = 0; i < 5; i++) begin
        checks++;
        if (counts[i] == 0) begin failures++; $display("FAIL mechanism never seen: %s", names[i]); end
        else $display("mechanism %-18s : %0d", names[i], counts[i]);
      end
      checks++; if (n_restart_running == 0) begin failures++; $display("FAIL no restart while running"); end
      checks++; if (n_done != 6) begin failures++; $display("FAIL done seen %0d times", n_done); end
      for (int m = 0; m <= 10; m++) begin
        checks++;
        if (n_mode[m] == 0) begin failures++; $display("FAIL mode %0d never executed", m); end
      end
      $display("restart while running: %0d, done pulses: %0d", n_restart_running, n_done);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
