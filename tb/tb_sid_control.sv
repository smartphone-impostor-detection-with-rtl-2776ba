// tb_sid_control: runs a small program through the control unit with a model
// instruction RAM and a model of the four-stage datapath occupancy. Every
// issued iteration (x and y read addresses, lane count, first/last flags,
// scratchpad row and result address) is compared with a list built here from
// the macro-instruction definitions: vector modes take ceil(Length/N)
// iterations, MVmul takes Width * ceil(Length/N) iterations ordered tile by
// tile, one iteration per cycle within an instruction. Also checks that an
// unknown mode is skipped, that HALT ends the program with one done pulse,
// that the drain stall is reported, and that start restarts a running program
// from its first instruction.
module tb_sid_control;
  import sid_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, i_re, rx_en, ry_en, dp_busy, running, done, stalled;
  logic [12:0] pc;
  inst_t inst;
  logic [31:0] rx_addr, ry_addr;
  uop_t uop;
  sid_control #(.N(N)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // instruction RAM and datapath occupancy models
  inst_t imem [16];
  always @(posedge clk) if (i_re) inst <= imem[pc[3:0]];
  logic [2:0] occ = '0;
  always @(posedge clk) occ <= {occ[1:0], uop.valid};
  assign dp_busy = uop.valid | (|occ);

  function automatic inst_t mk(mode_e m, int len, int wid, int ax, int ay, int az);
    inst_t i;
    i.mode = m; i.length = 14'(len); i.width = 14'(wid);
    i.addr_x = ax; i.addr_y = ay; i.addr_z = az;
    return i;
  endfunction

  typedef struct { int rx, ry, lanes, first, last, row, waddr, inst; } it_t;
  it_t expq [$];

  function automatic void expand(int k, inst_t in);
    int L, W, ax, ay, az, tiles;
    it_t e;
    L = in.length; W = (in.mode == M_MVMUL) ? int'(in.width) : 1;
    ax = in.addr_x; ay = in.addr_y; az = in.addr_z;
    tiles = (L + N - 1) / N;
    for (int t = 0; t < tiles; t++)
      for (int r = 0; r < W; r++) begin
        e.inst = k;
        e.lanes = (L - t * N < N) ? L - t * N : N;
        e.first = (t == 0); e.last = (t == tiles - 1);
        e.row = (in.mode == M_MVMUL) ? r : 0;
        case (in.mode)
          M_MVMUL: begin e.rx = ax + r * L + t * N; e.ry = ay + t * N; e.waddr = az + r; end
          M_VSSGT: begin e.rx = ax + t * N; e.ry = ay; e.waddr = az + t * N; end
          M_VSQNORM, M_VMAXABS: begin e.rx = ax + t * N; e.ry = ay + t * N; e.waddr = az; end
          default: begin e.rx = ax + t * N; e.ry = ay + t * N; e.waddr = az + t * N; end
        endcase
        expq.push_back(e);
      end
  endfunction

  // compare issued iterations
  int n_iss = 0, last_iss_cyc = -10, last_inst = -1, n_done = 0, n_stall = 0;
  logic [31:0] prx, pry;
  logic pend = 0;
  always @(posedge clk) if (rst_n) begin
    if (done) n_done++;
    if (stalled) n_stall++;
  end
  always @(posedge clk) if (rst_n) begin
    if (pend) begin
      it_t e;
      pend = 0;
      checks++;
      if (!uop.valid || expq.size() == 0) begin failures++; $display("FAIL no uop after read"); end
      else begin
        e = expq.pop_front();
        if (prx != e.rx || pry != e.ry || uop.lanes != 8'(e.lanes) || uop.first != e.first[0] ||
            uop.last != e.last[0] || uop.row != 14'(e.row) || uop.waddr != e.waddr) begin
          failures++;
          $display("FAIL iteration: rx %0d/%0d ry %0d/%0d lanes %0d/%0d first %b/%0d last %b/%0d row %0d/%0d waddr %0d/%0d",
                   prx, e.rx, pry, e.ry, uop.lanes, e.lanes, uop.first, e.first, uop.last, e.last,
                   uop.row, e.row, uop.waddr, e.waddr);
        end
        // one iteration per cycle inside an instruction
        if (e.inst == last_inst) begin
          checks++;
          if (cyc != last_iss_cyc + 1) begin failures++; $display("FAIL gap inside instruction %0d", e.inst); end
        end
        last_inst = e.inst; last_iss_cyc = cyc;
      end
    end
    if (rx_en) begin prx = rx_addr; pry = ry_addr; pend = 1; n_iss++; end
  end

  initial begin
    imem[0] = mk(M_VADD, 10, 0, 100, 200, 300);
    imem[1] = mk(M_MVMUL, 6, 3, 1000, 2000, 3000);
    imem[2] = mk(M_VSSGT, 5, 0, 10, 20, 30);
    imem[3] = mk(M_VSQNORM, 9, 0, 40, 0, 50);
    imem[4] = mk(mode_e'(4'd12), 7, 0, 1, 2, 3);
    imem[5] = mk(M_MVMUL, 4, 2, 500, 600, 700);
    imem[6] = mk(M_HALT, 0, 0, 0, 0, 0);
    for (int k = 0; k < 6; k++) if (k != 4) expand(k, imem[k]);
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    checks++; if (expq.size() != 0) begin failures++; $display("FAIL %0d iterations missing", expq.size()); end
    checks++; if (running) begin failures++; $display("FAIL still running after HALT"); end
    checks++; if (pc != 13'd7) begin failures++; $display("FAIL pc %0d after HALT", pc); end
    checks++; if (n_iss != 3 + 6 + 2 + 3 + 2) begin failures++; $display("FAIL %0d iterations", n_iss); end
    // restart while running: start again, interrupt inside the MVmul, restart
    for (int k = 0; k < 6; k++) if (k != 4) expand(k, imem[k]);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!(uop.valid && uop.mode == M_MVMUL)) @(negedge clk);
    // restart: whatever the interrupted run did not issue is dropped and the
    // program runs again from its first instruction
    @(negedge clk); start = 1;
    @(posedge clk); #1 start = 0;
    expq.delete();
    for (int j = 0; j < 6; j++) if (j != 4) expand(j, imem[j]);
    while (!done) @(negedge clk);
    @(negedge clk);
    checks++; if (expq.size() != 0) begin failures++; $display("FAIL %0d iterations missing after restart", expq.size()); end
    checks++; if (n_done != 2) begin failures++; $display("FAIL done pulses %0d", n_done); end
    checks++; if (n_stall == 0) begin failures++; $display("FAIL no drain stall seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
