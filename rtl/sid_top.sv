// sid_top: the Smartphone Impostor Detector (SID) module.
//
// A small programmable engine that runs a whole impostor-detection algorithm
// (MLP, SVM, LSTM, and the prediction-error-distribution KS test) on sensor
// readings without help from the CPU. It executes macro-instructions, each a
// complete vector or matrix operation on operands in the data RAM, with N
// parallel datapath tracks (LUT -> MUL -> ADD) under a six-stage control
// pipeline: Fetch, Decode (FSM), EXE0, EXE1, EXE2, WR (paper, Fig. 1).
//
// Interfaces:
//   * memory interface: the host writes the program into the instruction RAM
//     (imem_*) and reads/writes data RAM words (dmem_*), e.g. model weights and
//     results. dmem_gnt is low in a cycle where a sensor word takes the port.
//   * LUT load port (lut_*): slope/intercept segments for sigmoid, tanh, exp,
//     written into every track's table.
//   * sensor inputs: each sensor_valid cycle writes sensor_data into the data
//     RAM at sensor_base + k (k counts words of the reading); the word marked
//     sensor_last ends the reading and restarts the detection program at PC 0
//     (paper: a valid sensor input can reset the program counter).
//   * start restarts the program at PC 0; done pulses when HALT retires.
// The paper gives the block structure, the FSM control, 4 tracks, a 256-byte
// scratchpad, 1.75 MB data RAM and 128 KB instruction RAM (defaults here). The
// host/sensor port protocols, the LUT load port and the drain between
// instructions are this design's choices.
module sid_top
  import sid_pkg::*;
#(
  parameter int unsigned N          = 4,
  parameter int unsigned DMEM_WORDS = 458752,   // 1.75 MB
  parameter int unsigned IMEM_DEPTH = 8192,     // 128 KB of 128-bit instructions
  parameter int unsigned SPAD_WORDS = 64,       // 256 bytes
  parameter int unsigned LUT_SEGS   = 64,
  parameter int unsigned LUT_FRAC   = 2,
  localparam int unsigned PW        = $clog2(IMEM_DEPTH),
  localparam int unsigned LSW       = $clog2(LUT_SEGS)
) (
  input  logic              clk,
  input  logic              rst_n,
  // control / status
  input  logic              start,
  output logic              running,
  output logic              done,
  output logic              stalled,
  // memory interface: instruction RAM
  input  logic              imem_we,
  input  logic [PW-1:0]     imem_addr,
  input  inst_t             imem_wdata,
  // memory interface: data RAM
  input  logic              dmem_en,
  input  logic              dmem_we,
  input  logic [ADDR_W-1:0] dmem_addr,
  input  word_t             dmem_wdata,
  output word_t             dmem_rdata,
  output logic              dmem_gnt,
  // LUT load
  input  logic              lut_we,
  input  lut_fn_e           lut_fn,
  input  logic [LSW-1:0]    lut_seg,
  input  word_t             lut_k,
  input  word_t             lut_b,
  // sensor inputs
  input  logic              sensor_valid,
  input  word_t             sensor_data,
  input  logic              sensor_last,
  input  logic [ADDR_W-1:0] sensor_base
);

  // ---------------- sensor input ----------------
  logic [ADDR_W-1:0] sensor_ptr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sensor_ptr <= '0;
    else if (sensor_valid) sensor_ptr <= sensor_last ? '0 : sensor_ptr + 1'b1;
  end

  logic              a_en, a_we;
  logic [ADDR_W-1:0] a_addr;
  word_t             a_wdata;
  always_comb begin
    dmem_gnt = !sensor_valid;
    if (sensor_valid) begin
      a_en = 1'b1; a_we = 1'b1; a_addr = sensor_base + sensor_ptr; a_wdata = sensor_data;
    end else begin
      a_en = dmem_en; a_we = dmem_we; a_addr = dmem_addr; a_wdata = dmem_wdata;
    end
  end

  // ---------------- control ----------------
  logic              i_re;
  logic [PW-1:0]     pc;
  inst_t             inst;
  logic              rx_en, ry_en, dp_busy;
  logic [ADDR_W-1:0] rx_addr, ry_addr;
  uop_t              uop;

  sid_control #(.N(N), .IMEM_DEPTH(IMEM_DEPTH), .SPAD_WORDS(SPAD_WORDS)) u_ctrl (
    .clk, .rst_n,
    .start(start || (sensor_valid && sensor_last)),
    .i_re, .pc, .inst,
    .rx_en, .rx_addr, .ry_en, .ry_addr,
    .uop, .dp_busy,
    .running, .done, .stalled
  );

  sid_inst_ram #(.DEPTH(IMEM_DEPTH)) u_iram (
    .clk, .re(i_re), .pc, .inst,
    .host_we(imem_we), .host_addr(imem_addr), .host_wdata(imem_wdata)
  );

  // ---------------- data RAM and datapath ----------------
  word_t             x [N];
  word_t             y [N];
  word_t             w_data [N];
  logic [N-1:0]      w_mask;
  logic [ADDR_W-1:0] w_addr;

  sid_data_ram #(.N(N), .WORDS(DMEM_WORDS)) u_dram (
    .clk,
    .rx_en, .rx_addr, .rx_data(x),
    .ry_en, .ry_addr, .ry_data(y),
    .w_mask, .w_addr, .w_data,
    .a_en, .a_we, .a_addr, .a_wdata, .a_rdata(dmem_rdata)
  );

  sid_datapath #(.N(N), .SPAD_WORDS(SPAD_WORDS), .LUT_SEGS(LUT_SEGS), .LUT_FRAC(LUT_FRAC)) u_dp (
    .clk, .rst_n,
    .uop, .x, .y,
    .w_mask, .w_addr, .w_data,
    .busy(dp_busy),
    .lut_we, .lut_fn, .lut_seg, .lut_k, .lut_b
  );

endmodule
