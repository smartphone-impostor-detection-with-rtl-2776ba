// sid_data_ram: the datapath "Block RAM" of SID.
//
// Holds every vector and matrix operand and result, so that macro-instructions
// need no vector registers. Each cycle the pipeline reads N consecutive words
// from address rx_addr (operand x) and N from ry_addr (operand y), and writes up
// to N consecutive words from address w_addr (lane i goes to w_addr + i if
// w_mask[i]). To let N consecutive words start at any address, the RAM is split
// into N banks interleaved on the low address bits; the N words come out of the
// banks and are rotated into lane order. A fourth port, one word wide, serves
// the memory interface and the sensor inputs.
//
// Timing: all reads are synchronous (data the cycle after the address). If the
// pipeline and the single-word port write the same word in one cycle, the
// single-word port wins. Words past WORDS read as 0 and are not written.
//
// Paper: the prototype's datapath RAM is 1.75 MB (458752 32-bit words, the
// default). The banking, port set and address handling are this design's.
module sid_data_ram
  import sid_pkg::*;
#(
  parameter int unsigned N     = 4,        // parallel tracks, power of two, >= 2
  parameter int unsigned WORDS = 458752,   // 1.75 MB of 32-bit words
  localparam int unsigned BW   = $clog2(N),
  localparam int unsigned ROWS = (WORDS + N - 1) / N
) (
  input  logic              clk,
  // operand read ports (issued in Decode, data in EXE0)
  input  logic              rx_en,
  input  logic [ADDR_W-1:0] rx_addr,
  output word_t             rx_data [N],
  input  logic              ry_en,
  input  logic [ADDR_W-1:0] ry_addr,
  output word_t             ry_data [N],
  // result write port (WR stage)
  input  logic [N-1:0]      w_mask,
  input  logic [ADDR_W-1:0] w_addr,
  input  word_t             w_data  [N],
  // single-word port (memory interface / sensor inputs)
  input  logic              a_en,
  input  logic              a_we,
  input  logic [ADDR_W-1:0] a_addr,
  input  word_t             a_wdata,
  output word_t             a_rdata
);

  // Row of bank b that holds one of the N words starting at base: lanes whose
  // address wrapped past the end of base's row come from the next row.
  function automatic logic [ADDR_W-1:0] bank_row(logic [ADDR_W-1:0] base, int unsigned b);
    logic [ADDR_W-1:0] r;
    r = base >> BW;
    if (b < 32'(base[BW-1:0])) r = r + 1;
    return r;
  endfunction

  logic [BW-1:0]     rx_rot, ry_rot, a_bank;
  word_t             rx_bank [N];
  word_t             ry_bank [N];
  word_t             a_bank_data [N];
  logic [ADDR_W-1:0] a_row;
  assign a_row = a_addr >> BW;

  for (genvar b = 0; b < N; b++) begin : g_bank
    logic [BW-1:0] lane;
    assign lane = BW'(b) - w_addr[BW-1:0];
    sid_ram_bank #(.ROWS(ROWS)) u_bank (
      .clk,
      .rx_en, .rx_row(bank_row(rx_addr, b)), .rx_data(rx_bank[b]),
      .ry_en, .ry_row(bank_row(ry_addr, b)), .ry_data(ry_bank[b]),
      .w_en(w_mask[lane]), .w_row(bank_row(w_addr, b)), .w_data(w_data[lane]),
      .a_en(a_en && a_addr[BW-1:0] == BW'(b)), .a_we, .a_row, .a_wdata,
      .a_rdata(a_bank_data[b])
    );
  end

  always_ff @(posedge clk) begin
    if (rx_en) rx_rot <= rx_addr[BW-1:0];
    if (ry_en) ry_rot <= ry_addr[BW-1:0];
    if (a_en)  a_bank <= a_addr[BW-1:0];
  end
  assign a_rdata = a_bank_data[a_bank];

  // Rotate bank outputs into lane order: lane i came from bank (rot + i) mod N.
  always_comb begin
    for (int unsigned i = 0; i < N; i++) begin
      rx_data[i] = rx_bank[BW'(32'(rx_rot) + i)];
      ry_data[i] = ry_bank[BW'(32'(ry_rot) + i)];
    end
  end

  initial assert (N >= 2 && (N & (N - 1)) == 0) else $error("N must be a power of two >= 2");

endmodule
