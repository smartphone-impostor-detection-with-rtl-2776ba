// sid_ram_bank: one bank of the SID data RAM (helper of sid_data_ram).
//
// ROWS words of 32 bits with two synchronous read ports (operands x and y),
// one pipeline write port and one single-word port for the memory interface
// and sensor inputs, which reads synchronously and whose write wins over the
// pipeline write to the same row in the same cycle. Out-of-range rows read as
// 0 and are not written. Contents are not reset.
module sid_ram_bank
  import sid_pkg::*;
#(
  parameter int unsigned ROWS = 114688,
  localparam int unsigned RW  = $clog2(ROWS)
) (
  input  logic              clk,
  input  logic              rx_en,
  input  logic [ADDR_W-1:0] rx_row,
  output word_t             rx_data,
  input  logic              ry_en,
  input  logic [ADDR_W-1:0] ry_row,
  output word_t             ry_data,
  input  logic              w_en,
  input  logic [ADDR_W-1:0] w_row,
  input  word_t             w_data,
  input  logic              a_en,
  input  logic              a_we,
  input  logic [ADDR_W-1:0] a_row,
  input  word_t             a_wdata,
  output word_t             a_rdata
);

  word_t mem [ROWS];

  function automatic logic ok(logic [ADDR_W-1:0] r);
    return r < ADDR_W'(ROWS);
  endfunction

  always_ff @(posedge clk) begin
    if (w_en && ok(w_row) && !(a_en && a_we && a_row == w_row)) mem[w_row[RW-1:0]] <= w_data;
    if (a_en && a_we && ok(a_row)) mem[a_row[RW-1:0]] <= a_wdata;
    if (rx_en) rx_data <= ok(rx_row) ? mem[rx_row[RW-1:0]] : '0;
    if (ry_en) ry_data <= ok(ry_row) ? mem[ry_row[RW-1:0]] : '0;
    if (a_en)  a_rdata <= ok(a_row)  ? mem[a_row[RW-1:0]]  : '0;
  end

endmodule
