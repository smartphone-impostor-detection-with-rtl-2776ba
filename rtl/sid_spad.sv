// sid_spad: local scratchpad of the EXE2 stage.
//
// A small register-file memory that keeps intermediate results inside one
// macro-instruction: the partial sums of the matrix rows in MVmul, the running
// sum of squares in Vsqnorm and the running maximum in Vmaxabs (paper). The
// paper's prototype has 256 bytes, i.e. 64 32-bit words (default). The read is
// combinational and the write synchronous, so a value written at the end of one
// EXE2 cycle is read by the next; both happen in EXE2. Not reset: the
// datapath never reads an entry before writing it in the same instruction.
module sid_spad
  import sid_pkg::*;
#(
  parameter int unsigned WORDS = 64,
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic [AW-1:0] raddr,
  output word_t         rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  word_t         wdata
);

  word_t mem [WORDS];

  assign rdata = mem[raddr];

  always_ff @(posedge clk)
    if (we) mem[waddr] <= wdata;

endmodule
