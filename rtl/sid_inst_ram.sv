// sid_inst_ram: instruction RAM of SID.
//
// Holds the macro-instruction program: DEPTH entries of 128 bits. The paper's
// prototype has 128 KB of instruction RAM, i.e. 8192 instructions, which is the
// default. The host writes instructions through the memory interface port
// (one full instruction per write). Fetch reads one instruction per cycle by
// program counter; the read is synchronous, so inst appears the cycle after pc
// is presented with re high (block-RAM style, a design choice). Contents are
// not reset.
module sid_inst_ram
  import sid_pkg::*;
#(
  parameter int unsigned DEPTH = 8192,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  // fetch port
  input  logic          re,
  input  logic [AW-1:0] pc,
  output inst_t         inst,
  // memory interface (host) write port
  input  logic          host_we,
  input  logic [AW-1:0] host_addr,
  input  inst_t         host_wdata
);

  inst_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (host_we) mem[host_addr] <= host_wdata;
    if (re)      inst <= mem[pc];
  end

  // the instruction layout must be the 128-bit format
  initial assert ($bits(inst_t) == INST_W)
    else $error("instruction is %0d bits, expected %0d", $bits(inst_t), INST_W);

endmodule
