// sid_mul: multiplier of one datapath track (EXE1 stage).
//
// Multiplies two 32-bit Q16.16 fixed-point numbers and keeps the middle 32
// bits of the 64-bit product (arithmetic shift right by 16, i.e. truncation
// toward minus infinity, no saturation). The product is registered, so it
// appears one cycle after the operands, as the EXE1 -> EXE2 pipeline register.
// The paper gives the 32-bit fixed-point width and the unit's place in EXE1;
// the Q16.16 format, truncation and wrap-around are this design's choices.
module sid_mul
  import sid_pkg::*;
(
  input  logic  clk,
  input  logic  en,
  input  word_t a,
  input  word_t b,
  output word_t p
);

  always_ff @(posedge clk)
    if (en) p <= fx_mul(a, b);

endmodule
