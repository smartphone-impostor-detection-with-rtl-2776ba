// sid_lut: look-up table of one datapath track (EXE0 stage).
//
// Non-linear functions (sigmoid, tanh, exp) are not computed by dedicated
// units: the LUT returns a slope k and an intercept b for the input x, and the
// track's multiplier and adder then form z = k * x + b in EXE1 and EXE2
// (paper). The table is programmable (the paper calls it flexible): each
// function has SEGS segments of equal width 2^-SEG_FRAC covering
// [-SEGS/2 * 2^-SEG_FRAC, +SEGS/2 * 2^-SEG_FRAC); inputs outside the range use
// the first or last segment. Segment count, width and the write port used to
// load the table are this design's choices. The lookup is combinational; the
// result is registered by the datapath at the end of EXE0.
module sid_lut
  import sid_pkg::*;
#(
  parameter int unsigned SEGS     = 64,  // segments per function
  parameter int unsigned SEG_FRAC = 2,   // segment width 2^-SEG_FRAC (0.25)
  localparam int unsigned SW      = $clog2(SEGS)
) (
  input  logic          clk,
  // lookup
  input  lut_fn_e       fn,
  input  word_t         x,
  output word_t         k,
  output word_t         b,
  // table load
  input  logic          cfg_we,
  input  lut_fn_e       cfg_fn,
  input  logic [SW-1:0] cfg_seg,
  input  word_t         cfg_k,
  input  word_t         cfg_b
);

  word_t k_tab [3][SEGS];
  word_t b_tab [3][SEGS];

  always_ff @(posedge clk) begin
    if (cfg_we && cfg_fn != 2'd3) begin
      k_tab[cfg_fn][cfg_seg] <= cfg_k;
      b_tab[cfg_fn][cfg_seg] <= cfg_b;
    end
  end

  // Segment index: floor(x * 2^SEG_FRAC) + SEGS/2, clamped to [0, SEGS-1].
  logic signed [DATA_W-1:0] q;
  logic [SW-1:0]            seg;
  logic [1:0]               f;
  always_comb begin
    q = (x >>> (FRAC - SEG_FRAC)) + signed'(DATA_W'(SEGS / 2));
    if (q < 0)                         seg = '0;
    else if (q > signed'(DATA_W'(SEGS - 1))) seg = SW'(SEGS - 1);
    else                               seg = q[SW-1:0];
    f = (fn == 2'd3) ? 2'd0 : fn;
    k = k_tab[f][seg];
    b = b_tab[f][seg];
  end

endmodule
