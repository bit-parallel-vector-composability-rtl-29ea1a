// nb_mult: the narrow-bitwidth multiplier of one NBVE lane.
//
// It multiplies a 2-bit slice of an input by a 2-bit slice of a weight. A slice is
// read as unsigned (0..3). When it is the top slice of a two's complement operand
// (x_sgn / w_sgn set), it is read as signed (-2..1). Each operand is widened to
// 3 bits, and the 3b x 3b signed product always fits the 5-bit result (-6..9).
// Purely combinational.
//
// The 2-bit slice multiply is the paper's. The paper says nothing about
// signedness, so the per-slice sign flags are this design's choice.
module nb_mult
  import bpvec_pkg::*;
(
  input  logic [SLICE_W-1:0]       x,
  input  logic [SLICE_W-1:0]       w,
  input  logic                     x_sgn,
  input  logic                     w_sgn,
  output logic signed [PROD_W-1:0] p
);
  logic signed [SLICE_W:0]   xe, we;
  logic signed [2*SLICE_W+1:0] full;

  always_comb begin
    xe   = {x_sgn & x[SLICE_W-1], x};
    we   = {w_sgn & w[SLICE_W-1], w};
    full = xe * we;
    p    = full[PROD_W-1:0];
  end
endmodule
