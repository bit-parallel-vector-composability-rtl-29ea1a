// cvu_compose: operand composition of one CVU. This is the runtime
// reconfiguration that fits the 16 NBVEs to a layer's bitwidths.
//
// With nx = xbw/2 input slices and nw = wbw/2 weight slices per element, the NBVEs
// form 16/(nx*nw) clusters of nx*nw engines each. Cluster g takes elements
// g*L .. g*L+L-1 of the packed vectors, one element per lane. Inside a cluster,
// engine idx takes input slice j = idx / nw and weight slice k = idx mod nw of every
// element. Its shift is 2j+2k. Its slices are signed only if they are the top
// slice of a signed operand. All clusters feed the same global sum, so the CVU
// returns one scalar per cycle: a dot product of 16 (8b x 8b), 64 (8b x 2b, 4b x 4b)
// or 256 (2b x 2b) element pairs.
//
// Packing: element e of the input vector is x_vec[e*xbw +: xbw], and likewise
// for weights. A mode uses the low 512/nw bits of x_vec and the low 512/nx bits of
// w_vec; the bits above are ignored. An illegal bitwidth code is treated as 8 bits.
// Purely combinational.
//
// The clustering and the shift-and-add composition are the paper's. The element
// packing, the numbering of engines inside a cluster and the sign handling are
// this design's choices.
module cvu_compose
  import bpvec_pkg::*;
(
  input  mode_t                mode,
  input  logic [VEC_W-1:0]     x_vec,
  input  logic [VEC_W-1:0]     w_vec,
  output logic [SLICE_W-1:0]   x_sl  [N_NBVE][L],
  output logic [SLICE_W-1:0]   w_sl  [N_NBVE][L],
  output logic                 x_sgn [N_NBVE],
  output logic                 w_sgn [N_NBVE],
  output logic [SH_W-1:0]      shamt [N_NBVE]
);
  // log2 of the slice count of a bitwidth code
  function automatic int unsigned lg(bw_e b);
    case (b)
      BW2:     return 0;
      BW4:     return 1;
      default: return 2;
    endcase
  endfunction

  always_comb begin
    int unsigned lx, lw, g, idx, j, k, e, xp, wp;
    lx = lg(mode.xbw);
    lw = lg(mode.wbw);
    for (int n = 0; n < N_NBVE; n++) begin
      g   = n >> (lx + lw);
      idx = n & ((1 << (lx + lw)) - 1);
      j   = idx >> lw;
      k   = idx & ((1 << lw) - 1);
      shamt[n] = SH_W'(SLICE_W * (j + k));
      x_sgn[n] = mode.x_sgn && (j == (1 << lx) - 1);
      w_sgn[n] = mode.w_sgn && (k == (1 << lw) - 1);
      for (int l = 0; l < L; l++) begin
        e  = g * L + l;
        xp = (e << (lx + 1)) + SLICE_W * j;
        wp = (e << (lw + 1)) + SLICE_W * k;
        x_sl[n][l] = x_vec[xp[$clog2(VEC_W)-1:0] +: SLICE_W];
        w_sl[n][l] = w_vec[wp[$clog2(VEC_W)-1:0] +: SLICE_W];
      end
    end
  end
endmodule
