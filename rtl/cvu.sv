// cvu: Composable Vector Unit.
//
// The operand-composition stage cuts the packed input and weight vectors into
// 2-bit slices and spreads them over 16 NBVEs according to the layer's bitwidths.
// Each NBVE computes an L-lane slice dot product, registers it and shifts it to its
// significance. A global adder tree adds the 16 shifted scalars into one dot
// product, which is registered again.
//
// Throughput: one dot product per clock. Its length is 16 element pairs at 8b x 8b,
// 64 at 8b x 2b, 2b x 8b or 4b x 4b, and 256 at 2b x 2b. Other mixes follow
// 256/(nx*nw). Latency: y holds the result two clocks after x_vec / w_vec / mode
// are applied.
//
// The paper gives the structure: 16 NBVEs, L = 16, 2-bit slices, shifters and a
// global tree. The two-stage pipeline and the 32-bit signed result are this design's
// choices. The largest result, 16 products of 8-bit unsigned values, needs 21 bits.
module cvu
  import bpvec_pkg::*;
(
  input  logic                     clk,
  input  mode_t                    mode,
  input  logic [VEC_W-1:0]         x_vec,
  input  logic [VEC_W-1:0]         w_vec,
  output logic signed [PSUM_W-1:0] y
);
  localparam int unsigned GW = NSH_W + $clog2(N_NBVE);  // 25

  logic [SLICE_W-1:0]       x_sl  [N_NBVE][L];
  logic [SLICE_W-1:0]       w_sl  [N_NBVE][L];
  logic                     x_sgn [N_NBVE];
  logic                     w_sgn [N_NBVE];
  logic [SH_W-1:0]          shamt [N_NBVE];
  logic signed [NSH_W-1:0]  ny    [N_NBVE];
  logic signed [GW-1:0]     gsum;

  cvu_compose u_comp (
    .mode(mode), .x_vec(x_vec), .w_vec(w_vec),
    .x_sl(x_sl), .w_sl(w_sl), .x_sgn(x_sgn), .w_sgn(w_sgn), .shamt(shamt)
  );

  for (genvar n = 0; n < N_NBVE; n++) begin : g_nbve
    nbve #(.LANES(L)) u_nbve (
      .clk(clk), .x_sl(x_sl[n]), .w_sl(w_sl[n]),
      .x_sgn(x_sgn[n]), .w_sgn(w_sgn[n]), .shamt(shamt[n]), .y(ny[n])
    );
  end

  adder_tree #(.N(N_NBVE), .IN_W(NSH_W), .OUT_W(GW)) u_gtree (
    .in(ny), .sum(gsum)
  );

  always_ff @(posedge clk) y <= PSUM_W'(gsum);
endmodule
