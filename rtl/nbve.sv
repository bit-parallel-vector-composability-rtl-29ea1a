// nbve: Narrow-Bitwidth Vector Engine.
//
// L narrow multipliers each multiply one lane's input slice by its weight slice.
// A private adder tree reduces the L products to one scalar, the dot product of two
// bit-sliced sub-vectors. That scalar is registered. The shifter then moves it left
// by the combined significance of its slices (shamt = 2j + 2k for input slice j and
// weight slice k) before the CVU adds it to the other NBVEs.
//
// Timing: y is valid one clock after x_sl / w_sl / shamt. The shift amount is
// registered with the sum. There is no reset: the datapath registers carry no
// state of their own, and validity is tracked outside.
//
// Multipliers, adder tree and shifter are the paper's. The single register stage
// and its place are this design's choice.
module nbve
  import bpvec_pkg::*;
#(
  parameter int unsigned LANES = L
) (
  input  logic                      clk,
  input  logic [SLICE_W-1:0]        x_sl [LANES],
  input  logic [SLICE_W-1:0]        w_sl [LANES],
  input  logic                      x_sgn,
  input  logic                      w_sgn,
  input  logic [SH_W-1:0]           shamt,
  output logic signed [NSH_W-1:0]   y
);
  localparam int unsigned TW = PROD_W + $clog2(LANES);

  logic signed [PROD_W-1:0] prod [LANES];
  logic signed [TW-1:0]     tsum;
  logic signed [TW-1:0]     tsum_q;
  logic [SH_W-1:0]          shamt_q;

  for (genvar i = 0; i < LANES; i++) begin : g_mul
    nb_mult u_mul (
      .x(x_sl[i]), .w(w_sl[i]), .x_sgn(x_sgn), .w_sgn(w_sgn), .p(prod[i])
    );
  end

  adder_tree #(.N(LANES), .IN_W(PROD_W), .OUT_W(TW)) u_tree (
    .in(prod), .sum(tsum)
  );

  always_ff @(posedge clk) begin
    tsum_q  <= tsum;
    shamt_q <= shamt;
  end

  // Shifter: significance position of this engine's slices.
  always_comb y = NSH_W'(tsum_q) <<< shamt_q;
endmodule
