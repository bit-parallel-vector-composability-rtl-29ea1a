// adder_tree: balanced binary tree that sums N signed operands.
//
// The operands are sign-extended to OUT_W. Each tree level adds neighbouring
// pairs; an odd operand at a level is carried up unchanged. It is purely
// combinational. The enclosing block puts the register after it. The NBVE uses
// one as its private tree (N = L) and the CVU uses one as its global tree
// (N = 16 NBVEs), the paper's two levels of add-tree logic. The paper does not
// give the tree's shape; a binary tree is this design's choice.
module adder_tree #(
  parameter int unsigned N     = 16,
  parameter int unsigned IN_W  = 5,
  parameter int unsigned OUT_W = IN_W + $clog2(N)
) (
  input  logic signed [IN_W-1:0]  in  [N],
  output logic signed [OUT_W-1:0] sum
);
  localparam int unsigned LEVELS = (N > 1) ? $clog2(N) : 1;

  // node[lvl][i]: value i at level lvl; level 0 holds the operands.
  logic signed [OUT_W-1:0] node [LEVELS+1][N];

  always_comb begin
    int unsigned cnt;
    for (int l = 0; l <= LEVELS; l++)
      for (int i = 0; i < N; i++) node[l][i] = '0;
    for (int i = 0; i < N; i++) node[0][i] = OUT_W'(in[i]);
    cnt = N;
    for (int l = 0; l < LEVELS; l++) begin
      for (int i = 0; i < N / 2 + 1; i++) begin
        if (2 * i + 1 < cnt)      node[l+1][i] = node[l][2*i] + node[l][2*i+1];
        else if (2 * i < cnt)     node[l+1][i] = node[l][2*i];
      end
      cnt = (cnt + 1) / 2;
    end
    sum = node[LEVELS][0];
  end
endmodule
