// bpvec_pe: one processing element of the systolic array.
//
// A PE is a CVU, its private weight scratchpad, and a partial-sum adder. The row's
// input vector arrives on x_vec and is shared with the other PEs of the row. The
// weight vector is read from the scratchpad one clock earlier, through w_re/w_raddr,
// so it meets x_vec at the CVU. The CVU result, two clocks later, is added to the
// partial sum coming down from the PE above. The total is registered and passed to
// the PE below. vld_in/vld_out travel with the partial sum.
//
// Timing for a step whose x_vec is at the PE in clock t: w_re/w_raddr in clock t-1,
// psum_in/vld_in in clock t+2, psum_out/vld_out in clock t+3.
//
// The weight load port (w_we/w_waddr/w_wdata) writes the scratchpad directly.
//
// The paper gives the private weight scratchpad, the input shared along a row and
// the systolic aggregation of the CVU outputs. The partial sums move down the
// columns. The paper's words "aggregate across columns" could also be read as
// moving along the rows; but every CVU in a row sees the same input, so a sum along
// a row would be meaningless. The timing and widths are this design's choices.
module bpvec_pe
  import bpvec_pkg::*;
#(
  parameter int unsigned WDEPTH = 16,
  parameter int unsigned WAW    = (WDEPTH > 1) ? $clog2(WDEPTH) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  mode_t                    mode,
  input  logic [VEC_W-1:0]         x_vec,
  input  logic                     w_re,
  input  logic [WAW-1:0]           w_raddr,
  input  logic                     w_we,
  input  logic [WAW-1:0]           w_waddr,
  input  logic [VEC_W-1:0]         w_wdata,
  input  logic signed [PSUM_W-1:0] psum_in,
  input  logic                     vld_in,
  output logic signed [PSUM_W-1:0] psum_out,
  output logic                     vld_out
);
  logic [VEC_W-1:0]         w_vec;
  logic signed [PSUM_W-1:0] cvu_y;

  spad_ram #(.W(VEC_W), .DEPTH(WDEPTH)) u_wspad (
    .clk(clk), .we(w_we), .waddr(w_waddr), .wdata(w_wdata),
    .re(w_re), .raddr(w_raddr), .rdata(w_vec)
  );

  cvu u_cvu (.clk(clk), .mode(mode), .x_vec(x_vec), .w_vec(w_vec), .y(cvu_y));

  always_ff @(posedge clk) psum_out <= psum_in + cvu_y;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) vld_out <= 1'b0;
    else        vld_out <= vld_in;
endmodule
