// systolic_array: ROWS x COLS grid of PEs, each a CVU with its weight scratchpad.
//
// Each clock one step may enter. A step is one input vector per row (x_rows) and
// one weight address (w_raddr), which all PEs read from their own scratchpads.
// Column c then computes sum over r of dot(x_rows[r], W[r][c][w_raddr]). The rows
// split the reduction, and the columns are independent outputs. Partial sums move
// one row down per clock. Row r therefore gets its weight address and input vector
// r clocks after row 0, through skew registers. All columns of a row share that
// row's input, so every column's sum leaves the bottom row in the same clock.
//
// Timing: step_vld/w_raddr in clock t and x_rows in clock t+1, the input-buffer read
// latency. col_vld/col_sum follow in clock t+ROWS+3. Steps may enter every clock.
// mode must stay constant while steps are in flight.
//
// Weight loading: w_we writes w_wdata at w_waddr of the PE at (w_row, w_col).
//
// The 2D systolic organisation, the private scratchpads and the input shared along
// a row are the paper's. The 8 x 8 shape is derived from the paper's 1024 8-bit MACs
// at 16 MACs per CVU. The skew scheme is this design's choice.
module systolic_array
  import bpvec_pkg::*;
#(
  parameter int unsigned ROWS   = 8,
  parameter int unsigned COLS   = 8,
  parameter int unsigned WDEPTH = 16,
  parameter int unsigned WAW    = (WDEPTH > 1) ? $clog2(WDEPTH) : 1,
  parameter int unsigned RW     = (ROWS > 1) ? $clog2(ROWS) : 1,
  parameter int unsigned CW     = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  mode_t                    mode,
  input  logic                     step_vld,
  input  logic [WAW-1:0]           w_raddr,
  input  logic [VEC_W-1:0]         x_rows [ROWS],
  input  logic                     w_we,
  input  logic [RW-1:0]            w_row,
  input  logic [CW-1:0]            w_col,
  input  logic [WAW-1:0]           w_waddr,
  input  logic [VEC_W-1:0]         w_wdata,
  output logic                     col_vld,
  output logic signed [PSUM_W-1:0] col_sum [COLS]
);
  // Per-row skewed weight read request and input vector.
  logic             re_r  [ROWS];
  logic [WAW-1:0]   ra_r  [ROWS];
  logic [VEC_W-1:0] x_r   [ROWS];
  // Row-0 partial-sum valid: step_vld delayed to the CVU output time (3 clocks).
  logic [2:0]       v0_pipe;

  logic signed [PSUM_W-1:0] ps [ROWS+1][COLS];
  logic                     pv [ROWS+1][COLS];

  assign re_r[0] = step_vld;
  assign ra_r[0] = w_raddr;
  assign x_r[0]  = x_rows[0];

  for (genvar r = 1; r < ROWS; r++) begin : g_skew
    // x_rows[r] needs r clocks of delay; ra_r[r] follows ra_r[r-1] by one clock.
    logic [VEC_W-1:0] xd [r];
    always_ff @(posedge clk) begin
      xd[0] <= x_rows[r];
      for (int i = 1; i < r; i++) xd[i] <= xd[i-1];
      ra_r[r] <= ra_r[r-1];
    end
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) re_r[r] <= 1'b0;
      else        re_r[r] <= re_r[r-1];
    assign x_r[r] = xd[r-1];
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) v0_pipe <= '0;
    else        v0_pipe <= {v0_pipe[1:0], step_vld};

  for (genvar c = 0; c < COLS; c++) begin : g_top
    assign ps[0][c] = '0;
    assign pv[0][c] = v0_pipe[2];
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      logic we_rc;
      assign we_rc = w_we && (w_row == RW'(r)) && (w_col == CW'(c));
      bpvec_pe #(.WDEPTH(WDEPTH)) u_pe (
        .clk(clk), .rst_n(rst_n), .mode(mode),
        .x_vec(x_r[r]), .w_re(re_r[r]), .w_raddr(ra_r[r]),
        .w_we(we_rc), .w_waddr(w_waddr), .w_wdata(w_wdata),
        .psum_in(ps[r][c]), .vld_in(pv[r][c]),
        .psum_out(ps[r+1][c]), .vld_out(pv[r+1][c])
      );
    end
  end

  assign col_vld = pv[ROWS][0];
  for (genvar c = 0; c < COLS; c++) begin : g_out
    assign col_sum[c] = ps[ROWS][c];
  end
endmodule
