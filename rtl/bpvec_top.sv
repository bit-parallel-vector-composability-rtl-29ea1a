// bpvec_top: the bit-parallel vector-composable accelerator core.
//
// An 8 x 8 systolic array of Composable Vector Units (CVUs) with private 1 KB weight
// scratchpads. A 32 KB input buffer holds one 512-bit input vector per array row
// per word. Eight 64-bit column accumulators feed a 16 KB output buffer, and a tile
// controller runs the whole. One tile computes, for every column c,
//   out[c] = (acc_in ? out_old[c] : 0)
//          + sum_{s<K} sum_{r<ROWS} dot( ibuf[ib+s].row[r], wspad[r][c][wb+s] )
// at the input and weight bitwidths of cmd.mode: 2, 4 or 8 bits each, signed or
// unsigned. At 8b x 8b every CVU does 16 multiply-adds per clock, 1024 for the
// array. Narrower operands give more per clock, up to 16x at 2b x 2b.
//
// Host side: ibuf_* and wbuf_* load the buffers, which a DMA engine from off-chip
// DRAM would drive. A tile starts when cmd_valid and cmd_ready are both high, and
// done pulses when its result is in the output buffer. obuf_re/obuf_raddr read a
// result word one clock later. The controller owns the output-buffer read port
// while busy.
//
// Buffer packing: input word bits [r*512 +: 512] go to row r. Output word bits
// [c*64 +: 64] hold column c. A weight word of 512 bits is packed like an input
// vector: element e at bits [e*wbw +: wbw].
//
// The CVU organisation, the 1024-MAC count, the 112 KB of on-chip memory, the
// systolic array and the 64-bit accumulators follow the paper. The array shape, the
// split of the memory, the command format and the host ports are this design's
// choices.
module bpvec_top
  import bpvec_pkg::*;
#(
  parameter int unsigned ROWS   = 8,
  parameter int unsigned COLS   = 8,
  parameter int unsigned WDEPTH = 16,
  parameter int unsigned IDEPTH = 64,
  parameter int unsigned ODEPTH = 256,
  parameter int unsigned RW     = (ROWS > 1) ? $clog2(ROWS) : 1,
  parameter int unsigned CW     = (COLS > 1) ? $clog2(COLS) : 1,
  parameter int unsigned WAW    = (WDEPTH > 1) ? $clog2(WDEPTH) : 1,
  parameter int unsigned IAW    = (IDEPTH > 1) ? $clog2(IDEPTH) : 1,
  parameter int unsigned OAW    = (ODEPTH > 1) ? $clog2(ODEPTH) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // tile command
  input  logic                    cmd_valid,
  output logic                    cmd_ready,
  input  cmd_t                    cmd,
  output logic                    busy,
  output logic                    done,
  // input-buffer load
  input  logic                    ibuf_we,
  input  logic [IAW-1:0]          ibuf_waddr,
  input  logic [ROWS*VEC_W-1:0]   ibuf_wdata,
  // weight-scratchpad load
  input  logic                    wbuf_we,
  input  logic [RW-1:0]           wbuf_row,
  input  logic [CW-1:0]           wbuf_col,
  input  logic [WAW-1:0]          wbuf_waddr,
  input  logic [VEC_W-1:0]        wbuf_wdata,
  // output-buffer read
  input  logic                    obuf_re,
  input  logic [OAW-1:0]          obuf_raddr,
  output logic [COLS*ACC_W-1:0]   obuf_rdata
);
  mode_t                    mode;
  logic                     ib_re;
  logic [IAW-1:0]           ib_raddr;
  logic [ROWS*VEC_W-1:0]    ib_rdata;
  logic [VEC_W-1:0]         x_rows [ROWS];
  logic                     step_vld;
  logic [WAW-1:0]           w_raddr;
  logic                     col_vld;
  logic signed [PSUM_W-1:0] col_sum [COLS];
  logic                     acc_clr, acc_load;
  logic signed [ACC_W-1:0]  acc      [COLS];
  logic signed [ACC_W-1:0]  load_val [COLS];
  logic                     c_obuf_re, c_obuf_we;
  logic [OAW-1:0]           c_obuf_raddr, c_obuf_waddr;
  logic [COLS*ACC_W-1:0]    ob_wdata;

  bpvec_ctrl #(.IAW(IAW), .WAW(WAW), .OAW(OAW)) u_ctrl (
    .clk(clk), .rst_n(rst_n),
    .cmd_valid(cmd_valid), .cmd_ready(cmd_ready), .cmd(cmd),
    .busy(busy), .done(done), .mode(mode),
    .ibuf_re(ib_re), .ibuf_raddr(ib_raddr),
    .step_vld(step_vld), .w_raddr(w_raddr), .col_vld(col_vld),
    .acc_clr(acc_clr), .acc_load(acc_load),
    .obuf_re(c_obuf_re), .obuf_raddr(c_obuf_raddr),
    .obuf_we(c_obuf_we), .obuf_waddr(c_obuf_waddr)
  );

  spad_ram #(.W(ROWS*VEC_W), .DEPTH(IDEPTH)) u_ibuf (
    .clk(clk), .we(ibuf_we), .waddr(ibuf_waddr), .wdata(ibuf_wdata),
    .re(ib_re), .raddr(ib_raddr), .rdata(ib_rdata)
  );

  for (genvar r = 0; r < ROWS; r++) begin : g_xr
    assign x_rows[r] = ib_rdata[r*VEC_W +: VEC_W];
  end

  systolic_array #(.ROWS(ROWS), .COLS(COLS), .WDEPTH(WDEPTH)) u_array (
    .clk(clk), .rst_n(rst_n), .mode(mode),
    .step_vld(step_vld), .w_raddr(w_raddr), .x_rows(x_rows),
    .w_we(wbuf_we), .w_row(wbuf_row), .w_col(wbuf_col),
    .w_waddr(wbuf_waddr), .w_wdata(wbuf_wdata),
    .col_vld(col_vld), .col_sum(col_sum)
  );

  for (genvar c = 0; c < COLS; c++) begin : g_acc
    assign load_val[c]            = obuf_rdata[c*ACC_W +: ACC_W];
    assign ob_wdata[c*ACC_W +: ACC_W] = acc[c];
  end

  col_accum #(.COLS(COLS)) u_acc (
    .clk(clk), .rst_n(rst_n), .clr(acc_clr), .load(acc_load),
    .load_val(load_val), .in_vld(col_vld), .in_sum(col_sum), .acc(acc)
  );

  spad_ram #(.W(COLS*ACC_W), .DEPTH(ODEPTH)) u_obuf (
    .clk(clk), .we(c_obuf_we), .waddr(c_obuf_waddr), .wdata(ob_wdata),
    .re(busy ? c_obuf_re : obuf_re),
    .raddr(busy ? c_obuf_raddr : obuf_raddr),
    .rdata(obuf_rdata)
  );
endmodule
