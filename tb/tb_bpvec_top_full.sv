// tb_bpvec_top_full: end-to-end test of the accelerator at its default size, an
// 8 x 8 array of CVUs with 1 KB weight scratchpads, a 64-word input buffer and a
// 256-word output buffer. It runs the same tile sequence as tb_bpvec_top.
//
// The bench fills the input buffer and all 64 weight scratchpads with random data,
// then runs a sequence of tiles. The tiles cover homogeneous 8-bit layers
// (unsigned, signed, and extreme values), 8-bit inputs with 2-bit weights, where
// clusters of four NBVEs each take a quarter of a 64-element vector, 4b x 4b and
// 2b x 2b layers, and a tile that continues an earlier output row (acc_in). Each
// result is read back through the host port of the output buffer and compared with
// a reference built from whole elements. Each tile's done latency is checked
// against K + ROWS + 4 clocks, +2 with acc_in. The bench counts how often each
// mechanism occurred (mode switch, clustered composition, 16x-narrow mode, signed
// operands, accumulator continuation, step streaming deeper than the array
// latency), and any mechanism that never occurred counts as a failure.
module tb_bpvec_top_full;
  import bpvec_pkg::*;
  import bpvec_ref_pkg::*;
  localparam int ROWS = 8, COLS = 8, WD = 16, ID = 64, OD = 256;
  localparam int RW = (ROWS > 1) ? $clog2(ROWS) : 1, CW = (COLS > 1) ? $clog2(COLS) : 1;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, busy, done;
  cmd_t cmd;
  logic ib_we, wb_we, ob_re;
  logic [5:0] ib_wa;
  logic [ROWS*VEC_W-1:0] ib_wd;
  logic [RW-1:0] wb_row;
  logic [CW-1:0] wb_col;
  logic [3:0] wb_wa;
  logic [VEC_W-1:0] wb_wd;
  logic [7:0] ob_ra;
  logic [COLS*ACC_W-1:0] ob_rd;

  logic [VEC_W-1:0] imem [ID][ROWS];
  logic [VEC_W-1:0] wmem [ROWS][COLS][WD];
  longint omem [OD][COLS];
  int checks = 0, failures = 0;
  int cyc = 0;
  // mechanism counters
  int n_mode_switch = 0, n_cluster = 0, n_narrow16 = 0, n_signed = 0, n_acc_in = 0,
      n_stream_deep = 0;
  mode_t last_mode;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  bpvec_top dut (
    .clk(clk), .rst_n(rst_n), .cmd_valid(cmd_valid), .cmd_ready(cmd_ready), .cmd(cmd),
    .busy(busy), .done(done),
    .ibuf_we(ib_we), .ibuf_waddr(ib_wa), .ibuf_wdata(ib_wd),
    .wbuf_we(wb_we), .wbuf_row(wb_row), .wbuf_col(wb_col), .wbuf_waddr(wb_wa),
    .wbuf_wdata(wb_wd),
    .obuf_re(ob_re), .obuf_raddr(ob_ra), .obuf_rdata(ob_rd));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL cyc=%0d %s", cyc, what);
    end
  endtask

  task automatic run_tile(mode_t m, int k, int ib, int wb, int oa, bit acc_in);
    longint exp [COLS];
    int t0, lat;
    for (int c = 0; c < COLS; c++) begin
      exp[c] = acc_in ? omem[oa][c] : 0;
      for (int s = 0; s < k; s++)
        for (int r = 0; r < ROWS; r++)
          exp[c] += dot(imem[(ib + s) % ID][r], wmem[r][c][(wb + s) % WD], m);
    end
    if (m != last_mode) n_mode_switch++;
    last_mode = m;
    if (int'(m.xbw) * int'(m.wbw) < N_NBVE) n_cluster++;
    if (m.xbw == BW2 && m.wbw == BW2) n_narrow16++;
    if (m.x_sgn || m.w_sgn) n_signed++;
    if (acc_in) n_acc_in++;
    if (k > ROWS + 3) n_stream_deep++;
    chk(cmd_ready, "ready before tile");
    cmd.mode = m; cmd.k = 16'(k); cmd.ibuf_base = 16'(ib); cmd.wbuf_base = 16'(wb);
    cmd.obuf_addr = 16'(oa); cmd.acc_in = acc_in;
    cmd_valid = 1;
    @(posedge clk); #1; t0 = cyc;
    cmd_valid = 0;
    while (!done && cyc - t0 < 200) begin
      @(posedge clk); #1;
    end
    lat = cyc - t0;
    chk(lat == k + ROWS + 4 + (acc_in ? 2 : 0), $sformatf("tile latency %0d K=%0d", lat, k));
    // read back through the host port
    @(posedge clk); #1;
    ob_re = 1; ob_ra = 8'(oa);
    @(posedge clk); #1;
    ob_re = 0;
    for (int c = 0; c < COLS; c++) begin
      omem[oa][c] = exp[c];
      chk(longint'(ob_rd[c*ACC_W +: ACC_W]) == exp[c],
          $sformatf("x%0d w%0d col %0d got=%0d exp=%0d", 2*int'(m.xbw), 2*int'(m.wbw), c,
                    longint'(ob_rd[c*ACC_W +: ACC_W]), exp[c]));
    end
  endtask

  initial begin
    cmd_valid = 0; cmd = '0; ib_we = 0; wb_we = 0; ob_re = 0; ob_ra = '0;
    ib_wa = '0; ib_wd = '0; wb_row = '0; wb_col = '0; wb_wa = '0; wb_wd = '0;
    last_mode = mk_mode(8, 8, 0, 0);
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // input buffer: words 32..35 at the signed 8-bit extreme, the rest random
    for (int a = 0; a < ID; a++) begin
      for (int r = 0; r < ROWS; r++) begin
        imem[a][r] = (a >= 32 && a < 36) ? extreme_vec(8, 1) : rand_vec();
        ib_wd[r*VEC_W +: VEC_W] = imem[a][r];
      end
      ib_we = 1; ib_wa = 6'(a);
      @(posedge clk); #1;
    end
    ib_we = 0;
    // weight scratchpads: addresses 0..11 random, 12..15 at the signed 8-bit extreme
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        for (int a = 0; a < WD; a++) begin
          wmem[r][c][a] = (a >= 12) ? extreme_vec(8, 1) : rand_vec();
          wb_we = 1; wb_row = RW'(r); wb_col = CW'(c); wb_wa = 4'(a); wb_wd = wmem[r][c][a];
          @(posedge clk); #1;
        end
    wb_we = 0;

    run_tile(mk_mode(8, 8, 0, 0), 4,  0,  0, 0, 0);   // homogeneous 8-bit, unsigned
    run_tile(mk_mode(8, 8, 1, 1), 16, 3,  2, 1, 0);   // 8-bit signed, streaming 16 steps
    run_tile(mk_mode(8, 8, 1, 1), 4, 32, 12, 2, 0);   // signed extremes: -128 * -128
    run_tile(mk_mode(8, 2, 1, 1), 5,  7,  5, 3, 0);   // 8b inputs, 2b weights: 4 clusters
    run_tile(mk_mode(4, 4, 1, 1), 6, 10,  9, 4, 0);   // 4-bit layer
    run_tile(mk_mode(4, 4, 1, 1), 5, 20,  1, 4, 1);   // continue output row 4
    run_tile(mk_mode(2, 2, 0, 1), 3, 25, 14, 5, 0);   // 2b x 2b: 16 independent engines
    run_tile(mk_mode(2, 8, 0, 1), 2, 27,  3, 6, 0);   // 2b inputs, 8b weights
    run_tile(mk_mode(8, 4, 0, 0), 12, 58, 7, 7, 0);   // 8b x 4b, unsigned, ibuf wraps

    chk(n_mode_switch > 0, "mode switch never happened");
    chk(n_cluster > 0,     "clustered composition never happened");
    chk(n_narrow16 > 0,    "2b x 2b mode never happened");
    chk(n_signed > 0,      "signed operands never happened");
    chk(n_acc_in > 0,      "accumulator continuation never happened");
    chk(n_stream_deep > 0, "deep streaming never happened");
    $display("mechanisms: mode_switch=%0d cluster=%0d narrow16=%0d signed=%0d acc_in=%0d stream_deep=%0d",
             n_mode_switch, n_cluster, n_narrow16, n_signed, n_acc_in, n_stream_deep);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
