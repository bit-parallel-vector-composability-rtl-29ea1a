// tb_bpvec_layers: runs scaled-down layers of the two workload types the design
// targets. It maps each layer onto tiles the way a host would, and checks every
// output neuron against a plain integer model of the layer. Runs on a 2 x 3 array
// to stay short.
//
// Layer A, recurrent / fully connected, all 4-bit: y = W x. x has 2048 unsigned
// 4-bit activations, W is 6 x 2048 with signed 4-bit weights. One step carries 64
// elements per row, so one tile of K = 8 steps covers 2 rows x 8 x 64 = 1024
// inputs. Two tiles chained with acc_in give the full reduction. The 6 outputs need
// two groups of 3 columns.
//
// Layer B, first convolution layer, 8-bit: 3 input channels, 10 x 10 image, 3 x 3
// kernels, 3 output channels, no padding, stride 1 (an 8 x 8 output). The bench
// unrolls each output pixel's 27-element receptive field (im2col). It zero-pads the
// field to 16 elements per row chunk, so the 27 values go into rows 0 and 1 of step
// 0 and the rest of step 1. Each pixel is one tile of K = 2 with signed 8-bit
// weights and unsigned 8-bit pixels.
module tb_bpvec_layers;
  import bpvec_pkg::*;
  import bpvec_ref_pkg::*;
  localparam int ROWS = 2, COLS = 3;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, busy, done;
  cmd_t cmd;
  logic ib_we, wb_we, ob_re;
  logic [5:0] ib_wa;
  logic [ROWS*VEC_W-1:0] ib_wd;
  logic [0:0] wb_row;
  logic [1:0] wb_col;
  logic [3:0] wb_wa;
  logic [VEC_W-1:0] wb_wd;
  logic [7:0] ob_ra;
  logic [COLS*ACC_W-1:0] ob_rd;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  bpvec_top #(.ROWS(ROWS), .COLS(COLS)) dut (
    .clk(clk), .rst_n(rst_n), .cmd_valid(cmd_valid), .cmd_ready(cmd_ready), .cmd(cmd),
    .busy(busy), .done(done),
    .ibuf_we(ib_we), .ibuf_waddr(ib_wa), .ibuf_wdata(ib_wd),
    .wbuf_we(wb_we), .wbuf_row(wb_row), .wbuf_col(wb_col), .wbuf_waddr(wb_wa),
    .wbuf_wdata(wb_wd),
    .obuf_re(ob_re), .obuf_raddr(ob_ra), .obuf_rdata(ob_rd));

  task automatic write_ibuf(int a, logic [ROWS*VEC_W-1:0] d);
    ib_we = 1; ib_wa = 6'(a); ib_wd = d;
    @(posedge clk); #1;
    ib_we = 0;
  endtask

  task automatic write_w(int r, int c, int a, logic [VEC_W-1:0] d);
    wb_we = 1; wb_row = 1'(r); wb_col = 2'(c); wb_wa = 4'(a); wb_wd = d;
    @(posedge clk); #1;
    wb_we = 0;
  endtask

  task automatic tile(mode_t m, int k, int ib, int wb, int oa, bit acc_in);
    cmd.mode = m; cmd.k = 16'(k); cmd.ibuf_base = 16'(ib); cmd.wbuf_base = 16'(wb);
    cmd.obuf_addr = 16'(oa); cmd.acc_in = acc_in;
    cmd_valid = 1;
    @(posedge clk); #1;
    cmd_valid = 0;
    while (!done) begin
      @(posedge clk); #1;
    end
  endtask

  task automatic read_out(int oa, output longint v [COLS]);
    ob_re = 1; ob_ra = 8'(oa);
    @(posedge clk); #1;
    ob_re = 0;
    for (int c = 0; c < COLS; c++) v[c] = longint'(ob_rd[c*ACC_W +: ACC_W]);
  endtask

  // ---------------- layer A: 4-bit matrix-vector ----------------
  localparam int NIN = 2048, NOUT = 6;
  logic [3:0] xa [NIN];
  logic [3:0] wa [NOUT][NIN];

  // ---------------- layer B: 8-bit 3x3 convolution ----------------
  localparam int CI = 3, HI = 10, KS = 3, CO = 3, HO = HI - KS + 1;
  logic [7:0] img [CI][HI][HI];
  logic [7:0] ker [CO][CI][KS][KS];

  initial begin
    longint got [COLS];
    longint ref_y;
    logic [ROWS*VEC_W-1:0] word;
    logic [VEC_W-1:0] wv;
    mode_t m4, m8;
    cmd_valid = 0; cmd = '0; ib_we = 0; wb_we = 0; ob_re = 0; ob_ra = '0;
    ib_wa = '0; ib_wd = '0; wb_row = '0; wb_col = '0; wb_wa = '0; wb_wd = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;

    // ---- layer A ----
    m4 = mk_mode(4, 4, 0, 1);
    for (int i = 0; i < NIN; i++) xa[i] = 4'($urandom);
    for (int o = 0; o < NOUT; o++) for (int i = 0; i < NIN; i++) wa[o][i] = 4'($urandom);
    // input element i -> tile i/1024, step (i%1024)/128, row (i%128)/64, lane i%64
    for (int a = 0; a < 16; a++) begin
      word = '0;
      for (int r = 0; r < ROWS; r++)
        for (int e = 0; e < 64; e++) word[r*VEC_W + e*4 +: 4] = xa[a*128 + r*64 + e];
      write_ibuf(a, word);
    end
    // outputs 0..2 use weight addresses 0..15 and outputs 3..5 use them again after
    // a reload; address a holds step a
    for (int grp = 0; grp < 2; grp++) begin
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++)
          for (int a = 0; a < 16; a++) begin
            wv = '0;
            for (int e = 0; e < 64; e++) wv[e*4 +: 4] = wa[grp*COLS + c][a*128 + r*64 + e];
            write_w(r, c, a, wv);
          end
      tile(m4, 8, 0, 0, grp, 0);      // inputs 0..1023
      tile(m4, 8, 8, 8, grp, 1);      // inputs 1024..2047, continuing the row
      read_out(grp, got);
      for (int c = 0; c < COLS; c++) begin
        ref_y = 0;
        for (int i = 0; i < NIN; i++)
          ref_y += longint'(xa[i]) * longint'($signed(wa[grp*COLS + c][i]));
        checks++;
        if (got[c] != ref_y) begin
          failures++;
          $display("FAIL layer A out %0d got=%0d exp=%0d", grp*COLS + c, got[c], ref_y);
        end
      end
    end

    // ---- layer B ----
    m8 = mk_mode(8, 8, 0, 1);
    for (int ci = 0; ci < CI; ci++)
      for (int y = 0; y < HI; y++)
        for (int x = 0; x < HI; x++) img[ci][y][x] = 8'($urandom);
    for (int co = 0; co < CO; co++)
      for (int ci = 0; ci < CI; ci++)
        for (int ky = 0; ky < KS; ky++)
          for (int kx = 0; kx < KS; kx++) ker[co][ci][ky][kx] = 8'($urandom);
    // receptive-field element f = ci*9 + ky*3 + kx (0..26) -> step f/32, row (f%32)/16,
    // lane f%16; unused lanes are zero
    for (int r = 0; r < ROWS; r++)
      for (int co = 0; co < CO; co++)
        for (int s = 0; s < 2; s++) begin
          wv = '0;
          for (int e = 0; e < 16; e++) begin
            int f;
            f = s*32 + r*16 + e;
            if (f < CI*KS*KS) wv[e*8 +: 8] = ker[co][f/9][(f%9)/3][f%3];
          end
          write_w(r, co, s, wv);
        end
    for (int oy = 0; oy < HO; oy++)
      for (int ox = 0; ox < HO; ox++) begin
        int p;
        p = oy*HO + ox;
        for (int s = 0; s < 2; s++) begin
          word = '0;
          for (int r = 0; r < ROWS; r++)
            for (int e = 0; e < 16; e++) begin
              int f;
              f = s*32 + r*16 + e;
              if (f < CI*KS*KS)
                word[r*VEC_W + e*8 +: 8] = img[f/9][oy + (f%9)/3][ox + f%3];
            end
          write_ibuf(20 + s, word);
        end
        tile(m8, 2, 20, 0, 16 + p, 0);
        read_out(16 + p, got);
        for (int co = 0; co < CO; co++) begin
          ref_y = 0;
          for (int ci = 0; ci < CI; ci++)
            for (int ky = 0; ky < KS; ky++)
              for (int kx = 0; kx < KS; kx++)
                ref_y += longint'(img[ci][oy+ky][ox+kx]) * longint'($signed(ker[co][ci][ky][kx]));
          checks++;
          if (got[co] != ref_y) begin
            failures++;
            $display("FAIL layer B pixel (%0d,%0d) ch %0d got=%0d exp=%0d", oy, ox, co, got[co], ref_y);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
