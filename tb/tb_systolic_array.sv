// tb_systolic_array: a 3 x 2 array, reduced from 8 x 8 to keep the run short. The
// bench loads every PE's weight scratchpad, then issues steps, mostly back to back
// with random gaps, in two bitwidth modes. Every column sum must equal
// sum over rows of the reference dot product. It must appear exactly ROWS+3 clocks
// after its step was issued, and col_vld may rise at no other time.
module tb_systolic_array;
  import bpvec_pkg::*;
  import bpvec_ref_pkg::*;
  localparam int R = 3, C = 2, D = 16, LAT = R + 3;
  logic clk = 0, rst_n = 0;
  mode_t mode;
  logic step, w_we;
  logic [3:0] ra, wa;
  logic [VEC_W-1:0] xr [R];
  logic [VEC_W-1:0] wd;
  logic [1:0] wrow;
  logic [0:0] wcol;
  logic cv;
  logic signed [PSUM_W-1:0] cs [C];
  logic [VEC_W-1:0] wmem [R][C][D];
  int checks = 0, failures = 0;
  int cyc = 0;

  typedef struct { int due; longint s [C]; } exp_t;
  exp_t q [$];

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  systolic_array #(.ROWS(R), .COLS(C), .WDEPTH(D)) dut (
    .clk(clk), .rst_n(rst_n), .mode(mode), .step_vld(step), .w_raddr(ra), .x_rows(xr),
    .w_we(w_we), .w_row(wrow), .w_col(wcol), .w_waddr(wa), .w_wdata(wd),
    .col_vld(cv), .col_sum(cs));

  // Output checker, sampled just after each edge.
  always @(posedge clk) begin
    #2;
    if (rst_n) begin
      if (q.size() > 0 && q[0].due == cyc) begin
        checks++;
        if (!cv) begin
          failures++;
          $display("FAIL no col_vld at cycle %0d", cyc);
        end
        for (int c = 0; c < C; c++) begin
          checks++;
          if (longint'(cs[c]) != q[0].s[c]) begin
            failures++;
            $display("FAIL cyc=%0d col %0d got=%0d exp=%0d", cyc, c, cs[c], q[0].s[c]);
          end
        end
        void'(q.pop_front());
      end else if (cv) begin
        failures++;
        $display("FAIL stray col_vld at cycle %0d", cyc);
      end
    end
  end

  initial begin
    logic [VEC_W-1:0] xn [R];
    exp_t e;
    step = 0; w_we = 0; ra = '0; wa = '0; wd = '0; wrow = '0; wcol = '0;
    for (int r = 0; r < R; r++) xr[r] = '0;
    mode = mk_mode(8, 8, 1, 1);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++)
        for (int a = 0; a < D; a++) begin
          w_we = 1; wrow = 2'(r); wcol = 1'(c); wa = 4'(a); wd = rand_vec();
          wmem[r][c][a] = wd;
          @(posedge clk); #1;
        end
    w_we = 0;
    for (int m = 0; m < 2; m++) begin
      mode = (m == 0) ? mk_mode(8, 8, 1, 1) : mk_mode(4, 2, 0, 1);
      for (int s = 0; s < 40; s++) begin
        // step issue in this clock, input vectors in the next
        step = ($urandom % 4) != 0;
        ra   = 4'($urandom);
        for (int r = 0; r < R; r++) xn[r] = rand_vec();
        if (step) begin
          e.due = cyc + LAT;
          for (int c = 0; c < C; c++) begin
            e.s[c] = 0;
            for (int r = 0; r < R; r++) e.s[c] += dot(xn[r], wmem[r][c][ra], mode);
          end
          q.push_back(e);
        end
        @(posedge clk); #1;
        step = 0;
        for (int r = 0; r < R; r++) xr[r] = xn[r];
      end
      repeat (LAT + 2) @(posedge clk);
      #1;
    end
    checks++;
    if (q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
