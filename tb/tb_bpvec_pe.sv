// tb_bpvec_pe: loads the PE's weight scratchpad, then streams steps. Each step
// puts the weight address in clock t-1, the input vector in clock t, and a partial
// sum from above in clock t+2. psum_out in clock t+3 must equal psum_in plus the
// reference dot product, and vld must follow the same timing.
module tb_bpvec_pe;
  import bpvec_pkg::*;
  import bpvec_ref_pkg::*;
  localparam int D = 16;
  logic clk = 0, rst_n = 0;
  mode_t mode;
  logic [VEC_W-1:0] x, wd;
  logic w_re, w_we;
  logic [3:0] w_ra, w_wa;
  logic signed [PSUM_W-1:0] pin, pout;
  logic vin, vout;
  logic [VEC_W-1:0] wmem [D];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  bpvec_pe #(.WDEPTH(D)) dut (.clk(clk), .rst_n(rst_n), .mode(mode), .x_vec(x),
    .w_re(w_re), .w_raddr(w_ra), .w_we(w_we), .w_waddr(w_wa), .w_wdata(wd),
    .psum_in(pin), .vld_in(vin), .psum_out(pout), .vld_out(vout));

  // Stimulus per clock index: address at i, x at i+1, psum at i+3, output at i+4.
  localparam int N = 60;
  logic [3:0]   adr [N];
  logic [VEC_W-1:0] xv [N];
  int           ps  [N];
  longint       ex  [N];

  initial begin
    int bwl [3] = '{2, 4, 8};
    mode = mk_mode(8, 8, 1, 1);
    w_re = 0; w_we = 0; vin = 0; pin = 0; x = '0; w_ra = '0; w_wa = '0; wd = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < 3; m++) begin
      mode = mk_mode(bwl[m], bwl[2 - m], m[0], 1);
      for (int i = 0; i < D; i++) begin
        w_we = 1; w_wa = 4'(i); wd = rand_vec(); wmem[i] = wd;
        @(posedge clk); #1;
      end
      w_we = 0;
      for (int i = 0; i < N; i++) begin
        adr[i] = 4'($urandom); xv[i] = rand_vec(); ps[i] = int'($urandom % 100000) - 50000;
        ex[i]  = longint'(ps[i]) + dot(xv[i], wmem[adr[i]], mode);
      end
      for (int c = 0; c < N + 5; c++) begin
        w_re = (c < N);
        if (c < N) w_ra = adr[c];
        if (c >= 1 && c <= N) x = xv[c-1];
        vin = (c >= 3 && c < N + 3);
        if (vin) pin = PSUM_W'(ps[c-3]);
        @(posedge clk); #1;
        // after this edge, outputs of index c-3 are registered
        if (c >= 3 && c < N + 3) begin
          checks++;
          if (!vout || longint'(pout) != ex[c-3]) begin
            failures++;
            $display("FAIL m=%0d i=%0d vout=%0b pout=%0d exp=%0d", m, c-3, vout, pout, ex[c-3]);
          end
        end else if (c >= N + 3) begin
          checks++;
          if (vout) begin
            failures++;
            $display("FAIL stray valid");
          end
        end
      end
    end
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
