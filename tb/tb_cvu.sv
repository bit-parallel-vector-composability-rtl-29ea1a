// tb_cvu: streams a new random vector pair into the CVU every clock, cycling
// through all nine bitwidth pairs and the four sign settings. Each result must
// equal the reference dot product exactly two clocks after its inputs, which also
// checks the one-result-per-clock rate. It also counts how many element pairs
// each mode delivers per result.
module tb_cvu;
  import bpvec_pkg::*;
  import bpvec_ref_pkg::*;
  logic clk = 0;
  mode_t mode;
  logic [VEC_W-1:0] x, w;
  logic signed [PSUM_W-1:0] y;
  int checks = 0, failures = 0;
  longint exp_pipe [3];
  logic   vld_pipe [3];

  always #5 clk = ~clk;

  cvu dut (.clk(clk), .mode(mode), .x_vec(x), .w_vec(w), .y(y));

  initial begin
    int bwl [3] = '{2, 4, 8};
    int n;
    vld_pipe = '{0, 0, 0};
    n = 0;
    for (int a = 0; a < 3; a++)
      for (int b = 0; b < 3; b++)
        for (int s = 0; s < 4; s++)
          for (int t = 0; t < 12; t++) begin
            mode = mk_mode(bwl[a], bwl[b], s[0], s[1]);
            x = (t == 0) ? extreme_vec(bwl[a], s[0]) : rand_vec();
            w = (t == 0) ? extreme_vec(bwl[b], s[1]) : rand_vec();
            // the paper's element counts: 16 at 8x8, 64 at 8x2, 256 at 2x2
            if (t == 0 && s == 0) begin
              checks++;
              if (elems_per_cvu(mode.xbw, mode.wbw) != 256 / ((bwl[a] / 2) * (bwl[b] / 2)))
                failures++;
            end
            exp_pipe[0] = dot(x, w, mode);
            vld_pipe[0] = 1;
            @(posedge clk); #1;
            exp_pipe[2] = exp_pipe[1]; vld_pipe[2] = vld_pipe[1];
            exp_pipe[1] = exp_pipe[0]; vld_pipe[1] = vld_pipe[0];
            if (vld_pipe[2]) begin
              checks++;
              if (longint'(y) != exp_pipe[2]) begin
                failures++;
                $display("FAIL n=%0d y=%0d exp=%0d", n, y, exp_pipe[2]);
              end
            end
            n++;
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
