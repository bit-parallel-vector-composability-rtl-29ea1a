// tb_cvu_compose: for every bitwidth pair and sign setting, rebuilds the dot
// product from the slices, signs and shifts that the composition stage hands to the
// 16 NBVEs. It checks the result against the dot product of whole elements. It
// also checks that the nx*nw engines of each cluster carry distinct slice
// positions, so every slice pair of an element is multiplied exactly once.
module tb_cvu_compose;
  import bpvec_pkg::*;
  import bpvec_ref_pkg::*;
  mode_t mode;
  logic [VEC_W-1:0] x, w;
  logic [1:0] xs [N_NBVE][L], ws [N_NBVE][L];
  logic xg [N_NBVE], wg [N_NBVE];
  logic [SH_W-1:0] sh [N_NBVE];
  int checks = 0, failures = 0;

  cvu_compose dut (.mode(mode), .x_vec(x), .w_vec(w), .x_sl(xs), .w_sl(ws),
                   .x_sgn(xg), .w_sgn(wg), .shamt(sh));

  function automatic int sv(logic [1:0] s, logic sg);
    return (sg && s[1]) ? int'(s) - 4 : int'(s);
  endfunction

  initial begin
    int bwl [3] = '{2, 4, 8};
    longint got, e;
    int nx, nw;
    for (int a = 0; a < 3; a++)
      for (int b = 0; b < 3; b++)
        for (int s = 0; s < 4; s++)
          for (int t = 0; t < 20; t++) begin
            mode = mk_mode(bwl[a], bwl[b], s[0], s[1]);
            x = (t == 0) ? extreme_vec(bwl[a], s[0]) : rand_vec();
            w = (t == 0) ? extreme_vec(bwl[b], s[1]) : rand_vec();
            #1;
            got = 0;
            for (int n = 0; n < N_NBVE; n++)
              for (int l = 0; l < L; l++)
                got += longint'(sv(xs[n][l], xg[n]) * sv(ws[n][l], wg[n])) << sh[n];
            e = dot(x, w, mode);
            checks++;
            if (got != e) begin
              failures++;
              $display("FAIL x%0d w%0d s%0d got=%0d exp=%0d", bwl[a], bwl[b], s, got, e);
            end
            // Each cluster covers all (j,k) shift pairs exactly once.
            if (t == 0) begin
              nx = bwl[a] / 2; nw = bwl[b] / 2;
              for (int g = 0; g < N_NBVE / (nx * nw); g++) begin
                int seen;
                seen = 0;
                for (int i = 0; i < nx * nw; i++) seen += 1 << int'(sh[g*nx*nw + i]);
                checks++;
                if (seen != expected_seen(nx, nw)) begin
                  failures++;
                  $display("FAIL cluster shift set x%0d w%0d g%0d", bwl[a], bwl[b], g);
                end
              end
            end
          end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int expected_seen(int nx, int nw);
    int r;
    r = 0;
    for (int j = 0; j < nx; j++)
      for (int k = 0; k < nw; k++) r += 1 << (2 * (j + k));
    return r;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
