// tb_nb_mult: checks the 2-bit slice multiplier exhaustively, over all 16 slice
// pairs and all four sign settings, against integer arithmetic.
module tb_nb_mult;
  import bpvec_pkg::*;
  logic [1:0] x, w;
  logic       xs, ws;
  logic signed [PROD_W-1:0] p;
  int checks = 0, failures = 0;

  nb_mult dut (.x(x), .w(w), .x_sgn(xs), .w_sgn(ws), .p(p));

  initial begin
    int xv, wv;
    for (int s = 0; s < 4; s++)
      for (int a = 0; a < 4; a++)
        for (int b = 0; b < 4; b++) begin
          x = 2'(a); w = 2'(b); xs = s[0]; ws = s[1];
          #1;
          xv = (xs && a >= 2) ? a - 4 : a;
          wv = (ws && b >= 2) ? b - 4 : b;
          checks++;
          if (int'(p) != xv * wv) begin
            failures++;
            $display("FAIL x=%0d w=%0d xs=%0b ws=%0b p=%0d exp=%0d", a, b, xs, ws, p, xv*wv);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
