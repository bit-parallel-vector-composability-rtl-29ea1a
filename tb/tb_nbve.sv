// tb_nbve: drives random slices, sign flags and shift amounts into an NBVE each
// clock. It checks that the output one clock later equals the shifted sum of the
// lane products, computed here from integers.
module tb_nbve;
  import bpvec_pkg::*;
  logic clk = 0;
  logic [1:0] xs [L], ws [L];
  logic xg, wg;
  logic [SH_W-1:0] sh;
  logic signed [NSH_W-1:0] y;
  int checks = 0, failures = 0;
  longint exp_q;

  always #5 clk = ~clk;

  nbve dut (.clk(clk), .x_sl(xs), .w_sl(ws), .x_sgn(xg), .w_sgn(wg), .shamt(sh), .y(y));

  function automatic int sv(logic [1:0] s, logic sg);
    return (sg && s[1]) ? int'(s) - 4 : int'(s);
  endfunction

  initial begin
    longint e;
    for (int t = 0; t < 500; t++) begin
      e = 0;
      xg = $urandom; wg = $urandom;
      sh = SH_W'(2 * ($urandom % 7));
      for (int i = 0; i < L; i++) begin
        xs[i] = (t < 4) ? (t[0] ? 2'b10 : 2'b11) : 2'($urandom);
        ws[i] = (t < 4) ? (t[1] ? 2'b10 : 2'b11) : 2'($urandom);
        e += sv(xs[i], xg) * sv(ws[i], wg);
      end
      e = e * (longint'(1) << sh);
      @(posedge clk); #1;
      checks++;
      if (longint'(y) != e) begin
        failures++;
        $display("FAIL t=%0d y=%0d exp=%0d", t, y, e);
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
