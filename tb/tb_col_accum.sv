// tb_col_accum: random clears, preloads and additions against a model, including
// the most negative 32-bit partial sum to check sign extension to 64 bits.
module tb_col_accum;
  import bpvec_pkg::*;
  localparam int C = 4;
  logic clk = 0, rst_n = 0;
  logic clr, load, vld;
  logic signed [ACC_W-1:0] lv [C], acc [C];
  logic signed [PSUM_W-1:0] in [C];
  longint model [C];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  col_accum #(.COLS(C)) dut (.clk(clk), .rst_n(rst_n), .clr(clr), .load(load),
    .load_val(lv), .in_vld(vld), .in_sum(in), .acc(acc));

  initial begin
    clr = 0; load = 0; vld = 0;
    for (int c = 0; c < C; c++) begin lv[c] = '0; in[c] = '0; model[c] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      clr  = ($urandom % 20) == 0;
      load = ($urandom % 25) == 0;
      vld  = $urandom;
      for (int c = 0; c < C; c++) begin
        lv[c] = {$urandom, $urandom};
        in[c] = (t == 5) ? 32'sh8000_0000 : $urandom;
      end
      @(posedge clk); #1;
      for (int c = 0; c < C; c++) begin
        if (load)      model[c] = lv[c];
        else if (clr)  model[c] = 0;
        else if (vld)  model[c] += longint'(in[c]);
        checks++;
        if (acc[c] != model[c]) begin
          failures++;
          $display("FAIL t=%0d c=%0d acc=%0d exp=%0d", t, c, acc[c], model[c]);
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
