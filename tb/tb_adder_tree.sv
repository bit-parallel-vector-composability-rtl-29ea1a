// tb_adder_tree: random and extreme operands through a 16-input tree, the NBVE
// tree shape, and a 5-input tree, an odd count.
module tb_adder_tree;
  logic signed [4:0] a16 [16];
  logic signed [8:0] s16;
  logic signed [4:0] a5 [5];
  logic signed [7:0] s5;
  int checks = 0, failures = 0;

  adder_tree #(.N(16), .IN_W(5), .OUT_W(9)) dut16 (.in(a16), .sum(s16));
  adder_tree #(.N(5),  .IN_W(5), .OUT_W(8)) dut5  (.in(a5),  .sum(s5));

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got=%0d exp=%0d", what, got, exp);
    end
  endtask

  initial begin
    int e16, e5;
    for (int t = 0; t < 300; t++) begin
      e16 = 0; e5 = 0;
      for (int i = 0; i < 16; i++) begin
        case (t)
          0: a16[i] = -16;
          1: a16[i] = 15;
          default: a16[i] = 5'($urandom);
        endcase
        e16 += int'(a16[i]);
      end
      for (int i = 0; i < 5; i++) begin
        a5[i] = 5'($urandom);
        e5 += int'(a5[i]);
      end
      #1;
      check(int'(s16), e16, "N=16");
      check(int'(s5), e5, "N=5");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
