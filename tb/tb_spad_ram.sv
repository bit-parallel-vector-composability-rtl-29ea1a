// tb_spad_ram: random writes and reads against a model array. It checks the
// one-clock read latency, that rdata holds while re is low, and that a read of the
// address being written returns the old data.
module tb_spad_ram;
  localparam int W = 64, D = 16;
  logic clk = 0;
  logic we, re;
  logic [3:0] wa, ra;
  logic [W-1:0] wd, rd;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  spad_ram #(.W(W), .DEPTH(D)) dut (.clk(clk), .we(we), .waddr(wa), .wdata(wd),
                                    .re(re), .raddr(ra), .rdata(rd));

  initial begin
    logic [W-1:0] exp_rd;
    bit have_rd;
    we = 0; re = 0;
    // fill
    for (int i = 0; i < D; i++) begin
      we = 1; wa = 4'(i); wd = {$urandom, $urandom}; model[i] = wd;
      @(posedge clk); #1;
    end
    exp_rd = '0;
    have_rd = 0;
    for (int t = 0; t < 400; t++) begin
      we = $urandom; wa = 4'($urandom); wd = {$urandom, $urandom};
      re = $urandom; ra = (t % 7 == 0) ? wa : 4'($urandom);
      if (re) begin
        exp_rd = model[ra];                  // old data on a same-address write
        have_rd = 1;
      end
      @(posedge clk); #1;
      if (we) model[wa] = wd;
      if (!have_rd) continue;             // rdata is undefined before the first read
      checks++;
      if (rd != exp_rd) begin
        failures++;
        $display("FAIL t=%0d rd=%h exp=%h", t, rd, exp_rd);
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
