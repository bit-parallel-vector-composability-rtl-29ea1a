// tb_bpvec_ctrl: runs random tile commands through the controller. A delay line of
// LAT = ROWS+3 clocks stands in for the array. The bench checks that each tile
// issues exactly K steps with consecutive input and weight addresses from the
// given bases, and that ibuf_re matches step_vld. The accumulators must be cleared,
// or preloaded from obuf[obuf_addr] with acc_in. The mode must follow the command.
// The output word must be written once, at obuf_addr, only after the K-th result.
// done must come K+LAT+1 clocks after acceptance, two more with acc_in.
module tb_bpvec_ctrl;
  import bpvec_pkg::*;
  import bpvec_ref_pkg::*;
  localparam int ROWS = 8, LAT = ROWS + 3;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, busy, done;
  cmd_t cmd;
  mode_t mode;
  logic ib_re, step, cv, clr, ld, ob_re, ob_we;
  logic [5:0] ib_ra;
  logic [3:0] w_ra;
  logic [7:0] ob_ra, ob_wa;
  logic [LAT-1:0] dl;
  int checks = 0, failures = 0;
  int cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) dl <= '0;
    else        dl <= {dl[LAT-2:0], step};
  assign cv = dl[LAT-1];

  bpvec_ctrl #(.IAW(6), .WAW(4), .OAW(8)) dut (
    .clk(clk), .rst_n(rst_n), .cmd_valid(cmd_valid), .cmd_ready(cmd_ready), .cmd(cmd),
    .busy(busy), .done(done), .mode(mode), .ibuf_re(ib_re), .ibuf_raddr(ib_ra),
    .step_vld(step), .w_raddr(w_ra), .col_vld(cv), .acc_clr(clr), .acc_load(ld),
    .obuf_re(ob_re), .obuf_raddr(ob_ra), .obuf_we(ob_we), .obuf_waddr(ob_wa));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL cyc=%0d %s", cyc, what);
    end
  endtask

  initial begin
    int bwl [3] = '{2, 4, 8};
    int k, nstep, nres, nwr, ncl, nld, t0;
    bit wrote_early;
    cmd_valid = 0; cmd = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int t = 0; t < 30; t++) begin
      k = (t == 0) ? 1 : 1 + ($urandom % 16);
      cmd.mode      = mk_mode(bwl[$urandom % 3], bwl[$urandom % 3], 1'($urandom), 1'($urandom));
      cmd.k         = 16'(k);
      cmd.ibuf_base = 16'($urandom % 64);
      cmd.wbuf_base = 16'($urandom % 16);
      cmd.obuf_addr = 16'($urandom % 256);
      cmd.acc_in    = (t % 3) == 1;
      chk(cmd_ready, "ready when idle");
      cmd_valid = 1;
      ncl = clr;          // acc_clr is combinational on cmd_valid in idle
      #1;
      ncl = clr;
      @(posedge clk); #1; t0 = cyc;
      cmd_valid = 0;
      chk(!cmd_ready && busy, "busy after accept");
      chk(mode == cmd.mode, "mode taken from command");
      nstep = 0; nres = 0; nwr = 0; nld = 0; wrote_early = 0;
      while (!done) begin
        if (step) begin
          chk(ib_re, "ibuf_re with step");
          chk(ib_ra == 6'((cmd.ibuf_base + nstep) % 64), "ibuf address");
          chk(w_ra  == 4'((cmd.wbuf_base + nstep) % 16), "weight address");
          nstep++;
        end else chk(!ib_re, "no ibuf_re without step");
        if (ld) begin
          nld++;
          chk(ob_ra == cmd.obuf_addr[7:0], "preload address");
        end
        if (ob_we) begin
          nwr++;
          chk(ob_wa == cmd.obuf_addr[7:0], "write address");
          if (nres < k) wrote_early = 1;
        end
        if (cv) nres++;
        @(posedge clk); #1;
        if (cyc - t0 > 100) break;
      end
      chk(nstep == k, $sformatf("step count %0d vs %0d", nstep, k));
      chk(nwr == 1 && !wrote_early, "one write after last result");
      chk(cmd.acc_in ? (nld == 1 && ncl == 0) : (ncl == 1 && nld == 0), "clear / preload");
      chk(cyc - t0 == k + LAT + 1 + (cmd.acc_in ? 2 : 0),
          $sformatf("tile latency %0d for K=%0d acc_in=%0b", cyc - t0, k, cmd.acc_in));
      repeat ($urandom % 3) @(posedge clk);
      #1;
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
