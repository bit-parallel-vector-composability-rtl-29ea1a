// col_accum: the 64-bit output accumulators, one per array column.
//
// They sit below the bottom row of the array. When in_vld is high, each adds its
// column's sign-extended partial sum. clr zeroes all of them. load sets them to
// load_val, to continue an output row from an earlier tile; load wins over clr.
// Either takes priority over an addition in the same clock. acc shows the register
// values. Registers update on the rising edge, and rst_n clears them
// asynchronously.
//
// The 64-bit accumulation is the paper's. The clear and preload controls are this
// design's choice.
module col_accum
  import bpvec_pkg::*;
#(
  parameter int unsigned COLS = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clr,
  input  logic                     load,
  input  logic signed [ACC_W-1:0]  load_val [COLS],
  input  logic                     in_vld,
  input  logic signed [PSUM_W-1:0] in_sum   [COLS],
  output logic signed [ACC_W-1:0]  acc      [COLS]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < COLS; c++) acc[c] <= '0;
    end else if (load) begin
      for (int c = 0; c < COLS; c++) acc[c] <= load_val[c];
    end else if (clr) begin
      for (int c = 0; c < COLS; c++) acc[c] <= '0;
    end else if (in_vld) begin
      for (int c = 0; c < COLS; c++) acc[c] <= acc[c] + ACC_W'(in_sum[c]);
    end
  end
endmodule
