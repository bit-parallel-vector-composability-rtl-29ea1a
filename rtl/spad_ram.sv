// spad_ram: on-chip scratchpad with one write port and one read port.
//
// The accelerator uses it for every buffer. Each CVU has a private weight
// scratchpad. There is also the input buffer that feeds the array rows, and the
// output buffer that holds finished accumulator rows. A write stores wdata at
// waddr on the clock edge. A read returns mem[raddr] on rdata one clock after re;
// rdata holds its value while re is low. Reading and writing the same address in
// one clock returns the old data.
//
// The paper models its scratchpads with a memory compiler and gives only their
// total size, 112 KB. This register-array model and its read timing are this
// design's choice; a synthesis flow maps it to an SRAM macro.
module spad_ram #(
  parameter int unsigned W     = 512,
  parameter int unsigned DEPTH = 16,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
