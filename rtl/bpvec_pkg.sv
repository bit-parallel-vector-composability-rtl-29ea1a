// bpvec_pkg: types and constants shared by the bit-parallel vector-composable
// accelerator.
//
// Every operand is cut into 2-bit slices. Inputs and weights are at most 8 bits
// wide. A Composable Vector Unit (CVU) holds 16 Narrow-Bitwidth Vector Engines
// (NBVEs) with L = 16 lanes each. These numbers come from the paper's chosen design
// point. The array shape, buffer sizes and field widths are choices of this design.
package bpvec_pkg;

  // ---- fixed by the paper's design point ----
  localparam int unsigned SLICE_W = 2;   // bit-slice width
  localparam int unsigned MAX_BW  = 8;   // widest input / weight
  localparam int unsigned L       = 16;  // multipliers per NBVE
  localparam int unsigned N_NBVE  = (MAX_BW / SLICE_W) * (MAX_BW / SLICE_W); // 16
  localparam int unsigned ACC_W   = 64;  // output accumulators

  // ---- derived / chosen widths ----
  // Packed operand vector: 2-bit mode carries N_NBVE*L elements of 2 bits.
  localparam int unsigned VEC_W   = N_NBVE * L * SLICE_W;          // 512
  localparam int unsigned PROD_W  = 5;   // signed 2b x 2b slice product, range -6..9
  localparam int unsigned NSUM_W  = PROD_W + $clog2(L);             // 9: NBVE tree
  localparam int unsigned SHMAX   = 2 * (MAX_BW - SLICE_W);         // 12
  localparam int unsigned SH_W    = 4;                              // shift amount field
  localparam int unsigned NSH_W   = NSUM_W + SHMAX;                 // 21: shifted NBVE out
  localparam int unsigned PSUM_W  = 32;  // CVU result and column partial sums

  // Operand bitwidth of a layer. The code is the number of 2-bit slices.
  typedef enum logic [2:0] {
    BW2 = 3'd1,
    BW4 = 3'd2,
    BW8 = 3'd4
  } bw_e;

  // Per-layer datapath configuration, changeable between tiles.
  typedef struct packed {
    bw_e  xbw;     // input (activation) bitwidth
    bw_e  wbw;     // weight bitwidth
    logic x_sgn;   // inputs are two's complement
    logic w_sgn;   // weights are two's complement
  } mode_t;

  // One tile command: K steps of input vectors ibuf[ibuf_base + s] against weight
  // words wspad[wbuf_base + s], s = 0..K-1. The column sums accumulate into the
  // 64-bit accumulators, which then go to obuf[obuf_addr]. With acc_in set, the
  // accumulators start from the row already in obuf[obuf_addr] instead of zero.
  // Addresses wrap at the buffer depth.
  typedef struct packed {
    mode_t       mode;
    logic [15:0] k;
    logic [15:0] ibuf_base;
    logic [15:0] wbuf_base;
    logic [15:0] obuf_addr;
    logic        acc_in;
  } cmd_t;

  // Number of elements one CVU consumes per cycle in a mode.
  function automatic int unsigned elems_per_cvu(bw_e xbw, bw_e wbw);
    return (N_NBVE * L) / (int'(xbw) * int'(wbw));
  endfunction

  // Is this a supported bitwidth encoding?
  function automatic logic bw_ok(bw_e b);
    return (b == BW2) || (b == BW4) || (b == BW8);
  endfunction

endpackage
