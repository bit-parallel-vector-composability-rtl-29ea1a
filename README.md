# Bit-parallel vector-composable neural accelerator (BPVeC) in SystemVerilog

A dot product of wide integers can be rewritten as a weighted sum of dot products
of narrow bit-slices:

    X . W = sum_i x_i * w_i
          = sum_j sum_k 2^(2j+2k) * ( sum_i x_i[2j+1:2j] * w_i[2k+1:2k] )

The inner bracket is a dot product of 2-bit numbers. It is cheap to build as a row
of 2-bit multipliers feeding an adder tree. The shift by `2j+2k` is paid once per
bracket, not once per element. This accelerator is built from that idea. Its
compute unit is not a set of 8-bit multiply-accumulate units. It is a set of
*narrow-bitwidth vector engines* (NBVEs), each a 16-lane 2-bit dot-product engine.
A *composable vector unit* (CVU) groups 16 of them. Because the slices are
recombined only after the adder trees, the same 16 engines can be regrouped at
runtime for narrower operands:

| input x weight bits | NBVEs per cluster | clusters | element pairs per CVU per clock |
|---|---|---|---|
| 8 x 8 | 16 | 1 | 16 |
| 8 x 4, 4 x 8 | 8 | 2 | 32 |
| 8 x 2, 2 x 8, 4 x 4 | 4 | 4 | 64 |
| 4 x 2, 2 x 4 | 2 | 8 | 128 |
| 2 x 2 | 1 | 16 | 256 |

So a layer quantised to 4 bits runs 4x faster than an 8-bit layer on the same
hardware, and a 2-bit layer 16x faster.

The CVUs sit in an 8 x 8 systolic array. At 8 bits each CVU does 16 multiply-adds
per clock, so the array does 1024. The core has 112 KB of on-chip buffers and
64-bit output accumulators. The method, the 2-bit slicing, the 16 x 16 CVU, the
1024-MAC count, the memory total and the accumulator width follow the published
BPVeC design (Ghodrati et al., "Bit-Parallel Vector Composability for Neural
Acceleration"). Everything that publication leaves open was chosen for this
implementation; the choices are listed in the section on departures below.

## Arithmetic of one CVU

### Slices and signs

Every operand of `b` bits (b = 2, 4 or 8) is cut into `b/2` slices of 2 bits.
Slice `j` covers bits `2j+1:2j`. For unsigned operands every slice is a number
0..3. For two's-complement operands the top slice is read as signed (-2..1) and
the lower slices as unsigned. Then `x = sum_j 4^j * slice_j` holds in both cases.
`nb_mult` widens each slice to 3 bits according to its sign flag and multiplies
them. The product lies in -6..9 and is kept as 5 bits.

Inputs and weights carry separate sign flags (`mode_t.x_sgn`, `mode_t.w_sgn`). So
unsigned post-ReLU activations can be used with signed weights without losing a
bit of range.

### One NBVE

`nbve` has L = 16 lanes. Lane `l` multiplies one input slice by one weight slice.
`adder_tree` sums the 16 products into 9 bits, and the sum is registered. The
registered sum is shifted left by `shamt`, which is `2j+2k` for input slice `j`
and weight slice `k`, giving at most 21 bits. The NBVE does not know which
elements it is working on. Only the composition stage decides that.

### Composition: the part that changes with the layer

`cvu_compose` is combinational. It maps the packed operand vectors onto the 16
NBVEs. Let `nx = xbw/2` and `nw = wbw/2`. Then:

* The NBVEs form `16/(nx*nw)` clusters of `nx*nw` consecutive engines.
* Cluster `g` takes elements `g*16 .. g*16+15`, one per lane.
* Engine `idx` of a cluster takes input slice `j = idx / nw` and weight slice
  `k = idx mod nw` of each of its elements. Its shift is `2j+2k`. Its input
  slices are signed only if `j` is the top slice and inputs are signed, and
  likewise for weights.

So every (input slice, weight slice) pair of every element is multiplied exactly
once, with its own significance. The published design describes two levels of
composition: inside a cluster, then across clusters. Both levels are additions, so
here they become one global 16-input adder tree over the shifted NBVE outputs.
The result is the same, and no mode-dependent adder wiring is needed.

Vectors are packed densely. Element `e` is `x_vec[e*xbw +: xbw]` and
`w_vec[e*wbw +: wbw]`. A mode uses the low `512/nw` bits of `x_vec` and the low
`512/nx` bits of `w_vec`. For example, at 8 x 2 the CVU takes 64 input elements
(512 bits) and 64 weight elements (128 bits).

Illegal bitwidth codes are treated as 8 bits. Six-bit operands are not
supported: three slices per operand do not divide 16 engines evenly.

### CVU timing

`cvu` = composition, then 16 NBVEs (register 1), then the shifters, then the
global tree (register 2). A new vector pair can enter every clock, and the 32-bit
signed result `y` appears two clocks later. The largest possible magnitude, 16
products of 8-bit unsigned by 8-bit unsigned, needs 21 bits.

## The array and its dataflow

`systolic_array` holds ROWS x COLS `bpvec_pe` cells (8 x 8 by default). Each PE
is a CVU plus its private weight scratchpad (16 words of 512 bits = 1 KB), plus
a partial-sum adder with its register.

* **Inputs** are shared along a row. Every PE of row `r` sees the same input
  vector.
* **Weights** come from each PE's own scratchpad. All PEs read the same address.
* **Partial sums** flow down the columns, one register per PE. The bottom of
  column `c` delivers `sum_r dot(x_r, W[r][c])`.

The rows split the reduction dimension and the columns are independent outputs.
Row `r` gets its weight address and its input vector `r` clocks after row 0,
through skew registers. This lines up with the partial sum arriving from above.
Because all columns of a row share their input, every column's result leaves the
array in the same clock. No de-skew is needed at the bottom.

Timing of one step: `step_vld` and `w_raddr` in clock `t`, the input vectors in
`t+1` (the input-buffer read latency), and the column sums in `t+ROWS+3`. Steps
may be issued every clock. The mode must be held while steps are in flight, and
the controller guarantees this by changing mode only between tiles.

Below the array, `col_accum` holds one 64-bit accumulator per column.

## A tile: what the core computes per command

`bpvec_top` adds a 32 KB input buffer (64 words; each word holds one 512-bit
vector per row), a 16 KB output buffer (256 words of 8 x 64 bits) and the
controller `bpvec_ctrl`. Together with the 64 KB of weight scratchpads this is
112 KB. A command (`cmd_t`) runs one tile:

    for each column c:
      out[c] = (acc_in ? obuf[obuf_addr][c] : 0)
             + sum_{s<K} sum_{r<ROWS} dot( ibuf[ibuf_base+s].row[r],
                                           wspad[r][c][wbuf_base+s], mode )
    obuf[obuf_addr] = out

Addresses wrap at the buffer depth. The controller streams the K steps back to
back. It waits until K results have reached the accumulators, writes them to the
output buffer, and pulses `done`. For K >= 1, `done` is high K + ROWS + 4 clocks
after the clock edge that accepted the command, and 2 clocks later with `acc_in`,
because the old output row is first read back and preloaded. `acc_in` is how a
reduction longer than one tile is split: run several tiles into the same output
word.

Mapping layers onto tiles:

* A fully connected or recurrent layer `y = W x` becomes tiles where row `r`, step
  `s` carries a chunk of `x`, and PE `(r, c)` holds the matching chunk of output
  `c`'s weight row.
* A convolution becomes the same matrix-vector form after unrolling its receptive
  field (im2col).
* Per layer, `mode` selects the bitwidths. A network with 8-bit first and last
  layers and 4-bit layers in between just changes `mode` between tiles.

### Host ports

* `ibuf_we/ibuf_waddr/ibuf_wdata` write an input-buffer word. Bits
  `[r*512 +: 512]` go to row `r`.
* `wbuf_we/wbuf_row/wbuf_col/wbuf_waddr/wbuf_wdata` write one word of one PE's
  scratchpad.
* `cmd_valid/cmd_ready/cmd` issue a tile. `busy` and `done` report progress.
* `obuf_re/obuf_raddr` read a result word on `obuf_rdata` one clock later. Bits
  `[c*64 +: 64]` hold column `c`. While `busy`, the controller owns this read port.

These ports are where a DMA engine from off-chip DRAM would connect. The published
evaluation uses DDR4 (16 GB/s) or HBM2 (256 GB/s). Neither the DRAM nor a DMA
engine is part of this RTL.

## Files

| file | contents |
|---|---|
| `rtl/bpvec_pkg.sv` | constants, `bw_e` bitwidth codes, `mode_t`, `cmd_t` |
| `rtl/nb_mult.sv` | 2-bit x 2-bit slice multiplier with sign flags |
| `rtl/adder_tree.sv` | parameterised binary adder tree |
| `rtl/nbve.sv` | narrow-bitwidth vector engine: 16 multipliers, tree, register, shifter |
| `rtl/cvu_compose.sv` | runtime slice routing, shift and sign selection per mode |
| `rtl/cvu.sv` | composable vector unit: composition, 16 NBVEs, global tree |
| `rtl/spad_ram.sv` | 1-write 1-read synchronous RAM used for all buffers |
| `rtl/bpvec_pe.sv` | array cell: CVU, weight scratchpad, partial-sum adder |
| `rtl/systolic_array.sv` | ROWS x COLS PEs with input and address skew |
| `rtl/col_accum.sv` | 64-bit column accumulators |
| `rtl/bpvec_ctrl.sv` | tile sequencer |
| `rtl/bpvec_top.sv` | the core |
| `tb/bpvec_ref_pkg.sv` | element-level reference dot product used by the benches |
| `tb/tb_<module>.sv` | self-checking bench per module |
| `tb/tb_bpvec_top_full.sv` | the end-to-end bench at the default 8 x 8 size |
| `tb/tb_bpvec_layers.sv` | a 4-bit matrix-vector layer and an 8-bit 3 x 3 convolution mapped onto tiles |

## Simulating

Every bench prints `TB_RESULT checks=N failures=M` and stops itself. A watchdog
counts a failure if a bench hangs. For example, with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/bpvec_pkg.sv tb/bpvec_ref_pkg.sv tb/tb_cvu.sv --top-module tb_cvu -o sim
    ./obj_dir/sim

The benches use only two-state values and `$urandom`, so they also run with
`+verilator+rand+reset+2`. `tb_bpvec_top` runs the whole core on a 2 x 3 array,
which builds in well under a minute. `tb_bpvec_top_full` runs the same tile
sequence at the default 8 x 8 size. Its simulation takes about a second, but
Verilator takes several minutes to compile the 64 CVUs (about 13 minutes with one
compiler job). Use `-j` to compile in parallel.

What the benches establish:

* `nb_mult` is checked exhaustively.
* The adder tree is checked with even and odd operand counts.
* The NBVE, composition and CVU are checked in all nine bitwidth pairs and all four
  sign settings, including all-extreme vectors. They are checked against a
  reference that uses whole elements and never slices. The CVU bench also checks
  the 2-clock latency at one result per clock.
* The array bench checks results and the exact ROWS+3 latency with back-to-back
  and gapped steps.
* The controller bench checks addresses, step counts, clear/preload and the tile
  latency formula.
* The end-to-end benches run 9 tiles that cover 8/8 (unsigned, signed,
  -128 x -128 extremes), 8/2, 4/4, 2/2, 2/8, 8/4, an `acc_in` continuation and
  input-buffer wrap-around. They count each mechanism and fail if one never
  occurred.
* `tb_bpvec_layers` shows the layer mapping described above and checks it against
  a plain model of each layer. The first layer is a recurrent-style matrix-vector
  product: 2048 unsigned 4-bit inputs and 6 outputs with signed 4-bit weights, two
  chained tiles per output group. The second is a first-layer convolution: 3
  channels, a 10 x 10 image, 3 x 3 kernels, 8-bit, one tile per output pixel via
  im2col.

## Where this design departs from, or goes beyond, the published description

The publication describes the arithmetic and the CVU in detail, the array only in
outline, and the memory system and control not at all. Therefore:

* **Partial-sum direction.** The publication says that the inputs are shared
  across the columns of a row. It also says that CVU outputs "aggregate across
  columns" systolically. Summing along a row, where every CVU sees the same input,
  would be meaningless. So here partial sums move down the columns, as in
  TPU-style arrays.
* **Array shape 8 x 8** is inferred from 1024 MACs / 16 MACs per CVU. The
  publication does not state the shape.
* **Two-level composition as one tree.** This is equivalent arithmetic, as
  explained above. Whether the original hardware had separate cluster adders is not
  known.
* **Signed arithmetic** (top slice signed, per-operand flags) is this design's
  choice. The publication does not discuss signedness.
* **Supported widths** are 2, 4 and 8 bits for each operand independently. The
  publication's examples and workloads use 8, 4 and 2.
* **Pipelining** is this design's choice: one register after the NBVE trees, one
  after the global tree, one per PE for the partial sum, and registered buffer
  reads.
* **Memory split.** The publication gives 112 KB of on-chip memory in total. The
  split 64 KB weights / 32 KB inputs / 16 KB outputs, the word widths, and the
  register-array model of each buffer are this design's. A real chip would use
  SRAM macros.
* **Controller, command format, host ports and `acc_in` preload** are not in the
  publication.
* **Not built:** the off-chip memory system (DDR4/HBM2), its controller and a DMA
  engine, and any host processor. Running a whole network needs an external agent
  that loads buffers and issues tiles.

## Workload capacity

The publication evaluates AlexNet, Inception-v1, ResNet-18, ResNet-50, an RNN and
an LSTM, both at 8 bits throughout and with heterogeneous bitwidths. In the
heterogeneous case, first and last layers are 8-bit and the rest 4-bit for the
first three networks, and all layers are 4-bit for the others. All of these
bitwidth combinations are supported modes.

None of the models (8.6 MB to 56.1 MB of 8-bit weights) fits in the 112 KB of
on-chip memory. That is also true of the published design, which streams from
DRAM. Here each layer is run as a sequence of tiles reloaded through the host
ports. At 500 MHz the array's peak is 512 G multiply-adds per second at 8 bits,
and 2 T multiply-adds per second at 4 x 4 bits.
