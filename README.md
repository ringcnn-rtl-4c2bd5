# eRingCNN in SystemVerilog: a ring-tensor CNN accelerator for computational imaging

CNNs for denoising and super-resolution have to produce dense, fine detail for
every output pixel. The usual sparsity tricks, pruning and low-rank
factorisation, either make the hardware irregular or cost too much image
quality. eRingCNN uses *algebraic* sparsity instead. Features and weights are
grouped into n-tuples, and every 32-channel convolution becomes a convolution
over 32/n "ring" channels whose elements are n-tuples. The ring used here,
called (R_I, f_H), has two operations:

* **Multiplication is component-wise.** A weight tuple `g` times a feature
  tuple `x` gives `(g0·x0, …, g(n-1)·x(n-1))`. An n×n block of real weights
  shrinks to n weights, so multipliers and weight storage drop by a factor of n
  (50 % for n = 2, 75 % for n = 4). Because no transform is applied before the
  products, the multipliers stay 8×8 bit.
* **The non-linearity mixes the components.** The directional ReLU is
  `f_H(y) = H · relu(H · y)`, where H is the n×n Hadamard matrix of ±1
  entries. Components are mixed only where a non-linearity already sits.

This repository gives synthesizable RTL for the whole accelerator: two
convolution engines, the full-precision directional-ReLU pipeline, the
parameter and program memories, a layer sequencer and a block-based datapath
with three image block buffers. The default configuration is **n = 4**
(`N = 4`). `N = 2` selects the n = 2 configuration.

| quantity (n = 4 default) | value |
|---|---|
| RCONV-3x3 engine | 8×8 computing units × 288 multipliers = 18,432 |
| RCONV-1x1 engine | 2,048 multipliers |
| throughput | one 4×2-pixel tile of 32 channels per cycle |
| weight / bias / program memory | 480 KB / 12 KB / 8 KB |
| datapath FIFO / block buffers | 34 KB / 3 × 512 KB |
| feature, weight, bias precision | 8-bit signed, dynamic fixed point |
| accumulator | 24 bit; directional ReLU internals 29/31/33 bit |

With `N = 2` the engine has 16×16 units of 144 multipliers (36,864), the 1x1
engine has 4,096 multipliers, and the weight memory is 960 KB.

## Data layout: real channels and ring channels

Every feature port carries 32 real channels. Real channel `j` is component
`j mod n` of ring channel `j div n`. All weight words, bias words and
block-buffer words use the same byte order: byte `j` belongs to real channel
`j`. A ring convolution therefore never moves data across channels. Output
component `i` of ring channel `co` only ever sees component `i` of its
inputs. The only place where components meet is the directional ReLU.

Spatial work is organised in tiles. An output tile is 4 pixels wide and 2 rows
high. It needs a 6×4 input tile, which is the output tile plus a one-pixel
halo.

## The RCONV-3x3 engine (`rconv3x3_engine`, `ring_conv_unit`)

The engine is a 2D array with one `ring_conv_unit` per pair (output ring
channel `co`, input ring channel `ci`). A unit is n independent 3×3
convolutions over the 4×2 tile:

    z[r][c][i] = Σ_{s,t=0..2} g[s][t][i] · win[r+2-s][c+2-t][i]

This is the ring convolution `z[p,q] = Σ g[s,t]·x[p-s,q-t]` with its taps
centred on the output pixel. Each unit output is registered. The adder after
the registers sums over `ci`, and the bias is added to give the 24-bit `y`.
Each output tuple then goes through a `dir_relu`, giving the 8-bit `x`.
Both results leave the engine: `y` goes to the datapath (a layer whose
non-linearity comes after a residual add) and `x` goes to the 1x1 engine.

Latency: `y` is valid 2 cycles after the window, and `x` 4 cycles after it.
Weights sit in registers and are loaded before each layer. Word
`co*9 + s*3 + t` holds tap (s,t) of output ring channel `co` for all 32 real
input channels. The 8-bit bias is aligned to the accumulator by a left shift,
one shift per component (`b3_shift`).

## The directional ReLU with component-wise Q-formats (`dir_relu`)

This is the part that most needs explaining. After `f_H`, the n components of
a tuple have different dynamic ranges. So every component i has its own
number of fractional bits: `n_y,i` for the accumulated input and `n_x,i` for
the 8-bit output. The Hadamard transform adds components, so they must first
be brought to a common binary point. The unit works at full precision and
never quantizes between the two transforms:

    stage  operation                                        width (n=4)
    in     y_i                                              24
    1      a_i = y_i << s_i,   s_i = max n_y - n_y,i (0..5)  29
    1      h = H a   (butterfly of adders)                  31
    reg    ---------------- pipeline register -----------
    2      r = max(0, h)                                    31
    2      z = H r                                          33
    2      x_i = sat8(round(z_i >> t_i)),                   8
           t_i = max n_y - n_x,i (0..17)
    reg    ---------------- output register ---------------

Notes:

* H is not normalised. `H·H = n·I`, so the extra gain of n (2 bits for n = 4)
  must be taken out through `t_i` when the Q-formats are chosen.
* Rounding is to nearest: half an LSB is added before the arithmetic shift.
  The result then saturates to [-128, 127].
* `relu_en = 0` is a bypass for layers without a non-linearity. It skips both
  transforms and the ReLU, and only aligns and quantizes, i.e. `(y << s) >> t`.
* Latency is 2 cycles. One unit processes one n-tuple per cycle. The 3x3
  engine and the datapath each hold 8 × 32/n of them.

`hadamard_butterfly` builds H in Sylvester order, which matches the H_2 and
H_4 matrices of the ring tables: `H_4 = [[1,1,1,1],[1,-1,1,-1],[1,1,-1,-1],[1,-1,-1,1]]`.

## The RCONV-1x1 engine (`rconv1x1_engine`)

For each of the 8 pixels of a tile it computes
`y[co·n+i] = Σ_ci g[co][ci·n+i] · x[ci·n+i] + (b[co·n+i] << b1_shift[i])`.
The result is registered, so the latency is one cycle. It has no
non-linearity of its own. Its 24-bit output goes to the datapath, where the
residual is added before the directional ReLU.

## Block-based inference flow (`inference_datapath`, `block_buffer_bank`, `skip_fifo`)

The accelerator works on one image block at a time. A block is at most
128×128 pixels with 32 channels. Each layer reads its input feature map from
one block buffer (BB) and writes its output map to another, so intermediate
maps never leave the chip. Pixels outside the block are treated as zero.

**Buffer organisation.** A BB is 512 KB, split into 4 sub-banks by
`row mod 4`. A word is a 4-pixel row segment: 4 × 32 × 8 = 1024 bits, with
pixel p at bits `[p*256 +: 256]`. The word's address is
`(row div 4)·32 + column div 4`. The four rows `2tr-1 … 2tr+2` of the input
tile for tile row `tr` always lie in four different sub-banks.

**Sweep.** For tile row `tr`, the datapath reads segment column
`c = 0 … tiles_w` (all four rows in one cycle). It keeps a sliding window of
three segment columns. From column `c` it forms the 6×4 window of output tile
`c-1`. So a tile row costs `tiles_w + 1` cycles, and one window leaves per
cycle after the first column.

**Residuals.** When a layer has a residual (`res_en`), the skip tile of every
output tile is pushed into `skip_fifo` (136 entries of 256 B = 34 KB). It is
popped when that tile's convolution result arrives, so the skip path does not
depend on the engine latency. The skip tile is taken from one of two places:

* the centre of the input window, when `skip_bb = src_bb` (the usual residual
  block);
* a read from a third BB, for longer skip connections.

**Output stage.** The datapath takes the 3x3 engine's `y` (`OP_CONV3`) or the
1x1 engine's `y` (`OP_CONV3_1`), adds the skip feature shifted by `k_shift`,
and applies a second bank of `dir_relu` units (`qd`, `relu_en`). It then writes
the 4×2 tile (two row segments in two sub-banks) to the destination BB. The
destination must differ from the buffers being read; an assertion checks this.

## Layer program and controller (`main_controller`, memories)

A program is a list of 256-bit words, with `ring_pkg::instr_t` in the low bits
and one instruction per layer. The program starts at address 0 and stops at
`OP_END`. For each instruction the controller:

1. loads 9·32/n words of 3x3 weights from `w3_base` (72 for n = 4, 144 for n = 2);
2. for `OP_CONV3_1` only, loads 32/n words of 1x1 weights from `w1_base`;
3. loads two bias words from `b_base` (3x3 engine) and `b_base+1` (1x1 engine);
4. starts the datapath sweep and waits for it to finish.

Loading takes about 90 cycles per layer for n = 4 (about 170 for n = 2). A layer on a block of `TW × TH`
tiles then takes `TH·(TW+1)` cycles plus about 8 cycles of pipeline drain.

Instruction fields:

| field | meaning |
|---|---|
| `op` | `OP_END`, `OP_CONV3` (3x3 layer), `OP_CONV3_1` (3x3 → f_H → 1x1 layer pair) |
| `src_bb`, `dst_bb`, `skip_bb` | block buffers read, written, and used for the residual |
| `res_en`, `relu_en`, `relu3_en` | residual add; datapath f_H (else bypass); 3x3-engine f_H (else bypass) |
| `tiles_w`, `tiles_h` | block size in tiles (1…32, 1…64) |
| `w3_base`, `w1_base`, `b_base` | parameter addresses |
| `b3_shift`, `b1_shift`, `k_shift` | per-component alignment of biases and of the skip feature |
| `q3`, `qd` | per-component `s_i`, `t_i` of the engine and datapath directional ReLUs |

The weight, bias and program memories are register arrays with one write port
and one registered read port. Their word width is 256 bits (32 bytes).

## Top level (`eringcnn_top`) and how to use it

While `busy = 0`, the host:

* writes the program, weights and biases through `mem_we/mem_sel/mem_addr/mem_wdata`
  (`mem_sel`: 0 program, 1 weight, 2 bias);
* writes the input block into a BB through `host_bb_*` (one row segment per
  cycle).

The host then pulses `start` and waits for `done`. It reads the results
through `host_bb_*`; read data appear one cycle later, with `host_bb_rvalid`.
These host ports stand in for the external DRAM interface, which is not part
of this RTL.

## Simulating

All files are plain SystemVerilog-2017. Packages (`ring_pkg`, `tb_ref_pkg`)
must come first. For example, the end-to-end test at full size:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
        rtl/ring_pkg.sv tb/tb_ref_pkg.sv tb/tb_eringcnn_top.sv --top-module tb_eringcnn_top
    ./obj_dir/Vtb_eringcnn_top

Each module has a self-checking testbench `tb/tb_<module>.sv` that prints
`TB_RESULT checks=… failures=…`. `tb_ref_pkg` holds reference arithmetic that
is written from the definitions, not from the RTL: Hadamard signs as
`(-1)^popcount(i&k)` and the directional ReLU with rounding and saturation.

* `tb_eringcnn_top` runs a 3-layer program on a 24×8-pixel block at the
  default size. It compares all three output maps bit-exactly with the
  reference model. It also checks the tile rate, and that each mechanism
  occurs: both layer types, both residual sources, ReLU and bypass, border
  padding, saturation and FIFO use.
* `tb_eringcnn_top_n2` runs the same program with `N = 2`.
* The Verilator build of the top takes about 1.5 minutes for n = 4 and about
  3.5 minutes for n = 2; each run takes well under a second.

## How far it can be trusted

Bit-exact agreement is checked against the independent reference for:

* every unit;
* the engines and units at n = 4, and the computing unit, 1x1 engine and
  directional ReLU also at n = 2;
* the datapath with engine stand-ins;
* the full accelerator on a three-layer program, for both n = 4 and n = 2.

These checks cover the arithmetic, tiling, padding and sequencing as
specified here. The same checks would pass if the published chip rounds or
orders things differently, so they do not show that this RTL matches that
chip.

## Where this RTL departs from, or goes beyond, the published design

Taken from the published design:

* the ring (R_I, f_H) and the component-wise engines;
* channel counts, tile sizes and multiplier counts;
* the 24/29/31/33/8-bit widths and shift ranges of the directional ReLU, and
  its pipeline register between the first transform and the ReLU;
* the memory sizes, the three block buffers and the 34 KB FIFO;
* the placement of a directional ReLU after residual connections in the
  datapath.

This design's own choices, where the description stops:

* instruction set and controller sequence; weight/bias word layouts and
  register-based weight loading;
* bias and skip alignment shifts;
* rounding rule, the ReLU bypass mode, and the pipeline depth of the engines;
* block-buffer sub-banking, raster sweep and zero padding at block borders;
* using the FIFO to queue residual tiles.

Known gaps:

* **Pumped ERModules are not supported.** The ERNet models evaluated with this
  accelerator widen their hidden layers to R × 32 channels (R = 2…4). Running
  them needs the 1x1 engine to accumulate across several 32-channel passes, and
  this RTL cannot. Their parameters would fit in the memories, but the models
  cannot run as built.
* **No eCNN front end.** Weight compression is not implemented; the published
  design also omits it. Pixel (un)shuffle and the recompute-based block
  overlap handling of the eCNN backbone are not modelled.
* **Memories are register arrays.** They are not compiled SRAM macros. The
  250 MHz clock is a target that has not been checked here.
