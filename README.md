# F3DC: a fast-transform accelerator for 3-D deconvolution

3-D generative networks such as 3D-GAN grow a volume step by step with
stride-2 transposed convolutions ("deconvolutions") of 4x4x4 kernels. Done
the textbook way, by inserting zeros between input voxels and running an
ordinary convolution, more than 3/4 of the multiplications hit an inserted
zero. The F3DC method removes the zeros *and* applies a Winograd-style fast
transform: a 5x5x5 input tile and a 4x4x4 kernel are each transformed into an
8x8x8 cube, the two cubes are multiplied element by element (512
multiplications), and a final transform turns the product cube into a 6x6x6
output tile. That is 512 multiplications for 216 outputs, 2.37 per output,
against 64 with zero insertion and 8 for a plain zero-skipping direct method.

This repository holds synthesizable SystemVerilog for an accelerator built
around that transform: four fast processing units (FPUs) in a 2x2 array, two
channel accumulators, three on-chip buffers and an address-generating
controller. Everything in `rtl/` is the design; `tb/` holds self-checking
testbenches.

## 1. The transform, in one dimension

All of the arithmetic follows from one 1-D identity. Take a 4-tap kernel
`g0..g3`, five consecutive inputs `d0..d4`, and the three matrices

```
P^T (8x5)            H (8x4)                A^T (6x8)
 1  0 -1  0  0        0    0    0   1        1 1  1 0 0 0  0 0
 0  1  1  0  0        0   1/2   0  1/2       0 0  0 0 1 1  1 0
 0 -1  1  0  0        0  -1/2   0  1/2       0 1 -1 0 0 0  0 0
 0 -1  0  1  0        0    1    0   0        0 0  0 0 0 1 -1 0
 0  1  0 -1  0        0    0    1   0        0 1  1 1 0 0  0 0
 0  0  1  1  0       1/2   0   1/2  0        0 0  0 0 0 1  1 1
 0  0 -1  1  0      -1/2   0   1/2  0
 0  0 -1  0  1        1    0    0   0
```

Then `Y = A^T [ (H g) .* (P^T d) ]` gives six outputs

```
Y[n] = sum_i d[i] * g[n + 3 - 2i]      n = 0..5, terms with a tap outside 0..3 absent
```

which is exactly a stride-2 transposed convolution. Rows 0-3 of the matrices
form a 3-output, 2-tap fast filter over the odd taps (g3, g1) and inputs
d0..d3; rows 4-7 do the same over the even taps (g2, g0) and inputs d1..d4;
A^T interleaves the two stride phases back into natural order. Only +-1 and
+-1/2 appear, so the transforms need adders and shifts, no multipliers.

**Tiling.** For the usual padding of 1 (output size = 2 x input size), output
tile `t` of an axis covers outputs `6t .. 6t+5` and needs inputs
`3t-1 .. 3t+3` (zero outside the map). Neighbouring input tiles overlap by
two voxels; output tiles do not overlap, so no partial sums have to be kept
between tiles.

## 2. The transform, in three dimensions

The 3-D transform is separable: apply the 1-D matrix along width, then
height, then depth. The published description does this as "slice the cube
into matrices, multiply, rotate the cube by 90 degrees, slice and multiply
again"; in hardware the rotation is nothing but a different choice of which
wires form a line, so each 3-D transform here is a fixed, fully parallel
network of 1-D circuits:

| transform | 1-D circuit | lines per pass (w, h, d) | cube sizes |
|---|---|---|---|
| input, `P^T` | `f3dc_input_tf` (8 add/sub) | 25, 40, 64 | 5^3 -> 5x5x8 -> 5x8x8 -> 8^3 |
| kernel, `H` | `f3dc_weight_tf` (4 add/sub) | 16, 32, 64 | 4^3 -> ... -> 8^3 |
| output, `A^T` | `f3dc_output_tf` (8 add/sub, two shared) | 64, 48, 36 | 8^3 -> ... -> 6^3 |

`f3dc_input_tf3d`, `f3dc_weight_tf3d` and `f3dc_postprocess` contain these
networks; the permutation between passes is visible as the `c2`/`c3`
re-indexing assignments. The output tile comes out indexed
`[depth][height][width]` like the input.

The whole chain computes, for each of the 216 outputs of a tile,

```
y[x][y][z] = sum_{i,j,l} d[i][j][l] * g[x+3-2i][y+3-2j][z+3-2l]
```

and the testbenches check exactly this formula, not the matrices.

## 3. Number formats

Inputs are 16-bit and weights 8-bit signed integers (the quantisation of the
evaluated design). Every other width is this design's choice, sized so that
nothing can overflow:

| point | width | why |
|---|---|---|
| transformed input | 19 | each `P^T` pass adds at most one bit |
| transformed kernel | 11, holding 8 x H(g) | see below |
| EWMM product | 30 | 19 x 11, fits one 25x18 FPGA DSP |
| after three `A^T` passes | 36 | each pass adds at most two bits |
| FPU result | 33 | 36 minus the 3 fraction bits |
| accumulator, output buffer | 40 | 512 channels of 26-bit tile sums need 35 |

**The halves in H.** The weight circuit of the original design marks the
operands of the four half-weighted rows with ">>1". Shifting an odd 8-bit
weight right would drop a bit and make the result inexact. Here the shift is
done by moving the binary point: `f3dc_weight_tf` outputs `2*H*g`, so the
3-D kernel transform holds `8*G` with three fraction bits, and the
post-process ends with an arithmetic shift right by 3. Because the true
deconvolution result is an integer, the final shift is exact and the
accelerator is bit-exact against direct deconvolution (verified for extreme
values too).

Results stay at 40 bits in the output buffer. Re-quantising them to 16 bits
for the next layer (scale, rounding, activation) is not specified and is left
to whoever reads the output buffer.

## 4. Fast processing unit

`f3dc_fpu` chains three pipeline stages, each ending in a register:

1. **pre-process** (`f3dc_preprocess`): transforms the 5x5x5 input tile and
   the 4x4x4 kernel into two 8x8x8 cubes. The kernel is transformed every
   cycle, because the input channel is the innermost loop and the kernel
   therefore changes every cycle.
2. **EWMM** (`f3dc_ewmm`): 512 signed 19x11 multipliers.
3. **post-process** (`f3dc_postprocess`): `A^T` in three dimensions and the
   divide-by-8 shift.

One tile per cycle, latency 3 cycles. `valid` travels with the data; data
registers load only when valid, the valid bits are reset synchronously
(active-low `rst_n`).

## 5. Fast processing array and accumulation

`f3dc_fpa` holds four FPUs in a 2x2 grid. Per cycle it takes tiles of **two
input channels** and the **four kernels** connecting them to **two output
channels**:

```
               column 0 (out ch 2q)     column 1 (out ch 2q+1)
row 0 (in 2p)  FPU(0,0): K[2q][2p]      FPU(0,1): K[2q+1][2p]     <- tile of in ch 2p
row 1 (in 2p+1)FPU(1,0): K[2q][2p+1]    FPU(1,1): K[2q+1][2p+1]   <- tile of in ch 2p+1
                    |                        |
               accumulator 0            accumulator 1
```

FPUs of a row share the input tile; each column feeds one
`f3dc_accumulator`, which adds both FPU results to its running sum. A
`first` flag (first input-channel pair of a tile) restarts the sum, a `last`
flag closes the tile: one cycle later the accumulator raises `wr_o` and the
two finished tiles are written to the output buffer at the result address
that travelled with the `last` step. Since the input channel is the innermost
loop, only one tile per column is ever open and the accumulator is a single
bank of 216 registers.

## 6. Dataflow, buffers and the host contract

`f3dc_mem_ctrl` walks the loop nest (outermost first)

```
for ocp  in output-channel pairs     // weight-stationary order
 for td, th, tw in output tiles
  for icp in input-channel pairs     // accumulated in place
     issue(in_addr, wt_addr, res_addr, first, last, final)
```

one step per cycle with no gaps, using counters and adders only. The buffers
are simple dual-port synchronous RAMs with one-cycle read latency, one word
per step:

| buffer | word | address of a word | default depth |
|---|---|---|---|
| input (`f3dc_input_buffer`) | tiles of 2 input channels, 2x125x16 bit | `tile * n_icp + icp` | 2048 |
| kernel (`f3dc_kernel_buffer`) | 4 kernels `[row=in][col=out]`, 4x64x8 bit | `ocp * n_icp + icp` | 4096 |
| output (`f3dc_output_buffer`) | tiles of 2 output channels, 2x216x40 bit | `ocp * n_tiles + tile` | 512 |

with `tile = (td * n_th + th) * n_tw + tw`. The input buffer stores ready-cut
tiles, so the two overlapping voxels of neighbouring tiles are stored twice;
in exchange one read feeds a whole FPA row pair.

The external memory is off chip. `f3dc_top` brings out the input- and
kernel-buffer write ports and the output-buffer read port; a host or DMA
engine

1. cuts the input maps into 5x5x5 tiles (tile `t` of an axis starts at input
   `3t-1`, zeros outside) and writes them, two channels per word;
2. writes the kernels, four per word;
3. sets the five loop counts (`n_ocp`, `n_icp`, `n_td`, `n_th`, `n_tw`, all
   >= 1) and pulses `start_i`;
4. waits for `done_o` and reads the output tiles back; outputs past the map
   edge in the last tile of an axis are discarded.

A layer that does not fit the buffers is run in several passes over groups
of output channels and/or boxes of output tiles (examples in section 8).
Channel counts must be even; an odd count is padded with a zero channel.

**Timing.** A run of `N = n_ocp * n_td * n_th * n_tw * n_icp` steps takes
`N + 7` cycles from the `start_i` cycle to the `done_o` pulse: 2 cycles to
the first issue, 1 buffer read, 3 FPU stages, 1 accumulator stage, and the
write of the last word. `busy_o` is high in between; a `start_i` while busy
is ignored. At the evaluated 150 MHz the datapath peaks at
4 FPUs x 216 outputs x 8 useful multiply-adds x 2 = 13,824 operations per
cycle, 2.07 TOPS counted without zero-inserted work; the reported 1,700 GOPS
is 82% of that.

## 7. What follows the published design and what does not

Taken from the published design: the transform T3(6^3,4^3) and its three
matrices; the 1-D circuits (their printed inputs, outputs, signs and ">>1"
marks agree with the matrices; the shared `IN1+IN2`/`IN5+IN6` adders of the
output circuit); 512 multipliers per EWMM; FPU = pre-process, EWMM,
post-process; 2x2 FPA with row = input channel, column = output channel and
one accumulator per column; three buffers; a memory controller producing
input, weight and result addresses; weight-stationary loop order output
channel > depth tile > height tile > width tile > input channel with both
channel loops unrolled by 2; 16-bit inputs, 8-bit weights.

This design's own choices (the description is silent on them):

* all widths past the input quantisation, and the fixed-point reading of
  ">>1" (section 3);
* pipeline depth and register placement (3 FPU stages);
* buffer organisation, word layouts and depths; the published total is 1,470
  block RAMs (about 53 Mbit), the defaults here use about 25 Mbit;
* the controller's run-time loop counts, start/busy/done handshake and
  address layout, with no stalls (all data of a pass is on chip before it
  starts);
* the boundary between chip and host: tiling, zero padding, multi-pass
  scheduling and output re-quantisation are the host's job here;
* the padding-1 tile alignment, derived from the matrices.

Not built: the external memory and its interface (only the buffer ports are
provided), any support for other kernel sizes or strides (the datapath is
hard-wired for k=4, s=2), and the first, stride-1 layer of 3D-GAN.

## 8. Workloads

Layer sizes of the 3D-GAN generator (512x4^3 -> 256x8^3 -> 128x16^3 ->
64x32^3 -> 1x64^3, all k=4, s=2, p=1) are the commonly published ones.

| layer | steps (cycles) | passes with default buffers |
|---|---|---|
| 512x4^3 -> 256x8^3 | 262,144 | 8 (16 output-channel pairs each) |
| 256x8^3 -> 128x16^3 | 221,184 | 6 (9 tiles x 32 pairs) |
| 128x16^3 -> 64x32^3 | 442,368 | 18 (24 tiles x 16 pairs) |
| 64x32^3 -> 1x64^3 | 42,592 | 21 (64 tiles; output padded to 2 channels) |

The first generator layer (a 200-vector to 512x4^3, stride 1) does not map
onto the stride-2 datapath.

## 9. Verification

Every module has a self-checking testbench `tb/tb_<module>.sv`, each ending in
a line `TB_RESULT checks=<n> failures=<n>` and guarded by a watchdog. The
references are independent of the circuits: integer matrix products for the
1-D and 3-D transforms, a 64-bit direct transposed convolution for the FPU,
FPA and whole accelerator (`tb/f3dc_tb_pkg.sv`). Random data is mixed with
all-most-negative / all-most-positive operands to exercise the full widths.

* `tb_f3dc_fpu` streams tiles back to back and checks the 3-cycle latency and
  one-tile-per-cycle rate.
* `tb_f3dc_top` runs three small layers of different shapes (partial edge
  tiles, several output-channel pairs, non-cubic maps), each twice, once
  with an ignored start pulse; it checks every output word, the `N+7` cycle
  count, and that restarts, write-backs, output-pair changes, edge tiles and
  ignored starts all happen.
* `tb_f3dc_gan_layer` runs the accelerator with all parameters at their
  defaults on one full pass of the second 3D-GAN layer: all 512 input
  channels and 32 output channels, 32,768 steps, input and kernel buffers
  filled to their last word. It simulates in about 15 seconds.

To run one testbench with Verilator (5.x):

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/f3dc_pkg.sv tb/f3dc_tb_pkg.sv tb/tb_f3dc_top.sv --top-module tb_f3dc_top
./obj_dir/Vtb_f3dc_top
```

Building any testbench that contains the FPU takes about a minute,
because the four FPUs flatten into a large amount of combinational logic.

## 10. Files

| file | content |
|---|---|
| `rtl/f3dc_pkg.sv` | sizes, widths, tile and word types |
| `rtl/f3dc_input_tf.sv`, `f3dc_weight_tf.sv`, `f3dc_output_tf.sv` | 1-D transform circuits |
| `rtl/f3dc_input_tf3d.sv`, `f3dc_weight_tf3d.sv` | 3-D input and kernel transforms |
| `rtl/f3dc_preprocess.sv`, `f3dc_ewmm.sv`, `f3dc_postprocess.sv` | FPU stages |
| `rtl/f3dc_fpu.sv`, `f3dc_accumulator.sv`, `f3dc_fpa.sv` | FPU, accumulator, 2x2 array |
| `rtl/f3dc_input_buffer.sv`, `f3dc_kernel_buffer.sv`, `f3dc_output_buffer.sv` | on-chip buffers |
| `rtl/f3dc_mem_ctrl.sv` | loop nest and address generation |
| `rtl/f3dc_top.sv` | the accelerator |
| `tb/f3dc_tb_pkg.sv` | reference models and random helpers |
| `tb/tb_*.sv` | testbenches |
