# Axon: a diagonally fed systolic array with on-chip im2col (SystemVerilog)

A conventional systolic array feeds one operand matrix from its left edge and
the other from its top edge. Operands hop one PE per cycle, so the PE in the
far corner sees its first operand pair only after R + C - 2 cycles, and the
streams must be skewed so the right pairs meet. Axon feeds both operands
through the PEs on the **principal diagonal** instead. From there the row
operand travels left *and* right, and the column operand up *and* down. PE
(i, j) is |i - j| hops from both of its feeders, so A[i][k] and B[k][j] still
meet there, with no skew. The corner is now only N - 1 hops away (15 instead
of 30 on a 16 x 16 array).

Because the operands arrive unskewed, the feeder rows also line up in time.
Neighbouring feeder rows therefore hold overlapping convolution windows in
step, and a 2-to-1 multiplexer per feeder can pass a pixel from one window to
the next. That gives convolution lowering (im2col) on chip at almost no cost.

This repository holds synthesizable RTL for the configuration Axon was built
in:

- a 16 x 16 output-stationary array;
- FP16 multiply-accumulate;
- the im2col multiplexers;
- zero gating;
- buffers, a tile sequencer and self-checking testbenches around it.

## Block diagram

```
              FILTER buffer (16 read ports)
                 | column j operand -> PE (j, j)
                 v
 IFMAP buffer -> im2col muxes -> PE (i, i)       16 x 16 array of axon_pe
 (16 read ports)   ^                             row operand:    <- (i,i) ->
                   |                             column operand: up/down from (j,j)
                   +-- Input register of PE (i-1, i-1)
                                                 results shift down
                                                      v
                                               OUTPUT buffer (one row / entry)
 axon_ctrl: addresses, tags, im2col select, capture, output writes, statistics
```

| file | module | role |
|---|---|---|
| `rtl/axon_pkg.sv` | package | FP16 type, tile command struct, mode enum |
| `rtl/fp16_mac.sv` | `fp16_mac` | FP16 fused multiply-add |
| `rtl/axon_pe.sv` | `axon_pe` | output-stationary PE with zero gating |
| `rtl/axon_array.sv` | `axon_array` | N x N array, diagonal feeding, register sharing, readout chain |
| `rtl/axon_im2col_feed.sv` | `axon_im2col_feed` | the 2-to-1 muxes in front of the feeder PEs |
| `rtl/axon_buffer.sv` | `axon_buffer` | multi-read-port scratchpad (IFMAP, FILTER, OUTPUT) |
| `rtl/axon_ctrl.sv` | `axon_ctrl` | tile sequencer and address generator |
| `rtl/axon_top.sv` | `axon_top` | everything wired together |

## How operands move through the array

Feeder PE (i, i) registers A[i][k] and B[k][i] in the same cycle, for every i
at once. Each cycle the operands then move one hop:

- **Row operand:** a PE right of the diagonal takes it from its left
  neighbour; a PE left of the diagonal takes it from its right neighbour.
- **Column operand:** a PE below the diagonal takes it from the PE above; a
  PE above the diagonal takes it from the PE below.

So a feeder drives both neighbours, and every other PE passes the operand on
in the direction it came from. The PE is an ordinary output-stationary PE
(Input, Weight, Psum and Output registers). Only the wiring around it differs
from a conventional array.

Two consequences are built in:

- **Register sharing.** The PEs at (i, i-1) and (i, i+1) receive the same
  row operand in the same cycle, and so do (j-1, j) and (j+1, j) for the
  column operand. One of each pair therefore has no operand register of its
  own: it uses its partner's (`OWN_A` / `OWN_B` parameters of `axon_pe`). The
  reported area saving of Axon over a plain array comes from this.
- **Tags.** A valid bit and a "first element" bit travel with the row
  operand. The first element of a new dot product restarts Psum instead of
  adding to it, so tiles follow one another without a separate clear. The
  paper gives no control signals for the array; the tags are this design's
  own.

The feed order does not change the mathematics, but in floating point it does
change the rounding. The controller feeds the reduction from its last element
down to the first, as the paper's examples do. Its 3 x 3 GEMM starts with
A13*B31, and its im2col walk-through starts with the bottom-right pixel of
each window.

## On-chip im2col

Take a stride-1 convolution with an n x n filter. Array row i computes output
pixel (oy, ox0 + i), and array column j computes filter j. Row i needs
IFMAP[c][oy + r][ox0 + i + s] for every channel c, filter row r and filter
column s. The reduction is fed with s counting down fastest. At step s, row i
needs the pixel that row i-1 needed at step s+1, which is now sitting in the
Input register of feeder PE (i-1, i-1). So:

- at the first step of every filter row (s = n-1), all 16 rows read the
  IFMAP buffer and the mux select is 0;
- for the other n-1 steps only row 0 reads the buffer, the select is 1, and
  rows 1..15 take the word from the feeder above.

This is the paper's rule: "0 for 1 cycle, 1 for n-1 cycles". One tile reads
the IFMAP buffer K + 15K/n times instead of the 16K times a software-lowered
(im2col) operand would need. For a 3 x 3 filter that is 63 % fewer reads. The
end-to-end test prints this figure. The IFMAP buffer holds the raw C x H x W
tensor, not a lowered matrix.

`tb/axon_im2col_feed_tb.sv` replays the paper's 6 x 6 IFMAP / 3 x 3 filter
walk-through. It checks that four rows receive exactly the four windows of
the first output row, right to left.

## Arithmetic (`fp16_mac`)

The MAC computes `psum + a*b` in IEEE binary16 with a single rounding, to
nearest with ties to even. It does so exactly: both terms are placed on one
integer grid with LSB 2^-48, which is wide enough for any product of two
normal FP16 numbers. They are added as 84-bit integers, and the sum is
normalised and rounded once.

These are this design's own simplifications, not the paper's (the paper used
a simplified third-party FP unit and does not describe it):

- subnormals are flushed to zero, on input and on output;
- NaN, 0 * Inf and Inf - Inf give the quiet NaN 0x7E00;
- the MAC is single-cycle: Psum is the only register.

**Zero gating:** if either operand is zero (or subnormal), the PE skips the
MAC and Psum keeps its value. In silicon this enable would gate the clock.

## Using the design

The host interface of `axon_top` is this design's own.

1. Write the operands into the IFMAP and FILTER buffers (`if_we` / `fl_we`,
   one 16-bit word per cycle).
2. Present a `tile_cmd_t` on `cmd` with `cmd_valid`. It is taken when
   `cmd_ready` is high.
3. Wait for the one-cycle `done` pulse.
4. Read the result rows from the OUTPUT buffer. Entry `out_base + i` holds
   array row i, with column j in bits 16j+15:16j. Data appears one cycle
   after `ob_re`.

| mode | IFMAP layout | FILTER layout | result |
|---|---|---|---|
| `MODE_GEMM` | A[i][k] at `a_base + i*a_stride + k` | B[k][j] at `b_base + k*b_stride + j` | C[i][j], K = `k_len` |
| `MODE_CONV` | IFMAP[c][y][x] at `a_base + (c*H + y)*W + x` | filter j as [c][r][s] at `b_base + j*b_stride` | row i = pixel (`oy`, `ox0`+i), column j = filter j, K = C*n*n |

Each command computes one 16 x 16 output tile. The host tiles larger problems
over M and N by choosing bases and strides (the tests do this for a
32 x 40 x 32 GEMM).

There is no accumulation across K slices. A tile's operands must therefore
fit the buffers: K <= 256 with the default 4096-word buffers. In
convolution mode, array rows whose window runs past the IFMAP width produce
results the host must ignore (the 6 x 6 example uses 4 of 16 rows).

### Timing

A tile takes **K + 2N + 2 cycles** from command to `done`:

| phase | cycles |
|---|---|
| feed | K |
| drain | N + 1 (N - 1 hops, buffer read, feeder register, MAC) |
| capture | 1 |
| readout | N |

The paper's runtime model for Axon in output-stationary mode is
max(M,N) + M + K - 1, which is 2N + K - 1 for a square tile. The three extra
cycles are this design's pipeline. The conventional array needs 2M + N + K - 2
= 3N + K - 2. The testbenches check the tile length, and they check that MACs
in the array span exactly K + N - 1 cycles.

The statistics outputs count:

- buffer reads;
- words passed by the im2col muxes;
- tiles;
- busy cycles;
- MACs;
- zero-gated MACs.

## What follows the paper and what does not

Taken from the paper:

- 16 x 16 output-stationary array;
- diagonal feeding with two-way propagation;
- unchanged PE;
- register sharing beside the feeders;
- one 2-to-1 mux per feeder below the first, with its 0-then-1 control
  pattern;
- zero gating;
- FP16 MAC;
- readout of R rows down the columns;
- the IFMAP / FILTER / OUTPUT buffer placement.

This design's own choices:

- buffer sizes and organisation (one multi-port array per buffer; a chip
  would use banked SRAM);
- the command format and host ports;
- the valid/first tags;
- the feed pipeline (one-cycle buffer read);
- the FP16 details listed above;
- stride 1 and no padding for convolution;
- channel-major window order;
- tiles run one at a time, not overlapped.

Described by the paper but not built:

- the unified PE that switches between output-, input- and weight-stationary
  dataflows (preloading over the output path, bypass-and-add of partial sums
  split by the diagonal);
- the extension to rectangular arrays, which feeds off-diagonal columns from
  the bottom with zero padding.

## Simulating

Every testbench in `tb/` is self-checking and prints
`TB_RESULT checks=N failures=M`. For example, the end-to-end test at full
size:

```
verilator --binary --timing --assert -j 0 --top-module axon_top_tb \
  -y rtl -y tb +libext+.sv -Irtl -Itb rtl/axon_pkg.sv tb/fp16_ref_pkg.sv \
  tb/axon_top_tb.sv -o sim && ./obj_dir/sim
```

| testbench | what it checks |
|---|---|
| `fp16_mac_tb` | 25k vectors against a binary64 reference, rounding ties, overflow, flush-to-zero, NaN rules |
| `axon_pe_tb` | dot products, register latency, shared-register variant, zero-gating count, output shift |
| `axon_im2col_feed_tb` | the paper's 6 x 6 / 3 x 3 window walk-through, mux rule |
| `axon_array_tb` | 16 x 16 GEMM tiles, K + N - 1 MAC span, readout order, MAC and gating counts |
| `axon_buffer_tb` | multi-port reads, latency, hold, read-before-write |
| `axon_ctrl_tb` | every read address of every port in GEMM and CONV, im2col select pattern, capture cycle, tile length |
| `axon_top_tb` | full design at default size: tiled GEMM, a 2-channel convolution layer, the 6 x 6 example, a mode switch back to GEMM; IFMAP-read saving; every mechanism counted |
| `axon_workload_tb` | workloads from the paper's evaluation at full size: GEMM_0 (128 x 10 x 128, all tiles), a 1024 x 128 matrix-vector product, 32 channels of a 7 x 7 depthwise convolution; prints cycles against the Axon and conventional runtime models |

The reference arithmetic (`tb/fp16_ref_pkg.sv`) works in binary64 reals,
independently of the RTL. Test operands keep their exponents in a band where
binary64 holds the sum exactly, so the reference is exactly rounded.

## Fit of the paper's workloads

At the default sizes, a GEMM or convolution layer runs as a sequence of tiles
if its reduction length K is at most 256:

- **Fits:** TF0, GNMT1, NCF0, ResNet50's first layer (lowered), GEMM_0 and
  GEMM_1; all depthwise convolutions; the matrix-vector products with
  K <= 256; the convolution shapes of the memory-traffic study.
- **Does not fit:** layers with K of 288 to 50000 (GPT-3, the larger GNMT,
  NCF1, DB, the later ResNet50 and YOLOv3 layers). They would need larger
  buffers, or partial-sum accumulation across K slices, which the paper does
  not describe.
