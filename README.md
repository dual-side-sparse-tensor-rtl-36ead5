# Dual-side sparse tensor core in SystemVerilog

A GPU tensor core normally multiplies dense tiles with dot products. When
both operands are sparse, as with pruned weights and ReLU activations,
most of those multiply-adds work on zeros. Dot products cannot skip them
cheaply, because a zero in A and a zero in B seldom meet at the same index.

This design turns the tensor core into an **outer-product** engine. Each
step multiplies one column of A with one row of B, and the partial products
accumulate into the 32x32 output tile. The outer product can use the sparsity
of both operands:

* Each operand column or row is stored **bitmap-encoded**. A 32-bit mask marks
  the non-zeros, and the non-zero values are packed from index 0.
* Multiplying the packed vectors gives a dense block of products, every one
  of them non-zero. The work shrinks to `ceil(nnzA/8) x ceil(nnzB/16)` small
  steps instead of 8.
* Each product is then **scattered** back to its true (row, col) position
  and added there. The positions come from the two bitmaps.

So the arithmetic stays dense and regular. The irregular part is moved into
the accumulation buffer, which works as a gather-accumulate-scatter memory.

The RTL covers the following:

* the compute units (FEOP, OTC);
* the bitmap instructions (BOHMMA, POPC predication);
* the per-step address generation;
* the multi-bank accumulation buffer, with its dense and sparse modes;
* a bitmap-based sparse im2col unit that lowers a convolution feature map
  straight into the bitmap format;
* one top level, `dstc_top`, that runs sets of a warp-level sparse
  matrix-multiply.

## Number format

Operands are FP16. Products and accumulation are FP32, as in the
`OHMMA.8161.F32.F32` instruction. The helpers in `rtl/dstc_pkg.sv` work as
follows:

* `fp16_mul_fp32` forms the exact product. An 11x11-bit mantissa product
  always fits in FP32.
* `fp32_add` adds with round-to-nearest-even.
* Both treat a zero exponent as zero, so subnormals are flushed. NaN and
  infinity inputs are not modelled, and overflow gives infinity.

These numeric details are this design's own choice.

## Building blocks

### FEOP and OTC: the outer-product datapath

A **FEOP** (`rtl/feop.sv`) is the four-element outer-product unit. It
computes `d[j] = c[j] + a*b[j]` for j = 0..3 with four multipliers and four
adders. It reuses the multipliers of a four-element dot-product unit, but
replaces its adder tree with independent adders.

An **OTC** (`rtl/otc.sv`) is an 8x8x1 outer-product tensor core built from
16 FEOPs:

* FEOP (i, g) handles row i and columns 4g..4g+3.
* The OTC takes 8 A values, 8 B values and 64 FP32 accumulators.
* It produces 64 results in the same cycle. It is purely combinational; a
  register stage can be added around it without changing the rest.

### The instructions of one set

The top level executes a **set**: a 32x32x1 outer product of a 32-element A
column with a 32-element B row, accumulated into the 32x32 tile D. A
32x32x16 warp-level multiply (SpWMMA, or OWMMA when dense) is 16 sets, and
the caller feeds them in order.

A set is split into eight **OHMMA.8161** steps, each an 8x16x1 outer product
on the two OTCs. Step `s` covers the following part of the tile:

| step s | rows (of the packed A) | columns (of the packed B) |
|-------:|------------------------|---------------------------|
| 0, 1   | 0..7                   | 0..15, 16..31             |
| 2, 3   | 8..15                  | 0..15, 16..31             |
| 4, 5   | 16..23                 | 0..15, 16..31             |
| 6, 7   | 24..31                 | 0..15, 16..31             |

The two OTCs take columns 0..7 and 8..15 of the step. Output lane
`l = i*16 + t*8 + j` is row i of the step, OTC t, column j.

**BOHMMA.32321** (`rtl/bohmma.sv`) is the binary outer product of the A and
B bitmaps. `d_bm[i*32+j] = a_bm[i] & b_bm[j]` is the bitmap of the set's
partial product. The unit also keeps the OR of these over all sets since
`bm_clear`, which is the bitmap of the accumulated result.

**POPC predication** (`rtl/popc_pred.sv`):

* It counts `na = popcount(a_bm)` and `nb = popcount(b_bm)`.
* Step s is enabled iff `8*(s/2) < na` and `16*(s%2) < nb`.
* Example: an A column with 20 non-zeros and a B row with 11 runs only steps
  0, 2 and 4 and skips the other five.
* In dense mode all eight steps run.

### Where each product goes: `scatter_ctrl`

In sparse mode, lane (r, c) of step s holds the product of packed A element
`8*(s/2)+r` and packed B element `16*(s%2)+c`. `rtl/scatter_ctrl.sv` turns
those packed indices back into tile positions:

* The row is the position of the (k+1)-th set bit of `a_bm`, where k is the
  packed A index. The column is found the same way from `b_bm`.
* Lanes past the last non-zero are padding and are marked invalid.
* The unit is a prefix popcount (the rank of each bitmap position) followed
  by a select. For each output index it finds the position whose rank
  matches.

In dense mode the position is simply the step's tile position.

### The accumulation buffer

This is the hardest part of the design and the place where the sparse
speed-up is either kept or lost. `rtl/accum_buffer.sv` holds the 32x32 FP32
tile (4 KB) in **128 single-ported banks of 8 words**:

```
bank(row, col) = (row % 8) * 16 + (col % 16)
word(row, col) = (row / 8) * 2  + (col / 16)
```

An 8x16 block of the tile therefore lands on 128 different banks, one word
each. This is the interleaving of a smaller 4x4-bank example, widened to the
8x16 step.

**Dense mode.** Output lane l of step s is tile element
(8*(s/2) + l/16, 16*(s%2) + l%16). That is bank l, word s. Each bank has a
direct port to "its" FEOP output:

* The top reads the 128 old values (`dense_rdata`).
* The OTCs add the new products to them.
* The results go back with `dense_we` in the same cycle.

A dense step therefore takes one cycle, and a dense set takes 8 cycles.

**Sparse mode.** The products of a step now scatter to arbitrary positions,
so several lanes may hit one bank. The path has three stages:

1. **Lane queues.** Every lane has a queue (depth `QDEPTH`, 4 by default).
   A step enters all queues in one cycle (`sp_valid`), carrying the
   product's bank, word and value. `sp_ready` is low while any queue is
   full, which stalls issue at the top.
2. **Operand collector.** Each cycle, each bank is granted to the
   lowest-numbered lane whose queue head targets it. Heads that lose wait
   (`conflict` is high that cycle). Because the queues decouple the steps, a
   bank left idle by step s can serve step s+1 in the same cycle, which
   absorbs most conflicts.
3. **Adder and crossbar.** The winning heads are routed through a 128x128
   crossbar to their banks. Each bank reads its word, adds with a lane FP32
   adder and writes the sum in the same cycle.

Other ports and rules:

* `empty` reports that all queues have drained.
* Dense accesses and the host port are only allowed while the buffer is
  empty; assertions check this.
* A queue entry carries its address rather than a bitmap to decode later.

Host port: one 16-word half-row per cycle (`host_row`, `host_chunk`). It is
used to preload the bias C and to read the result D. The memory has no reset;
loading the bias initialises it.

### Sparse im2col

A convolution becomes a matrix multiply after **im2col**, which lowers the
feature map into a matrix whose columns are the sliding windows. The outer
product wants one column of that matrix at a time, and this design keeps it
in bitmap form the whole way. `rtl/sparse_im2col.sv` takes one feature-map
row:

* an R-bit bitmap, plus its non-zero values packed from 0;
* a K-wide kernel at stride S.

For kernel offset kx = 0..K-1 it produces the lowered column of height
`B = (R-K+S)/S`:

1. **Apply mask.** It keeps bitmap positions `kx + t*S`. For S = 1 this is
   the window starting at kx.
2. **Pop count.** The masked bitmap's popcount is the column's length.
3. **Shift left.** After each column, the row bitmap shifts by one. The bit
   that falls off the front is added to a running **offset**: the number of
   values that lie before the window. The column's values are then read from
   the packed row starting at that offset.

Example, row `0 1 0 1 1 0` with values `4 2 3`, K = 3, S = 1:

| kx | column bitmap | offset | length | values |
|---:|---------------|-------:|-------:|--------|
| 0  | `0101`        | 0      | 2      | 4 2    |
| 1  | `1011`        | 0      | 3      | 4 2 3  |
| 2  | `0110`        | 1      | 2      | 2 3    |

For S > 1 each value is fetched at `offset + (ones below it in the masked
bitmap)`, which is the same thing spread out.

The default R = 34, K = 3, S = 1 gives B = 32, one warp-tile column.

Where this unit sits is this design's own choice. The same steps could run as
instructions on the register file. Here it is a small hardware front end
that can supply the A operand of a set.

## The top level: `dstc_top`

```
            a_bm/a_val ---+
 fm_* --> sparse_im2col --+--> A  ----+--> bohmma -----------> res_bm
                                      +--> popc_pred -> pred --+
            b_bm/b_val ---------> B --+                        |
                                      |   step sequencer <-----+
                                      v
                         OTC 0 | OTC 1  (8x16 products)
                               |
        dense: read-add-write  |  sparse: scatter_ctrl -> lane queues
                               v
                         accum_buffer (128 banks)  <--> host port
```

**Handshake.** A set is offered with `set_valid` and taken when `set_ready`
is high. The fields are:

* `set_sparse`: SpWMMA or OWMMA.
* `a_bm`, `a_val`, `b_bm`, `b_val`: the packed values in sparse mode, the
  plain values in dense mode.
* `set_a_im2col`: use the im2col unit's current column as A. `set_ready`
  then also waits for a valid column.

**Timing.**

* A set is registered when accepted. Its enabled steps issue on the
  following cycles, one per cycle.
* The next set is accepted in the cycle of the last step. A stream of sets
  therefore costs `max(enabled steps, 1)` cycles per set, and 16 dense sets
  take exactly 128 cycles.
* A sparse step issues only when the buffer has queue room.
* A dense step waits until the sparse queues are empty. This is the switch
  from sparse mode to dense mode.
* `idle` is high when no set is pending and the buffer is empty.

In sparse mode the OTCs get a zero accumulator input and send bare products
to the buffer, whose lane adders do the accumulation. In dense mode the FEOP
adders accumulate, using the buffer's dense read port.

**Counters.** The following count events since reset:

| counter | counts |
|---|---|
| `cnt_sets` | sets |
| `cnt_steps` | issued steps |
| `cnt_skipped` | predicated-off steps |
| `cnt_conflict` | cycles with a bank conflict |
| `cnt_stall` | cycles a ready step waited for the buffer |
| `cnt_im2col` | sets fed by im2col |

## Departures from the original description

* The OTC is combinational, and a step completes within its issue cycle. The
  original core is pipelined over several stages; the depth of the
  outer-product version is not given.
* The original describes OWMMA both as 16x16x16 and through 32x32 sets. This
  RTL uses 32x32x1 sets, 8 OHMMA steps each, for both dense and sparse mode,
  to match the 32x32 accumulation buffer.
* Bank count and mapping (128 banks, above), queue depth (4), the
  fixed-priority operand collector and one read-add-write per bank per cycle
  are this design's choices. The description shows the structure (queues,
  adders, crossbar, single-ported banks, operand collector) but not these
  sizes.
* Queue entries carry the computed address. The original queues the bitmap
  and decodes positions at the gather/scatter control.
* Subnormals are flushed. There is no NaN or infinity handling.
* The im2col is a hardware unit rather than register-file code. It handles
  one feature-map row (R = 34 by default). Wider rows must be cut into
  overlapping pieces by the caller.
* The **two-level bitmap** (one bit per warp tile, used to skip whole empty
  tiles) is not built. It is a memory format plus a scheduling decision above
  this unit. Empty tiles simply never issue sets here.
* The rest of the GPU is represented only by the top's ports: register
  files, warp scheduler and the loading of bitmaps and values.

## Fitting real workloads

* A large SpGEMM, for example 4096x4096 by 4096x4096, is tiled into
  128x128 = 16384 output tiles of 32x32. Each tile is one pass of 4096 sets,
  and the 4 KB buffer holds exactly one tile. The size only changes the
  number of passes.
* Convolution layers with feature-map rows up to 34 wide (28, 14, 7 in
  common CNNs such as VGG-16 and ResNet-18) fit one im2col load. Rows of 56
  and more need splitting.

## Verification

Each block has a self-checking testbench in `tb/`. Every testbench ends by
printing `TB_RESULT checks=<n> failures=<n>` and has a cycle watchdog.
Reference values are computed independently: floating point in double
precision rounded to FP32 (`tb/tb_fp_pkg.sv`), and positions from explicit
lists of set bits.

| testbench | what it checks |
|---|---|
| `tb_feop`, `tb_otc` | random normal operands, exact products |
| `tb_bohmma` | AND outer product, OR accumulation, clear |
| `tb_popc_pred` | counts and predicates; the 20/11 example gives steps 0, 2, 4 |
| `tb_scatter_ctrl` | every lane of every step, sparse and dense |
| `tb_sparse_im2col` | the example above, the default size, a stride-2 instance |
| `tb_accum_buffer` | bias load; dense read-add-write; a conflict-free batch drains in 1 cycle; a batch aimed at one bank drains in 128; random batches with back-pressure |
| `tb_dstc_top` | end to end at default parameters (below) |
| `tb_spgemm_sweep` | one 32x32x32 SpGEMM tile at several operand densities (below) |
| `tb_im2col_resnet` | im2col of 56-wide feature-map rows (3x3 filter, padding 1), fed as two overlapping 34-element pieces, at densities 100% to 10%; every row takes 8 cycles |

`tb_dstc_top` covers:

* 16 dense sets, which must take exactly 128 cycles;
* sparse sets, including the 20/11 example (3 steps in 3 cycles) and an
  all-zero set;
* sparse-to-dense mode switches;
* im2col-fed sets.

It compares all of D with a reference and `res_bm` with the OR of the set
bitmaps. It fails if any mechanism never happened: step skipping, bank
conflicts, queue stalls, mode switches, im2col use or empty sets.

`tb_spgemm_sweep` runs a 32x32 output tile with an inner dimension of 32
(32 sparse sets) at several operand densities. It checks D, the step
counts and the cycle bounds. One run gave these cycle counts, measured from
the first set to idle:

| A density | B density | enabled steps | cycles | vs. 256 dense |
|---:|---:|---:|---:|---:|
| 100% | 100% | 256 | 257 | 1.00x |
| 50%  | 50%  | 113 | 189 | 1.35x |
| 25%  | 25%  | 42  | 57  | 4.5x  |
| 10%  | 10%  | 30  | 33  | 7.8x  |
| 1%   | 1%   | 5   | 31  | 8.3x  |
| 10%  | 100% | 62  | 72  | 3.6x  |

Two limits show up. At moderate density, bank conflicts in the buffer add
cycles beyond the enabled steps. At very high sparsity, the one-cycle cost of
accepting each set dominates.

In sparse mode the buffer may add the products of different sets to one
element in any order, since they travel in different lane queues. The
end-to-end test therefore uses small integer values, whose FP32 sums are
exact in any order. Rounding itself is covered by the FEOP and OTC tests.

To run a testbench with plain verilator:

```
verilator --binary --timing -Irtl -Itb --top-module tb_dstc_top \
    rtl/dstc_pkg.sv tb/tb_fp_pkg.sv rtl/*.sv tb/tb_dstc_top.sv
./obj_dir/Vtb_dstc_top
```

`tb_fp_pkg.sv` is needed by the floating-point testbenches. The package files
must come first.
