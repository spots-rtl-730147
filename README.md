# SPOTS: a sparse CNN accelerator built from a hardware IM2COL unit and a tall systolic array

A convolution layer can be computed as a single matrix product. Unroll every
K x K x C window of the input feature map (a *patch*) into one column, and stack
those columns side by side: this is the IM2COL matrix, with K·K·C rows and one
column per output pixel. Multiply it on the left by the filter matrix (one row
per filter, K·K·C columns) and you get the output feature map, one row per
output channel.

Doing this naively costs two things. Neighbouring patches overlap, so the
IM2COL matrix repeats most input values up to K² times, and building it in
software multiplies memory traffic. And pruned networks are full of zeros, in
the filters and in the feature maps (ReLU), which a dense matrix engine would
multiply anyway.

SPOTS addresses both:

* **Patches are built in hardware, on the fly.** Patch units pass overlapping
  elements to each other and keep them for later, so each input element is
  read from SRAM about once. The patches are written into a double buffer
  while the matrix engine works on the previous group.
* **Zeros are skipped before they reach the array.** The filter matrix is
  stored in a block-sparse format with two bitmaps. The IM2COL output is
  tagged, row by row, with an "all zero" bit. A row of the IM2COL matrix
  enters the array only when both the filter column and the IM2COL row can
  contribute something. Inside the array a zero operand gates the MAC.
* **The matrix engine is a tall, narrow, output-stationary systolic array.**
  It has 128 rows and 4 columns. It is narrow because only 4 IM2COL columns
  then have to be all-zero together for a row to be skipped. It can be split
  into four 32 x 4 arrays, each fed by its own IM2COL unit, for layers with
  few filters.

This repository holds synthesizable SystemVerilog for the whole datapath. Its
default parameters are those of the published prototype (Table 1 of the SPOTS
paper), and self-checking testbenches exercise every mechanism above. The text
below explains how the design works and where it departs from the published
description. It also explains how to simulate it.

---

## 1. Datapath of one layer

```
             ifmap SRAM (512 KB)
                  |  one read / cycle per IM2COL unit
     +------------+-------------+   x4 (unit 0 = main, units 1-3 used in multi mode)
     |       IM2COL unit         |
     |  input controller         |
     |   |  |  |  |   (new)      |
     |  PU0>PU1>PU2>PU3>(ring)   |  neighbour forwarding, reserved buffers
     |   |  |  |  |              |
     |  output controller --------+--> max-pool results (pool mode)
     +------------+-------------+
                  | 4 columns, one write port each
          patch double buffer  +  compress (all-zero bit per row)
                  | one IM2COL row (4 values) per cycle
   filter SRAM -> GEMM input controller  (M1, M2, 16 banks of array A)
                  | weights (left edge), IM2COL row (top edge)
          128 x 4 output-stationary systolic array  (or 4 x 32 x 4)
                  | drain chain
          GEMM output controller -> ofmap SRAM
```

The host loads the four SRAMs, writes a layer descriptor (`layer_cfg_t`) and
pulses `start`. `done` rises when the last tile has been written to the ofmap
SRAM (or, in pool mode, when the last pooled value has left).

The unit of work is a **group**: four horizontally adjacent patches of one
output row. Group g of output row y covers output columns 4g .. 4g+3. One
group fills one bank of the patch buffer: four IM2COL columns of K·K·C rows.
The GEMM side consumes one bank per **tile**. While it streams that bank
through the array, the IM2COL unit fills the other bank with the next group.

---

## 2. Building patches: the IM2COL unit

This is the least obvious part of the design and it is where most of the
control logic lives (`im2col_input_ctrl`, `patch_unit`, `im2col_output_ctrl`,
`im2col_unit`).

### 2.1 Rounds, groups and the PU assignment

The output positions are visited row by row. All patches of one output row
form a *round*. Inside a round, patch x always goes to PU `x mod 4`.
Consequently a PU sees the same patch column in every round, directly below
the patch it built last round. Each PU builds one patch at a time and emits
it in IM2COL order: channel by channel, and inside a channel the K x K window
in row-major order. The row index is k = (ch·K + ky)·K + kx.

### 2.2 Three sources per element

Every PU has three buffers:

| buffer | holds | implementation |
|---|---|---|
| N (new) | elements fetched from the ifmap SRAM for this PU | FIFO, depth 4 |
| G (neighbour) | elements forwarded by the PU on its left | FIFO, depth 256 |
| R (reserved) | elements this PU kept from its patch of the previous round | RAM, 4096 x 16 bit |

For the element at patch position (ky, kx), with overlap O = K − S, the
element is taken from

1. **G** if the patch to the left exists in this group or ring and covers it,
   i.e. `kx < O`;
2. otherwise **R**, if the patch above was built last round and the reserve
   is in use, and `ky < O`;
3. otherwise **N**.

The same rule is a function in `spots_pkg` (`pos_src`), so the input
controller and the PUs always agree. The input controller walks the same
patch positions as each PU and issues SRAM reads only for the positions that
resolve to N, in the order the PU will consume them.

While a PU emits an element it also:

* **forwards** the element to the right-hand PU when the patch to the right
  covers it (`kx >= S`);
* **keeps** it in R for the next round when the patch below covers it
  (`ky >= S`). It does not keep elements that came from G, because the left
  neighbour will hand them over again next round.

Each element travels with its feature-map row and column. The PU turns the
coordinates back into a row index k and checks them, with an assertion,
against the position it expects. A scheduling error therefore shows up
immediately in simulation, not as wrong numbers later.

A PU that is not the first of its round receives K² − K·S elements from its
neighbour, per channel. A PU in a round other than the first takes a further
(K − S) rows from R, minus what the neighbour already supplied. Only the rest
comes from SRAM.

### 2.3 The ring, and when it is not used

The four PUs form a one-way ring: PU p forwards to PU p+1, and PU 3 to PU 0.
The wrap link lets PU 0 of group g+1 receive its left overlap from PU 3 of
group g. Because PU 3 finishes group g before group g+1 starts, everything it
forwards must wait in PU 0's G FIFO. That is K·(K−S)·C elements. The wrap is
therefore used only when this fits G (256 entries) and only with a single
IM2COL unit. In multi-array mode consecutive groups belong to different
units. Without the wrap, PU 0 fetches its overlap again.

### 2.4 The reserved buffer, and when it overflows

R holds, for each group position of a round, C·K·(K−S) elements. It is split
into two halves by round parity, so that reading last round's elements and
writing this round's never collide. The input controller enables the reserve
for a layer only if `2 · groups_per_round · C · K · (K−S) <= 4096`.
Otherwise every PU fetches the upper rows again from SRAM, and reuse is
limited to horizontal neighbours. The reserve is sized for narrow, deep
layers: those have few groups per round, so their overlap fits.

### 2.5 Bypass when patches do not overlap

When S >= K (for example a 2x2/2 layer, or any 1x1 layer) nothing overlaps.
The input controller then skips the PUs. It tags each fetched element with
its column and row index and hands it directly to the output controller.
Every element is still read exactly once.

### 2.6 Output controller and max pooling

The output controller writes PU j's stream, or the bypass stream for column
j, into column j of the current patch-buffer bank, at row k. Each column has
its own write port, so no PU is ever stalled. When all PUs of a group are
idle, the input controller *commits* the bank and moves to the next group as
soon as the other bank is free.

In pool mode nothing is written to the buffer. Instead the output controller
keeps a running maximum per column. After K² elements of a channel it emits
the pooled value with its channel, output row and output column. Pooling thus
reuses the whole patch machinery, including forwarding and the reserve for
overlapping 3x3/2 windows. Only max pooling is implemented.

---

## 3. The double buffer and the compress unit

`patch_buffer` has two banks of 4 columns x 4608 rows for each IM2COL unit.
The size 4608 is 3·3·512, the largest K·K·C of the VGG/ResNet layers. The
IM2COL side writes one bank and commits it. The GEMM side reads a whole row
(4 values) per cycle from the other bank, then releases it.

`compress` watches the same write ports. It keeps one bit per row per bank,
set when any non-zero value is written to that row. A bank's bits are cleared
when the bank is released. A row of the IM2COL matrix is thus tagged "all
zero" at no extra read cost, by the time the bank is committed.

---

## 4. Sparse filters and the GEMM input controller

### 4.1 Storage format

The filter matrix (F rows x K·K·C columns) is cut into **blocks** of G = 8
consecutive filters of one column. This matches group-wise pruning, which
zeroes whole blocks. Three structures describe it:

* **M1**: one bit per column k. 0 means the whole column is zero.
* **Array A**: the non-zero blocks only, in 16 banks (one per 8 array rows),
  each entry 8 x 16 bit.
* **M2**: one word per *non-zero* column, in column order. It has one bit per
  (bank, accumulator pass), bit index `bank*4 + pass`, saying whether that
  block is present in A.

Filter f is computed by array row `f mod R` in accumulator `f div R`, where
R = 128 in tall mode and R = 32 in multi mode. So for each column, bank b
holds the blocks of passes 0..3 for filters `pass*R + 8b .. +7`. Each bank
stores its blocks column after column, with the passes of a column next to
each other. The host writes them in exactly that order. The
`host_load` task in `tb/tb_spots_top.sv` is a reference encoder.

### 4.2 Walking a tile

For every tile the controller visits k = 0 .. K·K·C−1:

| M1[k] | compress bit (OR over active units) | action | cycles |
|---|---|---|---|
| 0 | – | skip the row; nothing is read | 1 |
| 1 | 0 | skip the row; advance every bank pointer past this column's blocks (popcount of its M2 bits) | 1 |
| 1 | 1 | for each pass read one block from every bank whose M2 bit is set (absent blocks become zeros), then push the weight column and the IM2COL row into the array | npass + 1 |

The bank pointers never need an index search: the order of blocks in each
bank is the order in which the controller visits them. After the last row
the controller waits for the array to empty, asks the output controller to
drain, and releases the patch buffers.

---

## 5. The systolic array

`systolic_array` is M x N = 128 x 4 `spots_pe` instances. The array is output
stationary: PE (i, j) accumulates output (filter of row i, pixel of column j).
Weights flow left to right and IM2COL values top to bottom, each with a
valid/ready handshake.

**One PE.** A weight entry carries up to four weights, one per accumulator
in use (`npass`, set from F per layer). When a weight entry and a feature
value are both at the heads of the PE's two operand FIFOs, and the right and
lower neighbours can accept them, the pair is forwarded and a work entry is
queued. The MAC then processes the work entry in `npass` cycles:
`acc[p] += w[p] · f`. A slot whose operand is zero is gated: the accumulator
is not updated. It still takes its cycle, so the timing does not depend on
the data. The accumulators are 24 bits wide and wrap on overflow.

**Skew.** An IM2COL row enters all four columns at once, but it reaches row i
only i cycles later. Row i's weights enter in the same cycle. The first PE of
row i therefore has a weight FIFO of depth i + 2, which holds the weights
until the matching feature values arrive. A separate skew delay line is not
needed. With depth-2 FIFOs, the array edge stalled for most of every tile.

**Multi-array mode.** A multiplexer on the feature input of rows 0, 32, 64
and 96 selects either the PE above (tall mode) or a separate IM2COL unit
(multi mode). In multi mode row i takes the weights of edge row `i mod 32`,
so all four sub-arrays see the same filters. Each sub-array computes its own
group of output pixels. IM2COL unit u builds groups u, u+4, u+8, … of every
output row. All units run the same number of groups, empty ones included, so
the sub-arrays stay in lock step.

**Draining.** The PEs of a row form a shift chain. For each pass, four shift
cycles move the row's four results out at the right edge. `gemm_output_ctrl`
writes each set of 128 results as one 128 x 24-bit word of the ofmap SRAM at
address `(tile*4 + column)*4 + pass`. In word bit slice `[r*24 +: 24]`:

* in tall mode it is filter `pass*128 + r`;
* in multi mode it is filter `pass*32 + (r mod 32)` of sub-array `r div 32`.

Draining also clears the accumulators.

---

## 6. Programming a layer

`layer_cfg_t` holds:

| field | meaning |
|---|---|
| k | square kernel size |
| s | stride |
| c | input channels |
| h, w | input size |
| hout, wout | output size, (h−k)/s+1 and (w−k)/s+1 |
| f | number of filters |
| tall_mode | 1 = one 128 x 4 array, 0 = four 32 x 4 arrays |
| pool_mode | 1 = max pooling |

Memory layouts:

* **ifmap SRAM**, 2^18 x 16 bit: element (ch, y, x) at `(ch*h + y)*w + x`.
  Padding is not applied by the hardware. Store a padded feature map.
* **A banks** (`a_bank`, `a_waddr`, `a_wdata`): 16 x 4096 x 128 bit, weight e
  of a block in bits `[e*16 +: 16]`.
* **M1**, 4608 x 1 bit, addressed by k.
* **M2**, 4608 x 64 bit, addressed by the ordinal of the non-zero column.
* **ofmap SRAM**, 1024 x 3072 bit, read through `of_raddr`/`of_rdata`,
  layout as in section 5.

Limits at the default parameters:

* K <= 15;
* h, w <= 511;
* c <= 1023;
* K·K·C <= 4608;
* F <= 512 in tall mode and F <= 128 in multi mode;
* an ifmap of at most 262,144 words;
* at most 64 tiles (256 output pixels) per start, because the ofmap address
  wraps modulo its depth.

Larger layers have to be cut by the host into bands of output rows and into
groups of channels and filters. Each piece is then a separate start.

---

## 7. Parameters

| parameter | default | from the prototype? |
|---|---|---|
| M x N (array) | 128 x 4 = 512 PEs | yes |
| NSUB (small arrays / IM2COL units) | 4 (32 x 4 each) | yes |
| operand / accumulator width | 16 / 24 bit | yes |
| accumulators per PE | 4 | yes |
| PUs per IM2COL unit | 4 | yes |
| reserved buffer, main unit | 4 x 4096 x 16 bit = 32 KB | yes |
| reserved buffer, units 1-3 | 4 x 1024 words | own choice (published design says only "smaller") |
| filter SRAM | 16 banks x 4096 x 8 x 16 bit = 1 MB | yes |
| ifmap SRAM | 262,144 x 16 bit = 512 KB | yes |
| block size G | 8 filters | own choice (a design parameter in the published design) |
| patch buffer | 2 x 4 x 4608 x 16 bit per unit | own choice |
| ofmap SRAM | 1024 x 128 x 24 bit | own choice |
| PE FIFOs | depth 2 (first column: i+2) | own choice |
| G / N FIFOs | 256 / 4 | own choice |

All of these are module parameters of `spots_top` or constants of
`spots_pkg`.

---

## 8. Where this design departs from the published description

These are points where the published description is silent or only
qualitative, and this RTL made its own choice:

* Scheduling of patches to PUs within a group, ring-wrap and reserve
  enabling conditions, the R double-buffering by round parity, and the rule
  that elements from G are not reserved. The last follows the worked example
  of the published design.
* The bank layout of array A and the bit layout of M2 (section 4.1). The
  mapping of filters to array rows and accumulators.
* Handshakes, FIFO depths, the drain chain, SRAM read latencies (the ifmap
  SRAM is read synchronously; the filter and metadata SRAMs combinationally),
  and the ofmap layout.
* Zero padding, average pooling, fully-connected layers and filter counts
  above 4 x rows are not handled in hardware. A fully-connected layer can be
  run as a 1x1 convolution with the batch as width, within the limits
  above.
* The published design streams partial patches to the GEMM unit as soon as
  the PUs produce them. Here the hand-over is one whole group (one
  patch-buffer bank) at a time, and the double buffer overlaps the next
  group's IM2COL with the current group's GEMM.
* In multi mode the published design gives each small array a contiguous
  range of output columns. Here the groups of four columns are dealt
  round-robin to the units, so that all units have the same number of
  groups.
* Off-chip DRAM, the host and the requantisation of 24-bit results are
  outside the design.
* The timing target of the prototype (500 MHz in a 45 nm process) has not
  been checked here.

Against the four networks the prototype was evaluated on (AlexNet, VGG-16,
ResNet-50, GoogLeNet), each layer shape fits the per-layer limits above,
except ResNet-50's 1024/2048-channel and 1024/2048-filter layers. But none of
the networks fits in one start per layer:

* Early layers have thousands of output pixels against the 256 the ofmap
  SRAM holds.
* The largest dense weight tensors (2.6 MB for AlexNet conv4, 4.7 MB for
  VGG/ResNet 3x3x512x512) need block-level pruning to fit the 1 MB filter
  SRAM.

The published prototype has the same SRAM sizes, so it too must tile such
layers through DRAM.

---

## 9. Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | block(s) | what is checked |
|---|---|---|
| `tb_spots_pe` | PE | forwarding order under random back-pressure, accumulator values for npass 1-4, zero gating, latency |
| `tb_systolic_array` | array (8 x 2, 2 sub-arrays) | matrix products in tall and multi mode against a reference, single-column latency |
| `tb_patch_unit` | PU | patch order and values, forwarding, reserve reuse for a patch below and neighbour reuse for a patch to the right, random stalls |
| `tb_im2col_unit` | IM2COL unit and its controllers | every committed group against a reference IM2COL, for overlap, stride 2, bypass, 1x1, multi mode, a reserve too small (refetch) and max pooling, with mechanism counters |
| `tb_patch_buffer` | double buffer + compress | concurrent fill/read, bank alternation, all-zero row bits |
| `tb_spots_sram` | SRAM model | synchronous and asynchronous reads against a reference array |
| `tb_spots_top` | whole design at full size | five layers against a direct convolution: 3x3/1 tall (ring, wrap, reserve), 2x2/2 with 140 filters (bypass, two passes), 3x3/1 in multi mode, 2x2/2 and 3x3/2 max pooling; also counts zero-column and zero-row skips, MAC gating and IM2COL/GEMM overlap |

Each PE test, IM2COL test and the full-size test also fails if the mechanism
it targets never happened. Example timing from the full-size test:

* a 3x3/1, 2-channel 7x7 layer with 20 filters (25 output pixels, 7 tiles)
  takes 1817 cycles;
* the same design in multi mode runs a 4x12 layer with 40 filters in 240
  cycles.

To run a testbench with Verilator (the package must come first):

```
verilator --binary --timing --assert -j 0 rtl/spots_pkg.sv \
    $(ls rtl/*.sv | grep -v spots_pkg) tb/tb_spots_top.sv --top-module tb_spots_top
./obj_dir/Vtb_spots_top
```

The full-size testbench builds in well under a minute and runs in a few
seconds.

---

## 10. Files

| file | contents |
|---|---|
| `rtl/spots_pkg.sv` | widths, `layer_cfg_t`, element record, source rule |
| `rtl/sync_fifo.sv` | fall-through FIFO used in PEs and PUs |
| `rtl/spots_pe.sv`, `rtl/systolic_array.sv` | PE and reconfigurable array |
| `rtl/patch_unit.sv`, `rtl/im2col_input_ctrl.sv`, `rtl/im2col_output_ctrl.sv`, `rtl/im2col_unit.sv` | IM2COL unit |
| `rtl/patch_buffer.sv`, `rtl/compress.sv` | double buffer and zero-row bitmap |
| `rtl/gemm_input_ctrl.sv`, `rtl/gemm_output_ctrl.sv` | sparse GEMM feeder and result drain |
| `rtl/spots_sram.sv` | SRAM array model |
| `rtl/spots_top.sv` | top level |
| `tb/*.sv` | testbenches listed above |
