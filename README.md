# NullHop: a CNN layer engine that computes on compressed feature maps

After ReLU, most activations in a convolutional network are zero. NullHop
exploits this: feature maps are stored, moved and consumed in a compressed form,
and the multipliers only see the non-zero pixels. Nothing is decompressed. The
compressed rows are decoded into a stream of `(value, row, column, map)`
pixels. Each pixel is multiplied by every kernel weight it touches, for all
output maps in parallel. The results collect in small per-MAC accumulator windows
that slide along the image one column at a time. Zeros cost neither memory
bandwidth nor MAC cycles.

This repository holds synthesizable SystemVerilog for the whole accelerator
core. The defaults match the published configuration:

- 16-bit fixed-point activations and weights;
- 32-bit MACs, 128 of them, with 8 controllers;
- 512 KB of pixel memory and 128 kernel banks of 4.5 KB;
- kernels up to 7x7;
- images up to 512x512 with up to 1024 maps;
- 32-bit input and output buses.

One run of the core computes one convolutional layer: convolution (stride 1,
zero padding 0-3), then optional ReLU and optional 2x2 max pooling. A layer
with more than 128 output maps is computed as several runs ("passes"). The
output of a run is already in the compressed format, so it can be sent back
unchanged as the next layer's input.

## The sparse format

A feature-map tensor is sent as a sequence of 16-bit *fields*. There are two
fields per 32-bit bus word, upper half first. Fields are of two kinds:

- **SM segment**: a 16-bit mask saying which of 16 consecutive pixels are
  non-zero (the sparsity map, SM).
- **Value**: a non-zero pixel value. The values come right after their SM
  segment, in the order of the mask bits.

The number of ones in a segment is the number of values that follow it, so an
all-zero segment is followed directly by the next segment. The stream always
starts with a segment.

The paper fixes the segment length and the interleaving. The order in which
pixels fill the segments is this design's own choice:

- rows go from top to bottom;
- inside a row, pixel positions go from left to right;
- at each position, the channels (input maps) come in order.

Each position therefore gets `ceil(N/16)` segments, and bit `b` of segment `j`
(LSB first) is channel `16j+b`. Every row starts on a fresh bus word. If a
row has an odd number of fields, its last word is padded with a zero field.
With this layout the decoder can find each row on its own and knows when it
is complete.

Raw mode (`enc_en = 0`) uses the same order without segments: every pixel is
sent, two per word. It is meant for a dense first layer. For a 3-map
224x224 input, raw mode needs 294 KB and compressed mode needs up to 392 KB.

## What happens in one layer

1. The host writes the layer registers and then START.
2. The **input bus carries the kernels**. For each output map `o` of the pass,
   the stream is:
   - one 32-bit bias word;
   - the weights `w[o][i][ky][kx]` in `(i, ky, kx)` order, two per word
     (upper first), with the last word padded.

   One weight is written per clock cycle.
3. The accumulators are preset with the biases. The **input bus then carries
   the compressed input rows**.
4. Decoding starts as soon as the first rows of a stripe are stored. Loading
   and computing overlap, and the pixel memory gives writes priority over
   reads.
5. The **output bus carries the compressed output rows**. `done` rises once
   the last word has left.

`in_ready`/`in_valid` and `out_ready`/`out_valid` are ordinary valid/ready
handshakes. Both sides may stall at any time.

### Register map (`config_regs`)

| addr | name        | bits                                        |
|------|-------------|---------------------------------------------|
| 0    | height      | 9:0 (input rows, unpadded)                  |
| 1    | width       | 9:0                                         |
| 2    | n_in        | 10:0 input maps                             |
| 3    | n_out       | 7:0 output maps of this pass (<= 128/v)     |
| 4    | k           | 2:0 kernel size 1..7                        |
| 5    | pad         | 1:0 zero padding on each border             |
| 6    | log2_clust  | 1:0, v = 2^log2_clust clusters (1..8)       |
| 7    | flags       | 0 relu_en, 1 pool_en, 2 enc_en              |
| 8    | out_shift   | 4:0 output quantisation shift               |
| 9    | START       | write: start the layer                      |
| 10   | status      | read: 0 busy, 1 done                        |

Writes take effect on the next clock edge. Reads are combinational.

## Stripes and the sliding accumulator window

This is the heart of the design and the hardest part to follow.

### Stripes

The output is produced two rows at a time, so that 2x2 pooling can happen on
the fly. Output rows `2r` and `2r+1` need padded input rows `2r .. 2r+k`,
which is `k+1` rows. This band is a *stripe*.

For each stripe, the input data processor (IDP) walks the padded columns
`x' = 0 .. Wp-1` from left to right. At each column it emits:

- the non-zero pixels of the `k+1` stripe rows (slot `s = 0..k`, and channel
  order within a slot);
- then a **column token**, which is flagged `last` on the stripe's final
  column.

### Padding

Padding costs nothing. A padded row or column simply has no pixels, and only
the coordinates carry the offset.

### The row FSMs

The IDP manager keeps one row FSM per stripe row. Each FSM holds:

- a pointer to the next field of its row;
- the SM segment it is working through;
- its position.

At the start of a stripe it fetches each row's start pointer from the
**input tracker**, a table that the pixel memory fills as rows arrive. It
waits until a row is completely stored before reading it. The memory keeps
every row of the layer, so the rows shared between neighbouring stripes can
be read again.

### Taps issued per pixel

A pixel `(s, x', i)` reaches a controller. The controller issues one
multiply-accumulate per kernel tap that contributes to a valid output:

- output row `ro` in `{0, 1}`, with kernel row `ky = s - ro` in `0..k-1`;
- kernel column `kx` in `max(0, x'-Wo+1) .. min(k-1, x')`.

Taps that would land outside the output (at the left and right edges) are
skipped. The tap goes to accumulator `acc[ro][k-1-kx]`. The weight address
is `((i div v)*k + ky)*k + kx`, and this one address goes to every kernel
bank of the cluster at once.

### The accumulator window

Each MAC has `2 x 7` accumulators. They are a window over the output
columns `x'-k+1 .. x'`, for both output rows. Column 0 is the oldest.

A column token makes every MAC **shift**:

- column 0 leaves towards the PRE as a finished pair of output pixels;
- the other columns move one place left;
- column `k-1` is preset with the bias.

The first `k-1` shifts of a stripe only fill the window. They carry no result
(`emit` is low).

Results leave the MACs three clock edges after the column token was
accepted. The pixel allocator does not broadcast another column token while a
shift is in flight, or while the PRE is still busy with the previous column.
So the PRE never needs more than one column of buffering, which is the
`2 x M` entries the paper gives it.

## Clusters: fewer output maps than MACs

With `N_out = 128` every MAC computes one output map, and a single controller
drives all of them. With fewer output maps the MACs are grouped into
`v = 2^log2_clust` clusters of `128/v` MACs each:

- MAC `m` belongs to cluster `m div (128/v)` and computes output map
  `m mod (128/v)`;
- a pixel of input map `i` goes to the controller of cluster `i mod v`;
- the kernels are split the same way: weight `(o, i, ky, kx)` goes to bank
  `(i mod v)*(128/v) + o`, at address `((i div v)*k+ky)*k+kx`.

The controllers therefore work on different input maps in parallel. Only
cluster 0 adds the bias. The PRE adds the cluster partial sums together in
`log2(v)` halving steps: entry `j` gets entry `j + 64`, then `j + 32`, and so
on.

Clustering has a second use. A 512x3x3 kernel has 4608 weights and does not
fit one 2304-entry bank. With `v = 2` it is split over two banks. This is the
arrangement the deep VGG layers need.

## PRE: quantisation, ReLU, pooling, output order

For each column of results, the PRE:

1. reduces the clusters;
2. quantises each sum: 32-bit sum `>>> out_shift`, saturated to 16 bits;
3. merges it into the **output buffer** with a `max`.

The output buffer starts at 0 when ReLU is on, which gives ReLU for free. It
starts at -32768 when ReLU is off.

With pooling on:

- both rows of a column go into the same buffer entry;
- the buffer is encoded after every second column;
- an odd last column or output row is dropped (floor pooling).

With pooling off, each column is encoded twice: row 0, then row 1. The
encoded output rows therefore come out **interleaved column by column**. Row
`2r` of the output is the concatenation of the "row 0" records of stripe
`r`, and row `2r+1` is that of the "row 1" records. The records are padded to
a word at the end of each output row.

### The encoder

The encoder works on 16 buffer entries at a time:

- in the first cycle it sends the SM segment and the first non-zero value;
- after that it sends two values per cycle.

Fields are packed continuously into 32-bit words. A row ends on a word
boundary, with a zero pad field if needed.

## Blocks and files

| file | block |
|------|-------|
| `rtl/nh_pkg.sv` | sizes, the layer-configuration struct, token and MAC-operation structs, helper functions |
| `rtl/nullhop_top.sv` | top: register file, IDP, CCM, PRE, encoder; the layer sequence (idle, kernel load, run, done) |
| `rtl/config_regs.sv` | configuration registers and START |
| `rtl/idp.sv` | input data processor: pixel memory, input tracker and IDP manager |
| `rtl/pixel_memory.sv` | 512 KB in two word-interleaved banks, write priority, row parser that reports row starts |
| `rtl/input_tracker.sv` | row start pointer table |
| `rtl/idp_manager.sv` | row FSMs that decode a stripe into pixel and column tokens |
| `rtl/ccm.sv` | compute core: allocator, controllers, kernel memory, 128 MACs |
| `rtl/pixel_allocator.sv` | routes pixels to controllers, broadcasts column tokens |
| `rtl/controller.sv` | turns a pixel into its kernel taps and shifts |
| `rtl/kernel_memory.sv` | 128 kernel banks, bias registers, the kernel loader |
| `rtl/mac.sv` | one MAC with its 2 x 7 accumulator window |
| `rtl/pre.sv` | partial-sum reduction, quantisation, ReLU, pooling, output buffer |
| `rtl/encoder.sv` | output compression into SM segments and values |
| `rtl/sram_sp.sv` | generic single-port synchronous SRAM (stands in for the SRAM macros) |

## Where this RTL departs from the paper, and what is missing

These are the points to weigh before trusting the design for performance
numbers.

- **Decode rate.** All row FSMs share a single read port. Each field (SM or
  value) takes two cycles, so the IDP delivers about one non-zero pixel every
  two cycles. The paper reads up to `k+1` pixels per cycle. Results are
  exact, but with small kernels the MACs wait on the IDP. With 3x3 and larger
  kernels and many output maps, the MACs are usually the bottleneck anyway:
  each pixel costs up to `2k` MAC cycles.
- **Pixel memory holds a whole layer input.** Rows are never overwritten.
  The paper implies that an input larger than the memory can be streamed
  through it; that is not built. An input that does not fit raises
  `overflow`.
- **Kernel bank size.** The block diagram gives 4.5 KB per bank, which
  matches 576 KB over 128 banks. Elsewhere the paper speaks of 8 KB (4k
  values) per MAC. This design uses 4.5 KB = 2304 weights.
- **Own choices where the paper is silent:** the pixel order within
  segments, word alignment of rows, the kernel load order and bias word, the
  register map, valid/ready handshakes, output quantisation by a right shift,
  the interleaved row order of unpooled output, floor pooling of odd sizes,
  and 32-bit wrap-around accumulation.
- **Cluster counts** are powers of two (1, 2, 4, 8). For other counts of
  output maps, choose the next smaller `v`.
- Passes over more than 128 output maps are run by the host, one START per
  pass.
- Not part of this RTL: the host processor, DRAM, the FPGA DMA/AXI glue, the
  camera, the pads and the foundry SRAM macros. The memories are plain arrays
  behind `sram_sp`.

## Which networks fit

The figures below are at the default sizes, with the pixel memory holding
one whole layer input.

**These fit in every layer, even with no zeros at all:**

- the face detector (2 layers);
- RoshamboNet (5 layers);
- Giga1Net (11 layers).

Their largest input is Giga1Net layer 2 (112x112x16), at 416 KB dense. All
kernels fit a bank with the cluster count that keeps the layer to one pass.

**VGG16 and VGG19 do not fit as built.** Their kernels fit: 512x3x3 needs
`v = 2`, which gives 64 maps per pass. But the 224x224x64 input of layer 2
is 6.5 MB dense. It would fit the 512 KB memory only with more than 98%
zeros, which is more sparsity than these layers have. Running them needs the
streaming mode listed above.

## Simulating

Every testbench is self-checking. Each ends by printing `TB_RESULT
checks=N failures=M`, and has a cycle watchdog. The randomised ones use
`$urandom`. To build and run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl rtl/nh_pkg.sv \
          tb/tb_nullhop_top.sv --top-module tb_nullhop_top
./obj_dir/Vtb_nullhop_top
```

`-y rtl` lets Verilator find each module in `rtl/<name>.sv`; only the
package has to be named. Swap in another testbench and its `--top-module`
to run a single block.

| testbench | what it checks |
|-----------|----------------|
| `tb_nullhop_top` | Four layers, end to end, at the default sizes: 3x3 / 5x5 / 1x1 / 7x7 kernels, 8 / 4 / 1 / 2 clusters, padding, ReLU on and off, pooling on and off, compressed and raw output, random gaps and back-pressure. Every output word is compared with a reference model. Each mechanism is counted, and one that never happens is a failure. About 1.3 s. |
| `tb_idp` | The decoded token stream against a reference walk of the stripes, with loading and decoding overlapping. |
| `tb_idp_manager` | The row FSMs alone, against modelled memories with random grant refusals and slowly arriving rows. |
| `tb_pixel_memory`, `tb_input_tracker` | Storage, write-priority arbitration, row-start reporting and the row count. The overflow flag is not exercised by any testbench. |
| `tb_kernel_memory` | Bank/address placement for all cluster counts, and the exact load cycle count (one weight per cycle). |
| `tb_pixel_allocator`, `tb_controller`, `tb_mac` | Routing, the tap set and cycle count per pixel, accumulation and shifting. |
| `tb_ccm` | The compute core at 16 MACs: cluster-summed partial sums against a direct convolution. |
| `tb_pre`, `tb_encoder` | Reduction, quantisation, ReLU, pooling, and the exact output word format. |
| `tb_workloads` | Both face-detector layers and RoshamboNet layers 2-5, with their published shapes and random data, end to end at the default sizes. |
| `tb_config_regs` | The register map and the START pulse. |

The testbenches print the cycle count of each layer. For small images that
count is mostly kernel loading, which writes one weight per cycle, because
consecutive weights of an output map go to the same single-port bank. The
7x7 layer of `tb_nullhop_top`, with 17 input and 64 output maps, needs 53k
cycles of its 61k just to load the kernels. RoshamboNet layer 4 in
`tb_workloads` needs 74k of its 82k. The paper gives no figure for the
loading time.
