# A fused-layer CNN accelerator core for real-time object detection

This is synthesizable SystemVerilog for the core of an object-detection
accelerator. It follows the architecture published as *"A Real Time 1280x720
Object Detection Chip With 585MB/s Memory Traffic"*. The main problem in such
chips is DRAM traffic, not arithmetic. A YOLO-style network produces
intermediate feature maps far larger than its input. If every layer writes its
output off chip and reads it back, the memory bus runs out long before the
multipliers do.

The design avoids that by **running several consecutive layers, a fusion
group, on one tile without leaving the chip**:

* A 384 KB *unified buffer* is split into two 192 KB halves.
* One half holds the current layer's input and the other receives its output.
* After each layer the two halves swap roles.
* Only the group's input tile and its final output ever cross the chip
  boundary.

A tile spans the full width of the feature map and a band of rows. Tiles do
not overlap: rows outside the tile read as zero.

Three further ideas make this work:

* **A 768-MAC array built from 32x3 blocks.** Each block convolves one
  32-pixel column with one column of a 3x3 kernel. Products are summed along
  diagonals.
* **A pipelined accumulator.** It combines kernel columns, input-channel
  groups and the eight blocks.
* **A transposed write path.** It uses the SRAM byte-write mask. Each output
  lands directly in the layout the next layer reads, so no reordering pass is
  needed.

At 300 MHz the array peaks at 768 x 2 x 300 M = 460.8 GOPS. Features and
weights are 8-bit; accumulation is 24-bit.

## Datapath

```
 AXI4-Stream in (64 b) ──► axis_interface ──► config_register, weight_sram, bn_register,
                                    │         unified_buffer host port
                                    ▼
 unified_buffer ── input half, 96 banks x 64 b ──► pe_feeder ──► pe_array (8 x pe_block)
   (2 x 96 x 2 KB)                                    ▲          256 x 24 b sums + carries
        ▲                      weight_sram 3 x 64 b ──┘                 │
        │                                                               ▼
        │                                                    pipelined_accumulator
        │                                                        32 x 24 b
        │                                                               ▼
        └── output half ◄── transposed_addressing ◄── bn_act (+ bn_register)
             byte-masked       (+ max_pool)           32 x 8 b
 controller: loop counters, addresses, pass flags, half swap
```

Off-chip DRAM, the DMA engine and the host processor are outside the core. They
reach it only through the two 64-bit AXI4-Stream ports of `dla_top`.

Pipeline latency of one pass is as follows:

| Stage | Cycles |
|---|---|
| SRAM read | 1 |
| PE register | 1 |
| Accumulator | 2 |
| BN/activation register | 1 |
| Transposed write | 2 |

The array accepts one pass per cycle.

## How a 3x3 convolution maps onto a 32x3 block

A `pe_block` works on one column of feature pixels and one column of a kernel:

* 32 vertically adjacent pixels `x[0..31]` of one channel are broadcast
  across the rows.
* The three weights `w[0..2]` of one kernel column are broadcast down the
  columns.
* Each of the 96 multipliers forms `x[i]*w[j]`.
* Output row `r` adds the three products on one diagonal:

```
sum[r] = x[r-2]*w[0] + x[r-1]*w[1] + x[r]*w[2]          (terms with index < 0 absent)
```

This is a 3-tap vertical convolution. A full 3x3 kernel takes three passes,
one per kernel column (`kx = 0,1,2`), each reading the feature column
`x + kx - 1`.

The accumulator adds the three passes.

* **Stripes.** The column is processed in 32-row stripes. Stripe `s` reads
  input rows `32s+1 .. 32s+32`. Output row `r` of the stripe is then centred
  on input row `32s+r`.
* **Carries.** Rows 0 and 1 lack their top terms. Those terms sit in the
  previous stripe. Each block therefore also outputs two *carry* sums:
  `x[30]*w[0] + x[31]*w[1]` and `x[31]*w[0]`. The accumulator keeps them in
  a small register per block. It adds them into rows 0 and 1 of the next
  stripe.
* **Priming stripe.** Stripe −1 exists only to produce the carries for
  stripe 0. It writes nothing.

A column of height `H` therefore costs `ceil(H/32)+1` stripe passes per kernel
column.

Eight `pe_block`s make the `pe_array`. In a pass, block `b` handles input
channel `8g+b` of channel group `g`. The accumulator proceeds in three steps:

1. Per-block adders sum the three kernel columns.
2. A tree adder sums the eight blocks.
3. A final adder sums the channel groups.

The result is one output channel for 32 pixels.

Loop order, outer to inner:

```
3x3 convolution   : out channel, column x, stripe s = -1..S-1, group g, kx = 0..2
1x1 convolution   : out channel, column x, stripe s =  0..S-1, group g        (one tap)
3x3 depthwise     : group g,     column x, stripe s = -1..S-1, kx = 0..2
```

Here `S = ceil(H/32)`.

* **1x1 layers.** A 1x1 layer uses only tap 2. That tap reads the centre row,
  so no carries arise. The per-block weight comes from one of the three weight
  banks.
* **Depthwise layers.** Each block is its own output channel, so the tree adder
  is bypassed. The eight block results are latched and sent to BN one per cycle
  over eight cycles. The controller leaves a gap after every depthwise output
  for that drain.

## Unified buffer layout and transposed writes

Each half has 96 banks of 256 x 64-bit words (2 KB per bank). A word holds
**eight channels of one pixel**, one byte each. Pixel `(y, x)` of channel group
`g` is stored in

```
bank = y mod 96,   word = (y div 96) * W * G + x * G + g          (G = ceil(C/8))
```

Any 32 consecutive rows sit in 32 different banks. So one access, with
per-bank addresses, returns the whole 32-pixel column of a channel group. The
`pe_feeder` rotates the 96-bank read so that row 0 of the stripe reaches PE
row 0. It also zeroes rows that fall outside the tile.

The accumulator's output, however, is **one channel for 32 pixels**. That is
the transpose of the layout above. `transposed_addressing` writes the 32
values to the 32 banks of their rows, all at the same word address. The byte
mask enables only lane `ch mod 8`. After eight output channels, every word
holds its pixel's eight channels, ready for the next layer.

**Pooling.** With 2x2 max pooling the stripe's 32 rows become 16.

* Rows are paired inside `max_pool`.
* For the even column of a window the pooled value is written as is.
* For the odd column, the word written by the even column is read back through
  the output half's read port. The maximum of the two goes back to the same
  place.

The banks are therefore modelled with one read and one write port.

## Parameters and formats

| Item | Value | Source |
|---|---|---|
| PE array | 8 blocks x 32 x 3 MACs | published design |
| Unified buffer | 2 halves x 96 banks x 2 KB | published design |
| Weight SRAM | 3 banks x 32 KB, 3 x 64 b read | published design |
| BN register | 1 KB: 256 entries of {scale[15:0], bias[15:0]} | size published, format own |
| Precision | 8-bit data, 24-bit accumulation | published design |
| Fixed point | 4 fractional bits; ReLU6 clamps to 0..96 | own choice |
| Layer descriptors | up to 16 per group | own choice |

The BN/activation stage computes

```
y = sat8(((acc * scale) >>> shift) + bias),   then for ReLU6: clamp(y, 0, 96)
```

`shift` is the layer's 4-bit shift. Truncation and saturation are this
design's choices.

**Weight layout.** Each layer's weights start at its `wbase`.

* **3x3:** word `(co*G + g)*3 + kx` holds eight per-block weights in each bank.
  Bank `j` holds kernel row `j`.
* **Depthwise:** word `g*3 + kx`.
* **1x1:** index `i = co*G + g` is stored in bank `i mod 3` at word `i div 3`.

**Layer descriptor.** The `layer_cfg_t` descriptor in `dla_pkg` is 64 bits
wide. Its fields are:

* type (3x3 / depthwise / 1x1)
* pool and ReLU6 enables
* width and height
* input channel groups and output channels
* weight base and BN base
* shift

## Host protocol

The input stream carries commands. Each command is one header word
(`cmd_t`: `dest[4] bank[8] addr[16] count[16]`), followed for write
destinations by `count` data words. The destinations are:

| dest | meaning |
|---|---|
| 0 / 1 | write words into bank `bank` of the left / right buffer half |
| 2 | write weight bank `bank` |
| 3 | write BN register words (two entries each) |
| 4 | write layer descriptors, entry 16 = number of layers |
| 5 | start the group (no payload) |
| 6 / 7 | stream `count` words of the left / right half out, `tlast` on the last |

While the core runs, headers are refused. `busy` and `done` show progress. The
result of a group is in the left half after an even number of layers and in
the right half after an odd number.

## Departures from the published design and limits

* **Padding.** The published text allows constant boundary extension or zero
  padding at tile edges. It also says the top and bottom tile boundaries use
  boundary extension. This RTL uses zero padding on every edge.
* **Unsupported layers.** There is no hardware for residual additions,
  channel concatenation, the space-to-depth reorganisation, or stride-2
  convolution. The target network uses all of these. The published
  description does not say how the chip performs them, so a group here can
  contain only 3x3, depthwise 3x3 and 1x1 layers, each with optional 2x2
  pooling, BN and ReLU6.
* **Tile width.** The address map above gives each image row a single bank.
  A tile is therefore limited to `W * ceil(C/8) <= 256` per 96-row band:
  * 256 pixels wide with 8 channels;
  * 64 pixels wide with 32 channels.

  The published chip processes full 1280-pixel-wide rows, so its internal
  layout must differ. A wider tile needs a different bank map.
* **Depthwise throughput.** Depthwise layers issue 3 passes and then wait
  11 cycles for the eight-cycle output drain. They use the array at about a
  fifth of its rate.
* **Buffer ports.** The buffer banks are modelled as one-read/one-write
  arrays, and the weight SRAM likewise. Real macros would be substituted at
  synthesis.
* **Not included.** The off-chip DRAM, the DMA engine, the host processor and
  the system bus.

## Verification

Every block has a self-checking testbench in `tb/`. Each compares against a
reference computed in the testbench and prints
`TB_RESULT checks=N failures=M`.

| Testbench | What it checks |
|---|---|
| `tb_pe_block`, `tb_pe_array` | diagonal sums and carries on random data |
| `tb_pipelined_accumulator` | conv and depthwise pass sequences, carries, serialised output order |
| `tb_bn_act`, `tb_bn_register`, `tb_max_pool` | arithmetic against a reference model, saturation and clamp cases |
| `tb_transposed_addressing` | writes whole layers (plain and pooled) into a byte-masked buffer model and checks every byte |
| `tb_unified_buffer`, `tb_weight_sram`, `tb_config_register` | storage, role swap and masking |
| `tb_controller` | every issued address against a reference loop nest, for random layer groups |
| `tb_axis_interface` | command decode, write strobes, reads under back-pressure |
| `tb_dla_top` | the whole core, with no parameter overrides |

`tb_dla_top` loads a 6x100 tile with 16 channels over the stream and runs a
four-layer group:

1. 3x3 conv 16→8 with ReLU6
2. depthwise 3x3 with 2x2 pooling
3. 1x1 8→16
4. 1x1 16→8, linear

It reads the result back and compares every byte with a software model of the
same arithmetic. It also checks the pass count and the swap count, and that
each mechanism occurred:

* stripe carries
* rows wrapping past bank 95
* depthwise serialisation
* pooling read-back
* multi-group accumulation
* both clamp directions
* padding

A run takes about 2,000 busy cycles.

To run a testbench with plain Verilator:

```
verilator --binary -Wno-fatal --top-module tb_dla_top -y rtl rtl/dla_pkg.sv tb/tb_dla_top.sv
./obj_dir/Vtb_dla_top
```

Replace `tb_dla_top` with any other testbench name. The package must come
first; `-y rtl` finds the remaining modules.
