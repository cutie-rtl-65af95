# A fully unrolled ternary CNN inference core

This is synthesizable SystemVerilog for an inference core for convolutional
networks whose weights and activations are ternary, i.e. each value is
-1, 0 or +1. It follows the CUTIE architecture (Scherer et al., "CUTIE: Beyond
PetaOp/s/W Ternary DNN Inference Acceleration with Better-than-Binary Energy
Efficiency").

The central idea is to spend logic instead of data movement. The convolution is
not decomposed over time. The core has one output channel compute unit (OCU)
for each output channel. Each OCU holds the whole K x K x N_I kernel of its
channel and multiplies it with a complete activation window in one
combinational step. Every cycle, one window of the input feature map is
broadcast to all OCUs, and one complete output pixel (all N_O channels) comes
out of the pipeline. There are no partial sums, so no partial sums are stored.
Pooling and the activation function are fused into the OCU. The result goes
straight back into on-chip feature map memory as ternary values. A whole
network of up to L layers is queued on chip and runs without the host.

The default build is the main 22 nm configuration: 3x3 kernels, 128 input and
128 output channels, feature maps up to 32x32 pixels and up to 8 layers.

## Default dimensions

| parameter | default | meaning |
|---|---|---|
| `K` | 3 | largest kernel side (odd); smaller odd kernels are supported |
| `NI`, `NO` | 128, 128 | largest input / output channel count (must be equal) |
| `P` | 2 | pipeline stages of OCUs, `NO/P` = 64 OCUs per stage |
| `IW`, `IH` | 32, 32 | largest feature map size |
| `L` | 8 | layers in the instruction queue, threshold queues and weight memories |
| `WS` | 2 | memory words per pixel (must equal `P`) |

These figures follow from the parameters:

- A memory word is `NO/P` = 64 trits. It is stored compressed as 13 bytes (104 bits).
- A pixel is 2 words, or 208 bits.
- One window is `K*K*NI` = 1152 trits, 2304 bits in the datapath.
- Each feature map buffer has `K*P` = 6 banks of 342 words.
- Each OCU's weight memory bank holds `L*1152/64` = 144 words, for 1.89 Mbit in all.
- Each OCU's double weight buffer holds 2 x 1152 trits.

## Representation of ternary values

**Datapath.** A trit is two bits in two's complement: `00` = 0, `01` = +1,
`11` = -1. A vector of trits keeps trit i in bits `[2i+1:2i]`.

**Memory.** Both feature map memory and weight memory store five trits per
byte, which costs 1.6 bits per trit instead of 2. The code is the base-3
number of the five digits `(t_i + 1)`, with trit 0 as the least significant
digit:

    byte = sum_{i=0..4} (t_i + 1) * 3^i        (0 .. 242)

The paper takes its 5-in-8 code from other work and does not print it. This
code is a stand-in. Any bijection would work, because the compression sits
only at the memory boundary (`trit_compress`, `trit_decompress`). The package
functions `compress5` / `decompress5` hold the code. A 64-trit word uses 13
bytes; the unused fifth position of the last byte holds a zero trit.

**Products.** A product is encoded as +1 -> `10`, -1 -> `01`, 0 -> `00`. The
dot product is then popcount(MSBs) - popcount(LSBs). `ocu_tmac` builds this
from 1152 two-gate multipliers, two 1152-input population counts (11 bits
each) and a 12-bit subtractor, all combinational.

## Feature map memory: K pixels per cycle from single-port banks

The tile buffer needs K horizontally adjacent pixels per read. Pixels are
stored in raster order, address n = y*in_w + x, with all channels of a pixel
together. To make any K consecutive pixels readable in one cycle, pixel n goes
into bank group `n mod K`, at row `n / K`. The K pixels n .. n+K-1 then fall
into K different groups, and their rows differ by at most one.

Each group has P banks, one per 64-channel word of the pixel. The result is
K*P banks per buffer. There are two buffers: one is read as the input of the
running layer while the other receives its output. The controller swaps them
after every layer. The read is registered: data arrives one cycle after the
address.

There are two writers:

- the core's write-back, one full pixel at a time with per-word enables;
- the host, one word at a time.

The write-back has priority. The host sees `fm_ready_o` low in a cycle when
the core writes.

## Tile buffer: windows from K stored lines

The tile buffer keeps K image lines of decompressed pixels; line r lives in
slot `r mod K`. It schedules windows by their centre pixel:

- With padding, the first centre is the top-left pixel, and positions outside
  the image are read as zero.
- Without padding, the first centre is `((k-1)/2, (k-1)/2)`, so every window
  lies inside the image.
- Centres advance by `stride_x` and `stride_y`, each independently 1 to 3.
- A kernel smaller than K uses the middle of the K x K window, and the tile
  buffer masks the outer positions to zero.

Each line is loaded with `ceil(in_w / K)` reads of K pixels. While one row of
windows is being released, one window per cycle, the tile buffer already
reads the lines that the next row needs. They go into the slots of lines
that the next row no longer uses. Such a slot may still be in use by the
current row. In that case, a column of it is overwritten only once every
remaining window of the row lies to the right of that column. A read lands
two cycles after it is issued, so the rule keeps a margin.

The paper does not spell out this replacement rule. It comes from this
design, and it keeps the store at exactly K lines. A layer stalls only in
two places:

- for the lines its first window row needs;
- for three cycles between window rows.

The eight convolution layers below release 3728 windows in 4530 cycles,
including weight loading and layer switches.

With fused pooling, the tile buffer visits output pixels in raster order and
tags each window with its place in the pooling window:

- `first_row`, `first_col`, `last_row`, `last_col` (pooling windows are
  non-overlapping, with stride = size);
- the address of the pooled output pixel.

It does not release windows that would only feed an incomplete pooling window
at the right or bottom edge, which matches floor-mode pooling. `done_o` pulses
after the last window.

## OCU pipeline and stage silencing

The window passes through P stages. Each stage has a register that feeds its
64 OCUs and the next stage. A stage whose OCUs are all beyond the layer's
`out_ch` does not load its register. Its OCUs then see constant inputs and do
not toggle. This stands in for the paper's clock gating of unused stages.

Timing, counted from the cycle a window leaves the tile buffer (cycle T):

- stage s holds the window in cycle T+1+s;
- stage s's OCU results are registered in cycle T+2+s;
- stage s's results are delayed by P-1-s more registers, so all 128 trits of
  the pixel appear together in cycle T+P+1;
- they are compressed and written to the output buffer at the address that
  travelled with the window.

The P-1 alignment registers cost the most: 64 trits per stage per cycle of
delay. In exchange, every output pixel is written in one memory cycle as one
208-bit word group, and the feature map write port needs no read-modify-write.

## Inside an OCU

`ocu` = `weight_buffer` -> `ocu_tmac` -> `pooling_unit` -> `threshold_unit`,
followed by one output register. Without pooling, a result is ready one cycle
after its window reaches the OCU.

- **Weight buffer.** This is a double buffer of two 1152-trit kernels. One
  buffer feeds the multipliers while the other is loaded with the next
  layer's kernel, one decompressed 64-trit word per cycle.
- **Pooling unit.** It has a register, a FIFO and an add/max ALU, with a
  16-bit datapath. Within one row of a pooling window, the running value stays
  in the register. At the end of a pooling window's row, the partial value is
  pushed into the FIFO. At the start of the next row of the same pooling
  window, it is popped again. The FIFO therefore holds one entry per pooling
  window of an output row (16 at the default size). Max pooling keeps the
  maximum. Average pooling keeps the sum, and the thresholds are scaled
  offline by the window area. The unit marks a result valid only at the last
  pixel of each pooling window.
- **Threshold unit.** It holds a queue of L `{high, low}` 16-bit threshold
  pairs, one per layer. The output is +1 if value > high, -1 if value < low,
  and 0 otherwise. Batch normalisation, bias and the Hardtanh activation all
  fold into these two numbers.

## Layer queue, weight loading and the controller

The host writes three things before starting:

- layer instructions, one `cutie_pkg::layer_cfg_t` each: input width and
  height, kernel side, strides, padding flag, pooling enable / type / size,
  and output channels in use;
- threshold pairs;
- compressed kernels.

The layer and threshold queues are read without being emptied (`replay_fifo`).
Each start rewinds them, so a loaded network can run on any number of input
frames. `queue_clear_i` empties them.

After `start_i`, `cutie_ctrl` works as follows:

1. It copies layer 0's kernels from the weight memories into weight buffer 0
   of every OCU. This takes 18 words, all OCUs in parallel.
2. It starts the tile buffer on layer 0. In the same cycle it begins copying
   layer 1's kernels into the other weight buffer.
3. When the tile buffer is done, it waits P+2 cycles for the pipeline to
   drain. It then swaps the feature map buffers and the weight buffers and
   steps both queues. It then starts the next layer, again preloading the one
   after it.
4. After the last layer it raises `eoi_o`, which stays high until the next
   start. `out_buf_o` names the buffer that holds the result.

Layer l's kernel for OCU o occupies words `l*18 .. l*18+17` of weight memory
bank o. The trit order in a kernel is `((ky*K)+kx)*NI + ci`. Input channels a
layer does not use must have zero weights. The input feature map goes into
buffer 0.

## Using and simulating the RTL

Every module is in `rtl/<name>.sv`, and shared types are in
`rtl/cutie_pkg.sv`. The top is `cutie_top`. Each block has a self-checking
testbench in `tb/`, which prints `TB_RESULT checks=<n> failures=<n>`. For
example:

    verilator --binary --timing --assert -y rtl -y tb +libext+.sv -Irtl -Itb \
        rtl/cutie_pkg.sv tb/cutie_ref_pkg.sv tb/tb_cutie_full.sv \
        --top-module tb_cutie_full -o sim && obj_dir/sim

`tb/cutie_ref_pkg.sv` is the golden model. It implements padding, strides,
small kernels, max and sum pooling and thresholding directly on integer
arrays, plus the 5-in-8 code.

`tb/cutie_tb_body.svh` is shared by the two end-to-end benches. It programs
the core through its host ports, writes an input, runs it, reads back every
output pixel and compares it. It also checks that the number of released
windows is right, and counts each mechanism.

The end-to-end benches:

- **`tb_cutie_top`** runs a reduced core (8 channels, 8x8 pixels, 4 layers).
  It exercises and counts every mechanism and fails if one never occurs:
  - padded and unpadded layers;
  - strides;
  - a 1x1 kernel;
  - max and sum pooling;
  - a silenced stage;
  - weight preloading during execution;
  - buffer swaps;
  - replaying the queue for a second frame;
  - clearing and reloading it.
- **`tb_cutie_full`** uses the default parameters. It runs the eight
  convolution layers of the CIFAR-10 network below with random kernels and
  thresholds. It takes 4530 cycles and about one minute of simulation.

## What fits

The CIFAR-10 network used to evaluate the architecture has eight fused
convolution layers (3x3, padding 1) and a final 128 -> 10 dense layer:

| layers | input | channels | fused pooling |
|---|---|---|---|
| 1 | 32x32 | 126 -> 128 | none |
| 2 | 32x32 | 128 -> 128 | the second: 2x2 max |
| 2 | 16x16 | 128 -> 128 | the second: 2x2 max |
| 2 | 8x8 | 128 -> 128 | the second: 2x2 max |
| 1 | 4x4 | 128 -> 128 | 4x4 average |
| dense | 1x1 | 128 -> 10 | none |

- The eight convolution layers fit the default core exactly. They need 8
  queue entries (L = 8) and 8 x 18 = 144 weight words per OCU (the bank
  depth).
- The dense layer needs a ninth entry. It runs as a 1x1 convolution on the
  1x1x128 result after the queue and weights are reloaded. Its output is
  ternary.
- Frames larger than 32x32, such as 64x64 or 96x96, need host-side tiling
  through external memory. The core has no DRAM interface.

## Where this RTL departs from the paper, and how far to trust it

- **Layer switch.** The paper describes the switch from one layer to the next
  as taking a single cycle once weights are preloaded. Here the controller
  waits for the pipeline to drain, P+2 cycles, before switching.
- **First layer start.** The tile buffer starts only once the first layer's
  kernels are in the weight buffers. The paper's schedule overlaps the first
  feature map loading with this weight load. The difference costs 18 cycles
  per inference.
- **Window rate.** The paper implies one window per cycle. Here three cycles
  are lost between window rows, and the first lines of each layer are loaded
  before its first window.
- **Storage cells and clock gating.** The paper builds its memories and
  buffers from latches (standard-cell memories) and SRAM, with clock gating
  down to single words. Here they are plain flip-flop arrays with enables. A
  silenced stage holds its register instead of having its clock gated.
- **Compression code.** The 5-in-8 code is this design's own (see above).
- **Interfaces.** The host interface (strobes, widths, the `fm_ready_o`
  arbitration) and the layer instruction format are this design's own. The
  paper only names a layer queue and read/write access to the memories.
- **Threshold halves.** Which half of the 32-bit threshold word is the low
  threshold is this design's choice: `[15:0]` is low, `[31:16]` is high.
- **Parameter restrictions.** `NI == NO` and `WS == P` are required, as in
  the 2-stage, 2-words-per-pixel configuration described here.
- **Not built.** The ternary thermometer input encoding is a pre-processing
  step and is not built. There is no host processor, and there is no tiling
  across external memory.

Every block passes its testbench, and each testbench fails when a single
deliberate fault is put into its block. The full-size core passes lint with
Verilator and elaboration with slang.

Verilator reports only unused-signal warnings. These are status outputs of
sub-blocks that the top does not need, and each module's opening comment
explains its warnings. Yosys' coarse synthesis of the complete 128-OCU core
does not finish in ten minutes, so this README gives no cell counts for the
full core.
