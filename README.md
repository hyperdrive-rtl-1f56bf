# Hyperdrive: binary-weight CNN inference with feature maps kept on chip

In a CNN accelerator with binary weights, the weights stop being the costly
data: a 3x3 filter tap is a single bit. What remains expensive is moving
feature maps (FMs) in and out of the chip. Hyperdrive turns the usual
arrangement around. The whole FM of the widest layer stays on the chip, in
16-bit floating point (FP16). Only the binary weights stream in, one C-bit
word per cycle.

A chip covers an image of limited size. Several chips can be tiled into a 2D
mesh, each holding one rectangle of the FM. Neighbouring chips then swap only
the one-pixel border their 3x3 convolutions need. The weight stream is
broadcast to every chip.

This repository holds synthesizable SystemVerilog for one chip, plus
testbenches for each block and for a 2 x 2 mesh of chips.

## Chip organisation

The default size is C x M x N = 16 x 7 x 7 Tile Processing Units (TPUs).

- **Spatial tiles.** The chip's part of the FM is cut into M x N tiles, one
  rectangle of ht x wt pixels each.
- **TPUs.** Each tile has C TPUs (`tile_pu`). TPU c of tile (m, n)
  accumulates output channel c of the current block of C channels, for the
  tile's current output position. A TPU is an FP16 adder/subtractor, an
  accumulator register and a ReLU. The weight bit is the add/subtract
  select: 1 means +x and 0 means −x.
- **Shared multiplier.** The C TPUs of a tile share one FP16 multiplier for
  the batch-norm scale (`tpu_group`). That makes 49 multipliers per chip.
- **Feature Map Memory (FMM).** There is one bank of 8192 FP16 words per
  tile, 401,408 words (6.4 Mbit) in all. It is built from `fmm_block`s, each
  holding 8 single-port SRAM macros of 1024 lines x 7 words (`sram_sp`). One
  block serves a row of tiles; word n of a line belongs to tile column n.
  All tiles are read at the same address in the same cycle.
- **Weight buffer** (`weight_buffer`). It holds 5120 C-bit words. That is
  every (tap, input channel) weight word of the current output-channel block,
  for up to 512 input channels of a 3x3 layer.
- **Data Distribution Unit** (`ddu`, one per tile). A 3x3 tap at a tile's
  edge needs a pixel that lives somewhere else. The DDU picks the pixel for
  its tile from one of these sources:
  - its own bank;
  - the bank of an adjacent tile;
  - the border memory (a pixel of a neighbouring chip);
  - the corner memory (a pixel of a diagonal chip);
  - zero, where the mesh ends.
- **Border memory** (`border_memory`). Four SRAMs of 1024 x 7 words: top,
  bottom, left and right. Each acts as an extra row or column of tiles around
  the chip. One read returns a line from all four, so the DDUs of a whole
  tile row or column are served in one cycle.
- **Corner memory** (`corner_memory`). 4 x 1024 words, holding the single
  pixel each diagonal neighbour contributes.
- **Border interface** (`border_interface`). It sends this chip's edge
  results to its neighbours and receives theirs (see below).
- **I/O interface** (`io_interface`). It loads an FM, or a border region,
  from a 16-bit data stream, and streams FMs out.
- **Controller** (`controller`). It runs the commands and sequences a layer.

`hyperdrive_top` wires these blocks into one chip. Its ports are:

- a command port (`cmd_t`);
- the weight stream;
- the data-in and data-out streams (all valid/ready);
- `chip_type_i`;
- one 5-bit outgoing link and four 5-bit incoming links.

`chip_type_i` is one of the nine mesh positions NW, N, NE, W, C, E, SW, S
and SE, or `CHIP_SINGLE` for a chip used alone. It tells the chip which
neighbours exist.

## How a layer runs

A layer is one 1x1 or 3x3 convolution, with stride 1 or 2. It can add
optional batch-norm scaling, an optional bypass (residual) input, an optional
bias and an optional ReLU. The controller runs these loops:

```
for each block of C output channels:
    take C scale words (if batch-norm) and C bias words (if bias) from the weight stream
    for each output position (y, x) of a tile, raster order:
        for each filter tap t (outer), for each input channel ci (inner):   1 cycle
            all M*N tiles read input pixel (ci, s*y+dy, s*x+dx) through their DDU
            all C*M*N TPUs: acc += w[c][t][ci] ? x : -x
        scale:  C cycles, channel c = acc_c * scale_c on the tile's multiplier
        bypass: C cycles, channel c += bypass FM word (read from FMM)
        bias:   C cycles, channel c += bias_c, ReLU, write to FMM (all tiles)
        2 idle cycles
    wait until the border exchange with all neighbours is complete
```

**Convolution rate.** During convolution the chip does 2·C·M·N = 1568
operations per cycle. The testbenches check this exactly: a layer takes

    blocks x output positions x taps x input channels

convolution cycles. The per-position overhead is C cycles each for scale and
bypass when they are enabled, C cycles for bias and write-back (always), and
about 4 more cycles. That overhead is small for real layer
widths. For example, a 3x3 layer with 256 input channels has 2304
convolution cycles per position, against 48 + 4 overhead cycles.

**Weight re-use.** The weights of a block come from the stream only during
the first output position, and are written into the weight buffer as they
pass. All other positions re-read them from the buffer. The stream therefore
carries each weight bit once per layer. The controller stalls while the
stream has no word ready.

**Order of the per-channel steps.** The steps run in the order scale, then
bypass, then bias and write-back. The bypass word is read from the same
address layout as the output. Every write therefore lands on a free cycle of
the single-port FMM.

**Pipeline.** There are three stages:

1. memory reads are issued (FMM, weight buffer, border and corner memory);
2. the DDUs select the data and the TPUs operate;
3. the result of the channel selected by `out_sel` is written back.

The controller stalls in three cases:

- the weight stream is empty during a block's first output position;
- a border or corner read would collide with a write of received pixels;
- an edge position is about to be written back while the border queues
  are not yet empty.

### Memory layout and command formats

- **FMM.** Word (channel c, tile pixel y, x) of an FM is at
  `base + c*ht*wt + y*wt + x` in every tile's bank. `ht` and `wt` are the
  tile's height and width for that FM.
- **Weight buffer.** The address is `tap*n_in + ci`. Bit c of the word is
  the weight of output channel `block*C + c`.
- **Weight stream.** For each output-channel block it carries, in this
  order:
  - C scale words, if batch-norm is on;
  - C bias words, if bias is on;
  - `taps * n_in` weight words, with the tap as the outer loop.
- **Layer command** (`layer_cfg_t`). It gives:
  - kernel 1x1 or 3x3, and stride;
  - input and output channel counts (output a multiple of C);
  - the input tile size;
  - three FMM base addresses: input, output and bypass;
  - the enables for scale, bypass, bias and ReLU;
  - the border-memory half that holds the input's borders.
- **Strided layers.** Output position (y, x) reads input (2y+dy, 2x+dx). The
  output is half the size in each direction.
- **Load and read-out** (`io_cfg_t`). The data stream carries channel by
  channel. Within a channel it goes row by row over the chip's whole FM
  (global row `m*ht+y`, global column `n*wt+x`). A border load writes
  `count` words into one border or corner region, in the order the border
  interface uses. A host uses it to supply the borders of the first layer's
  input in a mesh.

## The multi-chip mesh: border exchange

This is the most intricate part of the design.

**What is sent.** Each chip computes the border pixels its neighbours need as
a normal part of its own output. When the controller writes back an output
position on the chip's edge, the border interface queues the edge line for
that neighbour. An edge line is the N or M values of the edge tiles for that
channel. There is one queue per side, each holding C lines, i.e. 112 pixels
at the default size.

**The link.** A chip has one outgoing link, which all four neighbours see. It
has 4 data bits and a valid bit. Each pixel goes out as 5 nibbles: a tag
nibble, then the FP16 value, most significant nibble first. The tag says
which neighbour the pixel is for. The queues take turns, round robin.

**Corner pixels.** There are no diagonal links. A chip sends its corner pixel
to its vertical neighbour with a "forward west" or "forward east" tag. That
chip stores it as an ordinary border pixel and re-sends it sideways as a
corner pixel, using a small forward FIFO.

**Receiving.** Four deserialisers rebuild the packets. A packet's tag and the
link it arrived on give the region: top, bottom, left, right, or one of the
four corners. Its address comes from a counter per region. This works
because a neighbour emits its edge pixels in the order it computes them:
channel block, then position along the edge, then channel. The receiver's
line number is therefore

    line = ((ch / C) * edge_length + pos) * C + ch % C

That is exactly the formula the controller uses when it reads the border
memory (`hd_pkg::bm_line`). Received pixels enter the memories through a
one-write-per-cycle arbiter. A link delivers at most one pixel every 5
cycles, so the arbiter never falls behind.

**Waiting flags.** When a chip writes back an edge position, its opposite
neighbour writes the mirror position at the same time. So the chip adds to
the matching region's counter the number of pixels it now expects from that
neighbour. Each pixel received subtracts one. A layer is finished (`sync`)
when every counter is zero and nothing is left to send or forward.

**Two halves.** The border and corner memories are each split into two
halves. Layer L reads its input borders from one half. Meanwhile the
neighbours' borders of layer L's output arrive in the other half. The next
layer swaps the halves.

**Mesh-level rule.** A layer command must reach all chips of a mesh together,
once every chip has reported `done_o`. The address counters are cleared at
the start of a layer. A chip that started its next layer early could
otherwise send pixels before its neighbour has cleared its counters.

## Number format

The FMs, scale and bias use IEEE-754 binary16 with round-to-nearest-even.
Subnormal inputs count as zero and results below the normal range are
flushed to zero. This keeps the adder and multiplier small. Overflow gives
infinity. Any NaN result is the single value 0x7E00.

All results depend on the order of operations. That order is fixed: taps
outer, input channels inner, starting from zero, then scale, bypass and
bias. The testbenches' reference models therefore compare bit-exactly.

## Where this RTL departs from the paper, and what is not built

**Storage and timing choices**

- **Weight buffer storage.** The weight buffer is a flip-flop array with a
  registered read, not a latch array. Its size and organisation (5120 x 16
  bit) are the paper's.
- **SRAM macros.** `sram_sp` is the behavioural array a memory compiler's
  macro would replace.
- **Arithmetic.** The FP16 units are combinational, one operation per cycle.
  The paper does not give their pipelining.

**Formats this design defines itself.** The paper does not give any of the
following:

- the command format;
- the weight-stream order of scale and bias words;
- the FMM address layout;
- the link packet format and tag codes;
- the per-side queues;
- the counter-based waiting flags;
- the two idle cycles per output position.

**Workloads the controller does not handle.**

- Channels are not split into several passes. A layer with more than 512
  input channels does not fit the weight buffer. This affects the 1x1
  layers of ResNet-50/152 and the wide layers of YOLOv3. An assertion
  reports it.
- Grouped and depth-wise convolution and channel shuffle (ShuffleNet) are
  not supported. Only dense 1x1 and 3x3 layers are.
- A strided bypass must be computed as a separate 1x1 strided layer, which
  is how the paper describes it.

**Capacity at the default size**

| Workload | Fits one chip? |
|---|---|
| ResNet-18 / ResNet-34 at 224x224 | Yes. The worst-case layer needs exactly the 401,408 words of the FMM. |
| ResNet-34 at 2048x1024, 10x5 mesh | Yes. About 334 k words per chip. |
| ResNet-50 / ResNet-152 at 224x224 | No. About 1.2 M words. |
| YOLOv2 at 448x448 | No. About 3.2 M words. |

**Not built.** The pads and I/O drivers, and the body-bias supply. They have
no logic function.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>`.

| Testbench | What it checks |
|---|---|
| `tb_fp16_add`, `tb_fp16_mul` | Random and corner-case operands against a real-number reference, `fp16_ref_pkg`. |
| `tb_tile_pu`, `tb_tpu_group` | Operation sequences against a software model. |
| `tb_sram_sp`, `tb_fmm_block`, `tb_weight_buffer`, `tb_border_memory`, `tb_corner_memory` | Random reads and writes against array models. |
| `tb_ddu` | A 7x7 array of DDUs for every offset and every set of neighbours, against a 9x9 grid holding the tiles plus a ring of neighbour pixels. |
| `tb_io_interface` | Load, read-out and border load against a bank model, plus the transfer rates. |
| `tb_border_interface` | Four border interfaces wired as a 2x2 mesh. Order, addresses, corner forwarding and sync. |
| `tb_controller` | Cycle counts, operation order, write-back addresses and timing, weight consumption, and stalls. |
| `tb_hyperdrive_top` | Four chips (2x2 tiles of 4 TPUs each) in a 2x2 mesh. It loads a 16x16 FM and its borders, then runs four layers: 3x3 with scale, bias and ReLU; 3x3 with bypass; 3x3 stride 2; and 1x1 stride 2. Outputs are compared bit-exactly with a reference model of the whole mesh. It also counts every mechanism and fails if one never happened. |
| `tb_hyperdrive_full` | One chip at full default size, stand-alone. A 3x3 layer 16→32 channels and a 1x1 stride-2 layer 32→16, bit-exact, at 1568 Op/cycle. |

The mechanisms `tb_hyperdrive_top` counts are:

- weight-stream stalls;
- zero padding;
- reads from a neighbour tile;
- border-memory reads and corner-memory reads;
- scale and bypass steps;
- ReLU clipping;
- strided layers;
- received border pixels;
- forwarded corner pixels;
- waits for queue room;
- border loads;
- border read/write collisions.

To run one, with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/hd_pkg.sv tb/fp16_ref_pkg.sv rtl/*.sv \
          tb/tb_hyperdrive_top.sv --top-module tb_hyperdrive_top -o sim && obj_dir/sim
```

The testbenches use only two-state simulation and `$urandom`.

**Lint warnings that stand:**

- `pad` and `ext` of the DDUs and the per-TPU accumulator outputs are
  unused at the top. They serve as observation points.
- Some package constants are unused.
- `rst_ni` is used both as an asynchronous reset and in the `disable iff`
  of assertions.
