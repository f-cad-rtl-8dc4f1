# A layer-pipelined accelerator for a three-branch codec-avatar decoder

A codec-avatar decoder turns a small latent code into a 3D face in three
parts. Branch 1 produces the facial geometry, a [3,256,256] position map.
Branch 2 produces a [3,1024,1024] UV texture. Branch 3 produces a
[2,256,256] warp field. Branches 2 and 3 start from the same [7,8,8] input
and share their first five layers. Almost every layer has the same shape: a
3x3 convolution with an *untied* bias (one bias per output pixel, not one per
channel), then an activation, then a 2x up-sampling. Each branch doubles the
resolution at every layer, from 8x8 up to 256x256 or 1024x1024.

This RTL runs the whole decoder as a set of pipelines, one per branch, with
every pipeline stage dedicated to one layer. A stage starts on the first rows
of a frame while the stage in front of it is still producing later rows. All
15 layers, across all three branches, are in flight together. Each stage can
be given its own amount of parallelism so that the stages of a branch take
about the same time.

The design is in SystemVerilog under `rtl/`, with self-checking testbenches
under `tb/`. All of it simulates with plain Verilator.

## The decoder as mapped

| branch | stage | channels | input map | fused op | cpf | kpf | hp | MACs | compute cycles / image |
|---|---|---|---|---|---|---|---|---|---|
| 1 | 0 | 4->256 | 8x8 | CAU | 4 | 1 | 1 | 4 | 147,456 |
| 1 | 1 | 256->128 | 16x16 | CAU | 16 | 4 | 1 | 64 | 1,179,648 |
| 1 | 2 | 128->64 | 32x32 | CAU | 16 | 4 | 1 | 64 | 1,179,648 |
| 1 | 3 | 64->64 | 64x64 | CAU | 16 | 8 | 1 | 128 | 1,179,648 |
| 1 | 4 | 64->32 | 128x128 | CAU | 16 | 8 | 2 | 256 | 1,179,648 |
| 1 | 5 | 32->3 | 256x256 | C | 16 | 3 | 1 | 48 | 1,179,648 |
| 2 (shared) | 0 | 7->256 | 8x8 | CAU | 7 | 1 | 1 | 7 | 147,456 |
| 2 (shared) | 1 | 256->128 | 16x16 | CAU | 16 | 8 | 1 | 128 | 589,824 |
| 2 (shared) | 2 | 128->128 | 32x32 | CAU | 16 | 16 | 1 | 256 | 589,824 |
| 2 (shared) | 3 | 128->64 | 64x64 | CAU | 16 | 16 | 2 | 512 | 589,824 |
| 2 (shared) | 4 | 64->64 | 128x128 | CAU | 16 | 16 | 4 | 1024 | 589,824 |
| 2 | 5 | 64->16 | 256x256 | CAU | 16 | 16 | 4 | 1024 | 589,824 |
| 2 | 6 | 16->16 | 512x512 | CAU | 16 | 16 | 4 | 1024 | 589,824 |
| 2 | 7 | 16->3 | 1024x1024 | C | 16 | 3 | 16 | 768 | 589,824 |
| 3 | 0 | 64->2 | 256x256 | C | 16 | 2 | 4 | 128 | 589,824 |

"CAU" is a convolution with activation and 2x up-sampling fused behind it.
"C" is a convolution alone.

Some of this table is given by the published decoder and some is ours:

- **Given:** the branch structure, the end-point shapes, and the 16-channel
  layers at the end of branch 2.
- **Ours:**
  - the other channel counts;
  - the 3x3 kernels;
  - the parallel factors. The published design finds these by a design-space
    search and reports only per-branch DSP totals.

The table lives in `rtl/fcad_pkg.sv` as three packed arrays of `layer_cfg_t`
records. Index 0 is the first stage. The top module takes the arrays as
parameters, so another decoder, or another parallelism choice, needs no code
change.

The shared front end (stages 0 to 4 of branch 2) is built once and counted as
part of branch 2, the heavier of the two users. Its output goes to both stage
5 of branch 2 and the single stage of branch 3.

## Three-dimensional parallelism in one stage

A stage (`fcad_bau`, the basic architecture unit) computes one layer with
three independent parallel factors:

- **cpf**, channel parallelism. Every processing element (`fcad_pe`) does
  cpf 8-bit multiply-accumulates per cycle over cpf input channels, and
  accumulates over the K·K·IN_CH/cpf cycles of one output window.
- **kpf**, kernel parallelism. A compute engine (`fcad_engine`) holds kpf
  PEs. They all see the same cpf features, each with the weights of its own
  output channel.
- **hp**, H-partition. The stage holds hp engines, one per output row. Each
  engine computes one of hp consecutive output rows, at the same column and
  with the same weights.

A stage therefore needs exactly

    Lat = OUT_CH · IN_CH · H · W · K² / (cpf · kpf · hp)

compute cycles per image. The testbenches check this count cycle-exactly,
both on a single unit and on every unit of the full decoder.

The computation order within a stage is, from outermost to innermost:

1. group of hp output rows;
2. column x;
3. output-channel block kb;
4. kernel row ky;
5. kernel column kx;
6. input-channel block cb.

One window is the K·K·IN_CH/cpf cycles that produce hp·kpf results. The
weights are stored in exactly this order. The engines are fully busy whenever
a window is being issued. A new window can follow the previous one with no
gap.

## How a stage is fed: the InBuf ring

The feature map arrives one pixel (all channels) per cycle, in raster order.
`fcad_inbuf` keeps only a window of NR = hp·(2 + ⌈(K−1)/hp⌉) rows:

- the K−1+hp rows that the current group of hp output rows reads, and
- hp rows that can fill for the next group meanwhile.

This is the hardest part of the design to see at once, so in detail:

- **Ring.** Rows go into a ring of NR slots. The ring continues from one
  frame to the next. `base_slot` is the slot holding row 0 of the frame now
  being computed, so row r of that frame is in slot (base_slot + r) mod NR.
  When the last window of a frame is issued, `base_slot` moves on by H.
  The rows of the next frame that have already arrived then become its rows
  0, 1, and so on. So a stage accepts the next frame while it is still
  finishing the current one.
- **Banks.** Slot s lives in bank s mod hp. The hp engines always read hp
  consecutive rows at the same column, so every read cycle touches each bank
  exactly once. There are no conflicts and each bank needs one read port.
  A rotation network after the banks hands row rd_row0+e to engine e.
- **Padding.** Reads above row 0, below row H−1, left of column 0 and right
  of column W−1 return zero. This gives "same" convolution with zero padding.
- **Flow control.** A group starts when:
  - the input rows it needs are present (up to row row0+hp−1+(K−1)/2);
  - the weights are loaded;
  - its half of the output buffer is free.

  The input stalls (`in_ready` low) while the next row would overwrite a
  slot the current group still reads.

## Weights, untied biases and the memory port

Each stage has its own external memory port, an MW = 64-bit read channel
(`fcad_mem_reader`). The words are laid out as follows.

**Weights**, at words 0 to NWB−1:

- One WeightBuf entry holds the kpf·cpf weights of one cycle.
- Entry number a = ((kb·K + ky)·K + kx)·CB + cb, where CB = IN_CH/cpf.
- Each entry takes ⌈kpf·cpf·8/MW⌉ consecutive words.
- Within an entry, weight (k, c) sits at bit offset (k·cpf + c)·8.
- The weights are read once after reset into `fcad_weightbuf`. The whole
  layer stays resident.

**Untied biases**, at words NWB to NWB+NBB−1:

- One bias entry holds the hp·kpf 16-bit biases of one window.
- Entry n = (g·W + x)·KB + kb, where g is the row group and KB = OUT_CH/kpf.
- Each entry takes ⌈hp·kpf·16/MW⌉ words.
- Within an entry, bias (e, k) sits at bit offset (e·kpf + k)·16.

A full-size layer has one bias per output value, for example 3·1024·1024 in
the last stage of branch 2. That is too many to keep on chip. The reader
therefore re-reads the bias region frame after frame into a small FIFO.

A gearbox (`fcad_gearbox`) assembles the memory words into entries. The
reader keeps at most DEPTH words in flight or buffered, so a slow memory
only ever delays a stage.

## After the accumulators

`fcad_postproc` processes hp·kpf lanes in one cycle:

1. adds the untied bias;
2. applies a leaky ReLU with slope 1/4, if the stage has an activation;
3. shifts right arithmetically by SHIFT;
4. saturates to 8 bits.

`fcad_outbuf` is a ping-pong buffer of two halves. Each half holds hp output
rows with all channels. While one half fills, the other is sent on pixel by
pixel. With up-sampling, every pixel is sent twice and every row twice: this
is nearest-neighbour 2x up-sampling, folded into the read side.

## Branches and the fan-out

`fcad_top` chains the units of each branch with valid/ready links. Each link
carries one pixel of up to 256 channels in a 2048-bit bus.

`fcad_fanout` sits behind the last shared stage. Each beat goes to both
branch 2 and branch 3. A beat leaves only when both have taken it, but each
branch may take it in a different cycle. A per-output flag records who
already has it.

Branch 1 runs independently of the other two. Branch 3 is fed by the shared
front end, so it moves at branch 2's pace. Their speeds:

- **Branch 1.** The image interval is its slowest unit, 1,179,648 cycles.
- **Branches 2 and 3.** The interval is 1,048,576 cycles. Every link carries
  one pixel per cycle, and branch 2's last links carry 1024·1024 pixels per
  image. That is more than the slowest unit's 589,824 compute cycles.

At 200 MHz this gives:

- branch 1: 169 geometries per second;
- branches 2 and 3: 190 images per second, which is 95 frames per second
  with two textures per frame (one per eye).

Wider links in the last two stages of branch 2 would lift branch 2 to its
compute limit of 169 frames per second. They are not implemented.

## Status and per-cycle events

Every unit reports:

- `weights_loaded`;
- `frame_done`, which pulses when the last window of a frame is issued;
- a 3-bit `evt`:
  - bit 0: input stall, the InBuf is full;
  - bit 1: the next untied bias has not arrived;
  - bit 2: a group is ready but both output halves are occupied.

`fcad_top` also reports `fan_split`, set when one branch took a fan-out beat
and the other has not yet.

## Testbenches

Every testbench ends with `TB_RESULT checks=N failures=M`. Each has a
watchdog.

| testbench | what it proves |
|---|---|
| `tb_fcad_pe` | random MAC sequences, accumulator restart, registered result |
| `tb_fcad_engine` | each PE uses its own weight slice on the shared features |
| `tb_fcad_inbuf` | every read of a sliding window, including padding rows and columns, with two banks |
| `tb_fcad_weightbuf` | entry assembly from 64-bit words for two layer shapes, `loaded` timing |
| `tb_fcad_mem_reader` | weights once, biases cycling, under random memory stalls and back-pressure |
| `tb_fcad_postproc` | bias, leaky ReLU, shift and saturation on random and edge values |
| `tb_fcad_outbuf` | ping-pong order, up-sampled and plain read-out, back-pressure |
| `tb_fcad_fanout` | both outputs see every beat once under independent random back-pressure |
| `tb_fcad_bau` | one unit (cpf=kpf=hp=2, CAU, 2 frames), every output against a reference convolution; compute cycles equal Lat |
| `tb_fcad_top` | all three branches with reduced sizes, two frames, every branch-1 value against a layer-by-layer reference; per-unit cycles; each event type occurs |
| `tb_fcad_top_full` | the default decoder at full size with batch {1,2,2}: output counts, frames and exact compute cycles per unit, branch-2 image interval |

`tb/fcad_dram_model.sv` stands in for the external memory. It returns words
with a fixed latency and, optionally, random request stalls. Its contents are
a hash of unit and address (`fcad_tb_pkg::mem_word`), so no data files are
needed.

To run one, for example the full-size decoder (about 30 s to build and 15 s
to run):

    verilator --binary --timing -O2 --top-module tb_fcad_top_full \
      rtl/fcad_pkg.sv tb/fcad_tb_pkg.sv rtl/*.sv tb/fcad_dram_model.sv \
      tb/tb_fcad_top_full.sv
    ./obj_dir/Vtb_fcad_top_full

## Where this departs from the published design

- **Fewer frames per second.** The published design reaches 122.1 frames/s
  on its largest 8-bit FPGA case, with 2,229 DSPs. This mapping uses 5,435
  8-bit MACs. Branch 1 reaches about 169 frames/s and branch 2 about 95,
  because of the one-pixel-per-cycle links described above.
- **A lighter decoder.** The published decoder table gives 1.9, 11.3 and 4.9
  GOP for branches 1 to 3, and 1.1M, 6.1M and 1.9M parameters. With the
  channel counts chosen here the branches come to 1.3, 5.6 and 2.4 GOP, with
  the shared front end counted in both branches 2 and 3. The published work
  does not give enough layer detail to match its totals. Frame rates are
  therefore not directly comparable.
- **Decoder input.** The decoder starts from the [4,8,8] and [7,8,8] tensors
  of the decoder table. Any step that turns a 256-dimensional latent code
  into those tensors is not included.
- **Own parallel factors.** The cpf, kpf and hp of each stage are ours, not
  the output of the published design-space search.
- **Own layer details.** The published description does not give the channel
  counts of most layers, the kernel size, the activation, the up-sampling
  method, the requantisation, the memory bus width or the bias width. The
  values here are ours, as listed above.
- **Shared layers.** In one place the published text says branches 2 and 3
  share two layers, as an example. Its decoder table says five. This design
  follows the table.
- **Not built:**
  - the design-space search itself, which is software;
  - the DDR memory, for which a behavioural model is used;
  - 16-bit builds. These are only a parameter change (DW, WW) but are not
    verified here.
- **No timing closure.** No FPGA timing is claimed for 200 MHz.
