# A structured-sparse CNN accelerator in SystemVerilog

This is RTL for a CNN accelerator that skips zero weights. It assumes the network was
pruned *shape-wise*: every kernel that is processed together has the same zero pattern.
Because the pattern is shared, one compressed index describes a whole group of kernels,
and one activation selector serves every processing unit. The array spends one clock
cycle per kept (nonzero) weight and output position, instead of one per weight. It also
gates the multiply-accumulate whenever the selected activation is zero.

The design follows a published FPGA accelerator for structured-sparse CNNs with an
array of 48 processing units of 28 PEs each (1344 PEs, 16-bit fixed point, 200 MHz).
At that clock the peak is 2 × 0.2 GHz × 1344 = 537.6 GOP/s. All parameter defaults
are those numbers. The sections below say where this RTL follows that design and where
it makes its own choices.

## 1. The computation and its loop order

A CONV layer computes output channels `F` from input channels `C` with `R×R` kernels
at stride `S`. The hardware maps the work onto the array as follows:

* **Output channels.** A group of N = 48 output channels runs at once, one per
  processing unit (PU). Every PU applies its own kernel, but all kernels of the group
  share one zero pattern.
* **Output columns.** Inside a PU, PE `m` computes the `m`-th of M = 28 neighbouring
  outputs of one output row. A row wider than M is cut into `G = ceil(V/M)` column
  groups.
* **Tiles.** A layer is cut into tiles of `U_t` output rows. The partial sums of a tile
  stay on chip: there is one buffer entry per (row, column group) per PE, at address
  `t·G + g`.

For one tile the controller runs this loop nest, outermost first:

```
for ic in 0..C-1                       input channel
  for t in 0..U_t-1                    output row of the tile
    for g in 0..G-1                    column group
      for kh in 0..R-1                 kernel row
        for each kept weight of row kh one cycle:
          every PE of every PU: acc += act[m·S + kw] · w[pu][ic][kh][kw]
```

Zero weights never reach the loop, because the index only lists kept weights. A kernel
row with no kept weight costs one cycle, in which the next input-row segment is loaded.
For the first input channel that has any kept weight, the accumulation starts from zero.
After that, each output position starts from the partial sum in its partial-sum buffer
(PSB). After the last channel the tile is *drained*:

* each position is read from the PSBs;
* it goes through normalization, ReLU and optional 2×2 max pooling;
* the result is written to the output buffer ABout, one M-wide word per PU in turn.

The channel loop sits outside the row loop. Each channel's index is therefore decoded
once per tile and replayed for every output position (see §5).

## 2. Compressed weight index

The index is stored in compressed-sparse-row form in the weight index buffer (WIB). It
has three parts:

| part | width | one entry per | value |
|---|---|---|---|
| Offset | 16 bit | input channel | kept weights in that channel's kernel |
| R_pointer | 4 bit | (channel, kernel row) | kept weights in that row |
| Index | 4 bit | kept weight | zeros skipped since the previous kept weight of the row (or since the row start) |

Example: a 3×3 channel with the pattern

```
1 0 1      Index 0 1      R_pointer 2
0 0 0                                0
0 1 0      Index 1                   1      Offset 3
```

One index serves all N output channels of a group. The N weight values themselves are
stored densely, in kept-weight order, in each PU's weight buffer (WB).

**FC layers.** A fully-connected layer uses one Index list over the whole input vector,
and Offset[0] holds its length. A gap of more than 15 zeros cannot be coded in 4 bits.
In that case a *filler* entry with step 15 and a zero weight is inserted: it consumes
position 15 of the gap and contributes nothing.

**Storage split.** The 4 KB WIB is split 1 KB for Offset (512 channels), 1 KB for
R_pointer (2048 nibbles) and 2 KB for Index (4096 nibbles). Nibble `k` of a 16-bit word
is bits `[4k+3:4k]`. The read ports take nibble addresses. The `off_base`, `rp_base` and
`idx_base` fields of the layer configuration locate a layer inside the three parts.

## 3. The vector generator (VGM): turning step indexes into activations

The VGM is the hardest part to follow, and the one the whole array depends on.

**Registers.** It holds two registers of `D = (M-1)·S_MAX + R_MAX` activations. The
default `D = 27·4 + 11 = 119` is enough for an 11×11 stride-4 layer.

* **REG1** holds the next input-row segment from ABin. That is the `(M-1)·S+R` input
  activations that the M outputs of one column group need from one input row.
* **REG0** is a shift register. Output lane `m` is always tapped at `REG0[m·S]`.

**CONV operation.** Per kernel row:

* `VGM_ROW`, the first kept weight of a row, with step index `i`: REG0 is loaded from
  REG1 shifted left by `i`. Lane `m` now sees input column `m·S + i`, which is the
  column that weight `kw = i` needs. In the same cycle REG1 is refilled with the next
  ABin segment. Loading the next row overlaps the current one, so a row change costs
  no extra cycle.
* `VGM_STEP`, each further kept weight, with step `i`: REG0 shifts by `i+1`, because the
  step counts only the zeros between the two weights.
* A kernel row with R_pointer = 0 issues a ROW without a MAC. It only moves to the next
  segment.
* The selected M activations are registered. They reach the PEs one cycle after the
  operation, together with the weight that the PU read from its WB in that cycle.

The ABin stream must hold one segment per (channel, output row, column group, kernel
row), in loop order. The segment of output row `t` and kernel row `kh` is input row
`t·S + kh`, columns `g·M·S … g·M·S + D-1`. The external loader repeats an input row for
each output row that uses it. The on-chip buffer does not keep rows for reuse.

**FC operation.** The input vector arrives in D-element chunks. A pointer walks over
REG0 by the decoded step. When it crosses the end of REG0, REG1 moves into REG0 and the
next chunk is popped. The single selected activation is driven on every lane, and each
PE multiplies it with its own weight from the wide WB port. Only PU 0 runs. The other
PUs stay idle, as in the original design, because FC layers are limited by weight
bandwidth rather than by compute.

## 4. Processing unit and PE

A PU has:

* **M zero discriminators.** Each raises an enable when its selected activation is
  nonzero.
* **M PEs.** Each does a 16×16 multiply-accumulate into a 32-bit accumulator. The
  accumulator register is enabled only when the activation is nonzero. That is the zero
  gating: on an FPGA it maps to the clock enable.
* **M PSBs.** Each holds 512 × 32 bit (2 KB). The memory is simple dual-port with
  write-first forwarding, so consecutive positions need no stall.
* **One WB.** 512 bytes, organised as 9 words of 28 weights, so that the write port is
  always M wide. Port A returns the single weight of a CONV step, which is broadcast to
  all PEs. Port B returns a whole word for the M PEs in FC mode.
* **Post-processing**, see below.

The PU is a two-stage pipeline. Stage 0 reads the WB and the PSB at the controller's
addresses. Stage 1 does the MAC. On the last weight of a position the new sum goes back
to the PSB.

**8-bit mode.** A 16-bit activation lane carries two signed 8-bit activations.
Activation `2g` goes in the low byte and activation `2g+1` in the high byte: two column
groups are packed into one lane group, so `G` halves. Both bytes are multiplied by the
same 8-bit weight, and the two 16-bit sums are kept side by side in the 32-bit PSB word.
That doubles throughput without widening any buffer.

**Post-processing.** The original design only names these stages. What they compute
here is this design's choice:

```
normalize : y = saturate16((psum + bias[pu]) >>> shift)   (8-bit mode: per byte, saturate8)
activate  : y = max(y, 0) if relu
pool      : 2x2 max, stride 2; pooled outputs fill lanes 0..M/2-1, the upper lanes are 0
```

## 5. Controller and per-channel index cache

For each input channel the controller does three things:

1. It reads Offset[ic].
2. It loads the channel's R R_pointer nibbles and Offset[ic] Index nibbles into a small
   register cache, one nibble per cycle. The cache holds R_MAX + R_MAX² entries.
3. It replays the cache for every (t, g) of the tile, one kept weight per cycle.

The weight address is the running kept-weight count of the layer, as in the original
pseudo code. The cache costs `1 + R + Offset[ic]` cycles per channel and tile. That is
small against `U_t·G·Offset[ic]` MAC cycles, but it is not free: it is this design's
choice, and the original does not say how its controller fetches the index.

**Layer configuration.** A layer is described by the packed struct `layer_cfg_t` in
`sacc_pkg`:

* mode (CONV/FC), int8, relu, pool, shift;
* R, S, C, U_t, G;
* the number of FC chunks;
* the base addresses in the WIB and the WB.

Pulse `start`, wait for `done`. The cfg must stay stable while `busy`; an assertion
checks this.

**Counters.** `perf` counts busy cycles, MAC cycles, skipped rows, ABin and ABout stall
cycles, and output words.

**Back-pressure.** A VGM operation that needs an ABin segment while ABin is empty
freezes the whole pipeline. A push into a full ABout freezes the drain.

## 6. Buffers and the outside world

The buffer sizes follow the original design. In this RTL:

| buffer | size | built as |
|---|---|---|
| ABin | 2 KB | FIFO of 8 segments of 119 × 16 bit |
| ABout | 2 KB | FIFO of 36 words of 28 × 16 bit |
| WIB | 4 KB | three RAMs (Offset / R_pointer / Index) |
| WB | 512 B per PU | 9 × (28 × 16 bit) ring |
| PSB | 2 KB per PE | 512 × 32 bit |

The original feeds these buffers from a DMA engine and DDR memory. Neither is described
well enough to build, so the top level brings their ports out instead:

* `abin_push` / `abin_din` / `abin_full`
* `about_pop` / `about_dout` / `about_empty`
* the WIB write port (`wib_we`, `wib_part`, `wib_waddr`, `wib_wdata`)
* per-PU WB write enables with a shared address and data
* per-PU `bias`

WB addresses wrap modulo the WB capacity, so a loader can stream the weights of a large
layer through the WB. `wb_free_ptr` tells it how far the array has read: narrow
addresses in CONV, wide words in FC. There is no flow control in the other direction.
The loader has to stay ahead of the read pointer.

## 7. Departures and limits

* **ABin width.** The original gives ABin a width of `16·(M-1+R)` bits, and the VGM
  register depth as `(M-1)·stride+R`. The two agree only at stride 1. This design uses
  the second formula with the largest supported R and S.
* **Not built: narrow layers.** The mapping that folds several output rows of a narrow
  layer (V < M) onto one PU row is not built. Such layers run with idle lanes.
* **Not built: refilling the WIB or WB during a layer.** It is only exposed, not
  handshaked. An FC layer whose index list exceeds 4096 nibbles cannot run in one pass.
  This rules out FC6 of AlexNet (9216 inputs) and of VGG-16 (25088 inputs). CONV layers
  of LeNet, AlexNet and VGG-16 fit the index buffer at the published sparsity. Their
  weights must be streamed through the WB ring.
* **Supported shapes.** Kernel size and stride are limited to R ≤ 11 and S ≤ 4. A tile
  may hold at most 512 (row, column-group) positions, and an FC chunk count fits 16 bits.
* **Clock gating** is modelled as a register enable, not as a gated clock.
* **Synthesis time.** A full 48×28 instance is large: Yosys coarse synthesis of the
  flattened top takes more than ten minutes. Every block synthesises on its own at the
  default size.

## 8. Files

`rtl/` holds one unit per file:

| file | contents |
|---|---|
| `sacc_pkg.sv` | types |
| `zero_discriminator.sv`, `pe.sv`, `psum_buffer.sv`, `weight_buffer.sv`, `post_proc.sv` | PU parts |
| `pu.sv` | the PU |
| `vgm.sv` | the VGM |
| `weight_index_buffer.sv` | the WIB |
| `act_fifo.sv` | ABin and ABout |
| `main_controller.sv` | the controller |
| `sparse_accel_top.sv` | the top level |

`tb/` holds one self-checking testbench per unit, plus two end-to-end tests.

* **`tb_sparse_accel_top`** runs at a reduced size (2 PUs of 4 PEs, small buffers, so
  that both FIFOs fill and run dry). It builds random shape-wise pruned kernels and
  compresses them into the index format. It streams inputs at a random rate and checks
  every output word against a direct convolution. It also checks the MAC-cycle count
  (one per kept weight and position) and the skipped-row count. Its five cases cover:
  * stride 1 with an all-pruned channel;
  * stride 2 with pooling;
  * FC with a filler entry;
  * 8-bit mode;
  * a 5×5 kernel at full input rate.

  Each mechanism must occur at least once: zero gating, row skip, ABin stall, ABout
  stall, pooling, FC, 8-bit, stride 2.
* **`tb_full_size`** runs the same kind of test on the default 48×28 array, including
  an 11×11 stride-4 layer that fills the whole VGM.
* **`tb_lenet_conv`** runs the two convolution layers of LeNet-5 (1→6 and 6→16
  channels, 5×5, with ReLU and pooling) on the default array, each as one tile.
* **`tb_vgm`** and **`tb_weight_index_buffer`** replay the worked examples of the index
  format and of the VGM shift sequence.

To run a test with Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/sacc_pkg.sv rtl/*.sv tb/tb_full_size.sv \
          --top-module tb_full_size -o sim
./obj_dir/sim +verilator+rand+reset+2
```

Each test prints `TB_RESULT checks=N failures=F` and stops.
