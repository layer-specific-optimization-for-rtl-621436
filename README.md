# Mixed data flow, mixed precision CNN accelerator in SystemVerilog

A detection CNN such as YOLO-v2 has two kinds of layers. In the early layers the
feature maps are big but the weights are few. In the late layers the maps are small but
the weights are many. A single engine with one way of scheduling suits neither kind.
This design splits the network at a **group boundary** and treats the two groups
differently:

* **First group: pipelined layers.** Every early layer has its own hardware. The layers
  are chained so that each one starts as soon as a few rows of its input exist, and no
  feature map ever leaves the chip. Each layer keeps only K+1 input rows and one row of
  partial sums. Its weights stay in on-chip memory and are replayed once per output row
  ("row-based weight reuse").
* **Second group: the main layer.** All late layers run one after another on one shared
  engine. That engine holds whole (small) frames on chip and reads every weight from
  DRAM exactly once per frame ("full weight reuse").

The only traffic crossing the chip boundary is:

* the input image;
* the parameters of the second group;
* the final result.

Intermediate feature maps never go to DRAM.

The weights are stored in **mixed precision**:

* Every weight has a dense 1-bit part meaning +mean or -mean. This part needs no
  multiplier: the activation is added or subtracted.
* The few weights whose value is far from ±mean also carry a sparse 8-bit correction
  (value - mean).

The dense and sparse parts are computed in parallel on the same sliding window. The sparse
part uses only a handful of multipliers per layer.

The default configuration follows Sim-YOLO-v2 (a darknet-19-like YOLO-v2 at 416x416)
with the boundary after CONV12:

| Part | Layers |
|---|---|
| First group (instantiated) | CONV9 3x3 256->512, CONV10 1x1 512->256, CONV11 3x3 256->512, CONV12 1x1 512->256, all at 26x26 |
| Main layer (sized for) | CONV13 to CONV17, 26x26 frames of up to 256 channels (13x13 up to 1024) |

Every layer uses 16 channels per tile (Ti = To = 16).

## Block map

```
            cfg bus ──────────────┬───────────────┬──────────────┐
                                  │               │              │
 image ─► pipelined_layer 0 ─► pipelined_layer 1 ─► ... ─► main_layer ─► result stream
 (row,tile,col)   (3x3)             (1x1)                     │   ▲
                                                              │   └── DRAM parameter stream
 each pipelined_layer / main_layer:
   row or frame buffers ─► data_dispatcher ─► conv_core ─► (eltwise_add) ─► next buffer
   parameter memory/DRAM ─► weight_prefetch ─┘
 conv_core:
   window ─► TO x dense_kernel ─► delay ─┐
          └► sparse_kernel ─────► delay ─┴► dense<<mean + sparse ─► psum_buffer ─► batch_norm
```

| File | Role |
|---|---|
| `mp_pkg.sv` | Widths (8-bit activations and sparse weights, 32-bit accumulation, 16-bit BN scale and bias) and small helpers. |
| `adder_tree.sv` | Pipelined binary adder tree, one register per level. |
| `delay_line.sv` | Register chain used to line up the dense and sparse results. |
| `dense_kernel.sv` | One output channel of the 1-bit convolution: ±activation, then an adder tree. |
| `sparse_kernel.sv` | Sparse 8-bit path: coordinate decode, NM multipliers, output-channel decoder, TO adder trees of TS inputs. |
| `weight_prefetch.sv` | Unpacks parameter words into two block banks. Skips the sparse words of blocks without sparse weights. |
| `batch_norm.sv` | Multiply by scale, arithmetic shift, add bias, saturate to 8 bits. |
| `psum_buffer.sv` | Partial-sum buffer with its accumulate loop. |
| `frame_buffer.sv` | Activation memory: one write port, several registered read ports. |
| `data_dispatcher.sv` | Window addresses, zero padding and window assembly for the row-ring and frame layouts. |
| `eltwise_add.sv` | Saturating lane-wise addition of the shortcut map. |
| `conv_core.sv` | The mixed-precision datapath of one layer. |
| `pipelined_layer.sv` | One first-group layer: row buffer, row-pass sequencer, parameter memory, output FIFO. |
| `main_layer.sv` | The second-group engine: frame buffers with rotating roles, shortcut buffer, layer descriptors. |
| `mixed_flow_accel.sv` | Top level: a chain of pipelined layers feeding the main layer. |

## Number formats and the mixed-precision sum

* **Activations.** Signed 8 bits. Each word holds T = 16 channels of one pixel, lane l in
  bits [8l+7:8l].
* **Dense weights.** 1 bit each; 1 means +mean, 0 means -mean.
* **The mean.** Applied once per output as a left shift of the dense sum by
  `mean_shift`. The mean is therefore a power of two, in the same fixed-point scale as
  the sparse values.
* **Sparse weights.** Signed 8 bits each, holding (w - mean) for the weights that need
  more than one bit.
* **The output of one window.** For every output channel:

  `(Σ ±a) << mean_shift  +  Σ w_sparse · a`

  This is accumulated in 32 bits over the input-channel tiles. Batch norm then gives
  `sat8(((acc · scale) >>> bn_shift) + bias)`.

## Sparse kernel

A weight block is the K×K×Ti×To set of weights that one sliding window meets. Its sparse
weights are stored as a count followed by a list of entries:

```
{ out channel (log2 To bits), in channel (log2 Ti), kernel position ky*K+kx (log2 K*K), value (8) }
```

All entries of a block are processed in the same cycle, whatever output channel they
belong to. This balances the load between channels. The pipeline has three stages:

1. **Select and multiply.** Each of the `NM` multipliers (N_multipliers) takes its
   entry's activation out of the window and multiplies. Entries at or beyond the count
   are switched off.
2. **Output channel decoder.** Each product gets a slot in the adder tree of its own
   output channel. The slot number is how many earlier entries of the block went to the
   same channel.
3. **Adder trees.** `TO` pipelined trees of `TS` inputs (tree_size) each.

Two sizing rules apply:

* `NM` must be at least the largest count of any block.
* `TS` must be at least the largest number of a block's entries that share one output
  channel.

An assertion reports a block that breaks the second rule. The latency is
2 + clog2(TS) cycles.

In `conv_core` the dense path (1 + clog2(Ti·K·K) cycles) and the sparse path go through
delay lines, so that both reach the adder in the same cycle. With the default sizes the
dense path is the longer one (9 against 5 cycles).

## Parameter stream and prefetch

The two groups read parameters from different places:

* A pipelined layer reads its parameters from its own on-chip memory, which is loaded
  once over the configuration bus.
* The main layer reads them from the DRAM stream.

Either way, a block arrives as one **record** of PW-bit words:

```
word 0                 : number n of sparse weights in the block (bits 7:0)
next ceil(To*Ti*K*K/PW): dense bits, bit (o*Ti + i)*K*K + ky*K + kx, LSB first
next ceil(n/EPW) words : sparse entries, EPW = floor(PW / entry width) per word, from the LSB
```

If n = 0, no sparse word follows and the sparse kernel is idle for that block.
`weight_prefetch` fills two banks in turn. The consumer releases a bank in the cycle it
issues the block's last window, so the next record can load while the current block is
being used. Records are in the order the blocks are used: output tile outer, input tile
inner.

## Pipelined layer (row-based weight reuse)

**Input and row buffer.** The input arrives in the order row, channel tile, column. It
goes into a ring of K+1 rows of all N channels, held in one `frame_buffer` with K·K read
ports. The writer may be at most P+1 rows ahead of the row being computed (P = (K-1)/2),
which is what lets a K+1 ring work.

**Row passes.** Output row r is computed when input row r+P has arrived:

* The layer takes the blocks in order (output tile mt, input tile nt).
* For each block it slides the window across the row, one window per cycle (a *row
  pass*), and adds into the H-entry partial-sum buffer.
* After the last input tile, the row of To channels goes through batch norm into an
  output FIFO. From there it streams to the next layer in the same order as the input.

**Flow control.** One pass chains into the next without a bubble when three things hold:

* the next block's bank is valid;
* the rows it needs are present;
* the FIFO has reserved room for a whole output row.

A pipelined layer therefore sustains one window per cycle. The counters
`stat_wstall`, `stat_ostall` and `stat_rows` count cycles lost waiting for weights,
cycles lost waiting for output room, and rows finished.

**Configuration (`cfg_sel`).**

| `cfg_sel` | Writes |
|---|---|
| 0 | Parameter memory word at `cfg_addr`. |
| 1 | Batch-norm entry `{bias[31:16], scale[15:0]}` of output channel `cfg_addr`. |
| 2 | Control word `{enable[30], bn_shift[29:24], mean_shift[23:20], param_len[19:0]}`. |

**Sizing the first group.** The chain is balanced when every layer needs about the same
number of windows per frame, H²·(N/Ti)·(M/To). The default CONV9–CONV12 layers all need
26·26·16·32 = 346,112 windows per frame at one window per cycle. Each layer starts a few
rows after the layer before it: 2 rows behind a 3x3 layer and 1 row behind a 1x1 layer.

## Main layer (full weight reuse, frame buffers)

**Frame buffers and roles.** There are three frame buffers plus a shortcut buffer SC,
each of `FB_DEPTH` words of T channels. The word address of (tile, row, column) is
(tile·h + row)·h + column. Three role pointers name which frame buffer is which:

| Role | Job |
|---|---|
| fill | Receives the next frame from the first group. |
| IN | Input of the current layer. |
| PP | Output of the current layer. |

When a frame is complete and the engine is idle, the fill and IN roles swap. The
first group can therefore stream frame f+1 while frame f is processed. While both are
busy, the first group is held off; `stat_fstall` counts those cycles.

**Layer descriptors.** A layer is a 64-bit descriptor (`cfg_sel` 0):

| Bits | Field |
|---|---|
| [6:0] | h |
| [14:7] | input tiles |
| [22:15] | output tiles |
| [23] | 1x1 (centre tap only) |
| [25:24] | source (0 IN, 1 PP, 2 SC) |
| [27:26] | destination (0 IN, 1 PP, 2 SC, 3 result port) |
| [28] | add the shortcut buffer to the result |
| [32:29] | mean_shift |
| [38:33] | bn_shift |
| [50:39] | base index into the batch-norm table |
| [51] | also copy the result into SC |

Two more configuration writes:

* `cfg_sel` 1 writes the batch-norm table.
* `cfg_sel` 2 writes `{layers[4:1], enable[0]}`.

Consecutive layers simply alternate IN and PP as source and destination: that is the
"interchange" of the buffers. The shortcut buffer can keep a layer's output, be added to
a later layer's output (`eltwise_add`, with saturation), or serve as a layer's input.

**Running a layer.** For each output tile and each input tile the engine takes one weight
block and sweeps the whole h×h plane with it, one window per cycle. The block is
therefore fetched from DRAM once per frame. The output buffer holds To·h² partial sums.
After the last input tile the finished plane is batch-normalised, optionally added to the
shortcut, and written to the destination buffer or to the result port. The next layer
starts when all writes of the previous layer are done.

**Counters.** `stat_wstall`, `stat_swaps` and `stat_sc` count cycles waiting for DRAM
words, role swaps, and shortcut accesses.

## Top level

`mixed_flow_accel` chains `PIPE_LAYERS` pipelined layers and the main layer:

* Their per-layer shapes are set by the array parameters `P_N`, `P_M` and `P_K`
  (8 entries; the entries beyond `PIPE_LAYERS` are ignored).
* `cfg_unit` picks the unit a configuration write goes to (0 .. PIPE_LAYERS-1, then the
  main layer).
* The ports are:
  * the image stream (`img_*`);
  * the main layer's DRAM parameter stream (`dram_p_*`);
  * the result stream, with its frame-buffer address (`res_*`);
  * `frame_done`;
  * the activity counters.

## How far it follows the source architecture

**Taken from the source architecture:**

* the two-group split with pipelined layers and one main layer;
* Scheme 3 with a (K+1)-row buffer in the first group;
* Scheme 2 in the second group;
* three interchangeable frame buffers plus a shortcut buffer, one of them the extra input
  buffer that pipelines the two groups;
* second-group parameters read from DRAM once per layer;
* first-group parameters on chip;
* dense 1-bit plus sparse 8-bit weights computed in parallel on the same window;
* a per-block sparse count of 8 bits and the sparse entry fields {out channel, in channel,
  position, 8-bit value};
* skipping the sparse words and turning the sparse kernel off for blocks with count zero;
* N_multipliers and tree_size as the two sizes of the sparse kernel;
* delay registers aligning the dense and sparse paths;
* batch norm as multiply, shift, add, quantise;
* the boundary after CONV12.

**Choices of this design** (the source gives no detail):

* all bit widths other than 8-bit activations and sparse weights;
* the power-of-two mean;
* the record format and the two-bank prefetcher;
* the multi-ported buffers (an FPGA build would bank them);
* "same" zero padding;
* valid/ready streams and the row/tile/column pixel order;
* the configuration bus, descriptors and counters;
* Ti = To = 16 in every layer;
* the default NM = 27 and TS = 8;
* the Sim-YOLO-v2 layer shapes, which are darknet-19-like shapes and not numbers from the
  source.

**Not built:**

* Max-pooling. The network needs it between groups of layers, but it is not described.
  For this reason the top starts at CONV9, and the main layer cannot yet run CONV13
  followed by CONV14 (CONV13's unpooled 26x26x512 output does not fit a frame buffer).
* The detection/region layer.
* Strided convolutions, 7x7 kernels, up-sampling and concatenation. ResNet-152 and
  YOLOv3 therefore do not map onto it.
* 16-bit data (the Tiny-YOLO-v2 comparison).

## Simulation

Every block has a self-checking testbench in `tb/`. Each one:

* compares the block with independent software arithmetic;
* checks cycle counts where a rate or latency matters;
* ends with `TB_RESULT checks=<n> failures=<n>`.

`tb_conv_pkg.sv` holds a software model of one convolution layer. The model generates
random dense bits, sparse blocks (a quarter of them empty), batch-norm parameters and
record streams, and computes the expected outputs.

Run a testbench with plain verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb rtl/mp_pkg.sv tb/tb_conv_pkg.sv \
          tb/tb_mixed_flow_accel.sv --top-module tb_mixed_flow_accel -Mdir obj -o sim
obj/sim +verilator+rand+reset+2
```

**Testbench summary.**

| Testbench | What it covers |
|---|---|
| `tb_pipelined_layer` | One layer at full rate, checking 288 windows in 288 cycles across passes, rows and frames. A second layer runs with narrow parameter words and random back-pressure. |
| `tb_main_layer` | A four-layer program over three frames: a 3x3 layer with a shortcut copy, 1x1, 3x3 plus the shortcut, and 1x1 from the shortcut buffer to the output. DRAM has random gaps. |
| `tb_mixed_flow_accel` | Reduced top: two pipelined layers (3x3, native 1x1) and the same four-layer main-layer program, 6x6 maps, 4-channel tiles, three frames. It checks every result and requires each mechanism to occur at least once: weight stalls in both groups, output back-pressure, hold-off of the first group, role swaps, shortcut reads, 1x1 layers and empty sparse blocks. It also bounds the frame time. |
| `tb_mixed_flow_accel_full` | The top with all default parameters. One 26x26x256 frame runs through CONV9–CONV12 and a 1x1 256->16 main-layer layer, with every result word checked. The frame takes about 411,000 cycles against 346,112 windows per first-group layer. This is about two minutes of simulation. |

**Limits of the tests.**

* The full-size test exercises only one main-layer layer.
* Multi-layer main-layer programs, shortcuts and role swaps are tested at the reduced
  sizes.
* The model's weights and activations are random, not trained Sim-YOLO-v2 values.
