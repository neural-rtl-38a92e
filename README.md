# NEURAL: an elastic spiking-CNN accelerator with data-event execution

Spiking neural networks (SNNs) send only binary spikes between layers, and most neurons stay
silent. An accelerator that steps through every pixel and every weight does most of its work
on zeros. NEURAL avoids this by splitting the work in two:

- **Sparsity is found ahead of the arithmetic.** A pipelined detector lists, for every output
  neuron of a tile, which kernel taps see a spike.
- **The neurons do only those updates.** The processing elements then perform exactly those
  updates and nothing else.

The two sides run at their own pace and meet in two elastic FIFOs. Computation starts whenever
both a spike window and its weights are present. Inside the PE array each neuron is event
driven: it spends one cycle per incoming spike, not per kernel tap.

The same datapath has two more jobs:

- **QKFormer attention on the fly.** Spiking QKFormer attention is computed in the write-back
  path, with no separate attention unit.
- **Spiking classifier (W2TTFS).** The final average pooling plus fully connected classifier is
  replaced by a spike-count scheme, so the classifier needs no multiplier.

This repository holds synthesizable SystemVerilog of the architecture. It runs single-time-step
networks with 3x3, stride-1, zero-padded convolutions, residual shortcuts, QKFormer Q/K layers,
and the classifier, together with self-checking testbenches for every block and for the whole
chip.

## 1. The numbers that shape everything

| quantity | value | where it comes from |
|---|---|---|
| SDU array (sparse detection units) | 64 = 8 x 8 output positions | published size |
| PE array | 256 = 4 output channels x 64 positions | published size; the 4 x 64 split is this design's |
| S-FIFO | 640 B = 2 words of 2560 bits | published size; word format is this design's |
| W-FIFO | 1 KB = 28 words of 289 bits | published size; word format is this design's |
| weights, bias | 8-bit and 16-bit signed fixed point | published "fixed point quantization" |
| membrane potential | 16-bit signed, saturating | this design |
| leak | Vmem >>> 1 before the threshold compare (decay 0.5, one step) | published decay 0.5 |
| feature maps | up to 32 x 32 (one 32-bit word per row) | CIFAR image size |
| classifier | 512 features x 100 classes, 8-bit weights | this design (sized to CIFAR-100) |

Everything derived lives in `rtl/neural_pkg.sv`. That includes the FIFO depths, which are computed
from the byte sizes and word widths. Change the numbers there.

## 2. How a convolution layer flows through the chip

A layer is computed one output tile at a time. A tile is 8 x 8 output positions for 4 output
channels, which is exactly the 256 PEs. Each tile accumulates over all its input channels.

The layer sequencer in `neural_top` walks the tiles in this order: output-channel groups of 4,
then tile rows, then tile columns, then input channels. It starts one PipeSDA job per
(tile, input channel) whenever PipeSDA is idle. The three engines below are coupled only by
valid/ready handshakes:

```
 spiking buffer --rows--> PipeSDA --window word--> S-FIFO --\
                                                               EPA --spikes--> write-back --> QKFormer --> spiking buffer
 off-chip memory --words--> WMU --weight word--> W-FIFO ----/
```

- **Data-driven at the top.** The PE array (EPA) consumes one S-FIFO word and one W-FIFO word
  together, as soon as both heads are valid and the previous input channel has drained. No
  central controller tells it when to start.
- **Event-driven inside a PE.** Each PE spends one cycle per event in its event list.

The array waits for its slowest PE, the one with the largest `vld_cnt`. An input channel
therefore costs `1 + max(vld_cnt)` cycles, where the max is at most 9.

A tile ends when the W-FIFO head is a **bias word**, not a weight word. The array then adds the
bias, compares with the threshold, and resets spiking neurons to 0. It passes the 256 spikes to
write-back, and the next tile's first input channel can start once write-back has taken them.

The top counts each of these events (`stats`):

- windows and spike events produced;
- cycles the S-FIFO was full;
- cycles the EPA waited for spikes, and cycles it waited for weights;
- cycles a weight fetch overlapped replay;
- K rows that were masked;
- empty classifier windows that were skipped.

## 3. Sparse detection (PipeSDA): from spikes to event lists

This is the least obvious part of the design. Take one input channel and one output tile at
origin (ty0, tx0). Output (y, x) of a 3x3 convolution with padding 1 sees input pixels
(y-1..y+1, x-1..x+1). Turned around, an input spike at tile-relative (r, c) reaches the 3x3
block of outputs whose top-left corner is (r-1, c-1): its **centre position** (CP). So:

1. **Index generation** (`event_generator`).
   - Reads the 10 input rows r = -1..8 around the tile, one 32-bit row per read. Rows outside
     the image cost one idle cycle and are never read.
   - Cuts out the 10-bit segment c = -1..8; pixels outside the image read as 0.
   - A priority encoder lists one spike (r, c) per cycle into a 16-entry index buffer, followed
     by an end-of-job marker.
   - The next row is read while the last spike of the current row is listed. A job therefore
     costs about one cycle per row plus one per spike.
2. **CP generation and CP map** (`event_field_generator`).
   - Computes CP = (r-1, c-1), which can be -1. A CP of -1 names a *virtual* SDU, which has no
     hardware but whose field still covers real SDUs.
   - Broadcasts the CP to the whole SDU array.
   - When the end marker arrives, it offers the finished window to the S-FIFO. It freezes while
     the S-FIFO is full, then clears the SDUs in the same cycle the window is taken.
3. **SDUs** (`sdu`, 8 x 8 of them).
   - SDU (y, x) takes dy = y - cp_y and dx = x - cp_x. If both lie in 0..2, the spike reaches
     it through tap (2-dy)*3 + (2-dx).
   - The SDU appends that tap to its 9-entry event FIFO and increments `vld_cnt`.
   - Taps are numbered ky*3+kx, where input pixel (y+ky-1, x+kx-1) meets weight `w[ky][kx]`.

Example: spikes at (0,1), (0,4), (1,3), (3,2) give CPs (-1,0), (-1,3), (0,2), (2,1). The event
field generator testbench starts with exactly this case.

The 64 event lists of a tile (64 x 40 bits) form one S-FIFO word.

## 4. The PE and its LIF neuron

Each PE (`pe`) holds the 9 weights `a..i` of its output channel for the current input channel,
plus the event list. Every cycle it reads the next tap index and sends `w[idx]` to its LIF unit
(`lif`). For example, an event list {0, 2, 3, 7} adds a + c + d + h over 4 cycles.

The LIF unit:

- At the start of a tile, loads `input_mp` if `p_choose` is set, else 0.
- Adds weights as they arrive, with saturation.
- Adds the bias once at the end of the tile.
- Fires if `(Vmem >>> 1) >= Vth`. `next_mp` is then 0 on a spike and Vmem otherwise.

`input_mp`, `p_choose`, `next_mp` and `mp_valid` are brought out of the top for an external
membrane-potential buffer. They are only needed when a layer must be split across passes; with
one time step and all input channels in one pass, tie `p_choose` low.

## 5. Weights: WMU, ping/pong buffers and the W-FIFO word

In off-chip memory, the weights of a layer are stored group after group, where a group is
4 output channels. Each group is `n_ic + 1` words of 289 bits (`wword_t`):

| word | `is_bias` | payload (288 bits) |
|---|---|---|
| input channel i (main channels first, then shortcut channels) | 0 | `payload[(o*9 + ky*3+kx)*8 +: 8]` = weight of output channel o of the group |
| last word | 1 | `payload[o*16 +: 16]` = bias of output channel o |

The WMU (`wmu`) fetches a group into the free one of its two buffers, ping and pong. It replays
that group into the W-FIFO once per tile, since every tile of the group needs the same weights.
While it replays, it already fetches the next group into the other buffer, so each weight is read
from off-chip memory once per layer.

The off-chip port is a valid/ready request with in-order responses. It may take any number of
cycles.

## 6. Write-back, residuals and on-the-fly QKFormer

Write-back (`writeback`) turns the 4 x 64 spikes of a tile into 8-bit pieces of map rows. It
writes them with a bit mask into the row `dst_base + channel*img_h + row` of the spikemap buffer.
Rows and columns past the image edge are dropped, and so are channels past `n_oc`. If `wr_sc` is
set, the same rows also go to the **shortcutmap buffer**.

A residual layer reads these rows back as `n_ic_sc` extra input channels, after its `n_ic_main`
ordinary ones. Its shortcut kernels then add the skip path into the same membrane potentials:

- an identity shortcut is a kernel with weight 1 at the centre tap only;
- a 1x1 convolution uses only the centre tap.

Every row then passes through `qkformer_unit`:

- **Q layer (`mode = WB_Q`).** Nothing is written. Each output channel's attention bit becomes
  the OR of all its spikes: `atten_reg[ch] |= OR(row)`. Set `atten_clr` in the layer
  description to clear the register first.
- **K layer (`mode = WB_K`).** A row is written unchanged if its channel's attention bit is set.
  Otherwise it is written as zeros, which is the token mask.
- **Normal layer.** Rows pass unchanged.

This costs one register stage and no extra cycles.

## 7. The W2TTFS classifier

An average pool over a window of ws x ws spikes gives count/ws². W2TTFS keeps the count
(`vld_cnt`) and uses the unit scale 1/ws² instead of a division. The classifier then adds the
feature's weight row `vld_cnt` times, which is the same as multiplying by the count. The unit
scale is a right shift by 2·log2(ws) at the output.

- **`ttfs_filter`** takes the final spike map channel by channel, one row per beat, and counts
  each window. It offers the non-empty windows to the FCU over `i_vld` / `i_ready`, with feature
  index ch·Ho·Wo + wy·Wo + wx. Window sizes are 1, 2 or 4, with at most 8 windows per row.
- **`fcu`** reads the weight row once, then adds it to all 100 class potentials in `vld_cnt`
  consecutive cycles.
- **`wtfc`** holds the FC weight memory (512 x 100 x 8 bit), the filter and the FCU. It reports
  `logit[k] = acc[k] >>> 2·log2(ws)` and the arg-max `class_idx`.

`neural_top` feeds the classifier from the spikemap buffer (`fc_start`, `fc_src_base`, ...).

## 8. Using the top level

1. While `busy` is low, write the input spike maps with `host_wr_en` (`host_wr_sc` selects the
   shortcutmap buffer). Channel c, row r of a map at base B is the word `B + c*H + r`; bit x is
   column x.
2. Put the weights in the off-chip memory as in section 5, and the FC weights through `fcw_*`.
3. For each layer, drive `cfg` (type `layer_cfg_t` in `neural_pkg`) and pulse `layer_start`.
   `layer_done` pulses when the last row has been written. The fields are:
   - `img_h`, `img_w`;
   - `n_ic_main` at `src_base`, and `n_ic_sc` at `sc_base`;
   - `n_oc`, `dst_base`, `wr_sc`;
   - `vth`, `mode`, `atten_clr`;
   - `w_base`, the off-chip address of the first weight word.
4. Pulse `fc_start` with the classifier's map description. Read `class_idx` and `logit` when
   `fc_done` pulses.

The spikemap buffer has 4096 rows and the shortcutmap buffer 2048 rows. A 64-channel 32x32 map
fills 2048 rows, so a layer can read one half of the spikemap buffer and write the other.

## 9. Simulating

Each testbench under `tb/` is self-checking. It prints `TB_RESULT checks=N failures=M` and has a
cycle watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/neural_pkg.sv tb/tb_neural_top.sv --top-module tb_neural_top
./obj_dir/Vtb_neural_top
```

Replace `tb_neural_top` with any block testbench (`tb_lif`, `tb_pe`, `tb_epa`, `tb_pipesda`,
`tb_wmu`, `tb_qkformer_unit`, `tb_ttfs_filter`, `tb_fcu`, `tb_wtfc`, ...). Each one compares the
block with an independent model: a golden convolution, a queue model, a bit-level buffer model,
and so on.

`tb_neural_top` runs the chip at its full default size and takes about 15 s. It runs a chain of
five layers and the classifier, checking every output bit and all 100 logits:

- a normal layer that also fills the shortcut buffer;
- a residual layer;
- a layer with partial tiles;
- a QKFormer Q layer, then a K layer.

It also requires that each mechanism of section 2 happened at least once. To force the
weights-late case, it slows down the off-chip memory model (`tb/offchip_mem.sv`).

`tb_workload_layers` runs layers shaped like those of the CIFAR networks at full size, in about
20 s. Every layer is checked bit by bit. Input maps have about 30 % spike density.

| layer | jobs (tile x input channel) | cycles | at 200 MHz |
|---|---|---|---|
| 16x16, 64 -> 128 channels (VGG-11 style) | 8192 | 337,708 | 1.7 ms |
| 16x16, 64 + 64 shortcut -> 64 channels (residual) | 8192 | 436,589 | 2.2 ms |
| 16x16, 64 -> 64, QKFormer Q layer (dense input) | 4096 | 382,991 | 1.9 ms |
| classifier, 512 features | - | about 1,700 | 8.5 us |

Most of the time goes to PipeSDA: about one cycle per input row plus one cycle per spike, for
every (tile, input channel) job. The PE array is idle much of the time (`stats.wait_spikes`).
The channel counts in these layers come from the usual definitions of those networks.

## 10. Departures and limits

- **Only 3x3, stride-1 convolutions are sequenced.** Pooling or strided downsampling layers, and
  the encoding of a non-spiking image into the first layer, are not built. A full VGG-11 or
  ResNet-11 therefore cannot run end to end, though each of its stride-1 layers fits in the
  buffers.
- **Word formats are this design's own.** The FIFO word formats and the mapping of 256 PEs to
  4 channels x 64 positions are not specified; the FIFO byte sizes are.
- **Fixed point, not floating point.** Weights are 8-bit fixed point. The evaluation also quotes
  an "FP8" precision; fixed point was chosen because quantization is described as fixed point.
- **QKFormer attention is per channel.** The text describes the attention bit both as an OR
  "across channels" and as a "per-channel activation status". This design keeps one bit per
  output channel, OR-ed over the whole Q map of that channel.
- **Classifier scaling is applied once.** The unit scale is applied after accumulation as a
  shift, rather than to each added weight. The sum is the same up to the final rounding.
- **Sizes chosen here.** Feature maps are at most 32 columns wide, the classifier window size is
  a power of two, and the FC memory is 512 features.
