# A folded, tile-pipelined accelerator for bundle-based DNNs

This RTL implements an FPGA-class DNN accelerator for compact object-detection
networks. The networks are built by repeating one hardware-friendly building
block, a **bundle**:

    DW-Conv3 (depth-wise 3x3)  ->  PW-Conv1 (point-wise 1x1)  ->  2x2 max-pool

The accelerator has two main ideas:

* **Folded across bundles.** There is one DW-conv IP, one PW-conv IP and one
  pooling IP, and they compute every bundle of the network in turn. Bundles
  differ only in their sizes, so a small descriptor per bundle is enough to
  reconfigure the shared hardware. Intermediate feature maps go back to
  off-chip memory between bundles.
* **Unfolded and pipelined inside a bundle.** A bundle is cut into spatial
  tiles. The operations of the bundle run as a pipeline over these tiles.
  While the DW stage convolves tile *t+1*, the PW stage runs the point-wise
  convolution and pooling of tile *t*.

The default precisions are 16-bit weights and 8-bit feature maps. These
precisions give the fastest of the three reference networks below.

## Reference networks

All three networks take a 3x160x360 colour image. They share the first three
bundles. From bundle 2 to bundle 4 each bundle doubles the channel count:

| bundle | DNN-A (W16,F8) | DNN-B (W16,F16) | DNN-C (W11,F8) |
|---|---|---|---|
| 1 | DW3(3), PW1(48), pool | same | same |
| 2 | DW3(48), PW1(96), pool | same | same |
| 3 | DW3(96), PW1(192), pool | same | same |
| 4 | DW3(192), PW1(384) | same | DW3(192), PW1(384) |
| 5 | PW1(10) | PW1(10) | DW3(384), PW1(512) |
| 6 | | | PW1(10) |

A bounding-box regression back-end follows the final 10-channel map. It is not
part of this RTL. The accelerator writes that map to memory for whatever
computes the back-end.

How these run on the default build:

* **DNN-A** runs as is. The full-size testbench runs the whole network and
  checks every output word.
* **DNN-C** also runs as is. Its 11-bit weights fit the 16-bit weight path,
  and its 512 channels equal the buffer limit. A second full-size testbench
  runs it.
* **DNN-B** needs 16-bit feature maps. Set `FM_W = 16` in `cd_pkg`. The
  40-bit accumulator is wide enough for that.

## Block diagram

```
                 +-------------------- bundle_accel ------------------------+
 cfg[ ] -------> | layer sequencer --- PW-weight loader ---> pw_weight_buf  |
 start/done <--> |       |                                        |        |
                 |       v                                        v        |
 mem_rd_* <----- | dw_stage: halo fetch -> dw_conv3_ip -> fm_pingpong_buf  |
                 |                                   (bank 0 / bank 1)     |
                 |                                          |              |
 mem_wr_* <----- | pw_stage: pw_conv1_ip -> maxpool2_ip -> address gen     |
                 +---------------------------------------------------------+
```

| file | role |
|---|---|
| `rtl/cd_pkg.sv` | widths, the `layer_cfg_t` descriptor, the `requant()` function |
| `rtl/bundle_accel.sv` | top: layer sequencer, PW parameter loader, bank hand-over, performance counters |
| `rtl/dw_stage.sv` | tile walker, halo fetch with zero padding, DW weight fetch, writes the ping-pong bank |
| `rtl/dw_conv3_ip.sv` | line-buffer 3x3 depth-wise convolution, one pixel per cycle |
| `rtl/fm_pingpong_buf.sv` | two-bank tile buffer, LANES channels per word |
| `rtl/pw_weight_buf.sv` | on-chip copy of a bundle's PW weights and biases |
| `rtl/pw_stage.sv` | PW loop over pixels, output channels and channel groups; pooling; write-back addresses |
| `rtl/pw_conv1_ip.sv` | LANES-wide dot product with accumulation over groups |
| `rtl/maxpool2_ip.sv` | 2x2/2 max-pool on a channel-interleaved stream, with bypass |

## The tile pipeline in detail

This is the part that needs the most care.

**Tiles and halo.** A bundle's input map of size `h x w` is walked in tiles of
up to `TILE_H x TILE_W` (16x16) output pixels, row of tiles by row of tiles.
Tiles at the right and bottom edges are smaller. For a DW bundle, the DW stage
fetches each tile with a one-pixel halo, `(th+2) x (tw+2)` pixels per channel.
A halo pixel outside the image is not read; a zero is inserted instead. The
result is a "same" 3x3 convolution with zero padding. So every pooled bundle
halves the map: 160x360, 80x180, 40x90, 20x45. Tiles must have even heights
and widths in pooled bundles. This holds when the tile size and the map size
are both even.

**DW stage.** Channels are processed one at a time. For each channel the stage:

1. reads nine weights and a bias from off-chip memory (10 cycles);
2. streams the halo tile through `dw_conv3_ip` at one pixel per cycle;
3. writes each result into lane `c % LANES` of word `(c / LANES, pixel)` of the
   current bank;
4. waits for the IP's two-cycle pipeline to drain.

A tile costs about `c_in * ((th+2)(tw+2) + 14)` cycles. In a PW-only bundle
(`dw_en = 0`) the tile is streamed without halo and the IP is in bypass, so
the bank receives the raw input.

**Bank hand-over.** When the last channel of a tile is written, the DW stage
pulses `tile_done`. The controller marks that bank full and stores the tile's
origin and size with it. The DW stage then moves on to the other bank. If
that bank is still full, the DW stage waits; this shows in `dw_stall_cycles`.
The PW stage is started on the oldest full bank. When it reports `done`, the
bank is freed. A bundle ends only when these four conditions all hold:

* the DW stage has produced all tiles;
* no hand-over pulse is still in flight;
* both banks are empty;
* the PW stage is idle.

An assertion in the top checks that the DW stage never writes the bank that
the PW stage is reading.

**PW stage.** For each tile pixel (raster order), each output channel `k`, and
each channel group `g`, the PW stage does the following:

* It reads one LANES-wide word of the bank and the matching weight word.
  Lanes past `c_in` are forced to zero.
* `pw_conv1_ip` forms the partial dot product. It starts from the bias on
  the first group and closes the sum on the last group, then shifts,
  applies ReLU and saturates.
* The result carries its `(y, x, k)` coordinates into `maxpool2_ip`.

A tile costs `th * tw * c_out * ceil(c_in / LANES)` cycles plus a 6-cycle
drain.

**Pooling.** Results arrive with all output channels of a pixel together, so
the pool keeps a partial maximum per `(x/2, k)`. The top-left pixel of a 2x2
window starts the partial maximum, and the bottom-right pixel emits the
pooled value. The output word address is
`out_base + k*Ho*Wo + (y0/p + y)*Wo + (x0/p + x)` with `p = 2` when pooling,
`p = 1` otherwise.

**Where the time goes.** The cycle count of one bundle is, to within a few
cycles per tile:

    c_out*c_in + c_out  +  DW(tile 0)  +  sum over tiles t of max(PW(t), DW(t+1))

Here `PW(t) = th*tw*c_out*ceil(c_in/16)`. `DW(t)` is `c_in*((th+2)(tw+2)+14)`
for a DW bundle and `c_in*(th*tw+3)` for a PW-only bundle. The full-network
testbenches check the measured count against this formula to within 1%; it
actually agrees to within 0.03%. A schedule without stage overlap would take
about 12% longer on DNN-A. In both simulated networks the PW stage is the slower
stage, so the DW stage spends most of its time stalled. The cycle counts
measured on the full-size testbenches are:

| network | cycles per image | at 100 MHz | at 200 MHz |
|---|---|---|---|
| DNN-A | 15,816,819 | 6.3 fps | 12.6 fps |
| DNN-C | 27,335,402 | 3.7 fps | 7.3 fps |

For comparison, the original FPGA implementation of these networks reported
29.7 fps (A) and 17.4 fps (C). It gave no clock frequency or datapath width.
Raising `LANES` shortens the PW stage almost in proportion. The per-bundle
PW weight load (`c_out * c_in` cycles) also adds a small serial term.

## Arithmetic

* Feature maps are signed `FM_W`-bit values. Off-chip memory holds them one
  per 16-bit word, sign-extended. The input image is read from the low
  `FM_W` bits.
* Weights and biases are signed 16-bit. A bias is added in accumulator
  scale, before the shift.
* The accumulator is 40 bits. That is enough for 512 input channels at
  16x16 bits, and also for 16-bit feature maps.
* Requantisation (`cd_pkg::requant`) works in three steps: arithmetic right
  shift by a per-bundle amount, optional ReLU, then saturation to the signed
  `FM_W` range. The DW and PW convolutions each have their own shift and
  ReLU enable.

## Programming model

The host fills `cfg[0 .. num_layers-1]` with one `layer_cfg_t` per bundle and
pulses `start`. The descriptor fields are:

| field | meaning |
|---|---|
| `c_in`, `c_out` | channels into the bundle, channels out of the PW conv (up to 512) |
| `h`, `w` | input map size (up to 511) |
| `dw_en`, `pool_en` | bundle has a DW conv / a max-pool |
| `relu_dw`, `relu_pw`, `shift_dw`, `shift_pw` | requantisation controls |
| `in_base`, `out_base` | word addresses of the input and output tensors, layout `[c][y][x]` |
| `dw_base` | per channel: 9 weights (`ky*3+kx`), then the bias |
| `pw_base` | `c_out*c_in` weights (`[k][c]`), then `c_out` biases |

For chaining, set `out_base` of one bundle as `in_base` of the next. For each
bundle the accelerator first copies the PW parameters into `pw_weight_buf`
(`c_out*c_in + c_out` cycles), then runs the tiles. `done` pulses once after
the last bundle. The memory interface is a plain word-addressed read port
with a fixed one-cycle latency and a write port that accepts a write every
cycle. A real system would put a DMA/AXI adapter with buffering here.

## What follows the original design and what was chosen here

The following come from the original description:

* the bundle (DW-Conv3, PW-Conv1, 2x2 max-pooling) as the reusable block;
* one set of computing IPs reused for all bundles;
* the operations inside a bundle pipelined over tiles;
* an on-chip memory between the IPs, with feature maps and parameters off
  chip;
* the three network configurations and their precisions;
* the 3x160x360 input.

Everything below the block level was chosen for this implementation, because
the original gives no details. That covers:

* the 16x16 tile size, the 16 lanes, the two-stage split at the DW/PW
  boundary, and the ping-pong bank;
* loading the whole PW weight set of a bundle on chip, and re-fetching the
  DW weights per tile;
* zero "same" padding and the requantisation scheme (shift, ReLU, saturate);
* ReLU after both convolutions (the template shows an activation, but the
  network table lists none);
* the descriptor format, the memory layout and the memory interface.

Known departures and limits:

* The original datapath width and clock are unknown, so throughput does not
  match the reported frame rates (see the table above).
* The bounding-box back-end, the host processor and the DRAM system are
  outside this RTL.
* Pooled bundles need even tile and map sizes.
* The memory port has no back-pressure. A real memory system needs either a
  stall input or a prefetch buffer in front of the DW stage.
* `pw_weight_buf` at 512x512x16 bits (4 Mbit) is sized for DNN-C. DNN-A needs
  at most 384x192.

## Verification

Each IP and buffer has a self-checking testbench in `tb/` that compares its
outputs with values computed in the testbench:

* `tb_dw_conv3_ip`: several frame sizes, gaps, back-to-back frames, bypass,
  and the 2-cycle latency.
* `tb_pw_conv1_ip`: 1 to 5 groups, tags, and the 2-cycle latency.
* `tb_maxpool2_ip`: several tile shapes and channel counts, and bypass.
* `tb_fm_pingpong_buf`: bank, group and lane isolation while both banks are
  in use.
* `tb_pw_weight_buf`: loader order and group reads.

`tb_bundle_accel` runs a small four-bundle network (3x20x36 input) end to end
against a reference model. It also counts that each mechanism actually
happens: zero padding, partial tiles, pooled and unpooled bundles, DW bypass,
multi-group accumulation, masked lanes, ReLU, saturation, stage overlap, DW
stalls and PW waits.

`tb_dnn_a_full` and `tb_dnn_c_full` run the complete DNN-A and DNN-C networks
at full size on random data with the default parameters. They compare every
output word of every bundle; this is about 1.6M and 2.0M words. They also
check the cycle count against the pipeline formula above. Each takes
well under a minute of simulation.

To simulate with Verilator (5.x), run from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
          --top-module tb_dnn_a_full rtl/cd_pkg.sv tb/tb_dnn_a_full.sv
./obj_dir/Vtb_dnn_a_full
```

Replace the module name to run any other testbench. Each prints one line of
the form `TB_RESULT checks=N failures=M`. The full-network testbenches
include `tb/tb_dnn_common.svh`, which holds the memory model, the reference
model and the layout code.

## Changing the design

* **Precision:** set `W_W`, `FM_W` and `ACC_W` in `cd_pkg`. FM values must
  fit in a `W_W`-bit memory word.
* **Parallelism:** the `LANES` parameter of `bundle_accel` sets the PW
  parallelism, `TILE_H` and `TILE_W` the tile size. Keep the tile size even
  for pooled bundles, and `CMAX` a multiple of `LANES`.
* **Larger networks:** raise `CMAX`, `DIM_W` and `HW_W` in `cd_pkg`, and
  `MAX_LAYERS` on the top.
