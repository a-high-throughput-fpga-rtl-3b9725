# Streaming lightweight-CNN accelerator with hybrid compute engines

Lightweight CNNs such as MobileNetV2 and ShuffleNetV2 change character along
their depth. Early layers have large feature maps and few weights. Late layers
have small maps and most of the weights. A streaming accelerator gives every
layer its own compute engine (CE), and all CEs run at the same time on
consecutive parts of the image. If every CE uses the same buffering pattern,
one half of the network wastes memory. With weights on chip the deep layers
are too large; with whole feature maps on chip the shallow layers are.

This design uses two kinds of CE and puts a *group boundary* between them:

* **Feature-map reused CE (FRCE)**, for shallow layers. All weights stay on
  chip in a small ROM. The feature map passes through once, as a
  *channel-first* pixel stream (one beat = all channels of one location).
  A line buffer holds only the rows a 3x3 window still needs. A pixel's
  storage is reused as soon as no future window can touch it.
* **Weight reused CE (WRCE)**, for deep layers. The whole input map is held
  on chip in a ping-pong buffer. Weights come from DRAM one kernel group at a
  time, and each group is applied to every position of the map. So each
  weight is fetched from DRAM exactly once per image. The feature map moves
  *location-first* (all positions of one channel, then the next channel).

The first WRCE after the boundary turns the channel-first stream into
location-first order inside its own buffer (the *order converter*).
Throughout, parallelism is taken across output kernels (Pw) and across
feature positions (Pf). Kernel counts that are not a multiple of Pw are
padded, so any Pw can be chosen (the *fine-grained parallel mechanism*,
FGPM).

The RTL is SystemVerilog in `rtl/`. Self-checking testbenches are in `tb/`.

## The network slice in `lwcnn_accel`

The top level chains eight layers. They are a representative piece of a
MobileNetV2-style network at full 224x224 input size, so that every CE type
and every inter-CE mechanism is present:

| CE | kind | layer | map | channels | Pf x Pw | shift, ReLU |
|---|---|---|---|---|---|---|
| L0 | FRCE | standard conv 3x3, stride 2, pad 1 | 224 -> 112 | 3 -> 16 | 1 x 16 | 8, yes |
| L1 | FRCE | depthwise 3x3, stride 2, pad 1 | 112 -> 56 | 16 | 1 x 4 | 6, yes |
| L2 | FRCE | pointwise | 56 | 16 -> 16 | 1 x 3 (padded to 18) | 7, no |
| L3 | FRCE | pointwise (in skip block) | 56 | 16 -> 32 | 1 x 8 | 7, yes |
| L4 | FRCE | depthwise 3x3, stride 1 (in skip block) | 56 | 32 | 1 x 4 | 6, yes |
| L5 | FRCE | pointwise (in skip block) | 56 | 32 -> 16 | 1 x 8 | 8, no |
| -- | shortcut | L2 output + L5 output, saturating | 56 | 16 | | |
| L6 | WRCE + converter | pointwise | 56 | 16 -> 32 | 8 x 4 | 7, yes |
| L7 | WRCE | pointwise | 56 | 32 -> 24 | 8 x 4 | 8, no |

The channel counts are top-level parameters (`C0, C1, C2, CX, C6, C7`). The
Pw/Pf values and shifts are local parameters in `lwcnn_accel.sv`. A full
network is built by chaining more of the same CEs. Their parameters would
come from a design-time search that picks the group boundary and each layer's
Pf/Pw so that all CEs take about the same number of cycles per image. That
search is not part of the RTL; the slice's Pw values were balanced by hand
in the same spirit (see *Throughput*).

## Numbers

* Activations and weights are signed 8-bit; products are summed in 32 bits.
* Each output is requantised with an arithmetic right shift by `SHIFT`, an
  optional ReLU, and saturation to [-128, 127] (`lwcnn_pkg::requant`). The
  skip-block addition saturates as well (`add_sat`). The real networks would
  use per-layer scales and biases. This shift-only form is a simplification
  that keeps the reference model bit-exact.

## FRCE: window schedule

`frce` handles three layer types (`TYPE`):

* standard convolution (STC, K x K x CIN kernels);
* depthwise convolution (DWC, one K x K kernel per channel);
* pointwise convolution (PWC, 1x1).

For every output pixel (oy, ox), it runs over kernel groups g = 0..G-1,
where G = ceil(COUT/PW). For each group it runs over T steps, which are
(ky, kx, ci) with ci fastest:

* STC: T = K*K*CIN;
* DWC: T = K*K;
* PWC: T = CIN.

Each step reads one pixel word from the line buffer and one weight word of
PW weights from the ROM. The PE array then does PW multiply-accumulates.
In DWC mode every PE row takes its own channel's byte from the pixel.

The cycle count is therefore exactly G*T per output pixel, with no bubble
between windows as long as input and output keep up. `tb_frce` checks this
rate.

The ROM word address is `g*T + t`. Lane w of that word holds kernel `g*PW+w`.
Lanes of a padded last group may hold anything. Their results are computed
and then dropped: only the real COUT channels reach the output pixel.

The results of a window are gathered across groups into one COUT-channel
pixel. That pixel goes to a two-entry output FIFO, which is the CE's output
port. The last group of a pixel starts only if the FIFO will have room, so
backpressure can never overflow it (an assertion checks this).

## FRCE: line-buffer lifetime

This is the subtle part of the design.

`line_buffer` stores NL rows of W pixels, one pixel word (all channels) per
address. Row r of the image lives in slot r mod NL. NL is K, or K+1 when the
stride is above 1; the extra row lets the input keep flowing while a strided
window still needs rows that a stride-1 layer would already have released.
Pixels are numbered by a global 32-bit count over all images (`wr_count`).

Two numbers control the buffer:

* **Accept rule.** A new pixel is accepted only while
  `wr_count < free_idx + NL*W`, where `free_idx` is the oldest pixel that a
  future window may still read. The controller recomputes `free_idx` for
  every window. Let `row0 = oy*S - PAD` and `col0 = ox*S - PAD`. Then:
  * `lo = max(0, row0)` and `next_lo = max(0, row0 + S)`;
  * `free_idx = image_base + lo*W`;
  * add `max(0, col0)` only if `next_lo > lo` or this is the last output row.

  Put simply, pixels to the left of the window are dead only when the next
  output row no longer starts at the same input row. With padding this is
  not always so: near the top edge two output rows can start at input row 0.
  Freeing those pixels too early corrupts the next row.
* **Window rule.** A window may start once its bottom-right pixel has
  arrived (`wr_count > index of that pixel`). Coordinates outside the image
  are clamped for this test.

The result is that the CE holds about (K-1) rows plus K pixels of live data.
It starts a window as soon as the last pixel arrives, and it streams the
next image in behind the current one. `image_base` and the read-side slot
base move forward at the end of each image.

**Padding is never stored.** The window reads with signed coordinates. Any
coordinate outside the image returns zero. So the line buffer holds only
real pixels, and padding costs no write bandwidth.

**Pointwise layers do not need rows.** For PWC the same module is used as a
1-pixel x 2-entry buffer (geometry H*W x 1, NL = 2). That is a two-pixel
input register, so the next pixel can arrive while the current one is being
used.

## Dataflow order converter

`gfm_buffer` with `CONVERTER = 1` is the global FM buffer of the first WRCE.
Its storage is split into NB = 2 banks. Every word holds PF positions of one
channel, and each byte lane has its own write-enable.

An incoming channel-first pixel at position p is serialised NB channels per
cycle. Channel c is written to:

* bank `c mod NB`;
* word `(c div NB)*NPG + p div PF` of the active half, where NPG = ceil(HW/PF);
* lane `p mod PF` only, through the byte mask.

After the last pixel of the map, every word holds PF consecutive positions of
one channel. That is exactly what the location-first WRCE reads. The
transpose costs no storage beyond the buffer itself. It costs ceil(C/NB)
cycles per input pixel; `in_ready` rises in the last of those cycles.

For example, with 6 channels, 4 positions and 2 banks, each pixel takes three
cycles. Even channels go to bank 0 and odd ones to bank 1, and one read
returns four positions. `tb_order_converter` checks this case cycle by cycle.

With `CONVERTER = 0` the same buffer accepts location-first words (one
position group of one channel per beat). It writes them whole.

## WRCE: one weight fetch per image

`wrce` (used here for pointwise layers) contains:

* a `gfm_buffer` that holds the whole map twice, so the next image can be
  written while this one is read;
* a `weight_buffer`: ping-pong storage of one kernel group, CIN words of PW
  weights;
* a PF x PW `pe_array`;
* a `wrce_out_buffer`.

For each image, the loops run g (kernel group), then pg (position group of PF
positions), then ci:

```
PE(f, w) += x[ci][pg*PF + f] * w[g*PW + w][ci]
```

After CIN cycles a tile of PF x PW results is requantised and written to the
output buffer as a single word. A kernel group is applied to the whole map
before the next one is used. So the DRAM weight stream is exactly
G x CIN words per image, in group order, and the next group loads while the
current one is in use.

The run takes G*NPG*CIN cycles per image, with no bubbles as long as:

* the next weight group is present;
* an output half is free. A group starts only if the output buffer has more
  free halves than groups already in flight.

The output buffer collects one kernel group's tiles. It then replays them
channel by channel, PF positions per beat, with `out_last` on the last beat
of a group. It drops FGPM-padded kernel lanes and positions past the end of
the map. It is double-buffered, so the array fills one group while the last
one drains.

**Fully connected layers** are the same CE with H = W = 1 and PF = 1
(`tb_fc_ce` runs 64 -> 10 with Pw = 4).

## WRCE for depthwise layers

A deep depthwise layer sums nothing across channels. Its input arrives
location-first, one channel at a time, so a WRCE only needs the channel it
is working on. `wrce_dwc` keeps that channel plane (H x W bytes, small in
deep layers) in a ping-pong pair of register planes, so the next channel
arrives while this one is computed. Each channel's K x K kernel comes from
DRAM into a ping-pong weight buffer, so again every weight is read once per
image.

Its Pf PEs share the weight of one tap. For output positions opg*Pf ..
opg*Pf+Pf-1 and tap (ky, kx), each PE fetches its own input pixel from the
plane. A coordinate outside the map gives zero, and the PE's lane may wrap
to the next output row inside one word. After K*K cycles the Pf sums leave
as one location-first word, with `out_last` after the last word of a channel.
That is ceil(HO*WO/Pf)*K*K cycles per channel.

The module is verified on its own (`tb_wrce_dwc`). The slice in
`lwcnn_accel` has no deep depthwise layer: its WRCEs work on a 56x56 map,
where a register plane would be large.

## Skip-connection block

`scb_shortcut` copies the block's input stream:

* One copy goes into the block's main branch (L3-L5).
* The other copy goes into a delayed buffer, a FIFO of `DEPTH` pixels.

Each pixel leaving the branch is added, with saturation, to the oldest FIFO
pixel. The input is accepted only when both the branch and the FIFO can take
it. The FRCEs release data after about two rows, so the branch lags its
input by at most about two rows. `DEPTH = 2*W` is therefore enough; the
full-size run peaks at 59 of 112 pixels. A FIFO shallower than the branch
latency would deadlock the block. The shortcut never travels to DRAM.

## Interfaces and timing

All streams use valid/ready and transfer on a rising clock edge when both
are high. Reset `rst_n` is asynchronous and active low.

`lwcnn_accel` ports:

| port | meaning |
|---|---|
| `in_valid/in_ready/in_pix[C0*8]` | image, channel-first, raster order, images back to back |
| `wld_en, wld_sel[2:0], wld_addr[15:0], wld_data[16*8]` | writes one ROM word of FRCE `wld_sel` (0..5); lanes above that layer's Pw are ignored; load before streaming |
| `wt6_valid/wt6_ready/wt6_data[4*8]`, `wt7_*` | DRAM weights of L6/L7: per image, for g = 0..G-1, CIN words, lane w = kernel g*PW+w (padded lanes zero) |
| `out_valid/out_ready/out_word[8*8]/out_last` | L7 result, location-first: per channel, the 8-position groups of the 56x56 map; `out_last` ends a kernel group |
| `ce_busy[7:0]` | per-CE PE-array activity, for utilisation counts |

Latencies inside the CEs:

* ROM, weight-buffer and feature-map reads return data one cycle after the
  request.
* A PE's sum is valid one cycle after its `last` operand.
* Requantisation is registered together with the result collection, so a
  finished sum reaches the CE output one or two cycles later.

## Throughput of the default build

A CE's cycles per image are G*T per output pixel times the output pixels
(FRCE), or G*NPG*CIN (WRCE). The Pw values are the fewest lanes that keep
every CE at or below the first layer. With Pf = 1 the first layer cannot go
below 27 cycles per output pixel (one lane per kernel, 3*3*3 steps).

| CE | Pf x Pw | cycles per image |
|---|---|---|
| L0 | 1 x 16 | 338,688 |
| L1 | 1 x 4 | 112,896 |
| L2 | 1 x 3 | 301,056 |
| L3 | 1 x 8 | 200,704 |
| L4 | 1 x 4 | 225,792 |
| L5 | 1 x 8 | 200,704 |
| L6 | 8 x 4 | 50,176 |
| L7 | 8 x 4 | 75,264 |

So the slice takes one image per 338,688 cycles in steady state, about
590 images/s at 200 MHz. The full-size testbench measures exactly these busy
counts per image for every CE. (Its total run time is longer, because it
holds the result stream for 800,000 cycles on purpose to fill the WRCE
buffers.)

The WRCEs are idle most of the time. Their Pf x Pw could be cut to 4 x 2
and they would still keep up, but the output word width (Pf bytes) is part
of the top's result port, so the defaults keep Pf 8. The default build has
107 multipliers.

## Simulating

The testbenches need only Verilator 5 (`--timing`) and no other files. Build
any of them like this:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  --top-module tb_frce -y rtl -y tb +libext+.sv \
  rtl/lwcnn_pkg.sv tb/lwcnn_ref_pkg.sv tb/tb_frce.sv
./obj_dir/Vtb_frce
```

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

Stimulus and weights are random. Expected values come from
`tb/lwcnn_ref_pkg.sv`, an independent integer model of the convolutions,
written in plain loops over the channel-first array layout. It is not
derived from the RTL.

| testbench | what it covers |
|---|---|
| `tb_mac_pe`, `tb_pe_array` | products, kernel boundaries, depthwise rows |
| `tb_weight_rom`, `tb_weight_buffer` | load/read, ping-pong hand-off, hold-off when full |
| `tb_line_buffer` | the accept rule, slot wrap, zero reads outside the image |
| `tb_frce` | STC stride 2 with a padded kernel group, DWC, PWC with Pw = 5, two images, random stalls, and the exact G*T rate without stalls |
| `tb_gfm_buffer`, `tb_order_converter` | ping-pong halves; converter bank placement, masks and cycles per pixel |
| `tb_wrce_out_buffer` | tile replay, dropping padded channels |
| `tb_wrce`, `tb_fc_ce` | whole WRCE with and without converter, weights counted once per image, the G*NPG*CIN rate |
| `tb_wrce_dwc` | depthwise WRCE at stride 1 and 2, a word spanning several output rows, zeroed tail lanes, the K*K rate |
| `tb_scb_shortcut` | copy, delay and saturating add under random stalls |
| `tb_lwcnn_accel` | the whole slice at 24x24 input; compares every result against the reference model, and fails if any of ten mechanisms never happened: backpressure, padding, next-image overlap, FGPM lanes, shortcut adds, masked converter writes, GFM/weight/output ping-pong, result stalls |
| `tb_lwcnn_accel_full` | the same at the default 224x224 size (about 5 s) |

## What differs from the architecture as published

* **FRCEs have Pf = 1 only**, so they work on one window at a time. Wider Pf
  for FRCEs (and the output reshaping it would need) is not built.
* **WRCEs handle pointwise, fully connected and (in `wrce_dwc`) depthwise
  layers.** Deep standard convolutions are not built. Neither is the WRCE
  shortcut, which would keep the skip data in DRAM. The depthwise WRCE keeps
  the whole channel plane rather than only the few lines a window needs, and
  it is not part of the top-level slice. In the slice, the skip block sits in the
  FRCE group.
* **No pooling, channel split, concatenation or channel shuffle.** These are
  needed for the complete MobileNetV2 (global pooling before the classifier)
  and ShuffleNetV2. For that reason the FC CE is tested on its own and is not
  in the top.
* **A slice, not a full network.** The per-layer configuration of the
  published MobileNetV2/ShuffleNetV2 builds is not given, so the eight
  layers, their channel counts, Pw/Pf and shifts are this design's own.
* **One multiplier per PE.** Packing two 8x8 products into one DSP slice is
  a vendor-specific mapping and is not modelled.
* **FRCE weights are loaded through a port** rather than fixed at
  configuration, so no weight files are needed.
* **Requantisation** by shift/ReLU/saturate is this design's own.
* **Inter-CE transfers are whole pixels** (FRCE) or whole PF-position words
  (WRCE). No separate width adapter stage is needed.
