# A reusable W1A3 convolution engine for Tincy YOLO

Tincy YOLO is a small object-detection network derived from Tiny YOLO. Its
hidden layers use binary weights (+1/-1) and 3-bit activations ("W1A3"), and
they account for more than 97 % of the work per frame. On a small
Zynq UltraScale+ device (XCZU3EG), the programmable logic can hold only
**one** convolutional layer together with the max pool that follows it. It
cannot hold a pipeline of all layers. So one engine is built, and the host
CPU runs the hidden layers through it one after the other, each time
loading that layer's weights and thresholds and streaming one feature map
through. The input layer (layer 1, 8-bit, on the CPU's NEON unit) and the
output layer (layer 15) stay in software.

This repository holds synthesizable SystemVerilog for that engine:

```
             cfg/start          w_* (weights)   t_* (thresholds)
                 |                   |                |
                 v                   v                v
 ifm_* ---> sliding_window ---> mvtu (PE x SIMD, WMEM, TMEM) ---> maxpool ---> ofm_*
  3-bit      im2col columns       binary MAC + 16-bit acc         2x2, stride 2 / 1
  SIMD lanes                      + 7-threshold activation        or pass-through
```

The streams `w_*`, `t_*`, `ifm_*` and `ofm_*` all use valid/ready.

## The layers it runs

Geometry of the hidden layers. Stride is 1 and padding is "same" throughout.
"Folds" are explained in the next section.

| layer | map in | ch in -> out | pool after | column beats `sf_n` | neuron folds `nf_n` | cycles (compute) | weights |
|---|---|---|---|---|---|---|---|
| 3  | 208x208 | 16 -> 64   | 2x2/2 (layer 4)  | 9   | 2  | 778,752 | 9,216 |
| 5  | 104x104 | 64 -> 64   | 2x2/2 (layer 6)  | 36  | 2  | 778,752 | 36,864 |
| 7  | 52x52   | 64 -> 128  | 2x2/2 (layer 8)  | 36  | 4  | 389,376 | 73,728 |
| 9  | 26x26   | 128 -> 256 | 2x2/2 (layer 10) | 72  | 8  | 389,376 | 294,912 |
| 11 | 13x13   | 256 -> 512 | 2x2/1 (layer 12) | 144 | 16 | 389,376 | 1,179,648 |
| 13 | 13x13   | 512 -> 512 | none             | 288 | 16 | 778,752 | 2,359,296 |
| 14 | 13x13   | 512 -> 512 | none             | 288 | 16 | 778,752 | 2,359,296 |

The table follows from the per-layer operation counts of the network and the
channel changes that turn Tiny YOLO into Tincy YOLO:

- layer 3 is widened to 64 channels;
- layers 13 and 14 are narrowed to 512;
- the first pool is removed and layer 1 gets stride 2.

For example, layer 3 is 208·208·64·16·9·2 = 797,442,048 operations.

A frame costs 4.28 M compute cycles in the engine, plus about 14 k beats of
weight and threshold loading. The measured total is 4.30 M cycles, about
21.5 ms at 200 MHz. The clock
frequency is an assumption. The published system reports about 30 ms for all
hidden layers together.

## Folding: how a convolution becomes PE x SIMD work

A convolution is a matrix product: weight matrix × im2col matrix. The
weight matrix has `ofm_ch` rows, one per output channel, and
`K·K·ifm_ch` columns. Each column of the im2col matrix is the K×K×C
footprint of one output pixel. The engine works through this product in
pieces:

- **SIMD** (default 16) input values of a column arrive per cycle. This
  piece of the column is a *column beat*, and a column has
  `sf_n = K·K·ifm_ch / SIMD` of them.
- **PE** (default 32) processing elements each compute one output channel.
  A set of PE channels is a *neuron fold*, and there are
  `nf_n = ofm_ch / PE` of them.
- For one output pixel, the MVTU runs the `sf_n` beats once for each
  neuron fold. That is `sf_n · nf_n` cycles per pixel, so 512 binary
  multiply-accumulates per cycle.
- The column comes from the sliding-window stream during the first fold. It
  is also written into a replay buffer, and the other `nf_n - 1` folds read
  it from there. The sliding window therefore only needs to supply one beat
  every `nf_n` cycles on average.

PE and SIMD must divide every layer's channel counts:

- SIMD ≤ 16, because layer 3 has only 16 input channels.
- PE ≤ 64 would be allowed by the smallest output-channel count. 32 is
  chosen so that PE·SIMD = 512 gives the per-frame time above.

### Arithmetic

- A weight bit of 1 means +1 and 0 means -1. Activations are unsigned
  0..7, because the network uses plain ReLU.
- Each PE adds its SIMD signed products into a 16-bit signed accumulator.
  The largest column (4608 values of at most 7) sums to at most ±32,256, so
  16 bits never overflow.
- At the end of a fold, the sum is compared with the channel's 7 ascending
  thresholds `t[0..6]`. The output activation is the number of thresholds
  with `sum >= t[i]`.
- The thresholds stand in for bias, batch normalisation, ReLU and
  requantisation together. A host that trained the network computes them
  offline.

### Memory layout (what the host must write)

| memory | one per | word | depth (default) | address | contents |
|---|---|---|---|---|---|
| WMEM | PE | SIMD bits | 4608 = 512·512·9/512 | `nf·sf_n + sf` | weights of channel `nf·PE+pe`, column beat `sf` |
| TMEM | PE | 7 × 16 bits | 16 = 512/PE | `nf` | thresholds of channel `nf·PE+pe` |
| replay buffer | MVTU | SIMD × 3 bits | 288 = 9·512/SIMD | `sf` | the current column |

Columns are ordered (ky, kx, channel). Column index `(ky·K + kx)·ifm_ch + c`
is lane `c % SIMD` of beat `(ky·K+kx)·ifm_ch/SIMD + c/SIMD`.

## Sliding window (im2col)

The input map arrives in raster order, channels lowest first. Each beat holds
SIMD channels of one pixel. Rows are stored in a ring of `MAX_K + 1 = 4` row
slots: row `r` goes to slot `r % 4`.

- Output row `oy` is emitted once rows up to `oy + pad` are held.
- Each output pixel's footprint is emitted in the order ky, kx, channel
  fold. Positions outside the map read as zero.
- Input is accepted during emission as long as it runs at most one row
  ahead of what row `oy` needs. The fourth slot takes that row, so a write
  never lands on a row that is still being read. The next row is normally
  complete by the time the current output row ends, so the only gap is one
  cycle per output row.
- The read port is registered, and the address counters stall together
  with it under back-pressure.

With only K slots, input would have to wait while a row is emitted. That
would cost about 5 % on layers 3 and 5, where a pixel needs only 18
cycles.

## Pooling

The pooling unit sees the MVTU's output beats: PE channels per beat, `nf_n`
beats per pixel, raster order. It has three modes:

- **pass-through** (`pool_en = 0`).
- **2×2, stride 2** (layers 4, 6, 8, 10). A row buffer holds one running
  maximum per pooled column and fold. The top-left pixel of each window
  initialises it and the bottom-right pixel completes it. The result leaves
  on the following cycle.
- **2×2, stride 1** (layer 12, 13×13 → 13×13). Here
  `out(y,x) = max(in(y..y+1, x..x+1))`, and positions outside the map are
  ignored. The unit keeps the previous pixel of the current row (one entry
  per fold). The row buffer holds the horizontal pair maxima
  `h(y-1,x) = max(in(y-1,x), in(y-1,x+1))` of the row above. Input `(y,x)`
  with x ≥ 1 forms `h(y,x-1)`. When y ≥ 1, it also emits
  `out(y-1,x-1) = max(h(y-1,x-1), h(y,x-1))`. The right-most column cannot
  be settled until the row has ended, so a `ROW_END` phase of `nf_n` cycles
  follows each row. After the last row, the row buffer holds the bottom
  output row, and a `FINAL` phase of `dim·nf_n` cycles emits it. Input is
  held off during both phases.

## Operating the engine

1. Put the layer description on `cfg` (type `qnn_pkg::layer_cfg_t`) and
   pulse `start` while `busy` is low. `cfg` holds `k` (1 or 3), `ifm_dim`,
   `ifm_ch`, `ofm_ch`, `pool_en` and `pool_s1`. `cfg` is sampled at this
   pulse.
2. Send `nf_n·sf_n` weight beats on `w_*`. Beat `i` is WMEM address `i` of
   every PE at once: lane `[p][s]` belongs to PE `p`, SIMD lane `s`.
3. Send `ofm_ch` threshold beats on `t_*`, channel 0 first.
4. Stream the input map on `ifm_*`, and collect the output map on `ofm_*`.
   Its size is `ifm_dim`, or `ifm_dim/2` for stride-2 pooling. It arrives
   in the same raster, channels-lowest-first order, PE channels per beat.
5. `done` pulses for one cycle after the last output beat has been taken.

A fully connected layer is the case `k = 1`, `ifm_dim = 1`.

Every stream carries an assertion that an offered beat stays stable until it
is taken.

Cycle counts at the default size with no stalls, from one simulated frame
in which each layer's output is the next layer's input. The bound is
compute plus weight and threshold loading:

| layer | cycles | bound |
|---|---|---|
| 3 + pool 4   | 779,256 | 778,834 |
| 5 + pool 6   | 779,726 | 778,888 |
| 7 + pool 8   | 390,070 | 389,648 |
| 9 + pool 10  | 390,630 | 390,208 |
| 11 + pool 12 (stride 1) | 392,838 | 392,192 |
| 13 | 784,710 | 783,872 |
| 14 | 784,710 | 783,872 |
| frame | 4,301,940 | |

At 200 MHz, the frame is 21.5 ms.

## Files

| file | contents |
|---|---|
| `rtl/qnn_pkg.sv` | widths (3-bit activations, 16-bit accumulator, 7 thresholds), `layer_cfg_t`, threshold function |
| `rtl/qnn_ram.sv` | dual-port RAM with registered read (WMEM, TMEM, replay buffer, line buffer) |
| `rtl/sliding_window.sv` | im2col generator |
| `rtl/mvtu.sv` | matrix-vector-threshold unit |
| `rtl/maxpool.sv` | 2×2 pooling, stride 2 or 1, or pass-through |
| `rtl/qnn_accel.sv` | top: layer sequencer and datapath |
| `tb/*_tb.sv` | one self-checking testbench per module |
| `tb/tincy_yolo_tb.sv` | a whole frame of the hidden layers through the engine |

Parameters of `qnn_accel`, with their defaults:

| parameter | default | why |
|---|---|---|
| `PE` | 32 | output channels per cycle; divides 64..512 |
| `SIMD` | 16 | input channels per cycle; divides 16..512 |
| `WMEM_DEPTH` | 4608 | 512·512·9 weights of layers 13/14 over PE·SIMD |
| `TMEM_DEPTH` | 16 | 512 output channels over PE |
| `IBUF_DEPTH` | 288 | longest column, 9·512, over SIMD |
| `ROW_WORDS` | 416 | largest `ifm_dim·ifm_ch/SIMD`: 104·64/16 (layer 5) = 13·512/16 (layers 13, 14) |
| `POOL_WORDS` | 208 | largest pool row buffer: 104·64/32 (layer 4) = 13·512/32 (layer 12) |

Every memory is sized for the largest Tincy YOLO layer. To run a bigger
network, raise the depths, and widen the `cfg` fields if needed. For
example, `ofm_ch` is 10 bits, so Tiny YOLO's 1024-channel layers would not
fit without that.

## Simulating

Each testbench builds standalone with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/qnn_pkg.sv tb/qnn_accel_tb.sv --top-module qnn_accel_tb
./obj_dir/Vqnn_accel_tb
```

Each testbench prints `TB_RESULT checks=N failures=M`. How each one works:

- **All testbenches.** They generate random data, compute the expected
  results themselves, and apply random stalls on every stream. They also
  have a cycle watchdog.
- **`qnn_accel_tb`.** It runs at the default parameters. It covers small
  layers of every kind, then Tincy YOLO layers 9 (with pooling), 11 (with
  the stride-1 pool) and 13 at full size, checking every output beat and
  the cycle counts. It also checks that each mechanism occurred at least
  once: input stall, output back-pressure, both pooling strides,
  pass-through, padding, 1×1 kernels and fold replay. It runs in about 12
  seconds.
- **`tincy_yolo_tb`.** It runs layers 3 to 14 of one frame in sequence
  (about 45 seconds). It starts from a random 208×208×16 map with
  thresholds spread over the sums, so all eight output levels occur. It
  checks every output value of every layer, each layer's cycle count
  against the bound (within 1 %) and one `done` pulse per layer.
- **Unit testbenches.** They use smaller PE/SIMD/memory sizes. `mvtu_tb`
  and `maxpool_tb` also check the one-beat-per-cycle rate.

## How far this follows the published design

**Taken from the paper:**

- W1A3 quantisation of the hidden layers;
- one generalized convolutional layer plus its pooling layer, reused for
  every layer;
- the FINN-style organisation into PE, SIMD, a weight memory and a threshold
  memory, with the 16 that appears among the layer's template arguments
  (read here as the accumulator width);
- 2×2 pooling;
- the layer geometries.

**Own choices, not published:**

- PE = 32 and SIMD = 16;
- the 7-threshold activation encoding and the weight bit encoding;
- zero "same" padding;
- the column order;
- the four-slot line buffer and its schedule;
- the replay buffer;
- the stride-1 pooling border rule, taken from the reference Tiny YOLO
  network;
- the load protocol and stream formats;
- the asynchronous active-low reset.

**Conflicting sources.** In the published figure of the HLS code, each layer
appears as its own template instance. This RTL follows the text instead: it
has one engine, configured at run time. The figure of the offload
configuration gives the offload's output as 13×13×125, which is the output
of layer 15. This RTL follows the text and the layer table instead, which
keep layer 15 on the CPU.

**Not here:**

- the CPU side: the NEON 8-bit first layer, the multi-threaded frame
  pipeline and its buffer hand-over, and the Darknet offload layer;
- the DMA and DRAM that hold feature maps and weights between layers. These
  appear as the four streams on the top.
