# A streaming deconvolution accelerator for quantized DCGAN generators

A DCGAN generator turns a short noise vector into an image. It does this with a
stack of transposed convolutions ("deconvolutions"). Each one doubles the
height and width of the feature map and cuts the channel count. This RTL runs
such a generator in hardware, with quantized weights and activations, as a
fully pipelined dataflow:

* every layer has an engine of its own;
* all engines work at the same time on different rows and frames;
* all weights and thresholds live on chip and are loaded at run time.

Each engine does not build a special deconvolution datapath. It rewrites the
transposed convolution as an ordinary stride-1 convolution over a
zero-expanded input. Zeros are inserted between the input pixels and a zero
border is added. A convolution engine then runs over that map:

```
input 3x3, stride 2                 expanded 5x5 (no border shown)
 1 4 7                               1 0 4 0 7
 2 5 8        --expand-->            0 0 0 0 0
 3 6 9                               2 0 5 0 8
                                     0 0 0 0 0
                                     3 0 6 0 9
```

The convolution engine is the matrix-vector-threshold design used for
quantized neural networks on FPGAs. PE output channels are computed in
parallel, each over SIMD input elements per clock. A staircase of thresholds
then maps each accumulator to an n-bit activation, which is a quantized ReLU.

## Default configuration: MNIST generator, W4A4

The parameter defaults build the MNIST generator with 4-bit weights and 4-bit
activations:

| engine | input map | output map | K / stride / pad | SIMD | PE | cycles per frame |
|---|---|---|---|---|---|---|
| 1 | 1x1x16 (noise) | 4x4x128 | 4 / 1 / 0 | 4 | 4 | 32768 |
| 2 | 4x4x128 | 8x8x64 | 4 / 2 / 1 | 16 | 8 | 65536 |
| 3 | 8x8x64 | 16x16x32 | 4 / 2 / 1 | 16 | 8 | 65536 |
| 4 | 16x16x32 | 32x32x1 | 4 / 2 / 1 | 8 | 1 | 65536 |

An engine needs (COUT/PE) * (K*K*CIN/SIMD) cycles per output pixel. That is
its folding factor, and the zeros of the expanded map are computed like any
other value. Engines 2-4 are balanced at 65536 cycles per frame. That gives
about 1900 frames/s at 125 MHz. In simulation the whole pipeline delivers one
frame every 67.4k cycles in steady state (about 1850 frames/s). The first
frame arrives after about 94k cycles.

The layer sizes, channel counts, per-layer PE and SIMD, and the W4A4 precision
come from the published design. Kernel size, stride and padding per layer are
not published. 4/1/0 followed by 4/2/1 is the usual DCGAN choice, it gives
exactly the published map sizes, and with it the computed frame rate matches
the published throughput closely. They are parameters.

## Files

| file | what it is |
|---|---|
| `rtl/qdcgan_pkg.sv` | shared constants, configuration encoding, size formulas, weight/activation decoding |
| `rtl/qdcgan_top.sv` | the accelerator: chain of engines and width converters |
| `rtl/deconv_layer.sv` | one engine: expand -> sliding window -> matrix unit |
| `rtl/deconv_expand.sv` | zero insertion and border padding |
| `rtl/ring_swg.sv` | sliding window generator on a circular row buffer |
| `rtl/mvau.sv` | PE x SIMD matrix-vector-activation unit |
| `rtl/weight_mem.sv` | per-PE weight memory |
| `rtl/threshold_unit.sv` | per-PE threshold memory and comparator staircase |
| `rtl/stream_dwc.sv` | stream width converter between engines |
| `tb/tb_*.sv` | self-checking testbench of each module (`mvau_check.sv` is a helper of `tb_mvau`) |
| `tb/tb_qdcgan_top.sv` | full-size MNIST end-to-end test |
| `tb/tb_qdcgan_w1a2.sv` | the MNIST build with 1-bit weights and 2-bit activations |
| `tb/tb_qdcgan_celeba.sv` | the same accelerator built for the 5-layer celebA generator |

## Streams and data formats

Every data path is a valid/ready stream. A beat moves on a rising clock edge
when valid and ready are both high. A producer holds its beat until it is
taken, and the RTL asserts this rule at the outputs of `ring_swg` and `mvau`.
There is one clock domain and one active-low asynchronous reset. Reset clears
the control state only. The memories are not reset.

* **Feature maps** travel in raster order (row, then column), with the channels
  of a pixel in consecutive beats. An engine's input carries SIMD channels per
  beat and its output PE channels per beat. Channel `c` of a beat sits in bits
  `[c*BITS +: BITS]`.
* **Noise input** (`z_*`): CH[0] values per frame, 8-bit two's complement,
  SIMD[0] = 4 per beat. The noise precision is this design's choice.
* **Image output** (`img_*`): 32x32 pixels in raster order, one 4-bit unsigned
  pixel per beat (PE of the last engine = 1).
* **Activations** between layers are unsigned (the output of a quantized
  ReLU). The last layer is thresholded too, so pixels are levels 0..15.
* **Weights** are two's complement WBITS-bit integers. With WBITS = 1 they are
  bipolar: bit 0 means -1 and bit 1 means +1.

## The engine in detail

### Expansion (`deconv_expand`)

For an IN_DIM x IN_DIM input, the expanded map has
`EDIM = (IN_DIM-1)*STRIDE + 1 + 2*(K-1-PAD)` pixels per side. A counter walks
the expanded map. A position whose row and column both lie on the stride grid
inside the border passes the next input beat through. Every other position
emits a zero beat without consuming input. The unit adds no latency and no
storage.

### Ring-buffer window generator (`ring_swg`)

The window generator holds only ROWS rows of the expanded map, in one memory
of ROWS x EDIM x (CIN/SIMD) words. A rotating slot index turns that memory
into a circular buffer of rows.

* A counter `nrows` holds the number of complete rows, counted from the
  oldest row the reader still needs.
* The writer fills the next slot while `nrows < ROWS`.
* The reader starts output row `oy` once `nrows >= K`, which means rows
  `oy .. oy+K-1` are all present.
* For every output pixel the reader walks `ky`, `kx`, channel fold, with the
  channel fold fastest.
* After each output row the reader frees the oldest row. After the last row
  of a frame it frees all K rows, so the next frame starts in fresh slots.

The writer may run ahead into the next row, or into the next frame, by up to
ROWS-K rows. This slack matters for throughput. In an expanded map one real
row is followed by STRIDE-1 zero rows. A consumer engine can therefore wait
long for its next real row and then want it at once. If the buffer is full,
the producer engine stalls, and engines 3 and 4 are both fully loaded. With
the minimum ROWS = K+1, the MNIST pipeline took 105k cycles per frame. With
K+2*STRIDE it took 70.4k. `deconv_layer` uses ROWS = 2K+STRIDE (10 rows for
K = 4), which gives 67.4k. The largest buffer (engine 4: 10 x 35 x 4 words of
32 bits) is 11 kbit.

### Matrix-vector-threshold unit (`mvau`)

The window of one output pixel is a vector of MW = K*K*CIN elements. The unit
multiplies it by the COUT x MW weight matrix in NF = COUT/PE output folds. Each
fold has SF = MW/SIMD input folds.

* Folds run as `for nf { for sf { ... } }`.
* During `nf = 0` the vector arrives from the stream and is copied into an
  SF-word input buffer. Folds `nf > 0` read the buffer, so the window
  generator delivers each window only once.
* Stage 0 issues `(nf, sf)` and performs three synchronous reads: the weight
  memory of every PE, the threshold row of the current `nf`, and the input
  buffer.
* Stage 1 forms the SIMD products and adds them into the PE accumulator. On
  `sf = SF-1` it thresholds the sum into the output register: one beat of PE
  activations, for output channels `nf*PE .. nf*PE+PE-1`.
* The whole unit holds while its output register is full and not taken. The
  memories' read enables follow this stall, so their data stays valid.

Throughput is one `(nf, sf)` step per clock. Latency is two clocks from the
last input beat to the first output beat.

The accumulator width is `IN_BITS + WBITS + clog2(MW) + 1`, which cannot
overflow: 21 bits for engine 1 and 20 bits for engine 2.

### Thresholds (`threshold_unit`)

For ABITS-bit outputs each output channel has NT = 2^ABITS - 1 ascending
thresholds. The activation is the number of thresholds the accumulator reaches
(`acc >= thr[i]`). Any monotonic quantized activation reduces to this form,
including a quantized ReLU with scale and bias folded in. The host computes
the threshold values from the trained network.

### Weight layout: transposed kernel

The engine computes

    out[oy][ox][co] = act_co( sum_{ky,kx,ci} E[oy+ky][ox+kx][ci] * W[co][ky][kx][ci] )

where E is the expanded map. Against the scatter definition of a transposed
convolution (input pixel `iy` adds kernel tap `t` into output
`oy = iy*STRIDE - PAD + t`), `W[ky] = Wt[K-1-ky]`. So the trained
transposed-convolution kernel is stored rotated by 180 degrees, and this is
done when the weights are packed. The end-to-end testbenches build their
reference in scatter form, so they check this mapping too.

### Width converters (`stream_dwc`)

An engine emits PE channels per beat, and the next engine takes SIMD
channels. The converter gathers beats (4->16 and 8->16 in the MNIST build) or
splits them, and keeps the element order. It sustains one input beat per
clock.

## Loading weights and thresholds

All engines share one configuration port. It takes one write per clock, with
no handshake, and loading is meant for times when no frame is in flight.

| signal | meaning |
|---|---|
| `cfg_layer` | engine index 0..N-1 |
| `cfg_kind` | `CFG_WEIGHT` or `CFG_THRESHOLD` |
| `cfg_pe` | PE within the engine |
| `cfg_addr` | weight: `nf*SF + sf`; threshold: `(nf << TW) \| t`, with TW = clog2(NT) (4 for 4-bit activations) |
| `cfg_data` | weight: SIMD weights, weight `j` in bits `[j*WBITS +: WBITS]`; threshold: a two's-complement value in the low ACC_BITS bits |

For output channel `co` of an engine: `pe = co % PE` and `nf = co / PE`.
Weight `j` of word `sf` multiplies vector element `i = sf*SIMD + j`, with
`i = (ky*K + kx)*CIN + ci`. The MNIST build holds 197,120 weights in
8192 + 8192 + 2048 + 64 words.

## Verification

Each module has a self-checking testbench that prints
`TB_RESULT checks=<n> failures=<n>`. The testbenches use random valid/ready
gaps, check cycle counts, and have a watchdog.

* `tb_deconv_expand`: the 3x3 -> 5x5 example above, plus a random 4-channel
  map, with rate checking.
* `tb_ring_swg`: three back-to-back frames against directly indexed windows.
  Once the first window of a frame is out, it must produce one beat per
  clock.
* `tb_mvau`: W4A4 with unsigned inputs, and bipolar W1 with signed 8-bit
  inputs and 2-bit outputs. It checks NF*SF cycles per vector.
* `tb_deconv_layer`: one engine against a scatter-form transposed
  convolution, within its folding budget.
* `tb_qdcgan_top`: the default MNIST build at full size.
  * Three frames with random weights and noise, every pixel compared with a
    layer-by-layer software model.
  * Thresholds placed at quantiles of each layer's accumulators, so all 16
    levels occur.
  * The frame interval must stay at or below 69367 cycles, which is 1802
    frames/s at 125 MHz.
  * Each of these must happen at least once: back-pressure, input stall,
    inserted zeros, ring wrap-around, input-vector reuse, width conversion.
* `tb_qdcgan_w1a2`: the MNIST network built with bipolar 1-bit weights and
  2-bit activations. It runs two frames with the same checks.
* `tb_qdcgan_celeba`: the celebA build (see below), two frames, about
  270k cycles per frame.

To run one with plain Verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -j 8 rtl/qdcgan_pkg.sv rtl/*.sv \
    tb/tb_qdcgan_top.sv --top-module tb_qdcgan_top -Mdir obj
./obj/Vtb_qdcgan_top
```

For `tb_mvau`, add `tb/mvau_check.sv`. The full-size MNIST test builds in
seconds and runs in about 2 s.

## Other configurations

`qdcgan_top` is parameterized by the number of engines and by per-engine
arrays: `CH` (N+1 channel counts), `PE`, `SIMD`, `KS`, `STRIDE` and `PAD`.
Precision is set by `WBITS` and `ABITS`, and the noise width by `Z_BITS`.

* **MNIST W1A2** runs on the default hardware with no change. Weights of ±1
  are exact in 4 bits. For 2-bit activations, load thresholds 4..15 above any
  reachable accumulator. A dedicated build is `WBITS = 1, ABITS = 2`, and its
  1-bit weights are bipolar. Simulated: 67.4k cycles per frame.
* **celebA W4A4** is a 5-engine build: 1x1x64 -> 4x4x256 -> 8x8x128 ->
  16x16x64 -> 32x32x32 -> 64x64x3, PE [4,8,8,8,3], SIMD [4,16,16,16,8]. The
  published PE list for it has only four entries ([4,8,8,3]). This build
  fills in PE = 8 for the fourth engine, which balances engines 2-5 at 262,144
  cycles per frame. Simulated: 270k cycles per frame, about 463 frames/s at
  125 MHz. That is faster than the roughly 300 frames/s reported for this
  network.
* The larger celebA build with PE 16 everywhere is only a matter of
  parameters as well. It has not been simulated here.

## Where this RTL departs from, or adds to, the published design

* **Not from the publication:** kernel size, stride and padding; noise
  precision; the stream and configuration formats; accumulator widths; the
  threshold rule and storage; the pipeline structure of the matrix unit; the
  depth of the ring buffer. The published design generates its engines with
  high-level synthesis; this is hand-written RTL of the same architecture.
* **PE and SIMD roles:** one sentence of the source describes PE as input
  parallelism and SIMD as output parallelism. Its table only makes sense the
  other way round (PE = 1 for a 1-channel output layer, PE = 3 for RGB). This
  RTL follows the table: PE is the number of output channels in parallel, and
  SIMD the number of input elements in parallel.
* **Zeros are computed.** The expanded map is convolved as it is. This
  matches the published design's approach and its throughput. Skipping the
  zero taps is an obvious further optimization, and it is not done here.
* **Output activation:** the generator's final activation is thresholded
  like the others, into unsigned ABITS-bit pixels.
* **Outside this RTL:** the host processor and its DDR memory, the DMA that
  feeds `z_*` and drains `img_*`, the clock source (125 MHz in the published
  build), and the host software that packs weights and thresholds.
* **Frame rate:** the MNIST build matches the published throughput
  (1854 vs about 1810 frames/s at 125 MHz). The celebA build is faster than
  published, so the published implementation must lose cycles somewhere this
  model does not.
