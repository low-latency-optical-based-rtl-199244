# Camera-based MHD mode tracker on a frame-grabber FPGA

This design predicts the rotating n=1 magnetohydrodynamic (MHD) mode of a tokamak plasma from
high-speed camera images, fast enough to close a feedback loop on the HBT-EP saddle coils. Each frame
gives one prediction in under 8 µs from its last useful pixel.

It lives inside a camera frame grabber, in the user-logic slot between the grabber's pixel
pre-processing and its DMA/PCIe engine. It does the following:

- copies every image packet, and sends the original on untouched;
- keeps only the central 32x32 pixels of each 128x32 frame;
- puts the camera link's shuffled line order back into image order;
- runs a small quantised convolutional network on the image, predicting the sine and cosine
  components of the mode;
- turns those two numbers into five coil requests;
- shifts the requests out as five 16-bit serial words for DACs.

All logic runs on one 250 MHz clock.

```
 pixel stream ──► stream_fork ──────────────────────────────► DMA / PCIe (unchanged copy)
 (8 px/packet)        │ copy, whole frames only
                      ▼
                   roi_crop ──► stripe_reorder ──► cnn_core ──► control_request ──► rs422_serializer
                 (centre 32x32)  (8 FIFOs, natural    (6 layers,    (5 requests,       (5 lanes +
                                  line order)          ap_vld out)   12-bit codes)      sclk, cs_n)
                                                          │                                 │
                                                    inference_on                       writeout_on
```

## Stream format

A packet carries eight 12-bit pixels in `s_data` (96 bits), pixel k at bits `[12k+11:12k]`.
`s_meta` holds four position flags: `sof`, `sol`, `eol` and `eof` (start and end of frame and of
line). A 128-pixel line is 16 packets and a 128x32 frame is 512 packets. The handshake is valid/ready
in the AXI-stream style.

## Forking without disturbing acquisition (`stream_fork`)

The DMA side owns the stream: `s_ready` is `dma_ready`, and the network branch can never slow
acquisition. The network branch sees a packet only when the DMA side takes it.

The network path cannot stall the camera, so it must be able to drop work. This design drops whole
frames, never single packets. At each start of frame the fork asks whether the path can take a
complete new frame (`nn_frame_ok`, driven by the reorder's `idle`). If it can, the frame is admitted
and goes through to its end. If not, the whole frame is withheld from the network and `nn_skips`
counts it; the DMA still gets it.

An admitted frame cannot overflow the path: once the reorder is empty, its FIFOs hold a whole
region of interest. `nn_drops` is kept as a guard and stays at zero. `nn_overflow` is a sticky OR of
the two.

## Region of interest (`roi_crop`)

The camera cannot capture lines narrower than 128 pixels, so frames are 128x32 and the network
uses the centre 32x32. `roi_crop` counts packets within a line (reset by `sol`) and lines within a
frame (reset by `sof`). It passes packet columns 6 to 9 of every line: pixels 48 to 79.

It passes each packet with its *arrival* line number, which is not the image line (next
section). Packets outside the window are accepted and discarded. A line that does not have 16
packets sets the sticky `geom_error`.

## Putting the lines back in order (`stripe_reorder`)

This is the least obvious part of the design. The camera link does not deliver lines top to bottom:
it delivers the frame in horizontal **stripes**. This design assumes eight stripes of four lines.
The first stripe to arrive is the one just above the centre of the sensor, then the one just below,
then alternately further up and further down. Inside a stripe the lines are in normal top-to-bottom
order.

| arrival stripe k | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 |
|---|---|---|---|---|---|---|---|---|
| image stripe (lines) | 3 (12–15) | 4 (16–19) | 2 (8–11) | 5 (20–23) | 1 (4–7) | 6 (24–27) | 0 (0–3) | 7 (28–31) |

The network wants the image in natural order, and a FIFO cannot be read at an arbitrary address.
So the reorder gives each arrival stripe its own FIFO, 16 packets deep (one stripe of the 32-pixel
window), and drains the FIFOs in image order: image stripe 0, which is arrival stripe 6, then 1, and
so on.

Image stripe p maps back to arrival stripe `raw_of(p)`. For the top half (p < 4) that is
2·(3−p). For the bottom half it is 2·(p−4)+1.

A stripe is drained as soon as its FIFO has data, so draining overlaps the arrival of later stripes.
When the link delivers packets at full rate, the final stripes drain about 40 clocks after the last
one arrives. At the camera's real readout rate, draining keeps up.

- `stalls` counts the clocks on which the reorder had data but the network input was busy.
- `idle` means all FIFOs are empty.
- `m_last` marks the 128th packet out.

The stripe count and the centre-out order are the most uncertain choices in the design. They come
from a drawing of the stripe pattern, not from a specification. Both live in the `N_STRIPES`
constant and the `raw_of` function, so they are easy to change.

## The network (`cnn_core`, `cnn_conv_pool`, `cnn_dense`)

| layer | operation | output | reuse factor RF | multipliers (TP x CP) |
|---|---|---|---|---|
| conv0 | 3x3 conv 1→16, ReLU, 2x2 max pool | 15x15x16 | 1 | 9 x 16 |
| conv1 | 3x3 conv 16→16, ReLU, 2x2 max pool | 6x6x16 | 4 | 36 x 16 |
| conv2 | 3x3 conv 16→24, ReLU, 2x2 max pool | 2x2x24 | 16 | 9 x 24 |
| dense0 | 96→42, ReLU | 42 | 48 | 2 x 42 |
| dense1 | 42→64, ReLU | 64 | 64 | 42 x 1 |
| dense2 | 64→2, linear (sine, cosine) | 2 | 128 | 1 x 1 |

The network has 12,916 weights and biases, stored as 7-bit weights and 16-bit biases. The
published count for this network is 12,910; the kernel size is not published. A 3x3 valid kernel is
used here because the same layer structure reproduces the published parameter count of the
larger predecessor network exactly. The six-parameter gap is unresolved.

**Reuse factor.** Each layer has a reuse factor RF: the number of clocks over which one output
position's multiply-accumulates are spread.

- A conv output position needs 9·CIN·COUT products.
- The layer multiplies a block of TP input terms by CP output channels per clock, and steps through
  RF = (9·CIN/TP)·(COUT/CP) blocks.
- `calc_tp`/`calc_cp` in `mt_pkg` choose the block shape.
- For a conv layer the work per pooled output pixel is 4·RF clocks, one RF for each of the four conv
  positions in the pooling window.

The four conv results are max-reduced, and ReLU is applied after the maximum (the two commute). The
result is shifted right by `SHIFTn` and saturated to 8 bits. Conv positions that the pooling would
discard (the last row and column of an odd-sized map) are never computed. The output layer keeps a
signed 11-bit result with no ReLU.

**Buffers and dataflow.** Each layer owns its output buffer:

- a conv layer keeps one memory word of COUT values per pooled pixel;
- a dense layer keeps a register row.

The next layer reads it through combinational read ports (`rd_addr`/`rd_data`, wired to the
consumer's `in_addr`/`in_data`). A layer starts when all of these hold:

- its input buffer is marked full;
- its own buffer is free;
- it is idle.

When it finishes, it marks its output full and releases its input. Layers of consecutive frames
therefore overlap. Every buffer is single, so conv0 can take a new frame only once conv1 has
finished with conv0's previous output.

**Timing at 250 MHz.** Per layer, start to done is the compute time plus 2 clocks. For a conv
layer the compute time is HP·WP·4·RF; for a dense layer it is RF.

| | clocks | time |
|---|---|---|
| last input packet to `y_vld` | 1985 | 7.94 µs |
| last region-of-interest packet at the top input to `pred_vld` | 1987 | 7.95 µs |
| new frame into the network, back to back | 1480 | 5.9 µs |

1480 clocks covers 120,000 frames/s (8.3 µs), with room to spare. `infer_active` (the top's
`inference_on` probe) is high from conv0's start to the `y_vld` clock while any frame is inside.
The published measurement for inference is 7.7 µs.

**Loading parameters.** All weights and biases are written at run time through `pwr`
(`mt_pkg::param_wr_t`: `en`, `layer`, `bias`, `addr`, `data`). For a bias, `addr` is the output
channel. Weights are stored as rows of M = TP·CP lanes, with

- row = (t / TP)·(COUT/CP) + c / CP
- lane = (t mod TP)·CP + c mod CP
- `addr` = row·M + lane

Here t is the term index and c the output channel. For a conv layer t = (ky·3+kx)·CIN + ci; for a
dense layer it is the input index. The flatten order is channels-last: ((y·W)+x)·C + c. Pruned
(zero) weights are simply stored as zeros.

## Coil requests (`control_request`)

For coil i (0 to 4):

v_i = g·[s·sin(mθ_i + nφ_i + γ) + c·cos(mθ_i + nφ_i + γ)]

Here s and c are the predicted sine and cosine. Each request is folded into two Q1.14 coefficients,
A_i = g·sin(·) and B_i = g·cos(·), so the block computes v_i = (A_i·s + B_i·c) >>> 14.

The reset values assume g = 1, γ = 0 and five neighbouring coils 36° apart:

- A = {0, 9630, 15582, 15582, 9630}
- B = {16384, 13255, 5063, −5063, −13255}

Each coefficient can be rewritten through `coef_wr_*`: index 0–4 for A, 5–9 for B. Each v_i is
offset by 2048 and clamped to 0…4095, giving a 12-bit unsigned DAC code. Four DAC control bits
(`DAC_CTL`, default 0000) are appended at the bottom to make a 16-bit word. The block has two
register stages, so `req_vld` follows `pred_vld` by two clocks.

## Serial writeout (`rs422_serializer`)

The five words are sent at the same time on five data lanes. The lanes share a serial clock and an
active-low chip select. Each bit lasts `BIT_CLKS` = 25 clocks, which is 10 MHz:

- data changes at the start of the bit;
- `sclk` rises in the middle of the bit, where the receiver samples;
- words go out MSB first.

A writeout takes 16·25 = 400 clocks (1.6 µs), during which `busy` (the top's `writeout_on`) is
high. One request arriving during a writeout is held and sent next. Further ones are counted in
`overruns`. The DAC part and its exact serial protocol are not specified, so the bit order and
clock edges are choices made here.

## How far to trust it

Every block has a self-checking testbench.

- **End-to-end test** (`tb_mode_tracker_top`, at full size):
  - streams striped 128x32 frames at 100 kframes/s, in a full-rate burst, and at 120 kframes/s
    (2083 clocks apart, none of which may be skipped), with random DMA back-pressure;
  - compares every prediction against a bit-exact behavioural model of the network in the testbench;
  - decodes the five serial lanes back to DAC codes;
  - checks the 1987-clock latency and the 400-clock writeout;
  - requires a DMA stall, a reorder stall, a skipped frame, readout overlapping inference, and a
    writeout for every prediction.
- **Fault check:** each testbench was also run against a copy of its block with one deliberate
  fault, and reported failures.

Departures from the published design and points taken on judgement:

- The fixed-point formats (8-bit activations, shift requantisation, 11-bit signed outputs) are
  this design's own; only the 7-bit weight precision is published. A trained network quantised
  elsewhere must be converted to these formats. The shifts are parameters of `cnn_core`.
- The kernel size (3x3, valid padding, 2x2 pooling) is inferred, as above.
- The stripe pattern is inferred, as above.
- Activations move between layers through whole-map buffers, not streaming FIFOs. This makes the
  latency 1985 clocks instead of the published 7.7 µs, which is about 1925 clocks.
- Frame skipping when the network is busy is this design's policy. The published design does not
  say what happens to a frame that arrives too early.
- A validation variant that wrote predictions into the unused image border is not included; the
  final published firmware drops it too.
- The CoaXPress receiver, DRAM buffering, pixel pre-processing, DMA/PCIe, GPIO drivers, DACs and
  the camera are outside this RTL. The top module meets them only at its ports.

## Simulating

All files are plain SystemVerilog. `rtl/mt_pkg.sv` must be compiled first. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_mode_tracker_top \
    rtl/mt_pkg.sv rtl/sync_fifo.sv rtl/stream_fork.sv rtl/roi_crop.sv rtl/stripe_reorder.sv \
    rtl/cnn_conv_pool.sv rtl/cnn_dense.sv rtl/cnn_core.sv rtl/control_request.sv \
    rtl/rs422_serializer.sv rtl/mode_tracker_top.sv tb/tb_mode_tracker_top.sv
obj_dir/Vtb_mode_tracker_top
```

Each testbench ends with a line `TB_RESULT checks=N failures=M`.

| testbench | what it covers |
|---|---|
| `tb_stream_fork` | copy integrity, DMA back-pressure, whole-frame admission and skip counting |
| `tb_roi_crop` | window position, line tags, short-line error |
| `tb_stripe_reorder` | stripe map, drain order, stalls, `idle` |
| `tb_cnn_conv_pool` | one small conv layer against a direct convolution, start-to-done time |
| `tb_cnn_dense` | three block shapes, saturation, signed output, start-to-done time |
| `tb_cnn_core` | the full network against a model, 1985-clock latency, overlapping frames |
| `tb_control_request` | codes against floating-point sin/cos coefficients, clamping, coefficient writes |
| `tb_rs422_serializer` | bit timing (25 clocks), 400-clock frame, MSB first, pending request, overrun |
| `tb_mode_tracker_top` | everything together at full size |

The full-size system test compiles in about 30 s and runs in under a second.

## Changing it

- **Image and window sizes:** `IMG_W`, `IMG_H`, `ROI_W`, `ROI_H` and `PPP` in `mt_pkg`, and the
  parameters of `roi_crop` and `stripe_reorder`.
- **Stripe count and order:** `N_STRIPES` and `stripe_reorder.raw_of`.
- **Reuse factors:** the `.RF()` values in `cnn_core`. Each must split its layer's
  multiply-accumulates exactly; an elaboration-time assertion checks this. Latency and multiplier
  count follow the formulas above.
- **Coil geometry and gain:** `control_request`'s `A_INIT`/`B_INIT`, or at run time through
  `coef_wr_*`.
- **Serial rate:** `rs422_serializer.BIT_CLKS`.
