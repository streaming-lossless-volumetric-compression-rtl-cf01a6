# SR-LVC: a streaming probability engine for lossless compression of medical volumes

A CT or MRI volume is a stack of 2-D slices. Neighbouring slices look alike, so
a good lossless coder predicts each pixel from two sources: the pixels of the
same slice that are already coded (above and to the left), and what it learnt
about the previous slice. SR-LVC does this with a small gated recurrent
convolutional network. For every pixel it outputs the two parameters (mu, s)
of a discrete logistic distribution, and an arithmetic coder on the host turns
them into bits. The network carries a 16-channel hidden state from one slice
to the next, the way a GRU carries its state from one time step to the next.
Because the state goes forward one slice at a time, a volume of any depth is
coded as a stream. Only the current slice and one hidden-state slice need to
be in memory.

This repository holds synthesizable SystemVerilog for the network engine as an
FPGA-style streaming accelerator. One raw pixel stream and one hidden-state
stream go in. One (mu, s) stream and one updated hidden-state stream come
out. The arithmetic coder and the DRAM/AXI plumbing around the engine are not
part of the RTL.

## 1. What is computed per pixel

Let x be slice t after normalisation, and h = h_{t-1} the previous slice's
hidden state (16 channels per pixel; zeros for the first slice). For pixel
(i, j), three convolution paths each give 48 feature channels. Each set of 48
is split into a Reset, an Update and a Candidate group of 16:

| path | input | kernel | output |
|---|---|---|---|
| masked CNN | x | 7x7, causal half only (24 taps: the three rows above and the three pixels to the left) | Rst_x, Upd_x, Cand_x |
| standard CNN | x | full 7x7 (49 taps) | Rst_s, Upd_s, Cand_s |
| depth-wise separable CNN (DSC) | h | 5x5 depth-wise per channel, ReLU, then 1x1 from 16 to 48 channels | Rst_h, Upd_h, Cand_h |

A gate with no parameters of its own merges an intra-slice set with the hidden
set, channel by channel:

    R = hsig(Rst_x + Rst_h)          hsig(v)  = clamp(v/6 + 1/2, 0, 1)
    U = hsig(Upd_x + Upd_h)          htanh(v) = clamp(v, -1, 1)
    C = htanh(Cand_x + R * Cand_h)
    g = U * h(i,j) + (1 - U) * C

Two instances of this gate exist:

- **Compression gate.** Fed by the masked CNN, so it only sees pixels the
  decoder already knows. Its 16-channel output goes to a linear layer
  16 -> 2, which gives (mu, s).
- **Update gate.** Fed by the standard CNN, which may look at the whole
  neighbourhood because its result is only used for the next slice. Its
  output is h_t(i, j), the hidden state passed on to slice t+1.

Both gates use the same DSC features and the same h(i, j). The DSC is
therefore computed once per pixel and its result is sent to both gates.

Before the network, the pixel is normalised: x_n = x * L / 2^D, where D is the
bit depth and L a scaling factor (L = 1 for 8-bit data, L = 8 for 12-bit data
in the reference configuration). Every convolution has a bias. The weights
total 1200 + 2400 + 416 + 816 + 34 = 4866.

## 2. Dataflow

    pix ──► pixel_normalize ──► padding_load(3) ──► sliding_window 7x7 ─┬─► masked_cnn ──┐
                                                                        └─► standard_cnn ─┼──┐
    h_{t-1} ──► padding_load(2, +1 row) ──► circular_line_buffer 5x5x16 ──► dsc_module ─┬─┤  │
                                                                                       │ ▼  ▼
                                                                  fusion_gate A ◄──────┘ │ fusion_gate B
                                                                        │                 │      │
                                                                  prob_estimator ◄────────┘      ▼
                                                                        ▼                    h_t (hout)
                                                                    (mu, s)

(The DSC output feeds both gates; gate A also takes the masked-CNN features
and gate B the standard-CNN features.)

Every arrow is a valid/ready stream. A word moves on a rising clock edge when
both valid and ready are high. Either output can stall the whole engine, and
either input can run dry without breaking anything.

| file | role |
|---|---|
| `rtl/srlvc_pkg.sv` | sizes, fixed-point helpers, weight address map |
| `rtl/pixel_normalize.sv` | x * L / 2^D as a shift, one register stage |
| `rtl/padding_load.sv` | turns an H x W raster into a zero-bordered raster |
| `rtl/sliding_window.sv` | 7x7 window over the padded pixel stream |
| `rtl/conv_pe.sv` | one convolution PE: per-row multiply-add trees, then a tree over the row sums and the bias |
| `rtl/masked_cnn.sv`, `rtl/standard_cnn.sv` | 6 PEs each, 48 kernels in 8 passes |
| `rtl/circular_line_buffer.sv` | 6 rotating line buffers, 256 bits wide, giving a 5x5x16 cube |
| `rtl/dsc_module.sv` | 16 depth-wise PEs, ReLU, 16 point-wise PEs in 3 passes |
| `rtl/fusion_gate.sv` | the gate above, 2 channels per cycle |
| `rtl/prob_estimator.sv` | 32 multipliers, two 16-input adder trees |
| `rtl/srlvc_top.sv` | the wiring above |

## 3. The two line-buffer schemes

The two input paths must both present a neighbourhood per pixel, but their
words differ a lot in width. They are therefore buffered differently. This is
the least obvious part of the design.

**Pixel path (`sliding_window`).** Words are 16 bits wide. The padded slice is
W+6 words wide. Each of the K-1 = 6 line buffers holds one earlier padded row
(MAX_W + 6 = 774 words). The window is 7x7 registers. When a pixel arrives at
column c, the design does four things:

1. Read column c from all six buffers.
2. Put the new pixel beneath them, making a 7-word column.
3. Shift the window left by one and load that column on the right.
4. Write the column back into the buffers, moved up by one row. The top word,
   which no later window needs, is dropped.

A textbook description uses K line buffers, the K-th holding only the word
about to be dropped. This design stores K-1, because that last word is never
read; the behaviour is the same. A window is emitted once the padded stream
has reached row 6 and column 6. It is centred on image pixel (r-6, c-6) when
(r, c) is the padded position just written. There is exactly one window per
image pixel, in raster order.

**Hidden-state path (`circular_line_buffer`).** Each word carries a whole
16-channel state, 256 bits. Moving such words between buffers for every pixel
would be expensive. Instead, K+1 = 6 line buffers are used in rotation. One
buffer receives the incoming row while the other five hold the five most
recent complete rows. For each incoming word, column c of those five rows is
read and shifted into a 5x5 cube of registers. When a row ends, the write
pointer moves on to the buffer with the oldest row. No data ever moves
between buffers.

Because the cube is built only from complete rows, it trails the input by one
row. The hidden-state padder therefore adds one extra zero row at the end of
each slice (`TAIL_ROWS = 1`), which pushes the last window row out. The
padders also start a slice only when its first word arrives. This way,
configuration can change between slices, and no border words appear
before there is data.

## 4. Lining up the two paths

The masked/standard CNNs and the DSC run on different streams with different
lags:

- The pixel window for (i, j) is ready once raw pixel (i+3, j+3) is in.
- The hidden cube for (i, j) is ready once h_{t-1}(i+3, j+2) is in.

Nothing in the engine counts pixels to pair them. Both paths emit exactly one
result per image pixel in raster order, and each fusion gate joins one word
from each side: it takes both in the same cycle or neither. A lockstep fork
sends the shared window to both CNNs, and another sends the DSC result to both
gates. A fork hands a word on only when every consumer can take it. The
faster path simply waits at the gate. The slice-end flags travel with the
data, and an assertion in `fusion_gate` checks that both sides flag the same
word.

The host must supply the whole of h_{t-1} for every slice, zeros for the
first one. It must also keep both input streams flowing: the pixel path needs
about three rows of lead over the gate, the hidden path a little less, and
both are buffered on chip.

## 5. Arithmetic

All weights and activations are 16-bit two's-complement fixed point with 10
fraction bits (range about +-32, step 1/1024).

- Products are 32 bits and are summed in 40 bits.
- Each PE output is shifted right by 10 (truncating toward minus infinity)
  and saturated to 16 bits.
- hsig uses the constant 171 ~ 1024/6.
- Normalisation uses shifts only, so L must be a power of two (1 to 32768,
  set by `cfg_log2_l`).

The reference implementation used 16-bit half-precision floats. The fixed-point
format is this design's own choice. It keeps the 16-bit width and makes every
operation exact and reproducible in a testbench, but a network trained in
float must be quantised to Q5.10 before it is loaded.

The scale output s is the raw linear output of the estimator. How it is made
positive (e.g. read as log-scale) is left to the coder.

## 6. Throughput and resources

The two CNN engines each have six PEs, and 48 kernels take 8 passes. With a
capture cycle, that is **9 cycles per pixel**, and these engines set the pace:

- The DSC needs 5 cycles per pixel (capture, depth-wise, three point-wise
  passes).
- Each fusion gate needs 9 cycles (capture plus 8 two-channel steps).
- The estimator needs 1 cycle.

Measured with outputs always ready:

| slice | cycles | at 237 MHz |
|---|---|---|
| 256 x 256 | 591,417 | 2.5 ms |
| 768 x 768 | 5,313,081 | 22.4 ms |

For comparison, the FPGA implementation this design follows reports 6.7 to
7.8 ms per 256 x 256 slice for each of its modules.

Multipliers in this RTL:

| module | multipliers | DSPs in the reference implementation |
|---|---|---|
| standard CNN | 6 x 49 = 294 | 297 |
| masked CNN | 6 x 24 = 144 | 171 |
| DSC | 16 x 25 + 16 x 16 = 656 | 662 |
| fusion gate (each) | 10 | 10 |
| estimator | 32 | 32 |

The line buffers (6 x 774 x 16 bits and 6 x 772 x 256 bits at MAX_W = 768)
are written as arrays, which synthesis maps to block RAM. Weights are held in
registers.

Supported sizes: slices up to MAX_W = 768 pixels wide (768 is also the default,
matching the largest configuration of the reference implementation) and
MAX_H = 1024 rows; bit depths up to 16. The number of slices is unlimited.
This covers 8-bit knee MRI at 256 x 256, 12-bit abdominal CT/MRI at 400 x 400
and 512 x 512, and 12-bit CT at up to 768 x 768.

## 7. Programming the engine

1. Hold `rst_n` low for a few cycles.
2. Write the 4866 weights over `wt_we / wt_addr / wt_data`, one per cycle, in
   Q5.10. The address map (`srlvc_pkg`), in each block kernel-major with
   weights before biases, is:

   | base | count | contents | weight address | bias address |
   |---|---|---|---|---|
   | 0 | 1200 | masked CNN | kernel*24 + tap | 1152 + kernel |
   | 1200 | 2400 | standard CNN | kernel*49 + row*7 + col | + 2352 + kernel |
   | 3600 | 416 | depth-wise | ch*25 + row*5 + col | + 400 + ch |
   | 4016 | 816 | point-wise | out*16 + in | + 768 + out |
   | 4832 | 34 | estimator | mu weights 0..15, s weights 16..31 | mu bias 32, s bias 33 |

   The masked taps are numbered in raster order over the three rows above the
   centre and then the three pixels left of it. Kernel k's output is feature
   channel k: channels 0-15 Reset, 16-31 Update, 32-47 Candidate.
3. For each slice, set `cfg_w`, `cfg_h`, `cfg_depth` (D) and `cfg_log2_l`
   (log2 L) and keep them stable. Then stream the slice's raw pixels on
   `pix_*` and the previous hidden state on `hin_*`, both in raster order. For
   `hin_data`, channel m is bits [16m+15 : 16m].
4. Collect (mu, s) from `prob_*` and h_t from `hout_*`, both in raster order.
   `prob_last` and `hout_last` mark the last pixel of the slice. Store h_t and
   feed it back as `hin_*` with the next slice.

## 8. Where this design departs from the reference description

- **Number format.** Q5.10 fixed point instead of half-precision floats.
- **Weight interface.** No weight interface is described, so this one is a
  simple write bus.
- **Memory interface.** The memory interface (DRAM and AXI engines, including
  the 256-bit hidden-state port) is outside the RTL. The four streams are the
  top's ports.
- **Padding.** The "padding load" stage is only named in the source
  description. The zero padding, the trailing row on the hidden path and the
  start-on-first-word rule are this design's own.
- **Sliding window.** The window keeps K-1 line buffers, not K (see §3). Each
  circular-buffer column is read in parallel rather than one word at a time.
- **Pass schedules.** The CNN schedules (8 passes of 6 PEs), the DSC schedule
  (3 point-wise passes) and the gate's 2 lanes are choices that match the
  reported multiplier counts. They do not match the reported latencies: this
  engine is about three times faster per slice at the same clock.
- **Masked CNN size.** It uses 6 PEs of 24 taps (144 multipliers), not the
  171 DSPs reported.
- **Feature order.** The Reset/Update/Candidate channel order, the masked-tap
  numbering and the form of s are not given in the source and were chosen here.
- **First slice.** The hidden state of the first slice (zeros) is supplied by
  the host.
- **Compression only.** The engine serves the compressor: it takes the
  whole slice as input, 3 rows ahead of its outputs. Decompression needs each
  decoded pixel fed back before the next (mu, s) can be computed. That uses
  the same network, but no hardware schedule for it is described, and none
  is built here.
- **Reset.** Only control state is reset. Line buffers, data registers and
  weights are not reset; each is written before it is read.

## 9. Verification

Each block has a self-checking testbench in `tb/`. It compares the block's
output with a model written independently in the testbench, and ends by
printing `TB_RESULT checks=N failures=M`:

| testbench | what it checks |
|---|---|
| `tb_pixel_normalize` | 8-bit/L=1 and 12-bit/L=8 modes, a saturating case, gaps and stalls |
| `tb_padding_load` | every word of two slices of different sizes (border, tail row, `out_last`), gaps and stalls |
| `tb_sliding_window` | every window against the padded image, one word per cycle |
| `tb_conv_pe` | random data and weights for the full 7x7 and the masked shape, including saturation |
| `tb_masked_cnn`, `tb_standard_cnn` | all 48 outputs per window, 9-cycle interval |
| `tb_circular_line_buffer` | every cube, several slices in a row (buffer rotation) |
| `tb_dsc_module` | depth-wise, ReLU and point-wise against a model, 5-cycle interval |
| `tb_fusion_gate` | against a real-valued model (12-LSB tolerance), all activation regions |
| `tb_prob_estimator` | exact (mu, s) |
| `tb_srlvc_top` | whole engine on small slices: 8-bit and 12-bit modes, several slices in a row, random gaps on both inputs, random back-pressure on both outputs; counts each of these events and fails if one never happens; cycle bound with no stalls |
| `tb_srlvc_full` | whole engine at default parameters: two 256 x 256 12-bit slices (the second recurrent), then one 768 x 768 8-bit slice; every output compared; cycle bounds of 9 cycles/pixel plus fill |
| `tb_srlvc_workloads` | whole engine at default parameters on the data it targets: three 256 x 256 8-bit slices, two 512 x 512, one 400 x 400 and one 768 x 768 12-bit slice; every output compared, cycle bound per slice (measured 9.01-9.02 cycles per pixel) |

The end-to-end testbenches share `tb/srlvc_tb_env.sv`. It contains the engine
and a bit-exact integer model of the whole network (same truncation and
saturation), and drives random weights and pixels. The full-size run covers
about 1.4 million checks and the workload run about 2.9 million; each takes under a
minute of simulation on a desktop machine.

To run a testbench with Verilator 5:

    verilator --binary --timing --assert -y rtl -y tb rtl/srlvc_pkg.sv \
        tb/tb_srlvc_top.sv --top-module tb_srlvc_top -Mdir build_top
    ./build_top/Vtb_srlvc_top

Replace `tb_srlvc_top` with any other testbench name. The package must be
listed first; everything else is found through `-y`.

What is not verified:

- Timing closure and resource use on a real FPGA.
- Compression ratio with trained weights. The tests use random weights and
  check the arithmetic, not the quality of the prediction.
