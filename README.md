# Raw-domain denoiser for ultra-compact analog endoscope sensors

Single-use endoscopes put a sensor smaller than 1 mm × 1 mm (for example the
OmniVision OV6946) at the tip. The sensor sends an analog signal down a long
cable to a bridge chip, where an ADC digitises it. The raw frames that arrive
there are noisy in three separate ways:

* **Periodic banding noise (PBN).** Impedance and phase mismatch on the long
  analog line adds a vertical square wave. On the OV6946 its period is 4
  pixels along x, so two adjacent columns are lifted by +κ and the next two
  are lowered by −κ. The amplitude κ drifts with supply voltage and cable
  length.
* **Fixed-pattern noise (FPN).** Every pixel has its own dark offset, and
  every column amplifier has its own offset too. For pixel (x, y) this is
  modelled as `K(x,y) · analog_gain · t + B(x,y)`, where t is the exposure
  time. K and B differ from one sensor to the next, so they are calibrated
  offline from dark frames.
* **Poisson-Gaussian noise.** Shot noise and read noise, plus quantization
  noise.

The denoiser removes these three one after another, in the raw (Bayer)
domain, before any ISP stage can amplify them. The first two are removed by
fixed arithmetic on the pixel stream. The third is left to a small U-Net
made of depth-wise and point-wise convolutions, which runs in 12-bit fixed
point on a systolic array. This is the method described by Xing et al., "A
Real-time Endoscopic Image Denoising System". This RTL implements the
arithmetic stages and the CNN's compute engine. The U-Net itself is not
included, because that description does not specify the network.

```
 raw pixels ──┬──────────────► pbn_remover ──► fpn_remover ──► clean pixels ──► (U-Net sequencer)
 (bridge ADC) │                    ▲               ▲  │                               │
              └─► pbn_estimator ───┘ κ, phase      │  └── read K,B ── fpn_coef_mem ◄── host writes
                  (previous frame)         gain, t ┘                                  │
                                                                                      ▼
                                                       systolic_array ──► requant ──► 12-bit results
```

`endo_denoise_top` wires all of this together. The U-Net sequencer is
external. So is the memory that holds its feature maps. The systolic array's
load, stream and result ports are therefore ports of the top, next to the
cleaned pixel stream.

## Pixel stream

Every stage exchanges the same stream, `denoise_pkg::pix_beat_t`: a 12-bit
raw pixel with a start-of-frame flag (`sof`) and an end-of-line flag
(`eol`), qualified by a separate `valid`. A sensor cannot be stalled, so
there is no backpressure: each stage accepts one pixel per cycle, and idle
cycles (blanking) may appear anywhere. Each stage finds its own (x, y) by
counting from `sof` and `eol`. Per-frame settings (enables, κ, phase, gain,
exposure) are sampled on the `sof` beat and held for the rest of the frame,
so a frame is never corrected with mixed settings.

The 12-bit pixel width is a design choice: the ADC's resolution is not
published. The default frame size of 400 × 400 is the OV6946's pixel array.

## Measuring the banding (`pbn_estimator`)

This is the least obvious part of the design.

Take two pixels two columns apart. They have the same Bayer colour, and they
always sit on opposite halves of the period-4 wave. So in a region of the
scene that is flat, or changes linearly, the second difference along x
contains nothing but the wave:

```
I(i-2) + I(i+2) - 2·I(i) = ±4κ        (wave at i-2 and i+2 is the opposite of the wave at i)
```

The estimator uses this identity on every row y:

```
w_i      = 1  if |I(i+2) - I(i-2)| < θ  else 0              (flat window: i-2 and i+2 share the wave's sign)
4·κ_y    = Σ_i |I(i-2) + I(i+2) - 2·I(i)| · w_i  /  Σ_i w_i
κ        = average of κ_y over the rows of the frame
```

The method's prose also mentions the first difference |I(i+2) − I(i)| = 2κ.
The amplitude here follows the formula above instead, because the second
difference also cancels a linear gradient in the scene. Here i runs over the
window centres that lie inside the row, 2 … W−3. The
threshold θ is an input (`theta`). Windows across an edge are dropped,
because the scene's own step makes |I(i+2) − I(i−2)| large. A row with no
flat window has no κ_y, so it is left out of the average.

In hardware, a 5-pixel shift register provides I(i−2), I(i) and I(i+2) as
I(i+2) arrives. Each row accumulates the numerator and the count of flat
windows. At `eol`, a serial divider (`serial_divider`, one quotient bit per
clock) computes `(Σ·4)/Σw`, which is κ_y in units of 1/16 pixel code
(`KFRAC` = 4 fractional bits). The quotients are summed over the frame.
After the last row (`IMG_H`), a second serial divider averages them. The
result appears on `kappa_q` with a one-cycle `est_valid`. With the default
400-pixel rows, a row division takes 26 cycles. A row, including any
blanking, must last longer than that. If it does not, the row is dropped,
`row_overrun` pulses, and an assertion fires. The frame estimate is ready
about 56 cycles after the last pixel.

**Phase.** The same flat windows also give the phase. If the wave is
positive at column i, then `I(i+2) − I(i)` is about −2κ there. The estimator
sums this difference over flat windows with i mod 4 = 0 and, separately,
with i mod 4 = 1, over the whole frame. The wave is taken as positive at
x mod 4 = r when the sum for r is negative. Columns 2 and 3 take the
opposite signs of columns 0 and 1. The result is the 4-bit `band_pat` (bit r
set means +κ at x mod 4 = r). This follows the published method, which reads
the sign of `I(i+2) − I(i)`. One caveat: a scene ramp of 2κ or more over two
pixels, inside windows that still count as flat, can outweigh the wave and
flip the phase. The signed second difference would be immune to such a ramp,
but it is not what the method prescribes.

If no row of the frame has a flat window (for example θ = 0), the previous
estimate is kept. `est_valid` still pulses, with `est_rows` = 0.

**Which frame's estimate is used.** The estimator watches the raw stream.
`pbn_remover` applies the estimate that was ready at the frame's `sof`, which
is the estimate of the previous frame. This avoids a frame buffer. It relies
on the banding being stable from frame to frame, which holds when the cable,
gain, exposure and supply are fixed. The first frame after reset is
corrected with κ = 0.

## Removing the banding (`pbn_remover`)

```
out = clamp( in − s(x mod 4) · round(κ), 0, 4095 ),   s = +1 where band_pat is set, −1 elsewhere
```

One cycle of latency. With `enable` low, the stream passes through
unchanged. This matches the "without PBN removal" configuration the method
was evaluated in.

## Removing fixed-pattern noise (`fpn_remover`, `fpn_coef_mem`)

Calibration is done offline and is not part of this RTL. For several
settings of gain and exposure, dark frames are captured, their banding is
removed, and they are averaged over time. A line is then fitted per pixel,
giving K and B. The host writes the result into `fpn_coef_mem`: one
`{K, B}` word per pixel, in raster order (address = y·IMG_W + x), 12-bit
signed each. At the default size that is 160,000 × 24 bits = 3.84 Mbit.
Temperature, which the model allows for, is ignored, as was done for the
OV6946.

At run time, `fpn_remover` forms g·t once per frame from `analog_gain` and
`exposure` sampled at `sof`. For each pixel it reads K and B and outputs

```
N_FPN = round( K · g · t / 2^(K_SHIFT + GAIN_FRAC) ) + B
out   = clamp( in − N_FPN, 0, 4095 )
```

It has three cycles of latency: memory read, then the FPN value, then the
subtraction. The number formats are design choices, since none are
published:

* gain is Q4.4 (`GAIN_W` = 8, `GAIN_FRAC` = 4);
* exposure is a 16-bit integer;
* K has 20 fractional bits relative to the g·t product;
* B is in pixel codes.

B absorbs the black level, so the output is zero-based. `enable` low passes
the stream through.

## The CNN engine (`systolic_array`, `sa_pe`, `requant`)

After banding and FPN are removed, the remaining noise is Poisson-Gaussian.
A U-Net handles it: its encoder and decoder use depth-wise plus point-wise
convolutions, in the style of PMRID, with every weight and activation
quantized to 12-bit fixed point. It runs on a systolic array. The published
description names the array but not its structure, so the array here is the
simplest one that serves those convolutions:

* **Weight-stationary, ROWS × COLS (16 × 16).** PE (k, j) holds weight
  W[k][j] and is loaded one row per cycle through `w_load`/`w_row`/`w_data`,
  only while the array is idle (asserted).
* An input vector `in_act[0..ROWS-1]` enters from the left. Row k is skewed
  by k cycles inside the array. Partial sums flow down the columns, starting
  from `in_psum[j]`. Column outputs are de-skewed, so a whole vector
  `out_acc[j] = in_psum[j] + Σ_k a[k]·W[k][j]` leaves together, exactly
  `ROWS + COLS − 1` cycles after it entered, at one vector per cycle.
* **Point-wise convolution:** one pixel's input channels are the vector,
  and the columns are the output channels. Feeding a tile's result back in
  as `in_psum` handles more than ROWS input channels.
* **Depth-wise 3×3 convolution:** through im2col. The 9 taps go to rows 0–8,
  and the channel's 9 weights go to one column.
* `requant` shifts each 32-bit accumulator right by `shift` with round-half-up,
  optionally applies a ReLU, and saturates to signed 12 bits. One cycle of
  latency.

The sequencer that walks the U-Net's layers is not here. It would generate
im2col windows, tile the channels, and handle down/up-sampling and skip
connections. Neither the network's layers and channel counts nor the
schedule of the FPGA implementation are published, so any sequencer would be
invented.

## Timing summary

| path | latency | rate |
|---|---|---|
| raw pixel → clean pixel | 4 cycles (PBN 1 + FPN 3) | 1 pixel/cycle |
| last pixel of frame → κ, phase | ≈ 56 cycles (default size) | once per frame |
| array input → `out_acc` | ROWS + COLS − 1 = 31 cycles | 1 vector/cycle |
| array input → 12-bit result | ROWS + COLS = 32 cycles | 1 vector/cycle |

The real-time target is 30 frames per second. For 400 × 400 pixels that is
4.8 Mpixel/s, so the correction pipeline keeps up at any clock above about
5 MHz plus blanking. Whether the array meets 30 fps for the U-Net cannot be
worked out, because the network's operation count is not published.

## Parameters

| parameter | default | where | origin |
|---|---|---|---|
| `PIX_W` | 12 | `denoise_pkg` | design choice (ADC width unpublished) |
| `Q_W` | 12 | `denoise_pkg` | published (12-bit fixed point) |
| `IMG_W`, `IMG_H` | 400, 400 | top, estimator, FPN | OV6946 datasheet |
| `KFRAC` | 4 | estimator, remover | design choice |
| `COEF_W` | 12 | FPN | design choice |
| `GAIN_W`, `GAIN_FRAC`, `EXP_W`, `K_SHIFT` | 8, 4, 16, 16 | FPN | design choice |
| `SA_ROWS`, `SA_COLS` | 16, 16 | array | design choice |
| `ACC_W` | 32 | array, requant | design choice |

The period of 4 pixels is structural: the x mod 4 logic and the 4-bit
pattern are built around it.

## Departures and limits

* **Published and built as described:** the order of the stages; the banding
  model (square wave, period 4); the banding estimate (Eq. 5 and 6, average
  over rows, phase from the sign of I(i+2) − I(i)); the FPN model
  K·g·t + B without temperature; 12-bit operands on a systolic array.
* **Choices of this design:** the stream format; using the previous frame's
  banding estimate; how the phase signs are combined; leaving rows with no
  flat window out of the average; all number formats, rounding and
  clamping; the coefficient memory's organisation; the array's dataflow,
  size and accumulator width; the requantizer's rounding and ReLU; the
  stage enables.
* **Not built:**
  * the analog sensor, amplifier, cable and ADC;
  * the offline FPN calibration;
  * the U-Net sequencer and its feature-map and weight memory;
  * the downstream ISP.

  The image-quality results published for the method (PSNR from 21.16 to
  33.05 dB on 200 OV6946 pairs) depend on the U-Net and cannot be
  reproduced with this RTL alone.

## Verification

Every block has a self-checking testbench in `tb/` (the helpers `sa_pe`
and `serial_divider` are tested through the array and the estimator). Each
prints `TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_denoise_pkg` | the shared clamp function at and around both ends of the pixel range |
| `tb_pbn_estimator` | κ and phase against Eq. 5/6 computed in the testbench, on noise-free frames (every phase, with edges; κ must be exact) and noisy frames; estimate kept when no window is flat; latency bound |
| `tb_pbn_remover` | every pixel against the formula, clamp at both ends, settings held per frame, 1-cycle latency |
| `tb_fpn_coef_mem` | write/read of every word, read latency, output hold, isolation of writes |
| `tb_fpn_remover` | every pixel against K·g·t + B in 64-bit arithmetic, per-frame sampling, clamp, 3-cycle latency |
| `tb_systolic_array` | 5 × 3 array, random and extreme weights, back-to-back and gapped vectors, exact latency |
| `tb_requant` | rounding, shift, ReLU, saturation at both ends |
| `tb_endo_denoise_top` | whole chain at 32 × 6 pixels and a 4 × 4 array (details below) |
| `tb_endo_denoise_full` | same as above with every parameter of the top at its default: seven 400 × 400 frames, 16 × 16 array (about 15 s) |

The two end-to-end testbenches run seven frames at three analog gains (1×,
2× and 4×, standing in for the low, medium and large gain classes of the
published test set, whose values are not given). They check every output
pixel bit-exactly against a model of the chain. They check that corrected
frames equal the synthetic scene (mean error 0), and that an uncorrected
frame does not. They exercise PBN bypass, FPN bypass, a frame with no flat
window, a dark frame that reaches the clamp, and one point-wise layer on
the array fed with cleaned pixels. They count each of these mechanisms and
fail if any never happens.

To simulate with Verilator, for example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl +libext+.sv \
    rtl/denoise_pkg.sv tb/tb_endo_denoise_top.sv --top-module tb_endo_denoise_top
./obj_dir/Vtb_endo_denoise_top
```

Lint a module with
`verilator --lint-only -Wall -Irtl -y rtl +libext+.sv rtl/denoise_pkg.sv rtl/<module>.sv`.
All sizes are parameters. The testbenches use small frames except
`tb_endo_denoise_full`.
