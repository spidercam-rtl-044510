# SpiderCam depth core: streaming depth from differential defocus in SystemVerilog

SpiderCam measures depth from one snapshot. Two sensors look through a beam
splitter at the same scene, and one sits a little farther from the splitter
than the other. The two images are therefore focused at slightly different
distances. For a textured patch, how the blur *differs* between the two images
tells you how far away the patch is. This is depth from differential defocus
(DfDD). It needs no projector, and its arithmetic is small enough to run on a
low-power FPGA at sensor rate.

This repository holds a synthesizable SystemVerilog description of the depth
core. Two 8-bit pixel streams go in. An 8-bit depth map comes out on a
parallel port, with one confidence and one depth value per pixel along the way.
The default configuration is the full one:

- 480 x 400 pixels;
- two image scales;
- pass-through plus x and y derivative estimates at each scale;
- band-pass preprocessing;
- 16 radial calibration zones.

## The estimate

Let `I1` and `I2` be the two aligned images. They give an average image and a
difference image:

    Iave = f(I1) + f(I2)        Idelta = f(I1) - f(I2)

Here `f` is an optional band-pass denoiser. At each scale `N`, two quantities
are formed per pixel:

    V_N = a_N * Laplacian(Iave)
    W_N = b_N * V_N - Idelta

`a_N` and `b_N` are calibrated constants. For the ideal optical model,
`Z * W ≈ V`, where `Z` is the depth. Every scale contributes three estimates:
the plain values, their x derivatives and their y derivatives (`V dx`,
`W dx`, ...). The depth is the weighted least-squares solution over all
2 x 3 estimates:

    C  = sum_i w_i V_i W_i              (confidence)
    Z' = sum_i w_i V_i W_i / sum_i w_i W_i^2

Only one division is needed per pixel. A pixel is reported only where
`C >= C_thresh` and `Z_min < Z' < Z_max`. All other pixels get the null
code 0.

The constants `a`, `b`, `C_thresh`, `Z_min` and `Z_max` are not uniform. The
small optics have field curvature, so the image is split into concentric rings
around the optical centre ("radial zones"), and each ring has its own set.

## One pixel per cycle, with no frame buffer

The whole core is one lock-step pipeline. Every stage moves by one raster
position on each cycle in which the global enable `en` is high. The enable is
high for each sensor pixel, and for the flush that pushes out the end of a
frame.

Nothing carries `(x, y)` with the pixels. Each stage knows its *lag*: the number
of enabled cycles between the start of the frame and the moment its output
holds pixel (0,0). A small counter (`raster_pos`) started by the frame-start
pulse recovers the stage's current position from that lag. The position is
needed for three things:

- zero padding at the image border;
- zero insertion;
- looking up the radial zone.

All lags are computed in one place (`spidercam_pkg`: `lag2d`, `pre_lag`,
`scale_lag_*`, `scales_lag_max`). The larger modules check at elaboration that
their own stage chain adds up to the same numbers, and stop with `$error` if it
does not.

Rules that follow from this model:

* A 2-D kernel is split into a horizontal pass (a shift register) and a
  vertical pass (a chain of line-length delay lines). Taps that fall outside
  the image read as zero.
* A kernel whose offsets reach `+k` lines adds `k*W + 1` cycles of lag. The
  `+1` is the output register of each pass.
* After the last input pixel of a frame, the core runs on its own for
  `LAT_TOTAL` cycles (`flushing` is high). The sensor's frame blanking must be at
  least that long. A pixel that arrives during the flush sets `overrun`. At
  the defaults, `LAT_TOTAL` is about 21 lines.

## Coarse scales without decimation

The usual multiscale approach decimates the image by two at every level.
Upsampling the result back in a stream would then need a large part of a frame
to be buffered. This core does not decimate.

Scale `N` runs on the full raster. Its useful samples sit at coordinates that
are multiples of `2^N`, and every kernel of that scale has its taps spaced
`2^N` apart (a zero-interleaved, or dilated, kernel). All scales therefore
keep the same one-pixel-per-cycle rhythm. The line buffers grow with the tap
spacing, not with the height of the image.

The stages of one scale (`scale_pipeline`):

1. Gaussian `[1 4 6 4 1]/16` on each axis, then the 2 x 2 box `[1 1]/2`, on
   both `Iave` and `Idelta`. These blurred, downsampled images are the inputs of
   scale `N+1`.
2. Laplacian, as the image minus its blurred copy. The copy goes through a zero
   inserter, which keeps only the pixels whose `x` and `y` are multiples of
   `2^(N+1)`. It then goes through the upsampler `[1 3 3 1]/4` on each axis.
   The upsampler weights add up to 2 per axis, which makes up for the inserted
   zeros.
3. `V = a * Lap` and `W = b * V - Idelta`, with `a` and `b` looked up from the
   pixel's zone.
4. Pass, DX and DY kernels (`[-1 0 1]/2` for the derivatives) on `V` and on
   `W`, then the products `VW` and `WW`, the weights, and a sum over the three
   estimates.
5. Back to full resolution. For `k = N-1` down to 0: a zero inserter with
   spacing `2^(k+1)`, then an upsampler with taps spaced `2^k`.

The coarse scale starts later, because it waits for the finer scale's blur, and
it has longer kernels. The `latency_buffer` therefore delays each scale's
`{VW, WW}` pair until all scales carry the same pixel. `sum_divide` adds the
pairs and divides.

The bypass paths of `Iave` and `Idelta` (into the Laplacian subtraction and
into `W`) are delay lines, sized from the same lag formulas.

## Number formats

* **Alignment (`bilinear_homography`)**
  - Each sensor stream gets an affine warp. The matrix is given as six signed
    Q16.16 numbers.
  - The warped value is a bilinear interpolation with 6-bit weights. The result
    is unsigned 8.4 fixed point.
  - The warp has to be small. Eight source lines are kept in memory, and the
    output trails the input by four lines. Source pixels outside the rows
    `y-3 .. y+3`, or outside the image, read as zero.
* **Preprocessing (`preprocessor`)**
  - All in integer arithmetic, with no bits dropped.
  - The high-pass step is `9*I - sum3x3(I)`, i.e. nine times the image minus its
    3 x 3 mean. It is followed by the 5 x 5 Gaussian.
  - The factor 9 scales `V` and `W` alike, so it cancels in `Z'`. It does scale
    `C`, and the confidence thresholds must be calibrated with it.
  - After the Gaussian, the values are converted to FP16, and `Iave` and
    `Idelta` are formed in FP16.
  - With `PREPROCESSING_ENABLE = 0`, the images go straight to FP16.
* **Everything after that is IEEE half precision without subnormals.**
  - Tiny results flush to zero.
  - Rounding is to nearest-even.
  - Exponent 31 is treated as infinity. No NaN is produced on purpose.
  - Dropping subnormals keeps the multiplier and the divider close to integer
    cost.
  - The arithmetic is in package functions (`fp16_add_f`, `fp16_mul_f`,
    `fp16_div_f`). Thin wrapper modules (`fp16_add`, `fp16_mul`, `fp16_div`)
    expose them. Multiplications by constant powers of two are exponent
    adjustments (`fp16_scale2`).
* **Output (`depth_filter`)**
  - The code is `round(Z' * depth_scale)`, saturated to 1..255. Code 0 is the
    null depth.
  - The flags `low_conf` and `out_of_range` tell the two kinds of rejection
    apart.

## Radial zones

`radial_zone` follows the raster of its stage and keeps
`r2 = (x-cx)^2 + (y-cy)^2` by increments, so it needs no multiplier or square
root per pixel. The zone is the smallest `z` with `r2 < r2_thr[z]`. A pixel
beyond the last threshold belongs to the outermost zone.

Each stage that needs a per-zone constant has its own tracker, set to the lag
of that stage. The same pixel therefore uses the same zone for `a`, `b` and the
output thresholds.

## Readout

`depth_readout` puts the depth bytes into a FIFO (4096 bytes by default). The
FIFO drains into an 8-bit port in the style of an FT232H synchronous FIFO:

- the bridge raises `port_ready` when it has room;
- a byte moves on every cycle with `port_wr` high;
- `port_vsync` marks the first byte of each frame;
- a byte that arrives when the FIFO is full is dropped and counted in
  `fifo_overflows`.

The FIFO level output of `depth_readout` is not used inside the top; that pin is
left open there.

## Parameters of `spidercam_top`

| parameter | default | meaning |
|---|---|---|
| `W`, `H` | 480, 400 | frame size |
| `NUM_SCALES` | 2 | number of image scales (1..3) |
| `DX_DY_ENABLE` | 1 | add the x/y derivative estimates |
| `PREPROCESSING_ENABLE` | 1 | band-pass denoising before FP16 |
| `RADIAL_ENABLE` | 1 | per-zone constants (otherwise zone 0 everywhere) |
| `ZONES` | 16 | radial zones |
| `FIFO_DEPTH` | 4096 | readout FIFO bytes |

The calibration sets are plain input ports:

- `hm1` / `hm2`: the two homographies;
- `a_tab` / `b_tab`: per scale and zone;
- `wgt`: three weights per scale;
- `c_thr`, `z_min`, `z_max`: the output thresholds, per zone;
- `depth_scale`: the scale of the 8-bit code;
- `ctr_x`, `ctr_y`: the optical centre;
- `r2_thr`: the squared zone radii.

A system would normally load these from a register file.

## Where this RTL departs from the published design, or fills gaps

* **Scaling of `Iave` and `Idelta`.** They are the plain sum and difference,
  without a factor 1/2. One description of the algorithm divides by two, and
  another does not. A common factor changes only the calibration.
* **Confidence.** `C` is `sum w V W`, as in the main description. One passage
  of the supplement writes `sum w W W` instead.
* **Choices the source leaves open**, each made here:
  - the 3 x 3 box size of the denoiser;
  - the `[-1 0 1]/2` derivative kernel;
  - zero padding at every border;
  - the sign convention of the Laplacian;
  - the homography formats and its row window;
  - the FIFO and the handshake of the readout port;
  - where the pipeline registers sit.
* **Line counts.** Because of the register placement, the number of buffered
  lines differs from the published line counts. For two scales with
  derivatives, the scale-0 stream waits about 9 lines in the latency buffer.
* **Back-to-back frames are not supported.** The core flushes between frames
  rather than overlapping the end of one frame with the start of the next. The
  sensors need enough vertical blanking, or a core clock faster than the pixel
  rate.
* **Not included.** The image sensors and the USB bridge chip are outside the
  core. Their signals are the top's ports. Calibration, which fits the
  constants from recorded image pairs, is an offline procedure and not part of
  the hardware.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` at the end, and each has a watchdog.

- **FP16 units.** Random operands, checked against real arithmetic within one
  unit in the last place. Zero and overflow are also checked.
- **Stream filters.** Five kernels and two tap spacings, checked against a
  real-valued convolution with zero padding, aligned by the documented lag.
- **Preprocessor.** Checked against a real-valued model of box, subtraction,
  Gaussian and FP16 conversion, with and without filtering.
- **Scale pipeline.** Scale 1, including the upsampling chain, checked against
  a real-valued model of every stage.
- **Homography, zero inserter, radial zones, latency buffer, depth filter,
  readout FIFO.** Each checked against direct reference computations. Enable
  gaps and (where it applies) several frames are included.
- **`tb_spidercam_top`.** A 64 x 48 frame, sent twice, with pixel gaps and line
  blanking.
  - Both sensors see the same scene, so `Idelta = 0` and `Z' = 1/b` for the
    pixel's zone. The test checks this value zone by zone.
  - It also checks the drops in flat areas (low confidence) and in a zone
    whose range excludes its depth (out of range).
  - The readout is throttled so that back-pressure and FIFO overflow both
    happen.
  - It counts every mechanism and fails if one never occurred.
- **`tb_spidercam_full`.** One frame through the top at the default 480 x 400
  configuration.
  - Sensor 2 is shifted by one pixel, and its homography shifts it back.
  - About 110,000 checks: the depth value, the flat-area drops, and the pixel
    and byte counts.

To run a testbench with verilator (example for the top):

    verilator --binary --timing --assert -Irtl -Itb --top-module tb_spidercam_top \
        rtl/spidercam_pkg.sv tb/tb_fp16_pkg.sv rtl/*.sv tb/tb_spidercam_top.sv
    ./obj_dir/Vtb_spidercam_top +verilator+rand+reset+2

The package files must come first. The full-size testbench builds in about
20 s and simulates one frame in a few seconds.

## File map

| file | contents |
|---|---|
| `rtl/spidercam_pkg.sv` | FP16 type and arithmetic, kernel tables, lag formulas |
| `rtl/raster_pos.sv` | raster position of a stream of given lag |
| `rtl/delay_line.sv` | ring-buffer delay / line buffer |
| `rtl/stream_window.sv` | 1-D sliding window with dilation and zero padding |
| `rtl/fp_filt1d.sv`, `rtl/fp_sep_filter.sv` | FP16 separable kernels |
| `rtl/int_filt1d.sv` | integer box / Gaussian passes of the preprocessor |
| `rtl/bilinear_homography.sv` | affine warp with bilinear interpolation |
| `rtl/preprocessor.sv` | denoising, FP16 conversion, sum and difference |
| `rtl/zero_inserter.sv` | zero insertion for the streaming upsampler |
| `rtl/scale_pipeline.sv` | one scale: Laplacian, V, W, estimates, upsampling |
| `rtl/radial_zone.sv` | incremental radius and zone index |
| `rtl/latency_buffer.sv` | alignment of the scales |
| `rtl/sum_divide.sv` | confidence and joint depth |
| `rtl/depth_filter.sv` | thresholds and 8-bit code |
| `rtl/depth_readout.sv` | FIFO and parallel port |
| `rtl/fp16_add.sv`, `rtl/fp16_mul.sv`, `rtl/fp16_div.sv` | FP16 operator modules |
| `rtl/spidercam_top.sv` | the core |
