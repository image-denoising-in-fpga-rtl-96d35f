# GenRE-Haar image denoiser

This is a streaming hardware denoiser for 8-bit greyscale images. The noise is
additive and white with a known variance. Its distribution is not known: it
may be Gaussian, uniform, Laplacian or anything else with zero mean.

The denoised image is a weighted sum of sixteen *sub-band images*:

    x_hat = sum_i alpha_i * psi_i          (i = 1..16)

Each `psi_i` is one sub-band of a five-level undecimated Haar transform of
the noisy image `y`, synthesised back to the image domain. That gives 3
detail bands (LH, HL, HH) per level plus the final low-pass band LL5. With
all `alpha_i = 1` the sum gives back `y` exactly.

The weights are chosen to minimise an unbiased estimate of the mean squared
error, the *generic risk estimate* (GenRE). That estimate needs only the
noise variance. Minimising it is the linear least-squares problem

    Q alpha = c,    Q = Psi^T Psi,    c = Psi^T y - q,    q_i = N sigma^2 H_i(1,1)

where `Psi` is the N x 16 matrix whose columns are the sub-band images and
`H_i(1,1)` is the centre tap of sub-band i's analysis-plus-synthesis filter.
The hardware builds `Psi` one row per clock cycle. It accumulates `Q` and `c`
on the fly, solves for `alpha` by gradient descent, and then forms `x_hat`.

Default configuration: 512 x 512 images, five levels, one pixel per clock.
At 183 MHz a complete image, with both passes and the solve, takes 625,744
cycles, or 3.42 ms.

## 1. Two passes over the image

`Psi` has 262,144 rows of 16 words for one 512 x 512 image. That is far too
much to store. Instead the image is streamed in twice, and `Psi` is recomputed
on the second pass.

The `analyse` pin selects the pass. It is sampled with the first pixel.

* **Analyse pass (`analyse = 1`).**
  - Every row of `Psi` goes to the outer-product accumulator, which builds `Q`.
  - Every row of `Psi`, together with the matching noisy pixel, goes to the
    matrix-vector accumulator, which builds `Psi^T y`.
  - After the last row, the gradient-descent solver runs. The resulting
    `alpha` is held, and `alpha_valid` goes high.
* **Denoise pass (`analyse = 0`).** Every row of `Psi` is multiplied by the
  stored `alpha` and summed, which gives one output pixel per clock.

Each pass has a fixed length:

- N pixels.
- Then a *flush* of LAT zero samples. The filter bank has a latency of LAT
  samples, so the flush pushes out the last LAT rows of `Psi`. It also leaves
  every delay line and running sum at zero. So the next pass starts clean,
  with no reset needed between frames.

The controller in `genre_denoiser` is a four-state machine:

    IDLE --first pixel--> PASS --N pixels--> FLUSH --LAT samples--> SOLVE (analyse only) --> IDLE
                                                            \------------- denoise -------> IDLE

## 2. The Haar filter bank

`haar_filter_bank` turns the pixel stream into the stream of `Psi` rows. The
paper's central implementation idea applies here: each side uses whichever
kind of filter is cheapest there.

### Kernels

At level `j` the undecimated Haar analysis kernel is `L x L`, with `L = 2^j`.
The kernel is made of four constant quadrants of size `L/2 x L/2`, and its
value is `±2^-2j`. Such a kernel is a box filter followed by a sparse
four-tap filter. The four taps are spaced `d = L/2` pixels apart:

    A = x(n - d*LINE - d)   B = x(n - d*LINE)   C = x(n - d)   D = x(n)

    LH = D - A + C - B      HL = D - A - C + B
    HH = D + A - C - B      LL = D + A + C + B

`LINE` is the row length. `haar2d_uwt` computes these four-tap filters using
two delay lines and four shared partial sums.

### Decomposition: direct, level by level

Level `j+1` of the transform works on `LL_j`. The cascade therefore has a
latency that grows with the level. The highest level finishes about
`16 x 512 + 16` samples after the first level.

The bands of all levels have to be *time-aligned*: each row of `Psi` must
hold all sixteen values for the same pixel. This design aligns them in two
steps:

1. `ll_subband_gen` computes `LL_1 .. LL_4` in advance as a cascade of
   four-tap LL filters. Each stage rescales its output to the fraction bits
   of its level.
2. `haar_decompose` gives each level its own alignment delay in front of its
   filter. The delay is taken from that level's `LL_{j-1}` input:

       delay_j = (LEVELS - j) + (2^LEVELS - 2^j) * (LINE + 1)

   After that delay, all 16 decomposition bands refer to the same pixel.
   The delay is applied to the narrow LL input rather than to the wider
   outputs.

### Recomposition: recursive, one channel per sub-band

Each of the 16 bands is synthesised separately, because GenRE needs the bands
separately. `ruwt_channel` implements the synthesis kernel (the analysis
kernel flipped) with three stages:

1. A *row recursion*, which is a running sum over `L/2` samples:
   `r(n) = r(n-1) + b(n) - b(n-L/2)`.
2. A *column recursion*, which is a running sum over `L/2` rows:
   `s(n) = s(n-LINE) + r(n) - r(n - (L/2)*LINE)`.
3. A `haar2d_uwt` with spacing `L/2`, whose output is selected with the sign
   of the flipped kernel:

   | Band | Output taken |
   |------|--------------|
   | LH   | −LH          |
   | HL   | −HL          |
   | HH   | HH           |
   | LL   | LL           |

The running sums are exact integers, so they cannot drift. They return to
zero after `L/2` rows of zeros, which the flush provides.

Each stage adds one register. Summed over both halves, the filter bank's
latency is

    LAT = LEVELS + 3 + (2^LEVELS - 1)(LINE + 1)    = 15911 at 512 x 512, 5 levels

The noisy pixel `y` is delayed by the same LAT samples inside the filter
bank, as `y_al`, so that it meets its own row of `Psi`.

### Borders

Every delay line outputs zero until it has been filled once. The image is
therefore zero-padded above and to the left. The rows of `Psi` are centred on
the kernels, so pixels near the bottom and right edges see the zeros of the
flush. A row does *not* wrap into the next row: the delays are exact sample
counts in a raster stream. The left-edge taps of one row therefore read the
right edge of the row above, as in any line-buffer implementation of a 2D
filter.

This border handling is the same in both passes. It is also the same in the
reference model used by the testbenches. So `alpha` is optimal for exactly
the transform that the hardware applies. The weights still sum back to `y`
when all `alpha_i = 1`.

## 3. Number formats

| Signal                        | Format                             | Notes |
|-------------------------------|------------------------------------|-------|
| input pixel                   | unsigned Q8.0                      | |
| decomposition band, level j   | signed, 16-bit word, 2, 4, 6, 6, 6 fraction bits for j = 1..5 | floor after each 2^-2 scaling |
| `LL_j` inside the generator   | the same fraction bits as level j  | |
| `psi_i` (column of `Psi`)     | signed 16-bit, 6 fraction bits     | level 1 truncated to 4 fraction bits first |
| `Q/N`, `c/N`                  | signed 34-bit, 12 fraction bits    | the solver scales both by a further 1/4 |
| `alpha_i`                     | signed 32-bit, 24 fraction bits    | reset value 1.0 |
| `sigma2` input                | unsigned 16-bit integer            | noise variance in pixel units |

Notes on the table:

- **Decomposition fraction bits.** They follow the truncated format: level 1
  keeps 2 fraction bits, level 2 keeps 4, and higher levels keep 6.
- **Recomposition fraction bits.** The output is truncated to 4 fraction bits
  at level 1 and to 6 above. It is then placed in a common 6-fraction-bit
  word, so that all columns share one binary point.
- **Scaling by N.** `Q` and `c` are divided by `N = 2^LOG2N` when read out.
  That is a shift, which is why the image size must be a power of two. `alpha`
  is unchanged by the scaling.
- **Width of `Q`.** After the division, `Q` is a mean of products of 16-bit
  words, so 34 bits can never overflow.

## 4. Estimating the shrinkage factors

### Outer products (`outer_product_acc`)

`Q = sum over rows of psi_row^T psi_row`. Only the upper triangle including
the diagonal is computed: 136 multiply-accumulators of 50 bits. Each
upper-triangle output is also wired to its mirror position below the
diagonal.

### Right-hand side (`matvec_c`)

There are 16 multiply-accumulators of `psi_i * y`.

The correction term `q_i` needs the centre tap `H_i(1,1)` of the combined
analysis-plus-synthesis filter. For Haar kernels it is the sum of the squared
kernel values: `L^2 * (2^-2j)^2 = 2^-2j`. So `q_i / N = sigma^2 * 2^-2j`,
which is a constant shift of the `sigma2` input per column.

### Gradient descent (`gradient_descent`)

    alpha <- alpha + mu * (c - Q alpha),    mu = 2^-13,    alpha_0 = 1

`Q alpha` uses 16 multipliers, one per row of `Q`. Each cycle they multiply
one column of `Q` by one `alpha_k`. That takes 16 cycles, and the update
takes 1 more, so an iteration takes 17 cycles. The solve runs a fixed
`GD_ITERS = 4096` iterations, which is 69,633 cycles including the start
cycle.

**Step size and scaling.** Gradient descent converges only while
`mu * lambda_max < 2`. The largest eigenvalue of `Q/N` is close to the mean
square of the LL5 band, which is roughly the mean of `pixel^2`. An ordinary
photograph of mean brightness 125 to 135 reaches 16,000 to 18,000 there. With
`mu = 2^-13` applied to `Q/N`, such an image sits at or beyond the limit of
16,384.

So the solver applies `mu = 2^-13` to `Q/(4N)` and `c/(4N)` instead. This is
the `GD_PRESCALE = 2` shift in the residual. It raises the limit to 65,536,
above the low-band energy of any 8-bit image, and it does not change the
solution `alpha`.

- The cost is a four-times slower approach for the weakest eigen-directions.
  These belong to the noise-dominated fine bands.
- With noise of standard deviation 25, the finest band has an energy of
  about 156. For an eigenvalue that size, 4096 iterations shrink the error
  by a factor of about 10^8.
- Directions with smaller eigenvalues settle less completely. On the smooth
  test image of `tb_genre_denoiser_full`, this costs about 0.5 dB.
- On the workload test scene (mean 135), the unscaled solver ends with
  weights above 100 and a PSNR of 5 dB. The scaled solver reaches 29.5 dB.

## 5. Output stage (`denoise`)

There are sixteen `psi_i * alpha_i` products, registered, followed by an
adder tree. The sum is rounded half-up to an integer and clamped to 0..255.
The stage has a latency of two cycles.

## 6. Interface and timing of `genre_denoiser`

| Port          | Dir | Width   | Meaning |
|---------------|-----|---------|---------|
| `clk`, `rst_n`| in  | 1       | clock; asynchronous active-low reset |
| `analyse`     | in  | 1       | 1 = analyse pass, 0 = denoise pass; sampled with the first pixel |
| `sigma2`      | in  | 16      | noise variance; hold it stable through an analyse pass and its solve |
| `pix_valid`, `pix`, `pix_ready` | in/in/out | 1/8/1 | pixel stream in raster order; a transfer happens when valid and ready are both high |
| `xhat_valid`, `xhat` | out | 1/8 | denoised pixel stream (denoise pass only; no back-pressure) |
| `alpha`       | out | 16 x 32 | stored weights, column order LH1, HL1, HH1, ..., HH5, LL5 |
| `alpha_valid` | out | 1       | `alpha` holds a finished estimate |
| `busy`        | out | 1       | a pass, flush or solve is in progress |

Timing:

- `pix_ready` is high in IDLE and PASS. It is low during FLUSH and SOLVE.
- The source may pause at any time. Every delay line advances only on an
  accepted pixel.
- The first `xhat` appears LAT + 2 accepted samples after the first pixel.
  After that, one pixel comes out per accepted input, and then per flush
  cycle.

Cycle counts at the defaults, for a source that never stalls:

| Phase            | Cycles |
|------------------|--------|
| analyse: pixels  | 262,144 |
| analyse: flush   | 15,911 |
| solve            | 69,633 |
| denoise: pixels  | 262,144 |
| denoise: flush   | 15,911 |
| **total**        | **625,744** (3.42 ms at 183 MHz) |

Parameters of the top:

- `IMG_W`, `IMG_H`: the image size, 512 x 512 by default. Both must be powers
  of two.
- `LEVELS = 5`.
- `GD_ITERS = 4096`.

A different image width changes every row delay. The delay memory is
proportional to `IMG_W`.

## 7. Cost

Multipliers:

- 136 for `Q`.
- 16 for `Psi^T y`.
- 16 for gradient descent.
- 16 for the output.

Delay memory is about 3.7 Mbit at the defaults, coarse-synthesis count. It is
dominated by the column recursions of the upper levels and by the alignment
delays. All delays are written as inferred single-port-style RAM arrays
(`delay_line`). There are no vendor primitives.

## 8. Departures from the published design

These are the points where this RTL differs from the original description, or
where that description left a choice open.

- **Upper-triangle multipliers.** The original cites 130 multipliers for the
  upper triangle of `Q`. A 16 x 16 symmetric matrix has 136 distinct
  entries, and all 136 are built.
- **Column-recursion feedback delay.** The original figure labels this delay
  `L/2 x 512`. A running sum over rows needs the previous row's sum, so it is
  a one-row delay here.
- **Truncation width.** The original text speaks of truncating to eight
  fraction bits. Its table of reduced formats shows 4 and 6 bits, and the
  table is followed.
- **One alignment delay per level.** The original block diagram has a delay
  stage both before and after the decomposition filters. Here the
  recomposition-side mismatch of `(2^j - 1)(LINE + 1)` samples is added to
  the input-side delay of each level. That is the narrowest place to store
  it, so nothing is delayed between decomposition and recomposition.
- **Aligned noisy pixel.** The original block diagram feeds the raw input to
  the matrix-vector multiplier. Here the pixel is delayed inside the filter
  bank so that it meets its own row of `Psi`.
- **Recursion start.** The recursions start from zero at the top-left border,
  with zero padding. They do not start from a convolution-computed initial
  value.
- **Choices the original leaves open.** They are all recorded in the file
  headers:
  - the pixel handshake;
  - the flush;
  - the division of `Q` and `c` by N;
  - the formula for `q`;
  - the number of gradient-descent iterations;
  - the scaling of `Q` and `c` that `mu` is applied to;
  - the rounding and clamping of the output;
  - the reset behaviour.
- **Execution time.** The original quotes 3.5 ms in one place and 3.6 ms in
  another. At 183 MHz this design needs 3.42 ms, which is within both.

## 9. Files

| File | Contents |
|------|----------|
| `rtl/genre_pkg.sv` | widths, number formats, band numbering, latency formula |
| `rtl/delay_line.sv` | RAM-based sample delay, zero until primed |
| `rtl/haar2d_uwt.sv` | four-tap 2D Haar filter (LH, HL, HH, LL) |
| `rtl/ll_subband_gen.sv` | advance computation of `LL_1..LL_4` |
| `rtl/haar_decompose.sv` | aligned decomposition, 16 bands |
| `rtl/ruwt_channel.sv` | recursive recomposition of one band |
| `rtl/haar_filter_bank.sv` | the complete filter bank plus the aligned `y` |
| `rtl/outer_product_acc.sv` | `Q/N` |
| `rtl/matvec_c.sv` | `c/N` |
| `rtl/gradient_descent.sv` | solver for `alpha` |
| `rtl/denoise.sv` | `x_hat = Psi alpha` |
| `rtl/genre_denoiser.sv` | top level and frame controller |
| `tb/genre_ref_pkg.sv` | bit-true reference model and test-image generators |
| `tb/tb_*.sv` | self-checking testbenches |

## 10. Verification

`tb/genre_ref_pkg.sv` is a bit-true model of the whole algorithm, written
without sharing any code with the RTL. It has two implementations of the
filter bank, one by direct convolution and one by running sums, and they
check each other.

Every block has its own self-checking testbench. Each testbench:

- compares every output against the model or a local calculation;
- has a watchdog;
- ends with a `TB_RESULT checks=... failures=...` line.

The testbenches with timing or feature checks:

- `tb_haar_filter_bank` compares all 16 columns and `y_al` for a 64-pixel-wide
  image with random input stalls. It also checks that `sum_i psi_i`
  reconstructs `y`.
- `tb_gradient_descent` checks the weights bit-exactly and the solve time of
  `17 * ITERS + 1` cycles.
- `tb_denoise` checks the two-cycle latency, the rounding and both clamps.

There are three end-to-end testbenches:

- `tb_genre_denoiser`
  - Size: 64 x 64, with 300 iterations.
  - Runs an analyse pass with random input stalls, then a denoise pass that
    has to wait through the flush and the solve.
  - Checks every `alpha` and every output pixel against the model.
  - Timing checks: the first-output latency, one pixel per clock, and the
    flush and solve lengths.
  - Counts how often each mechanism happened: a stall, back-pressure, a
    flush, a solve, a mode switch and a clamp. It fails if any count is zero.
- `tb_genre_denoiser_full`
  - The same test at the default parameters: 512 x 512, 5 levels, 4096
    iterations.
  - It also checks the whole frame against the 3.5 ms budget at 183 MHz.
  - On its synthetic image the PSNR rises from 23.5 dB to 31.3 dB.
- `tb_genre_workloads`
  - Runs a 512 x 512 scene through both passes three times, with Gaussian,
    uniform and Laplacian noise of standard deviation 25.
  - The scene is synthetic. It has the brightness and contrast of a typical
    test photograph: mean 135, standard deviation 45.
  - The noise comes from a fixed-seed generator.
  - Checks: weights and pixels bit-exact against the model, the 3.5 ms
    frame budget, a PSNR gain of at least 3 dB, and a higher SSIM after
    denoising.
  - The SSIM is computed over the whole image rather than in local windows.
    It goes from 0.87 to 0.98 here.
  - Results for all three noise types: about 20.3 dB in and 29.5 dB out,
    a gain of about 9.2 dB. The frame takes 625,744 cycles.

To run a testbench with plain Verilator (5.x):

    verilator --binary --timing --assert -Wno-fatal --top-module tb_genre_denoiser \
        -y rtl -y tb +libext+.sv -Irtl -Itb \
        rtl/genre_pkg.sv tb/genre_ref_pkg.sv tb/tb_genre_denoiser.sv
    ./obj_dir/Vtb_genre_denoiser

Replace the testbench name to run another test. The full-size tests take a
few seconds each.
