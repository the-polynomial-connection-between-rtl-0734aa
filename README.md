# Exact grey-value dilation and erosion by umbra convolution

Grey-value dilation of an image `f` by a structuring element (filter) `b` is

    (f ⊕ b)(x) = max over y of  f(x − y) + b(y)

This is a "sum of products" in the max-plus algebra, where max plays the role of addition and `+` plays the role of multiplication. The core turns it into an ordinary convolution.

Represent every grey value `a` by the monomial `t^a`:
- the product `t^a · t^c = t^(a+c)` carries the `+`;
- in a sum of monomials with non-negative coefficients, the degree is the largest exponent, so the degree carries the `max`.

So the dilated value at `x` is the degree of the polynomial `Σ_y t^f(x−y) · t^b(y)`.

Written as arrays of coefficients, this is a discrete linear convolution with one more axis than the image, the *range* (grey-value) axis. An FFT computes it in `O(n log n)` time, however large the filter. Each coefficient counts how many (pixel, filter tap) pairs reach that grey value. The coefficients are therefore non-negative integers, and only the position of the highest non-zero one is read. The result is exact, not an approximation, as long as the arithmetic error stays below one half.

The RTL in this directory computes the method in hardware:
- 2-D images of up to 1024 × 1024 grid points (image size + filter size − 1 ≤ 1024);
- up to 5 bits per pixel;
- a structuring element of up to 5 × 5 pixels, flat or non-flat, with an arbitrary origin and an arbitrary domain.

The 1-D FFTs are done by an external FFT core that the design drives through a stream port. A behavioural model of that core is included for simulation.

## The umbra and the range axis

Every pixel of the image becomes a column of samples along the range axis `z`:

    u_f(row, col, z) = 1   if (row, col) is in the image's domain and f(row, col) = z
                       0   otherwise

The filter gets the same treatment. The full linear convolution of the two umbras is

    C(row, col, z) = Σ_(i,j,k) u_f(row−i, col−j, z−k) · u_b(i, j, k)

`C(row, col, z)` is the number of filter taps `(i, j)` with `f(row−i, col−j) + b(i, j) = z`. The dilation is the largest `z` with `C ≥ 1`. A pixel that no filter tap reaches has no such `z`: it lies outside the dilated domain.

Sizes of the range axis:
- For a `PIX_W`-bit image, values run from 0 to `l = 2^PIX_W − 1`.
- Sums run from 0 to `2l`.
- The range axis therefore needs `2l + 1` samples. The design rounds this up to `R = 2^(PIX_W+1)`, which is 64 for 5 bits. The convolution along `z` then never wraps.

Along rows and columns, the image and filter sit at the top-left of an `N × N` grid. The condition `rows_img + rows_filt − 1 ≤ N` (and the same for columns) keeps the 2-D convolution from wrapping. The core refuses a start that breaks it, raising `cfg_err` for one cycle.

The umbras are never stored. The umbra generator (`umbra_gen`) forms each sample on the fly from the pixel buffer while the first FFT pass reads it. It compares the stored value with the requested `z`.

## Data flow of one run

The sequencer `morph_ctrl` steps through these phases:

| Phase | Pass | Reads | Writes |
|---|---|---|---|
| `F_Z`, `F_C`, `F_R` | forward FFT of the image umbra along range, column and row | umbra generator (first pass), then volume A | volume A |
| `B_Z`, `B_C`, `B_R` | forward FFT of the filter umbra, same order | umbra generator, then volume B | volume B |
| `MUL` | point-wise complex product `A := A · B` | volumes A and B | volume A |
| `I_R`, `I_C` | inverse FFT along row and column | volume A | volume A |
| `I_Z` | inverse FFT along range, only for the lines of output pixels | volume A | projector |

A 3-D DFT is separable, so each 3-D transform is three passes of 1-D transforms (`fft3d_pass`). A pass walks every line of the `N × N × R` volume along one axis:
1. For each line, it reads the samples through a two-entry FIFO and streams them into the FFT core. The FIFO lets the core stall its input at any cycle.
2. It takes the transformed line back and writes it in place.

Sending and receiving are decoupled, so the next line is already going in while the previous one comes out.

The last inverse pass runs only over a window of range lines. The window is the output image, offset by the filter origin. Instead of writing back, it streams each line into the projector.

Memory use:
- The image spectrum and later the product live in volume A.
- The filter spectrum lives in volume B.

Each volume has `N·N·R` complex words (2^26 words of 80 bits at the default sizes). Each is a plain one-write, one-read synchronous RAM (`volume_ram`).

## Projection: from coefficients back to grey values

The projector (`projector`) receives the `R` samples of one range line in order `z = 0 … R−1`. It keeps the last `z` whose real part is at least 0.5. It then emits that `z` as the dilated value, with `res_hit = 1`.

If no sample reaches 0.5, the pixel lies outside the dilated domain. It is emitted with `res_hit = 0` and value 0 (or `l` when eroding).

The threshold is 0.5, not "non-zero". The true coefficients are integers, so any sample at or above one half is a count of at least one, and fixed-point noise below one half is not. A threshold of exactly 1.0 would fail whenever the rounding falls just below the integer; `tb_projector` adds noise of both signs so that such a change is caught.

## Fixed point and why it stays exact

Every complex sample is two signed 40-bit components with 10 fraction bits (`morph_pkg`: `CW = 40`, `FRAC = 10`).

Bounds on the values:
- The forward transforms are unscaled. A spectrum value is bounded by the number of ones in the umbra: at most `N² = 2^20` for the image, and at most 25 for a 5 × 5 filter.
- The product is therefore below `2^25`, well within the 29 integer bits.
- The inverse transforms are scaled by `1/L` per line, so the final samples are the counts `C` themselves (at most 25) plus rounding noise.

How the rounding is done:
- The complex multiplier (`cmul`) keeps the full 81-bit products, rounds half up to 10 fraction bits and saturates to 40 bits.
- The FFT core model rounds each output to the same format.

What has been confirmed, and where:
- The noise stays far below 0.5 at every size simulated: every pixel of every test is compared with the direct max-plus definition and all match.
- The FFT core must round without bias (round to nearest). A rounding that is biased by even one LSB on every sample, for example "add one half, then round", adds up coherently along every 1024-point line. It then lands in the zero-frequency terms: at `N = 1024` the filter's DC term grows from 25 to about 1050, the product saturates, and every output pixel is wrong. At `N ≤ 512` the same bias happens to stay below the threshold. Any replacement FFT core should be checked for this first.
- A real FFT core with a different internal word length also needs its own check of the noise margin.

## Erosion by duality

Erosion uses `f ⊖ b = l − ((l − f) ⊕ b̆)`, where `b̆(y) = b(−y)` is the filter reflected about its origin. With `erode = 1`, the same datapath runs with three changes:
1. The umbra generator inverts the image value (`l − f`) while forming its umbra.
2. The filter buffer is read reflected, and the origin is mirrored to `(rows − 1 − org_row, cols − 1 − org_col)`.
3. The projector returns `l − degree`.

No pass is added, so erosion takes exactly as long as dilation. The reflection is easy to get wrong: with an unmirrored origin, erosion by a filter with an off-centre origin gives wrong pixels, which `tb_morph_fft_top` checks.

## Geometry and the structuring-element origin

The full linear convolution has `(rows_img + rows_filt − 1) × (cols_img + cols_filt − 1)` points. Output pixel `(i, j)` is read at convolution position `(i + org_row, j + org_col)`. Here `(org_row, org_col)` is the filter pixel that is placed on the output pixel, i.e. the filter's origin. For a centred 5 × 5 filter the origin is `(2, 2)`.

Each pixel of the image and of the filter carries a domain flag:
- Image pixels outside the domain add nothing.
- Filter taps outside the domain make a non-rectangular structuring element.

Because of these flags, a flat filter is simply a filter with all values 0.

## Interfaces and timing (`morph_fft_top`)

**Loading.** Both load ports write one pixel (value plus domain flag) per cycle:
- `img_wr_*` for the image;
- `filt_wr_*` for the filter.

Load only while `busy` is low. Pixels never written keep their previous contents; the sizes given at start decide which are used.

**Control.**
- `start` is a one-cycle pulse. It latches `img_rows`, `img_cols`, `filt_rows`, `filt_cols`, `org_row`, `org_col` and `erode`.
- `busy` stays high until `done` pulses.
- A start with illegal sizes raises `cfg_err` for one cycle instead.

**Results.**
- `res_valid` marks one output pixel: `res_row`, `res_col`, `res_value` (signed `PIX_W+2` bits) and `res_hit`.
- Pixels come in raster order, one per range line.
- There is no back-pressure on this port.

**FFT core port (`fft_*`).** This is a valid/ready input stream and a valid output stream.

Input side:
- `fft_in_last` marks the last sample of a line.
- `fft_log2n` gives the line length (`log2 N` for row and column passes, `PIX_W+1` for the range axis).
- `fft_inverse` selects the direction.

Output side:
- Samples return in natural order.
- `fft_out_last` must mark the last sample.
- `fft_out_ready` is high whenever a pass is running.

Scaling conventions:
- forward transforms are unscaled;
- inverse transforms are scaled by `1/L`.

A vendor FFT core configured for natural-order output and run-time transform length fits this port with at most a thin wrapper. That wrapper is not part of this RTL.

**Run time.** Every pass moves the whole volume once through the FFT core, at one sample per cycle when the core keeps up. A run is six forward passes, the product walk and three inverse passes (the last one only over the output window). That is roughly 9–10 cycles per volume point. The measured counts, with the FFT model accepting the next line while returning the previous one and never stalling, are:

| Grid (N) | Tonal range | Volume points | Cycles per run |
|---|---|---|---|
| 64 | 5 bits | 262 144 | 2.63 M |
| 128 | 5 bits | 1.05 M | 10.5 M |
| 256 | 5 bits | 4.19 M | 42.1 M |
| 512 | 5 bits | 16.8 M | 168 M |
| 1024 | 5 bits | 67.1 M | 674 M |

The run time does not depend on the filter size. It doubles with each extra bit of tonal range, because the range axis doubles. It grows by about 4× when `N` doubles, since the row/column grid quadruples. The same trends show in published FPGA timings of this method: about 1.8× per bit, and 3.7–4× per FFT-size doubling. The prose accompanying those timings speaks of "almost doubling" per FFT-size step, but the plotted values themselves grow about fourfold, as expected when the 2-D grid quadruples. The workload test checks against the plotted values.

## Parameters

| Parameter | Default | Meaning |
|---|---|---|
| `N` | 1024 | FFT size along rows and columns (power of two) |
| `PIX_W` | 5 | bits per pixel; range axis `R = 2^(PIX_W+1)` |
| `FILT_MAX` | 5 | largest filter edge |

The defaults are the largest configuration of the published FPGA evaluation: 2- to 5-bit tonal range, FFT sizes 32 to 1024, a 5 × 5 filter, and images from 28 × 28 to 1020 × 1020.

A smaller image needs no rebuild: it runs on the same hardware with smaller `img_rows`/`img_cols`. The passes still walk the whole `N × N` grid, though. To make small images fast, build with a smaller `N`.

## Where this design departs from the published one

The method (umbra, 3-D convolution by FFT, projection to the highest non-zero degree) and the target sizes come from the published work. So does building the 3-D FFT from a separate 1-D FFT core. The hardware details below are this design's own.

- **Whole volumes in RAM.** Two full `N × N × R` volumes are kept: 2 × 2^26 words of 80 bits at the defaults, about 10 Gbit in total. That is far beyond the on-chip block RAM of any FPGA. The published FPGA version also keeps its 2-D and 3-D arrays in block/ultra RAM, but it does not say how it arranges them to fit. A practical build must map `volume_ram` onto external memory or restructure the passes so that whole volumes are not held. Neither is done here.
- **No vendor FFT.** The 1-D FFT is a port. `tb/fft1d_model.sv` is a double-precision behavioural stand-in, not hardware.
- **Fixed-point format, pass order, 0.5 threshold, on-the-fly umbra, in-place reuse of volume A and the FFT stream protocol** are own choices.
- **Erosion mode** follows the duality relation of the method. The hardware for it (inverting umbra generator, reflected filter read, inverting projector) is own design.
- **Range-axis length** is rounded up to a power of two, `2^(PIX_W+1)`, for a radix-2 FFT core.
- **Data type.** The published software version works in floating point with 8-bit images. The hardware here, like the published FPGA version, is limited to 5 bits.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints `TB_RESULT checks=… failures=…` and ends on a watchdog if it hangs.

| Testbench | What it checks |
|---|---|
| `tb_pixel_buffer` | random writes/reads against a shadow array, non-power-of-two width, read-during-write returns old data |
| `tb_umbra_gen` | every value/`z`/domain/invert combination |
| `tb_volume_ram` | read-before-write, `rd_en` gating, random traffic against a model |
| `tb_cmul` | random complex products within one LSB of the exact value, saturation on overflow |
| `tb_projector` | random integer lines with sub-0.4 noise, no-hit lines, erosion inversion, output one cycle after the last sample |
| `tb_fft3d_pass` | forward pass on each axis against a direct DFT, 40 % FFT stalls, inverse range pass through a projector window |
| `tb_morph_ctrl` | phase order, pass configuration, product walk addresses |
| `tb_morph_fft_top` | end to end at `N = 16`, `PIX_W = 3` with a stalling FFT model (below) |
| `tb_workload_fpga` | the FPGA evaluation's cases at FFT sizes 32 and 64 for 2–5 bits, plus cycle-count trends |
| `tb_full_size` | one dilation at the default parameters: 1020 × 1020 5-bit image, every pixel checked |

The cases in `tb_morph_fft_top` are:
- a 1-D worked example with known result `5 8 9 8 8 9`;
- a random 5 × 5 non-flat filter, dilation and erosion;
- filters with holes and an off-centre origin, both modes;
- a pixel outside the dilated domain;
- a refused configuration.

The testbench counts every mechanism (FFT stalls, range-window projection, erosion, no-hit pixels, `cfg_err`, …) and fails if one never happened. Every output is compared with the direct max-plus definition.

Full size: `tb_full_size` runs the default build (`N = 1024`, 5 bits, 5 × 5 filter) on a random 1020 × 1020 image and checks all 1 040 400 output pixels. The run takes 674 M cycles, about 9 minutes of verilator time and 1.6 GB of memory. Runs of `wl_runner` at `N` = 128, 256 and 512 (5 bits), and at `N = 1024` with 1 bit, also matched pixel for pixel.

Simulating with verilator (example for the end-to-end test; the other testbenches are built the same way):

    verilator --binary --timing -Wno-fatal -Irtl -Itb \
        rtl/morph_pkg.sv rtl/*.sv tb/fft1d_model.sv tb/tb_morph_fft_top.sv \
        --top-module tb_morph_fft_top -o sim
    ./obj_dir/sim

`tb_workload_fpga` also needs `tb/wl_runner.sv`. The volume RAMs are plain arrays, so a default-size build allocates about 1.3 GB of simulator memory for them.

## Files

| File | Contents |
|---|---|
| `rtl/morph_pkg.sv` | fixed-point and complex types, axis and phase enums |
| `rtl/morph_fft_top.sv` | top level: configuration, buffers, volumes, wiring |
| `rtl/morph_ctrl.sv` | phase sequencer and product-walk address generator |
| `rtl/fft3d_pass.sv` | one axis pass of a 3-D FFT over the external 1-D core |
| `rtl/umbra_gen.sv` | umbra sample from pixel value and `z` |
| `rtl/pixel_buffer.sv` | image / filter memory with domain flag |
| `rtl/volume_ram.sv` | `N × N × R` complex volume memory |
| `rtl/cmul.sv` | fixed-point complex multiplier with rounding and saturation |
| `rtl/projector.sv` | threshold and highest-degree search along the range axis |
| `tb/fft1d_model.sv` | behavioural model of the external 1-D FFT core |
| `tb/wl_runner.sv` | one randomised dilation run, used by `tb_workload_fpga` |
| `tb/tb_*.sv` | testbenches |
