# Pseudo-Zernike / SVM gamma-hadron trigger

An imaging atmospheric Cherenkov telescope records, for every air shower that
triggers it, a picture of the shower's Cherenkov light on a camera of
photomultiplier pixels. Most of these pictures come from cosmic-ray hadrons;
the interesting ones come from gamma rays. Gamma showers give compact,
elliptical images whose long axis points towards the source; hadron showers
give wider and more irregular ones. This design is a third-level trigger that
makes the gamma/hadron decision in hardware, image by image, in two steps:

1. **Describe the image by its pseudo-Zernike moments.** The image is
   projected on an orthogonal basis of polynomials over the unit disk. The
   magnitudes of the projections are the features. They do not change when
   the telescope rotates about its axis. They do change with image size and
   position, and that is useful: size carries the shower energy, and position
   carries the pointing (the "alpha" angle of classical image analysis).
2. **Classify the feature vector with a support vector machine (SVM)** that
   uses a Gaussian kernel and was trained offline.

The RTL computes 36 features: all orders `n = 0..7`, with repetitions
`0 <= m <= n`. It normalizes them with the statistics of the training set.
It then evaluates

```
score = sum_i  alpha_i*y_i * exp(-gamma * ||x - z_i||^2)  +  b
decision = gamma-ray if score >= 0, hadron otherwise
```

over the stored support vectors `z_i`. The kernel width `gamma` resets to
1.07, the value chosen by a cross-validated grid search in the original
study. The original study built this function for a Xilinx Spartan-3 board
using a C-to-HDL compiler. This is a hand-written, synthesizable
SystemVerilog version of the same function. Everything the original leaves
open has been chosen here: the schedule, the word widths, the interfaces and
the exponential and square-root algorithms. Each of these choices is listed
below.

## Data flow

```
 pixel stream ──► pz_image_buffer ──► pz_feature_extractor ──► feature_normalizer ──► svm_decision ──► res_valid
 (valid/ready,    (NPIX x 16 bit)      ├ pz_radial_table         (mean, 1/std          ├ svm_model_memory   res_gamma
  NPIX per image)                      ├ pz_angular_table         per feature)         │  (z_i, alpha_i y_i) res_score
                                       └ fx_sqrt                                       └ fx_exp
 cfg bus ───────────────────────────────────────┴──────────────────────────┴───────────────┘
 (all tables and model values, written offline)
```

| module | role |
|---|---|
| `l3_trigger_top` | controller: load the image → extract the features → classify → report |
| `pz_image_buffer` | one image, written in pixel order, read by the extractor |
| `pz_radial_table` | `R_nm(r_p)·(n+1)/π` for 36 (n,m) pairs × NPIX pixels |
| `pz_angular_table` | `cos(mθ_p)`, `sin(mθ_p)` for m = 0..7 × NPIX pixels |
| `pz_feature_extractor` | complex multiply-accumulate over the pixels, then `sqrt(Re²+Im²)` |
| `fx_sqrt` | 64-bit integer square root, one result bit per clock |
| `feature_normalizer` | `x_k = (|A_k| − mean_k) · (1/std_k)` |
| `svm_model_memory` | support vectors (36 × Q3.12 each) and their coefficients |
| `svm_decision` | distance, kernel and weighted sum over the support vectors |
| `fx_exp` | `exp(−t)` by base-2 range reduction and a polynomial |
| `l3t_pkg` | shared widths, Q formats, the configuration bus type |

Default sizes: `NPIX = 577` pixels and `NSV = 1024` support vectors. 577 is
the pixel count of the MAGIC-I camera, the telescope the method was
developed for. The original text gives neither number.

## The pseudo-Zernike features

The pseudo-Zernike moment of order `n` and repetition `m` of an image `f` is

```
A_nm = (n+1)/π · Σ_p f_p · R_nm(ρ_p) · e^(−j m θ_p)

R_nm(ρ) = Σ_{s=0}^{n−|m|} (−1)^s (2n+1−s)! / ( s! (n−|m|−s)! (n+|m|+1−s)! ) · ρ^(n−s)
```

Here `(ρ_p, θ_p)` are the polar coordinates of pixel `p` in a unit disk that
covers the camera. Up to order `n` there are `(n+1)²` polynomials, since
`m` runs from `−n` to `n`. But `|A_n,−m| = |A_n,m|`, so only `0 <= m <= n`
gives distinct magnitudes. That is `(n+1)(n+2)/2 = 36` features for `n = 7`.
The original text states both the `(n+1)²` count and "order 7,
corresponding to 36 features". The RTL follows the 36.

Only `f_p` changes from one image to the next. The other factors depend only
on the camera geometry, so they are computed once offline and stored:

* `pz_radial_table` holds `R_nm(ρ_p)·(n+1)/π` as signed Q5.12 (18 bits).
  The 18 bits are needed: `|R_n0(0)| = n+1`, so at the camera centre the
  scaled value for `n = 7` reaches `8·8/π ≈ 20.4`, beyond a Q3.12 range.
* `pz_angular_table` holds `cos(mθ_p)` and `sin(mθ_p)` as signed Q1.14. The
  original only mentions storing the radial polynomials. Storing the angular
  factor as well is this design's choice, since it too is a function of
  pixel position only.

Feature `k = n(n+1)/2 + m` is computed by streaming all pixels through a
three-stage pipeline, one pixel per clock:

1. Read the image buffer and both tables.
2. Form `R·cos` and `R·sin`, shifted back to Q.12.
3. Accumulate `Re += f·R·cos` and `Im −= f·R·sin` in 48-bit accumulators.

After the last pixel, each accumulator is rounded down (arithmetic shift) to
Q.4 and saturated at 32 bits. The radicand `Re² + Im²` (64 bits) then goes to
`fx_sqrt`. `fx_sqrt` is the restoring digit-by-digit root: each clock it
takes the next two radicand bits into the remainder and tries to subtract
`4·root + 1`. After 32 clocks it returns `floor(sqrt)`, which is `|A_nm|` in
Q.4. The extractor waits for the root before starting the next feature. One
image therefore costs `36·(NPIX + 36)` clocks: 22 068 at 577 pixels.

## Normalization

The SVM was trained on features that had been standardized with the
training set's per-feature mean and standard deviation. The same mapping
must be applied in the trigger. `feature_normalizer` holds `mean_k` (Q28.4,
the unit of the magnitudes) and `1/std_k` (unsigned Q4.20). Loading the
reciprocal avoids a divider. The normalizer computes
`x_k = floor((|A_k| − mean_k)·(1/std_k))` in Q3.12 and saturates to
16 bits. After reset, `mean = 0` and `1/std = 1`.

## SVM evaluation

`svm_decision` keeps the 36 normalized features of the current image in a
register file. For each support vector `i < nsv` it streams the 36 stored
components `z_ik` and accumulates `(x_k − z_ik)²`. This is an exact integer
in Q.24 with 40 bits. When a vector's squared distance is complete, it moves
to a second pipeline, and the distance of the next vector starts on the very
next clock. The second pipeline:

* multiplies the distance by `gamma` (Q4.12) and saturates it to the exp
  input, unsigned Q8.16 (`t < 256`);
* `fx_exp` computes `exp(−t) = 2^−(t·log2 e)`. The product `t·log2 e` is
  split into an integer part `I` and a 16-bit fraction `F`. `2^−F =
  exp(−F ln 2)` comes from a 5th-order Taylor polynomial in Horner form, with
  coefficients `ln2^i / i!` in Q.20. The result is shifted right by `I` and
  rounded to Q1.16. The largest error is below 2·10⁻⁴: the measured value is
  1.4·10⁻⁴, and an argument of 0 gives exactly 1.0;
* multiplies by `alpha_i·y_i` (signed Q16.16) and adds the product to a
  64-bit Q.32 accumulator.

The Q16.16 coefficient format covers `|alpha_i| <= C = 28526.2`, the
regularization constant of the reported training. The final
`score = acc + b` is reported as signed Q16.16, saturated at ±32768.
`is_gamma` is set when `score >= 0`. The original gives the SVM target only
as a value in {1, −1}. Reading +1 as gamma is this design's convention.

`svm_decision` sets `done` `36·nsv + 9` clock edges after the edge that
samples its `start`.

## Interfaces

**Pixel input.** `pix_valid` / `pix_ready` / `pix_data[15:0]`. A transfer
happens on a clock where both are high. One image is `NPIX` amplitudes in
pixel order, already cleaned: pixels below the pedestal threshold are zero,
and cleaning is done upstream. `pix_ready` is high only while an image is
being loaded. It stays low from the last pixel until the decision is out.
There is a single image buffer, so the camera side stalls during that time.

**Result.** `res_valid` pulses for one clock with `res_gamma` and
`res_score` (signed Q16.16). There is no back-pressure.

**Latency.** `res_valid` is set by the clock edge that comes
`36·(NPIX+36) + 36·nsv + 14` edges after the edge that takes the last pixel.
That is 58 946 at the default size with all 1024 support vectors in use.
A new image can be loaded right after `res_valid`, so one image takes about
`NPIX` clocks more than the latency.

**Configuration** (`cfg`, a packed struct `{we, sel[3:0], addr[19:0], data[31:0]}`,
one write per clock). Write only while `busy` is low; an assertion in the
top checks this.

| `sel` | address | data |
|---|---|---|
| `CFG_RADIAL` | `k·NPIX + p` | `[17:0]` R, Q5.12 |
| `CFG_ANGULAR` | `m·NPIX + p` | `{cos[15:0], sin[15:0]}`, Q1.14 |
| `CFG_MEAN` | `k` | mean, Q28.4 |
| `CFG_INVSTD` | `k` | `[23:0]` 1/std, Q4.20 |
| `CFG_SV` | `i·36 + k` | `[15:0]` z_ik, Q3.12 |
| `CFG_ALPHA` | `i` | alpha_i·y_i, Q16.16 |
| `CFG_BIAS` | – | b, Q16.16 (reset 0) |
| `CFG_GAMMA` | – | `[15:0]` gamma, Q4.12 (reset 4383 = 1.07) |
| `CFG_NSV` | – | number of support vectors in use (reset NSV; larger values are clipped to NSV) |

The full default configuration is 20 772 radial, 4 616 angular, 36 864
support-vector and 1 024 coefficient words.

## Resources

At the default size the design holds 1.15 Mbit of memory: 590 kbit of
support vectors, 374 kbit of radial table, 148 kbit of angular table, 33 kbit
of coefficients and 9 kbit of image. It also has about 3 500 flip-flops.
Its arithmetic is about a dozen multipliers, most of them 16 to 18 bits
wide. The support-vector store scales with `NSV·36·16` bits. The original
text does not give the size of the trained model, and with 24 534 training
images it may well exceed 1024 support vectors. `NSV` is the parameter to
raise.

## What comes from the original work and what does not

Taken from it:
* the algorithm: pseudo-Zernike magnitudes of order 7 (36 features),
  normalization by training mean and standard deviation, and a Gaussian-kernel
  SVM;
* `gamma = 1.07` and the coefficient range implied by `C = 28526.2`;
* fixed-point arithmetic only, with its own square root and exponential;
* radial polynomials computed offline and stored.

Chosen here:
* all word widths and Q formats;
* the pixel count (577) and the support-vector capacity (1024);
* the stored angular table;
* loading the geometry tables through the configuration bus at run time,
  rather than presetting them in the FPGA image;
* folding `(n+1)/π` into the radial table;
* doing the normalization in hardware, with reciprocal standard deviations;
* the square-root and exponential algorithms;
* the loop order and pipelining;
* the single image buffer and its stall;
* the valid/ready and configuration interfaces;
* +1 = gamma.

Not built: the offline training (grid search over `C` and `gamma`, SVM
optimization), the image cleaning, and the camera readout that feeds the
trigger. The original implementation was generated from C, so its cycle
timing and resource use are unknown, and nothing here reproduces them.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog. The shared
package `tb/l3t_tb_pkg.sv` plays the part of the offline software:

* It lays out a hexagonal camera: a centre pixel, then rings of `6r` pixels,
  scaled so that the outermost pixel centre is at `ρ = 0.95`.
* It evaluates the radial polynomial formula above in floating point to fill
  the tables.
* It draws synthetic cleaned images: elliptical Gaussian light spots, narrow
  ones pointing at the camera centre for gammas and wide ones for hadrons.
* It holds integer reference models of the moment, square-root and
  normalization arithmetic.

Checks:
* `tb_pz_feature_extractor` compares all 36 features of three images with
  the integer model, bit for bit. It also compares them with a
  floating-point pseudo-Zernike computation from the unquantized
  polynomials, and checks the `36·(NPIX+36)` clock count.
* `tb_fx_sqrt` checks exact roots, including edge cases and 0 to 2⁶⁴−1.
  `tb_fx_exp` checks the error bound over `t ∈ [0, 256)`. `tb_svm_decision`
  checks the score against a floating-point decision function, the
  decision sign and the unit's own `36·nsv + 9` edge latency.
* `tb_l3_trigger_top` runs the whole trigger at its default parameters:
  * It builds 1024 training images and derives the normalization from them.
  * It loads their normalized features as the support vectors, with
    coefficients ±(0.5…1.5).
  * It classifies ten test images, streamed with random gaps and with the
    next image waiting on the stalled input.
  * It checks each score against the reference within the exp error bound,
    each decision, and the 58 946-edge latency.
  * It requires that input stalls, both decisions, 360 square roots and
    10 240 kernel evaluations actually occur.

  The run takes about 10 s of simulation. The real telescope data of the
  original study is not available, so all images are synthetic.
* `tb_workload_test_set` is a scaled, synthetic stand-in for the original
  study's evaluation. That evaluation classified 12 292 test images and
  reported the recognized fraction per class. This bench uses the same
  full-size setup to classify 100 fresh images and checks every score and
  decision. It then prints the same kind of table. On this synthetic data
  it recognizes 50 of 50 gamma-like and 31 of 50 hadron-like images. These
  numbers describe the toy images and the toy model, not the telescope. The
  run takes about 15 s.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_l3_trigger_top rtl/l3t_pkg.sv tb/l3t_tb_pkg.sv tb/tb_l3_trigger_top.sv
./obj_dir/Vtb_l3_trigger_top
```

Use the same command with any other `tb_*` module.

To adapt the design to another camera, change `NPIX` and regenerate the two
geometry tables from the formulas above. For a larger model, raise `NSV`.
All fixed-point formats are in `rtl/l3t_pkg.sv`. A format change there has
to be matched by the shifts in the module that consumes it (the comments
name the Q format at each step).
