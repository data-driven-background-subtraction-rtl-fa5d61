# Threshold-free background subtraction for thermal cameras, in RTL

A thermal camera watching a scene sees mostly still background: walls,
roads, trees warming and cooling slowly. Separating moving people and
vehicles from it is done pixel by pixel. Each pixel keeps a small
statistical model of the grey levels it usually shows, and a new value that
the model does not explain is foreground. This design holds that model as a
mixture of Gaussians per pixel, with two properties that make it practical
inside a camera:

* **The model is learned from the data.** The number of Gaussians, their
  weights, means and variances come from a short history of the pixel
  (N = 100 frames). No user sets them.
* **The update needs no thresholds.** Whether a new value belongs to an
  existing Gaussian is decided by comparing two probabilities. The only
  fixed number is the learning horizon N. No frame store or sample buffer
  is kept; the model itself is the state.

The hardware has two kinds of unit, fed through FIFOs from external memory:

| unit | module | job |
|------|--------|-----|
| Model estimation unit (MEU) | `meu` | once per pixel at start-up: history -> k-means++ -> variational EM -> initial mixture |
| Background subtraction unit (BSU) | `bsu` | every pixel of every frame: classify, then update the mixture |
| Core FIFO | `sync_fifo` | one per BSU, decouples the memory stream from the core |
| Shared bus | `bsps_bus` | deals pixels round-robin to the cores and returns results in order |
| Top | `bsps_top` | 4 BSU cores + FIFOs, the bus and one MEU |
| Arithmetic | `bsps_pkg` | fixed-point types and exp, ln, sqrt, normal CDF, digamma |

## The per-pixel model

A pixel's model is up to `K_MAX = 8` components. Each has a valid bit, a
weight `w`, a mean `mu` and a variance `sigma2`. All three are signed
Q15.16 numbers, so a component is 97 bits and a full model 776 bits
(`gmm_t`). The model travels with the pixel: a job is `{x, model}` (784
bits, `job_t`), and a result is `{model, p_bg, fg, new_comp}`
(`bsu_result_t`). The memory system outside the design stores the models
between frames.

Inside the units every quantity is widened to Q31.32 (`fx_t`). The extra
fraction bits matter: the fit test compares probabilities in the far
tails of a Gaussian, where Q16 rounds to zero.

## What the BSU does with one pixel

Given the new value `x` and the pixel's mixture:

1. **Closest component.** For each valid component, the unit computes
   `sigma = sqrt(var)`, the normalised distance `z = (x - mu)/sigma`, and
   the density `N(x | mu, var)`. It accumulates the mixture density
   `p(x|bg) = sum w_k N(x | mu_k, var_k)`. The component with the smallest
   |z| is `c`. This takes two cycles per component.
2. **Threshold-free fit test.** The question is whether x is better
   explained by component c or by a new, narrow component around x. For
   eps = 1, 2, 3, ... the unit evaluates
   `p~(eps) = w_c (Phi_c(x + eps) - Phi_c(x - eps)) / (2 eps)`. This is the
   average density of c over a window of half-width eps, scaled by its
   weight. It stops at the first eps where `p~` stops growing, and calls the
   best value `p~*` at `eps*`.
   The sample **fits** if `w_c N(x | c) >= p~*`. Otherwise a new component
   is warranted. One eps step costs one cycle.
3. **Classification.** Bayes' rule with a uniform foreground density over
   256 grey levels gives `p(bg|x) = p(x|bg) P_BG / (p(x|bg) + 1/256)`. The
   pixel is foreground when this is below 1/2. `P_BG` comes from the
   `cfg_p_bg` input; it should be above 1/2, and 0.60 is used throughout
   the testbenches.
4. **Update.**
   * *Fit:* follow-the-leader running averages with horizon N. `w_c` moves
     toward 1 by `(1 - w_c)/N`, the other weights shrink by `w/N`, and
     `mu_c` and `var_c` move toward the new sample.
   * *No fit:* a new component is created with `w = 1/N`, `mu = x` and
     `var = ((2 eps*)^2 - 1)/12`, the variance of a discrete uniform
     window of width 2 eps*. The other weights are scaled to sum to
     `(N-1)/N`. Components lighter than 1/N are removed, and the weights are
     renormalised to one.

A foreground object that stays in place therefore becomes background
gradually. Its new component gains weight and narrows frame by frame until
`p(bg|x)` crosses 1/2. In `tb_bsu_adapt` the test case is a still object
160 grey levels above a background of variance 4. It is absorbed after
71, 44 and 33 frames for `P_BG` = 0.55, 0.60 and 0.65. The published
analysis shows faster absorption, roughly 32, 14 and 9 frames. The
difference comes from the new component's starting width. An object far
out in the background's tail drives the eps search to its cap, so the
component starts wide (variance about 1365) and must narrow before its
density rises.

**Latency.** The BSU latency is `2K + eps* + ~10` cycles, where K is the
number of stored components. Typical pixels take 14-40 cycles, and the
worst case is `2 K_MAX + EPS_MAX + 8 = 88`. One pixel is in flight per
unit.

## What the MEU does with one history

1. **Loading.** The N samples are loaded, and their mean `m0` and
   variance `v0` become the priors of the Normal-Gamma model:
   `beta0 = b0/(a0 v0)`, `a0 = b0 = 1e-3`, and a Dirichlet prior
   `lambda0 = 1` on the weights.
2. **k-means++ seeding.** Seeds are drawn with probability proportional to
   the squared distance to the nearest seed chosen so far. The random
   numbers come from a 32-bit LFSR. Seeding stops at `K_INIT = 50` seeds,
   or earlier when every sample sits on a seed. `KM_ITERS = 4` Lloyd passes
   follow.
3. **Variational EM, `EM_ITERS = 10` iterations.** The E-step computes,
   for every sample and component,
   `ln rho = psi(lambda_k) - psi(sum lambda) + (psi(a_k) - ln b_k)/2 - a_k/(2 b_k)(x - m_k)^2 - 1/(2 beta_k)`.
   It then normalises over k to get responsibilities. The M-step turns
   the responsibility sums into new `lambda, beta, m, a, b`. The digamma
   `psi`, `ln` and `exp` are fixed-point approximations from the package.
4. **Output.** Components with `N_k < 1` are dropped. The `K_MAX`
   heaviest survivors leave as `w = N_k/N` (renormalised), `mu = m_k` and
   `var = b_k/a_k`.

One estimate takes 50 000-100 000 cycles for N = 100. The MEU runs only at
start-up, so a single instance serves all pixels.

## System organisation and throughput

`bsps_top` deals pixel i to core `i mod 4`.

* **Input side.** The bus offers each job to that core's FIFO. If the FIFO
  is full, the whole stream waits, and `stall` reports the wait.
* **Output side.** The bus takes results from the cores in the same
  rotation, so they come back in pixel order and the write-back address
  sequence equals the read sequence.
* **Per cycle.** At most one job and one result cross the bus each cycle.

All four cores work on different pixels of the same frame. In simulation
this gives about 7.8 cycles per pixel with four cores on a 16x8 scene with
a moving object and random output back-pressure. At 210 MHz that is about
350 frames/s at 320x240 and 88 at 640x480. Whether such a clock is reached
has not been established: the one-cycle fixed-point function evaluations
are deep combinational paths and would need pipelining for it.

## Where this RTL departs from the published design

The published design was built by high-level synthesis in floating point.
It reports 700-830 cycles per pixel per core, 17.36 fps at 320x240 on an
Artix-7 with 4 cores, and about 256 bits of model per pixel. This RTL
departs from it in these ways:

* **Number format.** Fixed point (Q31.32 working, Q15.16 stored), with own
  approximations: normal CDF after Abramowitz & Stegun 7.1.26, exp through
  2^-x plus a short Taylor tail, ln through a leading-one split plus a
  polynomial, and digamma by recurrence plus the asymptotic series. This
  also decides two edge cases. A density that rounds to zero never counts
  as a fit. The eps search keeps widening while the CDF difference is below
  resolution.
* **Fixed model size.** The model has 8 slots, so a job is 784 bits, about
  three times the reported average, and memory bandwidth grows with it.
  When all slots are full, a new component replaces the lightest one.
* **Limits not in the published design.** Variances are floored at 0.25,
  and eps is capped at 64.
* **Update details.** Pruning runs only when a component is created, and
  the mean/variance update uses the already updated weight.
* **Absorption speed.** A still object is absorbed 2-4 times more slowly
  than in the published adaptation analysis (see the BSU section).
* **MEU over-splitting.** The MEU often returns more components than the
  data has modes (typically 8 for 2-3 modes). A mode is split over
  neighbouring grey levels. The mixture as a whole is right, with means and
  total weight per mode correct. But when more than 8 components survive,
  keeping the 8 heaviest can move up to about 0.13 of weight between
  modes. The published design reports the right number of components. The
  cause here is one or more of: the fixed 10 iterations, the K_INIT = 50
  seeding of integer data, and fixed-point rounding. This is the main open
  item.
* **Interconnect.** The FIFO depth (4), the valid/ready handshakes, the
  round-robin dealing and the one-transfer-per-cycle bus are this design's
  own choices. The published design loads "batches of up to 16 pixels".
* **MEU input.** The MEU has its own history port instead of sharing the
  pixel FIFOs.
* **Outside the design.** External DRAM and the camera are not included.
  Whatever drives `pix_*`/`hist_*` and consumes `res_*`/`mdl_*` plays their
  role.
* **Core count.** The 16-core configuration compared in the published work
  is `M_CORES = 16`. It has not been simulated.

## Verification

Every module has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=<n> failures=<n>`.

| testbench | what it checks |
|-----------|----------------|
| `tb_bsps_pkg` | every arithmetic function against real-valued references (Simpson-integrated Phi, series digamma), plus saturation |
| `tb_sync_fifo` | random traffic against a queue model; one-cycle fall-through; full and empty behaviour |
| `tb_bsps_bus` | routing of job i to core i mod 4; in-order return from out-of-order cores; stall flag; one transfer per cycle |
| `tb_bsu` | about 300 pixels against a floating-point model of the full algorithm (fit test, new component, pruning, slot replacement, classification), and the per-pixel cycle bound |
| `tb_bsu_adapt` | a still object absorbed into the background, with the frame count checked for three priors against a replay of the update rules |
| `tb_meu` | 2-, 3- and 1-mode histories, checked at cluster level; cycle budget |
| `tb_bsps_top` | the full system at default parameters, end to end |

`tb_bsps_top` runs these steps:

1. The MEU estimates one pixel's model.
2. Twelve frames of 16x8 pixels stream through the four cores while a hot
   object crosses the scene.
3. The testbench checks pixel order, foreground on the object, background
   elsewhere, new components where the object arrives, weight sums, and
   the frame time.
4. It counts every mechanism and fails if any never happened: input stall,
   output back-pressure, new component, fit, foreground, background and
   MEU estimate.

To run a testbench with Verilator (the package first, then the modules
the testbench uses):

```
verilator --binary --timing --assert -Irtl rtl/bsps_pkg.sv rtl/sync_fifo.sv \
  rtl/bsu.sv rtl/meu.sv rtl/bsps_bus.sv rtl/bsps_top.sv tb/tb_bsps_top.sv \
  --top-module tb_bsps_top -o tb && ./obj_dir/tb
```

Synthesis has not been completed. A coarse yosys synthesis of the top did
not finish within ten minutes, so no area or clock figures are claimed.
