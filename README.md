# A pipelined QR-iteration engine for plotting root densities of complex functions

The idea is to approximate a complex function on a region by polynomials and
find all the roots of many polynomials (for example, one per parameter value or
per random perturbation). Then count how often a root lands on each pixel of a
1920×1080 screen. Where roots pile up, the picture is bright.

The hard part is finding the roots fast. The roots of a monic polynomial

    p(z) = z^n + a_{n-1} z^{n-1} + ... + a_1 z + a_0      (n ≤ 6, complex a_k)

are the eigenvalues of its companion matrix. This design finds them with the
single-shift QR algorithm, running on a single pipelined processing element
(PE). The PE does one Givens rotation pass per clock and has up to eight
polynomials in flight. At 100 MHz with n = 6 and 10 QR iterations per
deflation step, it finishes one polynomial every 300 cycles (3.33·10^5
polynomials/s). That is about 16.7 million QR steps per second on matrices of
6×6 and smaller.

All arithmetic is IEEE-754 single precision. A complex number is a pair of
binary32 words.

## 1. The algorithm as the hardware runs it

The companion matrix is built with the negated coefficients in the first row
and ones on the subdiagonal. It is upper Hessenberg: zero below the first
subdiagonal. A QR step with a shift keeps it Hessenberg. Because of that,
every orthogonal factor is a product of m−1 plane (Givens) rotations on
neighbouring rows.

For the active leading block of order m (starting at m = n), one **QR
iteration** is:

1. Take the shift s = A[m−1][m−1]. Subtract s from A[k][k] for k < m.
2. **Left half-sweep**, for r = 1 … m−1:
   - With a = A[r−1][r−1] and b = A[r][r−1], set ρ = 1/√(|a|²+|b|²), c = ρ·ā and s_r = ρ·b̄.
   - Replace rows r−1 and r by `[c s_r; −s̄_r c̄]` times those rows.
   - This zeroes A[r][r−1]. The (c, s_r) pair is kept.
3. **Right half-sweep**, for r = 1 … m−1:
   - Replace columns r−1 and r by those columns times `[c̄ −s_r; s̄_r c]`, re-using the kept pair.
   - This is A ← R·Q.
4. Add s back to the diagonal.

After T iterations (T = 10) the entry A[m−1][m−2] is taken as converged.
A[m−1][m−1] is then an eigenvalue, and m drops by one (deflation). When m
reaches 2 and its T iterations are done, the diagonal holds all n roots.

Each iteration is 2(m−1) rotation passes, so a degree-n polynomial costs

    T · Σ_{m=2..n} 2(m−1) = n(n−1)·T  passes  = 300 for n = 6, T = 10.

There is no convergence test: each order gets exactly T iterations. This keeps
the schedule fixed and the pipeline full. The price is that some polynomials
are not fully converged after T steps. In double-precision experiments with
random degree-6 polynomials (roots in the disc |z| < 0.9, pairwise distance
≥ 0.15), about 1.4 % of them still had a root error above 10⁻⁵ with T = 10.
The testbenches therefore check accuracy only on polynomials for which the
same fixed schedule converges in double precision.

## 2. The PE loop

```
 coefficients ─► matrix_represent ─► input_selector ─► pe_core ─► task_scheduler ─┬─► fifo_cache
                                          ▲                                       │
                                          └────────── next-step task ─────────────┘
```

Everything a polynomial needs travels with it as one **task** (`task_t`, in
`hqr_pkg`):

- the 6×6 complex matrix;
- the order m of the active block, the iteration count `iter`, the rotation position (row, col) and the half-sweep direction `mode` (left/right);
- the shift s of the running iteration;
- the five (c, s) pairs of the left half-sweep.

There is no memory pool and no per-polynomial state anywhere else. A task
makes one rotation pass each time it goes round the loop.

| stage | module | cycles | does |
|---|---|---|---|
| 1 | `input_selector` | 1 | picks the next-step task from the scheduler if there is one; otherwise accepts a new polynomial |
| 2 | `diag_shift` (SUBTRACT=1) | 1 | on the first pass of an iteration (left, row 1): stores s = A[m−1][m−1] and subtracts it from the diagonal |
| 3–5 | `givens_rotation` | 3 | on left passes: \|a\|², \|b\|² → ρ → c = ρā, s = ρb̄; stored in the task |
| 6–7 | `matrix_mult` | 2 | selects the 2×2 matrix for the mode, then 2N units compute `a·x + b·y` for the two rows (or columns) |
| 8 | `diag_shift` (SUBTRACT=0) | 1 | on the last pass of an iteration (right, row m−1): adds s back |
| – | `task_scheduler` | 0 | combinational: next (row, col, mode, iter, m), or output |

A stage with nothing to do for the current pass copies the task through.
Because of this, every task has the same 8-cycle loop and the loop never
stalls.

The input selector always gives the recirculating task priority. A new
polynomial enters only in an empty slot. This happens when a task has just
finished, or at start-up, when the eight slots fill one after another. So in
steady state, up to eight polynomials are interleaved, each at its own point in
its schedule.

### Scheduler state machine

After each pass, the scheduler in `task_scheduler` steps the state:

```
(row+1, col+1) != (m, m-1)          → row += 1, col += 1           (next rotation)
else (row, col) ← (1, 0) and
   mode == left                     → mode ← right
   mode == right, iter <  T-1       → mode ← left, iter += 1
   mode == right, iter == T-1, m>2  → mode ← left, iter ← 0, m -= 1 (deflate)
   mode == right, iter == T-1, m==2 → output diag(A) to the FIFO
```

The comparison uses the incremented position. This makes each half-sweep
exactly rotations 1 … m−1, so the pass count matches 2m−2 per iteration. The
design parameter `MAX_ITER` is T−1. The top computes it from `QR_ITERS` (=T).

If the FIFO is full when a task finishes, the task is marked `done` and goes
round the loop unchanged. Every stage passes a `done` task through. The
scheduler retries the write on the next pass. Nothing is lost and nothing
stalls. The only cost is that the slot stays busy.

## 3. Number formats

| item | format |
|---|---|
| real number | binary32; subnormals flushed to zero; round to nearest even; overflow to ∞; no NaN handling |
| complex (`cplx_t`) | `{re, im}`, 64 bits |
| coefficients (`cvec_t`) | `in_coef[k]` = a_k, k = 0 … 5; a_6 = 1 is implied |
| result (`result_t`) | degree (3 bits) + 6 complex roots; root k valid for k < degree |
| pixel address | y·1920 + x |
| density | 4-bit saturating counter per pixel |

The binary32 functions live in `hqr_pkg`:

- `fp_add`, `fp_mul`: correctly rounded for normal operands. They are checked against double-precision arithmetic followed by rounding.
- `fp_rsqrt`: within 1 ulp. It uses an integer division 2^74/M followed by an integer square root. This is a simple, exact construction; a production version would use a table and Newton steps.
- `fp_floor_u16`: integer part for pixel coordinates.

They are combinational. The pipeline registers are in the modules that use
them.

## 4. Output side

- **`fifo_cache`**: 1024 × 387-bit first-word-fall-through FIFO. It takes one complete result per cycle.
- **`roots_to_pixels`**:
  - Reads the head result and turns one root per cycle into a pixel: x = ⌊(Re z − re_min)·scale⌋ and y = ⌊(im_max − Im z)·scale⌋. Imaginary axis points up.
  - Roots outside the 1920×1080 window are dropped.
  - Pops the FIFO after the last root of a result.
  - On average one result arrives per 300 cycles and takes at most 6 cycles to drain. Results can still arrive in bursts: the eight polynomials that start together also finish on consecutive cycles. A deep FIFO absorbs such a burst. A shallow one fills, and the scheduler's retry takes over.
- **`video_memory`**:
  - 1920×1080 × 4-bit density counters, two clocks.
  - Port A (PE clock) does a two-stage read-increment-write that saturates at 15. The write-back register forwards into the next read, so back-to-back hits on one pixel both count.
  - Port B (pixel clock) reads with one cycle latency.
  - The memory starts cleared.
- **`signal_generator`**:
  - Standard 1080p60 raster: 2200 × 1125 total, sync pulses 44 and 5, front porches 88 and 4, positive syncs, 148.5 MHz.
  - Reads the memory one pixel ahead, and outputs grey level = density·255/15 with `hsync`, `vsync` and `de` aligned to it.
  - These signals are the top's outputs, ready for a DVI/HDMI encoder. The encoder and the pins are not part of this RTL.

## 5. Top level: `root_plotter_top`

| port | dir | width | meaning |
|---|---|---|---|
| clk, rst | in | 1 | PE clock (100 MHz) and synchronous reset |
| clk_pix, rst_pix | in | 1 | pixel clock (148.5 MHz) and reset |
| in_valid / in_ready | in / out | 1 | polynomial handshake; transfer when both are high |
| in_deg | in | 3 | degree, 2 … 6 |
| in_coef | in | 6×64 | a_0 … a_5 |
| re_min, im_max, scale | in | 32 each | plotted window (binary32) |
| rgb | out | 24 | pixel colour |
| hsync, vsync, de | out | 1 each | video timing |

Parameters:

| parameter | default |
|---|---|
| QR_ITERS | 10 |
| FIFO_DEPTH | 1024 |
| H_RES | 1920 |
| V_RES | 1080 |
| DENSITY_W | 4 |

`hqr_pkg::N` = 6 sets the largest degree. A polynomial of lower degree d uses
the leading d×d block and costs d(d−1)·T passes.

Timing, measured at the defaults:

- In steady state, a new polynomial is accepted every 300 cycles on average.
- A degree-6 polynomial leaves the loop 2400 cycles after it entered: 300 passes × 8 cycles.

## 6. Where this design departs from, or adds to, the published one

Followed:

- The block structure: matrix represent, input selector, PE core of four modules, next-step scheduler, FIFO, roots-to-pixels, video memory, signal generator.
- The input-selector priority, the shift trigger points, and the Givens formulas.
- The two rotation matrices and the 2N `a·x+b·y` units.
- The scheduler's transitions.
- n = 6, T = 10, FP32, 100/148.5 MHz and 1080p60.

Chosen here, because the published description is silent:

- the companion-matrix layout;
- stage depths (1+1+3+2+1);
- the FIFO depth (1024) and the 4-bit density, both estimated from the reported block-RAM use;
- the full-FIFO retry;
- the rounding and subnormal rules;
- c = 1, s = 0 when a = b = 0;
- the window mapping and the grey colour map;
- the 1080p60 porch and sync numbers;
- lower-degree support.

Not included:

- The fitting of polynomials to a function: software, done before the data reaches this design.
- The DVI/TMDS encoder and HDMI pins.
- Several PE cores sharing the FIFO. The published evaluation uses one, and so does this design.

## 7. Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=… failures=…` and has a cycle watchdog.

Two packages support them:

- `tb_util_pkg`: real/binary32 conversion and complex helpers.
- `tb_ref_pkg`: a double-precision model of one rotation pass and of the whole schedule. It also makes polynomials from chosen roots and matches roots.

| testbench | what it checks |
|---|---|
| `tb_matrix_represent` | companion layout for every degree |
| `tb_input_selector` | priority, handshake |
| `tb_diag_shift` | both instances against the model |
| `tb_givens_rotation` | c, s against double precision; the rotation zeroes b; a = b = 0 gives (1, 0); 3-cycle latency |
| `tb_matrix_mult` | both modes against the model |
| `tb_pe_core` | 7-cycle latency; full schedules driven by a model scheduler, roots within 10⁻⁵ |
| `tb_task_scheduler` | every transition, full-FIFO retry |
| `tb_fifo_cache` | against a queue model, full/empty |
| `tb_roots_to_pixels` | coordinates, drops, pops |
| `tb_video_memory` | increments, forwarding, saturation, read port |
| `tb_signal_generator` | raster counts, sync widths and positions, colour |
| `tb_root_plotter_top` | small screen, FIFO depth 2, 40 polynomials; roots, pixel counts and the rendered image |
| `tb_root_plotter_full` | all defaults; see below |

`tb_root_plotter_top` also counts each mechanism and fails if any of them never
happens:

- new input and recirculation;
- shift subtract and add;
- left→right and right→left switches;
- iteration step and deflation;
- output and full-FIFO retry;
- off-screen drop;
- pixel write, same-pixel forwarding and saturation.

`tb_root_plotter_full` runs the top with every parameter at its default on 24
degree-6 polynomials. It checks:

- the roots;
- latency (2400 cycles) and spacing (300 cycles per polynomial);
- the video memory contents;
- one complete 1080p frame, compared pixel by pixel with the model.

Measured single-precision root errors are below 10⁻⁵ in typical cases. They
reach about 10⁻³ for the double and close roots that `tb_root_plotter_top`
includes on purpose.

To run a testbench with Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal -O2 \
    rtl/hqr_pkg.sv tb/tb_util_pkg.sv tb/tb_ref_pkg.sv \
    $(ls rtl/*.sv | grep -v hqr_pkg) tb/tb_pe_core.sv \
    --top-module tb_pe_core -o sim && ./obj_dir/sim
```

Replace `tb_pe_core` with any testbench name. The full-size run simulates in about twenty
seconds on a current workstation.

## 8. Limits to keep in mind

- Fixed T with no convergence test. Clustered or multiple roots come out with reduced accuracy, and a small share of random polynomials is not fully converged (see section 1).
- The binary32 units are single-cycle combinational blocks inside their pipeline stages. They show the function, not a timing-closed 100 MHz implementation. Meeting 100 MHz on an FPGA would need more pipeline stages. That changes only the loop length, and so the number of polynomials in flight, not the schedule or the throughput.
- The density counters saturate at 15. There is no clear port; the memory is cleared only at configuration.
