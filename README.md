# A row-parallel V-cycle multigrid solver for the 2-D Poisson equation

This design solves the discrete Poisson equation `-Δu = f` on the unit
square in hardware. The grid has N × N interior points and zero boundary
values. The solver is a V-cycle multigrid method in IEEE-754 single
precision. Every row of the grid has its own small processing element, the
*row lane*. All lanes work in lock step on the same column, so one clock
advances every row of the grid at once. The row-parallel organisation comes
from the Handel-C implementation in Kasbah, Damaj and Haraty, *Multigrid
Solvers in Reconfigurable Hardware* (Journal of Computational and Applied Mathematics, doi:10.1016/j.cam.2006.12.031). There,
each multigrid operator is a loop over the columns of a row, replicated for
every row with a `par` statement. This RTL turns each replicated row process
into a lane and the flowchart of the V-cycle into a controller. It adds the
memories, wiring and timing that the publication leaves open.

The default build is N = 2048. That is the largest mesh the publication
reports, and the RTL has been simulated at that size. Every parameter can be
made smaller for experiments.

## The numerical method

### Discretisation and levels

Level 0 is the fine grid: `n_0 = N` interior points per side, spacing `h`.
Level `l` has `n_l = N / 2^l` points per side and spacing `2^l h`. N must be
a power of two, so the coarsest level `K = log2 N` is a single point. Coarse
point `(I,J)` covers the 2 × 2 block of fine points `(2I-1..2I, 2J-1..2J)`.
Values outside the grid (row or column 0 and `n_l+1`) are zero on every
level.

### Operators

All operators use the 5-point stencil. Each arithmetic step is one rounded
float32 operation, taken in the order shown in brackets.

| operator | formula | clocks per column |
|---|---|---|
| Gauss-Seidel smoothing | `u = 0.25 * (((up+down) + (left+right)) + h²·f)` | 4 |
| residual | `r = f + ((((up+down) + (left+right)) − 4u) · (1/h²))` | 5 |
| restriction | `f_c(I,J) = 0.125 * ((r(2I-1,2J-1)+r(2I,2J-1)) + (r(2I-1,2J)+r(2I,2J)))` | 3 per coarse column |
| prolongation | `v(i,j) = u_c(⌈i/2⌉, ⌈j/2⌉)` | 1 |
| correction | `u = u + v` | 1 |

`h²` and `1/h²` of level `l` are the fine values times `4^l` and `4^-l`.
They are exact exponent shifts.

**Smoothing order.** All rows are updated at once, and the columns of a row
in order. So the `left` neighbour is the value the lane wrote one column
earlier, in the same sweep. `right`, `up` and `down` are still the values
from before the sweep. This is Gauss-Seidel along a row and Jacobi across
rows. It is exactly what a `par` over rows around a sequential column loop
computes. As a smoother it damps the row-alternating error mode by a factor
of 3 per sweep.

**Restriction factor.** Prolongation copies each coarse value onto its 2×2
block. The coarse equations are the same 5-point formula with spacing 2h.
The restriction factor 1/8 makes the coarse operator equal to the Galerkin
product R·A·P. With a plain average (factor 1/4), every coarse correction
comes out twice too large. In simulation the V-cycle then diverges from
64 × 64 upwards.

### The V-cycle

```
Initialize: u0 = 0
repeat
    for l = 0 .. K-1:   nu1 × smooth(l); residual(l) -> v_l;
                        if l = 0 and max|r| < tol: stop (converged)
                        restrict(l) -> f_(l+1), u_(l+1) = 0
    smooth(K)                       -- exact on the 1×1 level: the coarse solver
    for l = K-1 .. 0:   prolongate(l) -> v_l; correct(l); nu2 × smooth(l)
until max_cycles V-cycles done
```

The coarsest level has one unknown and zero neighbours. There, one
Gauss-Seidel step `u = h²f/4` is the exact solution, so the "direct solver
on the coarsest grid" is that one step. The convergence test uses the
largest residual magnitude of the fine grid, computed after pre-smoothing.
Float magnitudes compare like unsigned integers, so the test needs no
arithmetic.

## Hardware organisation

```
                 +-------------------+   control word (1 per clock, broadcast)
   start, tol -->|   vcycle_ctrl     |-----------------------------------------+
   nu1, nu2  --->|  stage/level/j/   |<-- max |r| (reduction over all lanes)   |
                 |  phase counters   |                                          |
                 +-------------------+                                          |
      +-----------+     +-----------+     +-----------+           +-----------+ |
      | mg_lane 1 |<--->| mg_lane 2 |<--->| mg_lane 3 |<-- ... -->| mg_lane N |<+
      +-----------+     +-----------+     +-----------+           +-----------+
       u/f/v rows        u/f/v rows         ...
```

### Row lane (`mg_lane`)

Lane `k` is row `k` of every level that has at least `k` rows. It contains:

* three row memories (`mg_row_bank`) of `2N` words: `u` (solution on level
  0, correction on coarser levels), `f` (right-hand side or restricted
  residual) and `v` (residual, later reused for the prolonged correction).
  Level `l` sits at addresses `base(l) .. base(l)+n_l−1`, where
  `base(l) = N + N/2 + … + N/2^(l−1)`. Boundary columns are not stored.
* one instance of each operator: `gs_smoother`, `residual_op`,
  `restrict_op` and `prolong_correct_op`. Together they hold 7 float adders
  and 3 float multipliers per lane.
* the boundary masks. The lane reads zero for the row above row 1, for the
  row below row `n_l`, and for the left of column 1 and the right of column
  `n_l`.

A lane takes part in a sweep only if its row exists on the current level
(`row ≤ n_l`). In a restriction, only lanes with `row ≤ n_l/2` take part.

### Wiring between lanes (`mg_vcycle_top`)

| purpose | lane k receives |
|---|---|
| stencil | `u(j)` of lanes `k−1` and `k+1` |
| restriction | `v(j)`, `v(j+1)` of lanes `2k−1` and `2k` |
| prolongation | the coarse `u` of lane `⌈k/2⌉` |

All lanes use the same addresses in a given clock, so the controller sends
one address set to every lane. Each lane's memories expose combinational
read ports at those addresses:

* `u`: `j`, `j−1`, `j+1`, the prolongation source, and the host port;
* `v`: `j` and `j+1`;
* `f`: `j`.

### Control word and schedule (`vcycle_ctrl`, `mg_pkg`)

The controller holds four counters: stage, level, column `j` and phase. It
emits the control word `mg_ctrl_t` combinationally. The word carries the
operator, the phase, `n_l`, the addresses (`a_c`, `a_l`, `a_r`, prolongation
source `a_p`, restriction target `a_w`), the first/last-column flags and
`h²`, `1/h²` of the level.

Each operator keeps its partial results in two internal registers between
phases. Memory writes happen at the clock edge of an operator's last phase.
Phase 0 reads the neighbours' `u(j)` before any lane writes column `j`,
which gives the smoothing order described above.

A sweep over `n` columns with a `p`-phase operator takes exactly `n·p`
clocks. There are no idle clocks between sweeps. One V-cycle therefore takes

```
clocks = (4·nu1 + 4·nu2 + 5 + 1.5 + 2) · (2N − 2) + 4
```

Initialisation takes another N clocks, once per solve. Two examples:

* N = 2048, nu1 = nu2 = 1: 67 555 clocks per V-cycle.
* N = 16, nu1 = nu2 = 2: 739 clocks per V-cycle.

The publication counts one clock per Handel-C assignment. The phases follow
the groups of parallel assignments in its flowcharts.

### Floating-point units (`fp_add`, `fp_mul`)

These are combinational single-precision units:

* rounding: to nearest even;
* subnormals: read as zero on input, flushed to zero on output;
* overflow: becomes infinity;
* infinities and NaNs: passed through.

The original design took its operators from a vendor library. These units
are an independent replacement with the same function.

## Interface of the top (`mg_vcycle_top`)

| signal | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock, asynchronous active-low reset of the controller |
| `host_we`, `host_sel_f`, `host_row`, `host_col`, `host_wdata` | in | write one word of level-0 `f` (`host_sel_f=1`) or `u` per clock; 1-based indices; ignored while `busy` |
| `host_rdata` | out | `u(host_row, host_col)`, combinational |
| `start` | in | one-clock pulse: clear `u`, run V-cycles |
| `nu1`, `nu2` | in | pre- and post-smoothing steps (0–15) |
| `max_cycles` | in | V-cycle limit (at least 1) |
| `tol` | in | stop when the fine-grid max \|r\| < `tol` (float) |
| `sq_h0`, `inv_sq_h0` | in | `h²` and `1/h²` of the fine grid, `h = 1/(N+1)` |
| `busy`, `done` | out | `busy` for exactly the scheduled clocks; `done` from the next clock until the next `start` |
| `converged`, `vcycles`, `res_norm` | out | outcome: tolerance met, V-cycles completed, last fine-grid max \|r\| |
| `op`, `level` | out | operator and level being executed (for observation) |

The memories have no reset. Initialisation and restriction write every word
before it is read. Only `f` of level 0 must be loaded before `start`.

## Behaviour and limits

These results come from simulating f = 2π² sin πx sin πy, whose exact
solution is sin πx sin πy, with nu1 = nu2 = 2:

* **16 × 16:** max |r| < 0.001 after 19 V-cycles. The error to the exact
  solution is 2.8·10⁻³, which is the discretisation error.
* **64 × 64:** after 40 V-cycles, max |r| = 0.13 and the error is 4.6·10⁻³.

Convergence per V-cycle is slow because the prolongation copies values
instead of interpolating them. It also slows down as levels are added.

The residual also has a floor set by float32 rounding. Rounding alone leaves
a residual of about `4·2⁻²⁴·|u|/h²`. That is about 10⁻³ at 64 × 64 and about
1 at 2048 × 2048. A tolerance of 0.001 is therefore unreachable on large
grids, and there the solve ends at `max_cycles`.

**Size.** At N = 2048 the design has:

* 2048 lanes;
* 14 336 float adders and 6 144 multipliers;
* 3 × 2048 × 4096 words of memory (805 Mbit).

That fully row-parallel design is far larger than any FPGA of the
publication's generation. The resource figures published for the Handel-C
version (a few thousand slices at 2048 × 2048) cannot correspond to it. The
RTL takes the row-parallel structure literally. Mapping it to a real device
would need lanes time-shared over rows and external grid memory.

## Where this design departs from, or fills in, the publication

Taken from the publication:

* the five operators and their operation order;
* the `par`-over-rows organisation;
* the V-cycle flowchart;
* Gauss-Seidel smoothing with the ¼ factor;
* the 2×2 block restriction and the copy prolongation, as written in its
  code;
* single-precision arithmetic;
* the 0.001 accuracy target;
* the mesh sizes 8 to 2048.

Choices made here:

* **Restriction and interpolation.** The publication's text names full
  weighting and bilinear interpolation, but its code shows a 4-point sum and
  a 2×2 copy. This design follows the code.
* **Restriction factor.** The restriction's factor is not given; 1/8 is used
  (see above).
* **Number of smoothing steps.** Not given; it is the run-time input
  `nu1`/`nu2`.
* **Boundary values.** Not given; the boundary is zero.
* **Residual form.** The residual is computed as `f − A u` with a
  precomputed `1/h²`.
* **Stopping rule.** Not given; it is max |r| < tol.
* **Repeated V-cycles.** The published flowchart makes one pass down and up
  and then stops. Both of its level tests are labelled "coarsest level"; the
  one after post-smoothing can only mean "back on the finest level". Here the
  V-cycle repeats until the tolerance or `max_cycles` is reached.
  `max_cycles = 1` gives the single pass of the flowchart.
* **Storage and I/O.** The per-row memories, the host load/readback port and
  all timing are this design's own. The publication does not describe
  storage or I/O.
* **Floating-point units.** They are this design's own.
* **Grid size.** It is fixed at build time by `N`, as each mesh size was a
  separate build in the publication.

The Jacobi and SOR solvers that the publication compares against are not
part of this design.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=… failures=…` and stops itself with a watchdog. Reference
values come from `tb/fp_ref_pkg.sv`. It computes in double precision and
rounds to float32, which gives the correctly rounded float32 sum or product.

| testbench | what it checks |
|---|---|
| `tb_fp_add`, `tb_fp_mul` | ~5000 random and corner-case operands each, bit-exact |
| `tb_mg_row_bank` | random reads and writes on three ports against a model array |
| `tb_gs_smoother`, `tb_residual_op`, `tb_restrict_op`, `tb_prolong_correct_op` | one column at a time against the formulas above, bit-exact; write strobe only in the last phase |
| `tb_mg_lane` | host port, initialisation, smoothing in the first, last and an inner row (boundary masking), residual, restriction, prolongation, correction, idle lane |
| `tb_vcycle_ctrl` | the control word on every clock against the V-cycle schedule built independently; stop on limit and on tolerance |
| `tb_mg_vcycle_top` (N = 16) | two complete solves against a float32 model of the whole algorithm, bit-exact on every grid point; clock count; V-cycle count; residual norm; every operator and both stop conditions occur |
| `tb_mg_vcycle_full` (N = 2048, default) | one V-cycle at full size; `f` written and `u` read through hierarchical references; all 4 194 304 points bit-exact against the model |

To run one with Verilator:

```
verilator --binary --timing -Irtl -Itb rtl/mg_pkg.sv tb/fp_ref_pkg.sv rtl/*.sv \
          tb/tb_mg_vcycle_top.sv --top-module tb_mg_vcycle_top -o sim && ./obj_dir/sim
```

Add `-GN=64` to change the grid size of `tb_mg_vcycle_top`. The full-size
testbench produces about 700 MB of C++. Building it takes about 10 minutes
on four cores. Running it takes about 8 minutes. It checks 69 603 busy
clocks: 2 048 for initialisation and 67 555 for the V-cycle.
