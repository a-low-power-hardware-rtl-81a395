# DFGPGD: an inverse-free fixed-point solver core for constrained LASSO problems

This is synthesizable SystemVerilog for a hardware solver of the composite problem

    minimise   1/2 ||H x - b||^2 + gamma * ||z||_1
    subject to A x + B z = c

using **Dual-Feedback Generalized Proximal Gradient Descent (DFGPGD)**, an
instance of a proximal, weighted-Lagrangian ADMM. In ADMM the x-update normally
solves a linear system with `H'H + (1/lambda) A'L A`, which means a matrix
inverse or factorisation. That costs O(n^3) and behaves badly when the matrix is
ill-conditioned. DFGPGD picks the proximal weighting matrix of the x-update so
that this system becomes a multiple of the identity. The x-update then reduces
to a gradient step plus a correction term, and every operation in an iteration
is a matrix-vector product, a vector addition or an element-wise shrink. An
iteration costs O(n^2) and never divides.

The core uses 24-bit two's-complement fixed point with 8 fractional bits
(Q16.8) throughout. The solver this design is modelled on was evaluated in that
format.

## The iteration

With the host-supplied constants

| symbol | meaning | where it lives |
|---|---|---|
| `H'H` (N x N), `H'b` (N) | Hessian and linear term of the data fit | loaded, unscaled |
| `inv_lx` = 1/lambda_x | gradient step; needs lambda_x > the largest eigenvalue of H'H | run-time input |
| `Kx` = (1/(lambda_x*lambda)) A'L (N x P) | feedback gain of the x-update | loaded, pre-scaled |
| `Kz` = (1/(lambda_z*lambda)) B'L (NZ x P) | gain of the z-update | loaded, pre-scaled |
| `A` (P x N), `B` (P x NZ), `c` (P) | equality constraint | loaded |
| `thr` = gamma/lambda_z | l1 shrinkage threshold | run-time input |

each iteration computes

    u     = A x + B z - c + v               (already in the feedback cache)
    x_new = x - inv_lx * (H'H x - H'b) - Kx u
    w     = A x_new + B z - c + v
    z_new = soft(z - Kz w, thr)             soft(y,t) = sign(y) * max(|y| - t, 0)
    v_new = v + (A x_new + B z_new - c)

The z-update is the proximal step of the l1 norm, taken with the metric
`lambda_z * I`, and soft thresholding is its closed form. `L` is the weight of
the augmented Lagrangian and `lambda` its penalty. Both enter the hardware only
through `Kx` and `Kz`, so the host is free to choose them.

### The dual feedback

The term `u` that drives the x-update has the same form as the one the v-update
needs, `A x + B z - c`, one iteration later. The core never computes `u` on its
own. In the last pass of every iteration it forms the residual
`r = A x_new + B z_new - c` once, and uses it both to update `v` and to write
the next `u = r + v_new` into a small cache. The cached products `A x` and `B z`
are kept as well. The next pass that needs one of them reads it back and does
not recompute it. `w` has the same shape as `u`, so it is stored in the same
cache between the AX and Z passes.

Before the first iteration, two initialisation passes compute `A x0`, `B z0`
and `u = A x0 + B z0 - c + v0` from whatever start point the host loaded.
Running a second solve without reloading therefore continues from the previous
result (a warm start).

## Architecture

```
             host load / read port
                     |
   +-----------------+-------------------------------------------+
   |  cache memories (dfg_ram, 24-bit words)                       |
   |   H'H  Kx  A  B  Kz          matrices, row-major             |
   |   H'b  c   x[2] z[2] v       vectors (x, z double-buffered)  |
   |   u/w  Ax  Bz                dual-feedback cache             |
   +---------+-------------------------------+---------------------+
   matrix row | vector element                | per-row elements
             v                               v
   +--------------------+           +---------------------------+
   | dfg_mac  (sum 0)   |  acc0,1   | row finisher              |
   | dfg_mac  (sum 1)   |---------->|  x: x - inv_lx*(g-H'b)-f  |
   +--------------------+           |  z: dfg_soft_thresh       |
             ^                      |  v, u, Ax, Bz, w updates  |
             |                      +---------------------------+
   +--------------------+
   | dfg_ctrl           |  passes, row/col indices, strobes, banks
   +--------------------+
```

| file | role |
|---|---|
| `rtl/dfg_pkg.sv` | Q16.8 type, saturating add/sub/mul helpers, memory-select and pass encodings |
| `rtl/dfg_ram.sv` | cache memory: one write port, two synchronous read ports |
| `rtl/dfg_mac.sv` | multiply-accumulate, exact 64-bit sum of 48-bit products |
| `rtl/dfg_soft_thresh.sv` | l1 proximal operator (combinational) |
| `rtl/dfg_ctrl.sv` | pass sequencer and iteration counter |
| `rtl/dfg_top.sv` | the solver core: memories, operand muxes, row finisher, host port |

### Pass schedule

The core works one matrix row at a time, with one product per clock cycle:

| pass | rows | products per row | result written at the end of the row |
|---|---|---|---|
| INIT_AX | P | N | `Ax` |
| INIT_BZ | P | NZ | `Bz`, `u` |
| X | N | N + P | `x_new` (the first N products are `H'H x`, the last P are `Kx u`, in separate accumulators) |
| AX | P | N | `Ax`, `w` (into the u cache) |
| Z | NZ | P | `z_new` |
| BZ | P | NZ | `Bz`, `v`, `u` |

Each row ends with two more cycles. In WAIT, the last operands leave the
memory and enter the accumulator. In FIN, the row result is computed and
written. The element-wise operands (`x_i`, `H'b_i`, `v_i`, ...) are read
through each memory's second port at the row index, and are ready by FIN.
Because `x` and `z` are double-buffered, the X and Z passes read the old
iterate in full while writing the new one. The live bank flips at the end of
the pass.

### Latency

The clock edge that samples `start` is followed, this many edges later, by the
edge that raises `done`:

    P(N+2) + P(NZ+2) + max_iter * [ N(N+P+2) + P(N+2) + NZ(P+2) + P(NZ+2) ]

At the default N = NZ = P = 700, one iteration takes 2,455,600 cycles and the
initialisation 982,800. Every testbench checks this formula exactly.

### Number format

* Every stored word is Q16.8: 24 bits, 16 integer bits including the sign,
  8 fractional bits.
* A dot product is accumulated exactly: 48-bit products into a 64-bit sum, good
  for more than 2^15 terms. It is reduced to Q16.8 once per row. The reduction
  is an arithmetic shift right by 8 (truncation towards minus infinity),
  followed by saturation to the 24-bit range.
* Each addition, subtraction and the `inv_lx` multiply in the row finisher
  also saturates. The operation order is fixed. The testbench reference model
  (`tb/dfg_model_pkg.sv`) follows it and matches the core bit for bit.

## Host interface (`dfg_top`)

| signal | dir | width | use |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset (returns to idle, banks 0) |
| `load_we`, `load_sel`, `load_addr`, `load_data` | in | 1, 4, 32, 24 | write one word per cycle while idle; `load_sel` is `dfg_pkg::mem_sel_e`; matrices are row-major, `addr = row*cols + col` |
| `rd_sel`, `rd_addr` → `rd_data` | in/out | 4, 32, 24 | read x, z, v or u while idle; data one cycle later |
| `start`, `max_iter`, `inv_lx`, `thr` | in | 1, 16, 24, 24 | start a solve; the three values are latched on start |
| `busy`, `done`, `iter` | out | 1, 1, 16 | running; one-cycle end pulse; iterations completed |

Loads and `start` while `busy` are ignored. Assertions flag both as usage
errors. Memory contents are not reset. Load every matrix and vector before the
first solve.

Parameters: `N` (length of x, default 700), `NZ` (length of z, default 700),
`P` (number of constraints, default 700), `IT_W` (iteration counter width,
default 16), `LAW` (host address width, default 32). At the defaults the core
holds 2,457,000 words (about 59 Mbit) of cache.

### Using it for LASSO

For plain LASSO, `minimise 1/2||Hx-b||^2 + gamma||x||_1`, split the variable as
`x - z = 0`: `A = I`, `B = -I`, `c = 0`, `P = NZ = N`. With `L = I`, choose
`lambda = 1`, `lambda_z = 1` and `lambda_x` above the largest eigenvalue of
`H'H`. Then `Kx = I/lambda_x` and `Kz = -I`, and only `H'H` and `H'b` depend
on the data. The number of measurements m does not appear in the hardware: it
only sets the cost of the host's one-off computation of `H'H` and `H'b`.

## Verification

All testbenches are self-checking. Each prints `TB_RESULT checks=N failures=M`
and has a cycle watchdog.

| testbench | what it checks |
|---|---|
| `tb_dfg_mac` | random operand streams (including full-scale values), restarts and idle cycles; every cycle against an integer sum |
| `tb_dfg_soft_thresh` | boundary and random inputs, negative thresholds, the `zeroed` flag |
| `tb_dfg_ram` | random writes with reads on both ports in the same cycles; read latency; read right after write |
| `tb_dfg_ctrl` | pass order, row lengths, accumulator restart strobes, segment split, bank flips, exact cycle counts for 0 to 3 iterations on an unequal shape |
| `tb_dfg_top` | N=5, NZ=4, P=6: dense random solve, warm restart, initialisation only, saturating data, identity-coupled data; x, z, v, u bit-exact with the model, cycle counts, and that shrink-to-zero, shrinkage, saturation, iteration and warm restart each occur |
| `tb_dfg_full` | default parameters (700/700/700): a random LASSO with n = 700, m = 270 and 10 sparse non-zeros, 10 iterations from zero. Bit-exact result, cycle count (25,538,800), and a lower objective than at the start. About 20 s in Verilator |
| `tb_dfg_lasso_sweep` | n = 70, m = 27 LASSO at MAX_ITER = 10, 100, 300, bit-exact at each. Also reports the relative objective error against a double-precision optimum |

Run one with plain Verilator from the project root, for example:

    verilator --binary --timing --assert -Irtl -Itb \
      rtl/dfg_pkg.sv tb/dfg_model_pkg.sv rtl/dfg_ram.sv rtl/dfg_mac.sv \
      rtl/dfg_soft_thresh.sv rtl/dfg_ctrl.sv rtl/dfg_top.sv tb/tb_dfg_top.sv \
      --top-module tb_dfg_top -o sim && ./obj_dir/sim

### Accuracy of Q16.8

The sweep testbench shows what 8 fractional bits cost. On its n = 70 instance
(gamma = 0.1, lambda_x = 8), the same iteration in double precision reaches
0.4 % relative objective error after 300 iterations. In the Q16.8 core the
error falls from 77 % at 10 iterations to 33 % at 100 and 23 % at 300, and
improves only slowly after that. The step `inv_lx = 1/8` and the gain `Kx` are
exact, but the gradient products are truncated to 1/256, and truncation is
biased. The core is therefore suited to
the low-accuracy, low-power end of the accuracy/power trade-off. For high
accuracy, widen `FRAC` (and `W`) in `dfg_pkg`: nothing else in the RTL depends
on the format. The reference model hard-codes the 24-bit range and the 8-bit
shift, and would need the same change.

## Where this design departs from, or adds to, the original description

The algorithm, the caching of `H'H`, `H'b` and the scaled `A'L`, the reuse of
the residual as the next feedback term, the Q16.8 word format and the
run-time iteration count come from the published description of DFGPGD. That
solver was produced by high-level synthesis, and its architecture was not
published. Everything below is therefore this design's own:

* **Schedule and parallelism.** This core makes one product per cycle. The
  published implementation reported about 1,052 cycles per iteration and
  10 DSP slices on an FPGA, for a problem size that was not stated. Those
  figures cannot be compared with the latency above. Raising throughput means
  several row engines working on disjoint rows. They would need more memory
  read ports or banked memories, and the controller would stay as it is.
* **`Kz` cache.** Only `A'L` is described as pre-scaled and cached. This design
  treats `B'L` the same way, with `1/(lambda_z*lambda)`.
* **z-update metric.** The proximal metric of the z-update is fixed to
  `lambda_z * I`, the choice the convergence analysis uses. That makes the
  z-update a soft threshold.
* **Rounding and overflow.** Truncation with saturation is assumed; the source
  does not specify either.
* **Initialisation passes** are added so that any start point (x0, z0, v0) is
  handled correctly.
* **Host port, memory organisation, reset, double buffering**: own choices.
* **Problem shape.** The general problem statement gives both `z` in R^n and
  `B` in R^(p x m), which conflict. The core keeps `N`, `NZ` and `P` as
  independent parameters. The defaults `NZ = P = N = 700` are the LASSO split
  at the largest problem size used in the evaluation (n = 700, m = 270).
* **Objective scaling.** Whether the data term is `||Hx-b||^2` or
  `1/2||Hx-b||^2` only scales `H'H` and `H'b`, which the host supplies.
* Not included: the host-side computation of `H'H`, `H'b`, `Kx` and `Kz`; the
  FPGA board and processor interface; and the ADMM solver that DFGPGD was
  compared against.
