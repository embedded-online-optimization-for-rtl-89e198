# Fixed-point first-order QP solvers for fast model predictive control

Model predictive control solves a small quadratic program at every sampling
instant. When the sampling rate is in the megahertz range there is no time for
an interior-point method; what fits is a fixed, small number of cheap
iterations of a first-order method, each of which is mostly one dense
matrix-vector product followed by a projection onto simple constraints. This
RTL builds two such solvers as deeply pipelined fixed-point datapaths:

* **Fast gradient solver** (`fgm_solver`) for problems where only the inputs
  are bounded. The feasible set is a box, so the projection is a clamp.
* **ADMM solver** (`admm_solver`) for problems that also constrain the states,
  with some of them softened by a slack variable. Besides clamping it needs a
  projection onto a two-dimensional cone, and it keeps a dual variable.

`fom_mpc_top` holds one of each, side by side and independent. Matrices and
bounds are computed offline on a host and written in through a configuration
port. The state estimate `x` is then applied, `start` is pulsed, and a fixed
number of cycles later `done` pulses with the solution vector.

## Arithmetic

Every quantity is a 32-bit two's-complement fixed-point word with `FRAC`
fraction bits: 16 for the fast gradient solver and 18 for ADMM. A product is
formed at full width and arithmetically shifted right by `FRAC` (truncation).
Sums wrap. There is no saturation logic, because the matrices and bounds are
meant to be scaled so that nothing overflows. Fixing a word width is this
design's own choice. The algorithms only fix the number of fraction bits.

## The iteration pipeline (one lane)

An iteration computes `n` new components. One lane computes one component per
cycle:

1. A row of the matrix is read from the coefficient memory. There is one
   memory block per multiplier, each `ceil(n/P)` deep.
2. The dot product runs `n` registered multipliers into a registered binary
   adder tree, giving `1 + ceil(log2 n)` cycles.
3. The affine term is added or subtracted.
4. The result is projected.
5. It is combined with the previous iterate:
   * fast gradient: `y = (1+beta) z - beta z_prev`, where `beta z_prev` is
     kept in a FIFO from the last iteration;
   * ADMM: `nu' = rho y + nu - rho z` and `w = rho z - nu'`, where `nu` is
     kept in a FIFO.

The output stream goes into a serial-to-parallel register. When the last
component arrives, the whole vector is copied into a holding register. That
register feeds all multipliers of the next iteration while the shift register
refills.

With `P` lanes, lane `k` computes components `k, k+P, k+2P, ...`. The
iteration period is:

* fast gradient: `L_F = ceil(n/P) + ceil(log2 n) + 6` cycles;
* ADMM: `L_A = ceil(n/P) + ceil(log2 n) + 9` cycles.

Both assume one-cycle adders and multipliers. A row enters each cycle, so a
new iteration can start only when the previous vector is complete. That is
why the pipeline depth adds to the row count instead of overlapping it.

### Set-up pass

Each solve starts with one extra pass through the same pipeline, before the
`IMAX` iterations:

* fast gradient: the pass computes `Phi x` (the state-dependent part of the
  gradient) into a per-row register file. It also produces the cold start
  `z_0 = clamp(0)`.
* ADMM: the pass multiplies the set-up matrix `[M12 | -M11 h]` by `[x; 1]`,
  giving the constant vector of the `y` update. It also emits the initial
  `w_0 = rho z_0 - nu_0`.

A solve therefore takes exactly `(IMAX + 1) * L` cycles. With the default
sizes this is 16 x 52 = 832 cycles for the fast gradient solver (n = 40) and
41 x 233 = 9553 cycles for ADMM (n = 216).

### Warm start (ADMM)

In the last iteration the final `z` and `nu` are written into a FIFO in each
lane. The first horizon stage is left out. At the next solve, the set-up pass
replays the FIFO contents, so the old plan moves forward by one stage. The
slots of the last stage are filled with a constant `w_N` (zero for `nu`).

`warm = 0` gives a cold start: zeros everywhere, and the stored values are
discarded. Because the shift must stay inside each lane's stream, `P` must
divide both `n_u` and `n_x + |S|`.

### Cone projection

A soft-constrained state `x` and its slack `delta` must satisfy
`|x - c| <= r + delta` and `delta >= 0`. The block receives `x` and then
`delta` in consecutive cycles. Six differences decide which of these cases
applies:

* inside the set;
* on the upper or lower edge;
* at one of the two apexes `(c +- r, 0)`;
* below the base.

Halving a difference gives the edge projection. The output appears 3 cycles
later, one cycle more than the box clamp. For this reason every soft state
must be followed directly by its slack in the same lane. An assertion in
`admm_lane` checks this.

## Configuration

Both solvers take `cfg_wr_t` writes (`fom_pkg`), one per cycle. Each write
carries a selector, a global row, a column and a data word:

| `sel`          | row / col                  | meaning                               |
|----------------|----------------------------|---------------------------------------|
| `SEL_ITER_MAT` | i, j                       | `I - H_n` (FGM) or `M11` (ADMM)       |
| `SEL_INIT_MAT` | i, j                       | `Phi_n` (FGM) or `[M12, -M11 h]` (ADMM) |
| `SEL_LO/HI`    | i                          | bounds, or `c - r` / `c + r` for a soft state |
| `SEL_TYPE`     | i                          | ADMM: free, box, soft state, slack    |
| `SEL_SCALAR`   | col 0 / 1 / 2              | `beta`, `1+beta`, `w_N`               |

A row goes to lane `row % P`, at local address `row / P`.

## Departures and open points

* The published ADMM period formula gives 233 cycles at n = 216. The
  published timing table implies 234. The RTL follows the formula.
* The published timings do not include the set-up pass. They correspond to
  `IMAX * L`. Here the pass costs one extra period.
* The ADMM lane's internal pipeline is not drawn in the source. It is built
  from the algorithm and the period formula.
* The warm-start padding is a constant. Deriving `w_N` from earlier values
  is not built.
* In the warm-start block, the `w_N` multiplexer sits behind the FIFO rather
  than in front of it. The result is the same.
* `rho` must be a power of two (it is 2 in the reference example), so it is
  a shift.
* There is no host interface beyond the write port. The FPGA-specific
  mapping (DSP slices, block RAM primitives) is left to synthesis.

## Files and simulation

`rtl/` holds one module per file:

* `fom_pkg` has the shared types;
* the arithmetic blocks are `fx_mul`, `dot_product`, `box_projection`,
  `cone_projection` and `admm_projection`;
* the storage blocks are `coef_memory`, `iter_fifo`, `warm_start` and
  `s2p_shift_register`;
* the two lanes are `fgm_lane` and `admm_lane`;
* the two sequencers are `fgm_solver` and `admm_solver`;
* `fom_mpc_top` is the top level.

`tb/` has a self-checking testbench per block. `tb_ref_pkg` holds bit-exact
reference models of both algorithms. `tb_fom_mpc_top` runs the top level at
its default sizes:

* it loads random problems and runs four solves on each solver;
* it compares every output word and every cycle count;
* it counts each mechanism and fails if one never happened: set-up passes,
  lower and upper clamping, all six cone cases, warm and cold starts.

Example:

    verilator --binary --timing --assert -Irtl -Itb rtl/fom_pkg.sv tb/tb_ref_pkg.sv \
      tb/tb_fom_mpc_top.sv --top-module tb_fom_mpc_top
    ./obj_dir/Vtb_fom_mpc_top

Each testbench prints `TB_RESULT checks=<n> failures=<m>`.
