# Spectral-element Poisson CG solver in SystemVerilog

This is a synthesizable SystemVerilog model of the accelerator described in
*A High-Fidelity Flow Solver for Unstructured Meshes on Field-Programmable
Gate Arrays*. It is an unpreconditioned conjugate-gradient (CG) solver for
the Poisson equation, discretised with the spectral element method (SEM) on
hexahedral elements of polynomial order N = 7. Each element has
(N+1)^3 = 512 Gauss-Lobatto-Legendre (GLL) points.

The design follows the paper's algorithm, operator and optimisations. The
paper built its accelerator with an HLS compiler and gives no
micro-architecture, so the hardware structure here is this design's own.
That includes the pipelines, the memories and the host interface.

## What the solver computes

The operator is applied matrix-free, element by element:

    w = Q Q^T  D^T G D  p,   then boundary points of w set to zero

- `D` is the 1-D spectral differentiation matrix, applied along each of the
  three directions.
- `G` holds six geometric factors per point. This is the symmetric tensor
  w_i w_j w_k detJ J^-1 J^-T.
- `Q Q^T` is the gather-scatter. Every local copy of a shared mesh point
  receives the sum over all of its copies.

Each CG iteration runs this schedule:

| phase | work | paper |
|---|---|---|
| FEED | `p = r + beta p`, streamed straight into the element operator; `w = A_L p` | Alg. 1 lines 5-6, fused |
| GS | gather-scatter of `w`, then boundary mask | lines 6-7 |
| PW | `pw = <p, w, c>`, `alpha = rho / pw` | line 8 |
| UPD | `x += alpha p`, `r -= alpha w`, `rho_new = <r, r, c>`, in one pass | lines 9-11, fused |
| BETA | `beta = rho_new / rho`; stop on `rho < tol` or on the iteration limit | lines 12-13 |

All vectors are stored in the local, element-by-element layout. The
reductions therefore weight every point by `c`, the inverse of its
multiplicity, so that shared points count once.

## Blocks

| file | role |
|---|---|
| `rtl/sem_pkg.sv` | number format (binary32 by default), the geometric-factor record `geom_t`, and the host array and vector-operation selectors |
| `rtl/fp_add.sv`, `fp_mul.sv`, `fp_div.sv` | combinational IEEE-754 add, multiply and divide |
| `rtl/ax_local.sv` | local operator `D^T G D u` for one element at a time, with valid/ready streams in and out |
| `rtl/geom_remat.sv` | forms G for one point from the element's J^-1, detJ and the quadrature weights (rematerialisation) |
| `rtl/gather_scatter.sv` | direct-stiffness summation through an accumulator indexed by global point number, then boundary masking |
| `rtl/cg_vecops.sv` | the weighted reductions and the fused x/r update, one point per cycle |
| `rtl/vec_ram.sv` | one solver array: synchronous write, asynchronous read |
| `rtl/cg_solver.sv` | top level: arrays, scheduling FSM, the shared divider, the host port |

### Number format

The default is binary32, which matches the paper's FP32 builds. All units
round to nearest, ties to even. Subnormal results and inputs are flushed to
zero, and NaN and infinity are not produced. The paper does not describe
these details; they are this design's choice. Setting `FP_EW = 11` and
`FP_MW = 52` in `sem_pkg` gives binary64. The three arithmetic units have
been tested bit-exact in that format. The full binary64 solver build has not
been simulated.

### Element operator (`ax_local`)

Per point the unit forms `ur`, `us` and `ut`, then applies `G`, then the
transposed derivative. That is 12(N+1)+15 operations per point, the count
the paper gives. The element is held in on-chip buffers. Three multiply-add
lanes run the phases LOAD, GRAD, GEOM, DIV and OUT, which take
NP^3 (2 NP + 5) = 10752 cycles per element. The input stream carries one
`(u, G)` pair per point. The output stream carries `w`.

### Geometric factors: stored or rematerialised

`cg_solver` has a parameter `REMAT`:

- `REMAT = 0` (default, the paper's FP32-CG): the host loads all six factors
  of every point. That is six arrays of `MAX_ELEMS * 512` words.
- `REMAT = 1` (the paper's FP32-CG-Remat): the host loads per element the
  nine entries of J^-1 and detJ, plus the 8 GLL weights. `geom_remat`
  computes each point's factors as the point is fed. This removes the six
  per-point arrays.

The paper's two statements of the cost differ. One says eight values per
element; the other says `n` words instead of `6n`. Taking J^-1 constant per
element costs ten words per element. It is exact only for elements that are
affine images of the reference cube. The paper restricts rematerialisation
to elements that are "only linearly deformed"; this design reads that as
affine.

### Gather-scatter

The unit first clears an accumulator with one entry per global point. It
then adds every local value into its global entry. Finally it writes the
sums back to every local copy, writing zero at boundary points. This takes
`num_global + 2 num_local` cycles. The paper's version uses non-aligned DDR
accesses and is its measured bottleneck. Keeping the accumulator on chip
avoids that cost, so the paper's gather-scatter bandwidth figures do not
apply to this model.

### Memories

The paper places the arrays in four external DDR4 banks. Here each array is
an on-chip `vec_ram` sized for `MAX_ELEMS = 32768` elements, the largest
mesh in the paper's results. These arrays are far larger than an FPGA's
block RAM, so they stand in for external memory. A memory controller and the
bank placement are not modelled.

## Top-level interface (`cg_solver`)

The host port may be used only while `busy` is low.

- **Write:** `h_we`, `h_sel`, `h_addr` and `h_wdata` write one word.
  - Per-point arrays (`SEL_X`, `SEL_R`, `SEL_P`, `SEL_C`, `SEL_G11`..`SEL_G33`,
    `SEL_GID`, `SEL_MASK`) are addressed by local point
    `e*512 + i + 8j + 64k`.
  - `SEL_D` is addressed by `i*8 + l`.
  - `SEL_JINV + 3*row + col` and `SEL_DETJ` are addressed by element.
  - `SEL_WQ` is addressed by GLL index.
- **Read:** `h_rsel` and `h_raddr` read per-point arrays combinationally on
  `h_rdata`.
- **Run:** the host loads `x = x0`, `r = b - A x0`, `p = 0`, `c`, the
  geometry, the global numbering `gid` and the boundary flags. It then
  pulses `start` with `num_elems`, `num_global`, `max_iter` and `tol`.
- **Result:** `done` pulses at the end. `iter_count`, `rho` (the last
  `<r, r, c>`) and `converged` then hold the result.

Timing per iteration, with E elements and n = 512 E local points:

    E * 512 * 21  +  num_global + 2n  +  2(n + 1)  + a few control cycles

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

- `tb_fp_arith` checks random operands against real arithmetic, plus exact
  rounding cases.
- `tb_fp_arith64` builds the same units for binary64 and compares every
  result bit for bit with the simulator's own binary64 arithmetic,
  including near-cancellations.
- `tb_ax_local` compares random elements with a binary64 reference, under
  random output back-pressure, and checks the cycle count.
- `tb_gather_scatter` uses random maps and masks with exact integer sums.
- `tb_cg_vecops` and `tb_vec_ram` are unit tests.
- `tb_geom_remat` checks random Jacobians against a binary64 reference.
- `tb_cg_solver` runs the default top level at full size on a real 2x2x2
  brick mesh, with GLL points, the derivative matrix, the numbering and the
  multiplicities all built in the testbench. It compares against CG in
  binary64. The first run stops on the iteration limit; the second runs to
  convergence, in 45 iterations against 44 in binary64. It also counts
  element-stream stalls, fused p updates, summed and masked points, and
  both stop conditions, and fails any of these that never occurs.
- `tb_cg_solver_remat` repeats this with `REMAT = 1` on a sheared mesh, so
  that all six factors are non-zero.
- `tb_cg_mesh128` runs the same test on 128 elements (8x4x4, 65536 local
  points), the smallest mesh size the paper measures. It stops after 3
  iterations, then converges to a loose tolerance in 17 iterations, the same
  count as binary64. Larger meshes fit in the default build, but the
  simulation time grows with the mesh; 128 elements is the largest size
  simulated.

Example, with Verilator 5:

    verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
        rtl/sem_pkg.sv tb/tb_fp_pkg.sv tb/tb_cg_solver.sv --top-module tb_cg_solver
    ./obj_dir/Vtb_cg_solver

## Not implemented

- DDR4 banks, the memory controller and the host CPU with its OpenCL
  runtime. These are replaced by on-chip arrays and the host port.
- The throughput of the paper's HLS kernels. This model processes about one
  operand per lane per cycle. A 32768-element iteration takes roughly
  4.3e8 cycles, so the paper's performance, frequency and resource figures
  are not reproduced.
- Curved or trilinear elements with rematerialised factors. Only affine
  elements are exact.
- The binary64 solver build is supported by the package parameters but has
  not been simulated as a whole. Only its arithmetic units have been tested.
