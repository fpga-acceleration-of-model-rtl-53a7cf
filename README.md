# A pipelined dual fast gradient QP solver for model predictive control

Model predictive control (MPC) solves a small quadratic program (QP) at every
sampling instant. For plasma current and shape control in a tokamak the QP is
solved with the dual fast gradient method (dFGM): a fixed number of cheap
iterations, each dominated by two matrix-vector products. On a processor the
iterations cannot be spread over threads usefully — each iteration is only a
few microseconds of work, far below the scale of thread scheduling — but the
work *inside* an iteration is highly parallel. This RTL exploits that: it
turns each matrix-vector product into a wide, pipelined datapath that
produces one matrix row per clock, and runs the 500 iterations back to back.

The design follows the FPGA dFGM solver described by Gerkšič, Pregelj and
Perne ("FPGA acceleration of Model Predictive Control for Iter plasma current
and shape control"), in its fastest variant ("optimized version B", Xilinx
ZC706). That work was produced by high-level synthesis from C; this is a
hand-written SystemVerilog rendering of the same architecture. The
publication describes the optimisations but not the problem size, the
operator internals or any interface, so those are choices made here and are
listed in the section on departures.

## The problem and the iteration

The solver minimises `1/2 z'Hz + f'z` subject to `A z <= b`, with `NZ`
decision variables and `NC` constraints (`NC > NZ`: `A` is tall). It works on
the dual variables `mu >= 0`. With the matrix `M_z = -H^-1 A'` (NZ x NC) and
the vector `q = -H^-1 f` prepared beforehand, iteration `k` is

```
phase 1   z        = M_z * mu_hat + q
phase 2   mu_new   = max(0, mu_hat + step * (A z - b))
          mu_hat   = mu_new + beta_k * (mu_new - mu)
          mu       = mu_new
```

`step = 1/L`, with `L` the largest eigenvalue of `A H^-1 A'`, and `beta_k` is
the Nesterov momentum coefficient of iteration `k`. The solver starts from
`mu = mu_hat = 0`, runs exactly `N_ITER = 500` iterations (no convergence
test) and returns the `z` of the last iteration.

The two phases cannot overlap: phase 2 needs every element of `z`, and the
next phase 1 needs every element of `mu_hat`. Inside a phase everything is
pipelined.

## Block structure

```
                 load port (ld_*)
                      |
   +------------------+--------------------------------------------+
   |  dfgm_ctrl: prologue -> (phase 1, phase 2) x N_ITER -> epilogue |
   +-----------------------------------------------------------------+
   phase 1:  mu_hat[NC] --> matvec_unit u_mvz (NZ x NC, 1 lane)
                              --> primal_update (+ q_i) --> z[i]
   phase 2:  z[NZ]      --> matvec_unit u_mva (NC x NZ, SPLIT lanes)
                              --> dual_update x SPLIT --> mu[i], mu_hat[i]
   epilogue: z --> z_out
```

| File | Role |
|---|---|
| `rtl/dfgm_pkg.sv` | `fp32_t`, load-port target codes, `fp32_max0` |
| `rtl/fp32_add.sv`, `rtl/fp32_mul.sv` | combinational single-precision operators |
| `rtl/adder_tree.sv` | pipelined binary-tree sum of one row's products |
| `rtl/matrix_ram.sv` | column-partitioned matrix bank, one full row per read |
| `rtl/matvec_unit.sv` | unrolled, row-pipelined, row-block-split matrix-vector product |
| `rtl/primal_update.sv` | `z_i = (M_z mu_hat)_i + q_i` |
| `rtl/dual_update.sv` | gradient step, projection, momentum for one constraint per clock |
| `rtl/dfgm_ctrl.sv` | solve sequencer, iteration and clock counters |
| `rtl/dfgm_solver.sv` | top level: vectors, load port, wiring |

## The matrix-vector engine

About nine tenths of the arithmetic is in the two products, so this is where
the design spends its hardware. A product `y = M x` written as two nested
loops (rows outside, columns inside) is transformed in three ways.

**Inner loop unrolled.** Every column has its own multiplier, so all
products of one row are formed in the same clock. For that the matrix is
partitioned by column (`matrix_ram`): conceptually one narrow memory per
column, so one read returns a whole row. The input vector is held in
registers, all elements visible at once.

**Row sums as a binary tree.** A serial accumulation would chain `COLS`
floating-point additions, each depending on the previous one, and the row
loop could not be pipelined. `adder_tree` adds the products pairwise, level
by level: `ceil(log2 COLS)` adder delays, each level registered, so a new row
can enter every clock. An operand without a partner on an odd-sized level is
carried up unchanged. The addition order is therefore fixed and differs from
a left-to-right sum; a bit-exact software model has to pair the terms the
same way (element `k` of the next level is `2k + 2k+1` of the current one).

**Outer loop pipelined.** A row counter issues one row address per clock.
The pipeline per lane is: registered memory read, registered products,
`LAT = ceil(log2 COLS)` tree levels.

**Tall matrix cut into row blocks.** `A` has few columns and many rows, so
unrolling its inner loop gives little parallelism and its row loop is long.
`matvec_unit` cuts a matrix into `SPLIT` stacked blocks of `RB = ROWS/SPLIT`
rows; each block has its own bank, multipliers, tree and (in the top) its own
`dual_update` pipeline, and all blocks advance in step. Lane `l` delivers
global rows `l*RB .. l*RB+RB-1`. The product of `A` thus takes `NC/SPLIT`
row slots instead of `NC`. The square-ish `M_z` product runs with one lane.

Timing of one product (start sampled at clock edge 0): rows are read at edges
`1..RB`, the first result appears after edge `2+LAT`, the last (with `done`)
after edge `RB+1+LAT`. The input vector must not change in between.

## Vector updates

`primal_update` adds `q_i` in one register stage. `dual_update` has four
stages — `g = v - b`; `mu_new = max(0, mu_hat + step*g)`; `d = mu_new - mu`;
`mu_hat_new = mu_new + beta*d` — and accepts one constraint per clock. The
projection is a sign test (`fp32_max0`): a negative value or `-0` becomes
`+0`, so the sign bit of `mu_new` is always 0. The old `mu`, `mu_hat` and `b` of a row are read from the register
vectors at the moment the row's product leaves the matrix-vector unit and
written back four clocks later; each row is touched once per phase, so there
is no read-after-write hazard.

## Timing of a solve

With `LAT(n) = ceil(log2 n)`:

```
phase 1     NZ      + LAT(NC) + 4 clocks
phase 2     NC/SPLIT + LAT(NZ) + 7 clocks
iteration   sum of both      (112 clocks at NZ=44, NC=88, SPLIT=2)
solve       N_ITER * iteration + 2   (56,002 clocks at the defaults)
```

The constant terms are the memory read, product register, the
`primal_update`/`dual_update` stages and one clock of phase hand-over in the
controller each way. For comparison, the published HLS implementation reports
237 clocks per iteration and about 120,000 clocks per sample at 100 MHz, for
a problem whose size it does not state.

## Number format

All data are IEEE-754 single precision. `fp32_add` aligns the smaller operand
in a 50-bit field and folds every bit shifted out into the lowest bit, which
keeps round-to-nearest-even exact; `fp32_mul` rounds the 48-bit mantissa
product. Both are combinational (the surrounding pipeline registers them).
Simplifications: subnormal inputs read as zero, results below the smallest
normal flush to signed zero, overflow gives infinity, exact cancellation gives
`+0`, and infinities/NaN are not handled beyond passing through. A
well-scaled MPC problem stays far from these limits; a badly scaled one
should be rescaled by the host before loading.

## Using the solver

Ports of `dfgm_solver` (parameters `NZ = 44`, `NC = 88`, `SPLIT = 2`,
`N_ITER = 500`; `NC` must be a multiple of `SPLIT`):

| Port | Dir | Meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; active-low asynchronous reset of control state |
| `ld_en`, `ld_sel`, `ld_row`, `ld_col`, `ld_data` | in | write one fp32 word per clock |
| `start` | in | one-clock pulse starts a solve |
| `busy`, `done` | out | solve running; one-clock pulse when `z_out` is new |
| `z_out[NZ]` | out | solution of the last solve |
| `cycles` | out | clocks from start to done of the last solve |

`ld_sel` (`ld_sel_e`): `LD_MZ` (row, col of `M_z`), `LD_A` (row, col of `A`),
`LD_Q`, `LD_B` (row = index), `LD_BETA` (row = iteration), `LD_STEP`. The host
computes `M_z`, `q`, `step` and the momentum table, for instance
`t_0 = 1`, `t_{k+1} = (1 + sqrt(1 + 4 t_k^2)) / 2`,
`beta_k = (t_k - 1) / t_{k+1}`. Loading while `busy` is not allowed (an
assertion flags it). Between MPC samples normally only `q` (and `b`) change.
Memories and data registers are not reset; load everything before the first
solve.

## Departures from the published design and choices made here

* Problem size `NZ = 44`, `NC = 88` is assumed (e.g. 11 actuators times 4
  blocked moves, two-sided limits); the publication gives none. The 500
  iterations and single precision are the publication's.
* "Subdividing the tall matrix vertically" is read as stacking row blocks
  processed in parallel; `SPLIT = 2` is assumed.
* Partitioning: matrices by column, vectors completely (registers).
* The dFGM equations, the cold start, the momentum sequence and the
  returned iterate are the standard method; the publication refers to an
  external library for them. The prologue here only clears the duals; the
  parametric part of a real MPC prologue (building `q` and `b` from the
  plant state) is left to the host.
* The floating-point operators are this design's own, single-cycle, with the
  simplifications above; the HLS version used vendor operator cores with
  multi-cycle latency, which is one reason its iteration is longer.
* The load port, the status outputs and all latencies are this design's.
* The publication also mentions scalar products among the loop's vector
  operations; here the only scalar products are the matrix row sums (no
  restart or convergence test is built, matching the fixed iteration count).
* There is no bus interface to a processor; the Zynq processing system of
  the boards is outside the RTL.

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. Reference arithmetic (`tb/fp_ref_pkg.sv`)
goes through the simulator's double-precision reals and rounds back to single
precision, which gives correctly rounded single-precision results for one
addition or multiplication; it is independent of the RTL operators.

* `tb_fp32_add`, `tb_fp32_mul`: 20,000+ random and directed cases each,
  bit-exact.
* `tb_adder_tree`, `tb_matrix_ram`, `tb_matvec_unit`, `tb_primal_update`,
  `tb_dual_update`, `tb_dfgm_ctrl`: results, ordering and latencies.
* `tb_dfgm_solver`: the whole solver at `NZ=8, NC=16, SPLIT=2`, 60
  iterations, three solves. `tb_dfgm_solver_full`: one solve at the default
  parameters (500 iterations). Both (through `tb/dfgm_tb_body.svh`) build a
  random strictly convex QP, load it, compare `z_out` bit for bit with a
  reference dFGM using the same operation order, check the clocks per
  iteration and per solve, check that the returned point nearly satisfies
  `A z <= b`, and count that the projection both clamped and passed values,
  that momentum was used, that every row-block lane delivered every row and
  that the prologue ran once per solve. The full-size run reaches a maximum
  constraint violation of about 1e-4.

Run one testbench with Verilator, for example:

```
verilator --binary --timing --assert -Itb \
  rtl/dfgm_pkg.sv tb/fp_ref_pkg.sv rtl/fp32_add.sv rtl/fp32_mul.sv \
  rtl/adder_tree.sv rtl/matrix_ram.sv rtl/matvec_unit.sv \
  rtl/primal_update.sv rtl/dual_update.sv rtl/dfgm_ctrl.sv \
  rtl/dfgm_solver.sv tb/tb_dfgm_solver_full.sv --top-module tb_dfgm_solver_full
./obj_dir/Vtb_dfgm_solver_full
```

The full-size build takes under a minute and the simulation a few seconds.

## Size at the default parameters

180 single-precision multipliers (88 per product, 2 per dual lane) and 182
adders (87 + 2x43 in the trees, 1 primal, 4 per dual lane); matrix storage
2 x 44 x 88 words; vectors 44 + 4 x 88 words plus a 500-entry momentum table.
On a ZC706-class device the multipliers alone map to roughly 540 DSP slices.
Changing `NZ`, `NC`, `SPLIT` and `N_ITER` scales everything; widths of the
indices follow automatically.
