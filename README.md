# A MINRES accelerator for interior-point nonlinear MPC

Nonlinear model predictive control (NMPC) solves an optimal control problem over
a horizon of N sampling instants at every control step. An interior-point method
solves it, and each of its iterations reduces to one large, sparse, symmetric,
indefinite linear system, the KKT system `A z = b`. This linear solve dominates
the run time. This RTL moves the whole solve into FPGA logic. A processor forms
`A` and `b` (derivatives, Hessian blocks, right-hand side), loads them, starts the
solver and reads `z` back. The processor also does the rest of the interior-point
iteration: dual update, step length and line search.

The solver is MINRES, the minimum-residual Krylov method for symmetric
indefinite systems. Nearly all of its work is one matrix-vector product per
iteration. The rest is a handful of vector updates and dot products, plus six
scalar operations: two divisions, two square roots and a few multiply-adds.
The design is built around one idea: make that matrix-vector product cheap by
using the structure the optimal control problem gives the KKT matrix.

All arithmetic is IEEE-754 single precision. The default build is a horizon of
N = 10 on P = 10 multiply-accumulate lanes. Its numbers follow a 6-state,
2-input crane model discretised with the trapezoidal rule: 386 unknowns and
161 stored non-zeros per block.

## The shape of the KKT matrix

Order the unknowns by sampling instant: states, inputs and integrator stage
variables of instant 0, their equality multipliers, then instant 1, and so on.
`A` then becomes block diagonal:

```
 lead |  -I                                   (initial-state constraint, NX rows)
 -I   | [ block 0 ]  -I
        -I   [ block 1 ]  -I
                  -I   [ block 2 ] ...
```

* Every diagonal ("grey") block holds the Hessian of one stage, the constraint
  Jacobian and its transpose. Since each stage uses the same model, **every
  block has the same sparsity pattern**. Only the values differ.
* Neighbouring blocks touch only through **negative identity matrices**. These
  link the end-state rows of one block to the initial-state columns of the next.
  A lone `-I` ties the measured initial state to block 0.
* Each block is symmetric, so only its lower triangle is stored.

In this RTL, partition 0 is a *lead* partition of `NX` rows for the
initial-state constraint, and partitions 1..N are the grey blocks of `BLK` rows
each. Rows `CROW .. CROW+NX-1` of block k are coupled to rows `0 .. NX-1` of
block k+1. Lead row i is coupled to row i of block 0. With the defaults
(NX = 6, BLK = 38, CROW = 32) the system has 6 + 10·38 = 386 unknowns.

The block size is an assumption. It counts 6 states, 2 inputs, two trapezoidal
stages of 6 variables, and 6 + 12 equality rows, which gives 20 + 18 = 38.
The last block uses the same size and pattern as the others, so the host pads it
as needed.

## Matrix-vector product: coupling phase, then lanes (`kkt_spmv`)

`y = A x` is computed in two phases.

1. **Coupling (BLK cycles).** A `-I` block contributes `-x[j]` to `y[i]`, which
   needs no arithmetic. Each output partition is initialised one row per cycle,
   all partitions in parallel. A coupled row gets the partner input element with
   its sign bit flipped. Every other row gets zero.
2. **Blocks.** P lanes then accumulate the grey blocks onto that initial value.
   Lane l takes blocks l, l+P, l+2P, ... The blocks use disjoint partitions of
   the input vector, the output vector and the non-zero store, so the lanes
   never compete for a memory. P trades area against time. With P = N every
   block has its own lane. With P = 1 one lane walks all blocks.

Time from `start` to `done`:
`BLK + ceil(N/P)·nmac + LAT_MUL + LAT_ADD + 4` cycles. With the defaults and a
169-entry schedule this is 227 cycles.

## The scheduled MAC lane (`spmv_lane`)

This is the part that takes the most care to understand.

A lane is one pipelined multiplier (5 cycles) feeding one pipelined adder
(6 cycles). Each non-zero `a_ij` needs a read-modify-write of `y[i]`:
`y[i] += a_ij · x[j]`. If two updates of the same row are closer together than
the adder latency, the second one reads a stale `y[i]`. A naive lane therefore
issues only one MAC every 6 cycles.

The fix is an **offline schedule**. The order of the MACs of one block is
computed once, at design time. The order keeps updates of the same row at least
`LAT_ADD` slots apart, and interleaves other rows between them, so a new MAC can
start every cycle (initiation interval 1). Every block has the same pattern, so
one schedule serves all blocks and all lanes.

Each schedule entry (`sched_t` in `nmpc_pkg`, 25 bits) is:

| field  | width | meaning                                         |
|--------|-------|-------------------------------------------------|
| valid  | 1     | 0 marks an empty spacer slot                    |
| aidx   | 8     | index of the stored (lower-triangle) non-zero   |
| col    | 8     | input-vector row j within the block             |
| row    | 8     | output-vector row i within the block            |

A stored off-diagonal value appears in two entries, as (i, j) and (j, i), with the
same `aidx`. This is how storing only the lower triangle works.

The lane turns each entry into four address streams:

| cycle after issue | action                                                   |
|-------------------|----------------------------------------------------------|
| 0                 | read `a[aidx]` and `x[col]`, feed the multiplier         |
| LAT_MUL           | read `y[row]` (output port 2), feed the adder            |
| LAT_MUL + LAT_ADD | write the sum to `y[row]` (output port 1)                |

The row and the block index travel with the data as a tag. If an entry is
exactly `LAT_ADD` slots behind an earlier update of the same row, the earlier
sum is written in the same cycle as the later read. A write-to-read bypass
forwards it, so a spacing of exactly `LAT_ADD` is enough.

The schedule is loaded by the host through the `sched_*` ports, up to 256
entries. In the crane example a block has 161 non-zero MACs. A schedule at
initiation interval 1 therefore takes about 161 + 5 + 6 cycles per block. The
greedy scheduler in the testbenches needs a few spacers, for example 169 entries
at the default size.

## The MINRES sequencer (`minres_engine`)

MINRES is written as a 60-instruction micro-program (`minres_prog` in
`nmpc_pkg`) that a small sequencer runs. The program follows the Paige-Saunders
form: a Lanczos three-term recurrence builds an orthonormal basis, and Givens
rotations update the solution. Only the last two Lanczos vectors and the last two
search directions are kept.

Resources:

* Nine vectors of DIM words: b, x, v, v_old, v_new, A·v, w, w_old, w_new.
* 32 scalar registers, zeroed at `start`.
* Two multipliers, one adder and one shared iterative divide/square-root unit
  (`fp_divsqrt`, 29 cycles per operation).

Instructions:

| op (`OP_*`)      | effect                                                  |
|------------------|---------------------------------------------------------|
| `VAXPBY d,a,b,va,vb` | `v[d] = s[a]·v[va] + s[b]·v[vb]`, one element per cycle |
| `VDOT d,va,vb`   | `s[d] = v[va]·v[vb]`                                    |
| `VZERO d`        | clear vector d                                          |
| `VSPMV d,va`     | `v[d] = A·v[va]` on `kkt_spmv`                          |
| `SMUL/SADD/SSUB/SDIV/SSQRT/SMOV/SNEG/SLI` | scalar operations      |
| `BEQZ a,target`  | branch if `s[a]` is zero                                |
| `LOOP target`    | next iteration while fewer than `niter` have run        |
| `HALT`           | raise `done`                                            |

`VDOT` feeds its products into `LAT_ADD` interleaved partial sums, one for each
adder pipeline slot. A partial sum is never read before its previous update is
written. The six partial sums are added at the end.

`VSPMV` copies the source vector into the matrix unit's partitions, runs it, and
copies the result back.

Each iteration has exactly two divisions and two square roots:

* `beta = sqrt(v_new·v_new)` and `1/beta`;
* `rho1 = sqrt(rho0² + beta²)` and `1/rho1`.

The loop runs `niter` iterations. It stops early if the new Lanczos vector is
exactly zero (beta = 0), which also covers `b = 0`.

Time per iteration: one matrix-vector product (about 230 cycles at the default
size), a dozen streamed vector operations of DIM elements, and the scalar chain.
At the default size this is about 5,700 cycles per iteration. A full solve of 386
iterations takes 2.2 million cycles, or 13 ms at 167 MHz. The vector operations
run one after another and are not overlapped with the matrix-vector product.
This is the main place to gain speed.

## Top level and interface (`nmpc_hg3_top`)

`nmpc_hg3_top` joins `minres_engine` and `kkt_spmv`. It has plain
one-word-per-cycle ports. A bus bridge (for example AXI) would sit in front of
these ports.

| port group | use |
|------------|-----|
| `sched_we, sched_waddr[8], sched_wdata (sched_t)` | write schedule entry |
| `a_we, a_wblk, a_waddr[8], a_wdata[32]` | write stored non-zero `a_waddr` of block `a_wblk` |
| `nmac[9]` | schedule length, used by every product |
| `b_we, b_idx, b_wdata[32]` | write `b` by global index (lead rows, then block 0, 1, ...) |
| `start, niter[16]` | start a solve with an iteration limit |
| `busy, done, iters[16]` | status; `done` pulses when `z` is ready |
| `z_idx, z_rdata[32]` | read `z` by global index (combinational) |

Loads are allowed only while `busy` is low; an assertion checks this. The first
solve uses `z0 = 0`.

Parameters:

| parameter | default | meaning |
|-----------|---------|---------|
| `N`    | 10  | horizon, number of grey blocks |
| `P`    | 10  | number of MAC lanes |
| `BLK`  | 38  | rows per block |
| `NX`   | 6   | coupling size (states) |
| `CROW` | 32  | first coupled row of a block |
| `NNZ`  | 161 | stored non-zeros per block |

## Floating-point units

`fp_mul` (5 cycles) and `fp_add` (6 cycles) accept one operation per cycle.
Each does its arithmetic in one stage and then runs it through delay registers,
so the latency matches the value the schedule assumes. Retiming in synthesis is
expected to spread the logic.

All units round to nearest even and flush subnormals to zero. Overflow gives
infinity. NaN inputs are not handled specially. `fp_divsqrt` uses restoring
radix-2 division and a restoring square root.

## Where this RTL departs from the source design

* **Prescaling.** The source design prescales the KKT system with a
  sparsity-preserving scaling. That turns the `-I` couplings into general
  diagonal matrices. This RTL keeps the pure `-I` form that the sign-flip
  coupling phase relies on, and it has no prescaler. Badly scaled systems will
  therefore converge more slowly.
* **Block sizes.** The block size, the coupling row position, the schedule depth
  (256) and the terminal block's shape are this design's own assumptions.
* **Speed.** The source design reports about 96 ms for 15 interior-point
  iterations at N = 10, P = 10, at 166 MHz, including software. That is at most
  6.4 ms per linear solve. This RTL needs about 13 ms per solve, because its
  vector operations and vector copies are sequential.
* **Schedule.** The source design finds the MAC schedule by branch and bound.
  The testbenches use a greedy list scheduler. Either kind is loaded at run time.
* **Figure example.** In the source design's four-by-four example schedule, the
  read addresses printed for the last two output updates are 1 and 2. The
  multiply-accumulate arithmetic requires rows 0 and 1, because the stored
  non-zeros a21 and a32 are reused as a12 and a23. This RTL follows the
  arithmetic. `tb_spmv_lane` replays the example with the printed matrix and
  input addresses, and with the example's multiplier and adder latencies of 3
  and 2.
* **Not built.** The processor software, the bus interface and the block RAM
  macros are not built. The memories are plain arrays.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

| testbench | checks |
|-----------|--------|
| `tb_fp_mul`, `tb_fp_add` | random and corner-case operands against a double-precision reference rounded to single; exact latency |
| `tb_fp_divsqrt` | division and square root against the rounded reference (within 1 ulp); 29-cycle latency |
| `tb_spmv_lane` | the four-by-four example schedule at latencies 3/2, then random blocks and schedules at 5/6 with spacing exactly `LAT_ADD`; results and cycle count |
| `tb_kkt_spmv` | small (N = 5, P = 3) random KKT matrices against a dense reference; cycle count |
| `tb_minres_engine` | MINRES with a behavioural dense matrix unit: residual, iteration limit, `b = 0` |
| `tb_nmpc_hg3_top` | reduced size (N = 3, P = 2): full solve checked by its residual; counts coupling transfers, lane reuse, spacer slots, bypasses, divide/sqrt operations, the iteration limit and the early exit |
| `tb_nmpc_hg3_full` | the top at its defaults: 386 unknowns, 386 iterations, relative residual about 3e-7 |
| `tb_kkt_spmv_sweep` | N = 20 blocks on 1, 2, 5, 10 and 20 lanes: every output element and the cycle count of each; a 169-entry schedule takes 3433, 1743, 729, 391 and 222 cycles |

The shared helpers are:

* `tb/tb_fp_pkg.sv`: real/float conversion, ulp distance and random floats.
* `tb/tb_kkt_model.sv`: random KKT pattern, greedy schedule and dense reference.

To simulate one testbench with verilator, list the package files first:

```
verilator --binary --timing --assert -Irtl \
  rtl/nmpc_pkg.sv tb/tb_fp_pkg.sv tb/tb_kkt_model.sv \
  rtl/fp_mul.sv rtl/fp_add.sv rtl/fp_divsqrt.sv rtl/spmv_lane.sv \
  rtl/kkt_spmv.sv rtl/minres_engine.sv rtl/nmpc_hg3_top.sv \
  tb/tb_nmpc_hg3_top.sv --top-module tb_nmpc_hg3_top -o sim
./obj_dir/sim
```

Replace the last file and the top module to run another testbench. The
full-size run takes a few seconds.
