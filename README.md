# A factor-graph LQR solver in hardware

This design computes finite-horizon LQR control in a way that suits hardware.
The usual approach is a backward Riccati recursion. Here the whole horizon is
instead written as one sparse least-squares problem over the states
x_0..x_N and controls u_0..u_{N-1}, and that problem is solved by variable
elimination on its factor graph. Each elimination is a small dense QR
decomposition, which maps onto a fixed datapath. The graph is a chain, so
two such datapaths can eliminate from its two ends at once and meet in the
middle. A final back substitution recovers the whole trajectory.

The RAM, the two engines, the partial-QR block with one Evaluate unit and
several Update units, and the four-stage back substitution are modelled on
the FGLQR accelerator (an FPGA design for vehicle path tracking). Details
that publication does not give are this design's own. They are listed in
"Departures and open points" below.

The default configuration is the one that accelerator was evaluated with:
5 states, 2 controls, horizon N = 50, single-precision floating point.

## 1. The problem as a factor graph

The cost being minimised is

    J = sum_k  x_k' Q x_k  +  u_k' R u_k  +  d_k' P d_k ,   d_k = x_{k+1} - A x_k - B u_k

plus a prior on the first state. The dynamics are not a hard constraint.
They are a least-squares term with a large weight P = 2^e · I (e = 10 by
default). With every term quadratic, each term is a *Gaussian factor*: a
row block `[coefficients | right-hand side]` acting on the few variables it
touches. Multiplying each block by the square root of its weight
("whitening") turns the problem into one stacked least-squares system
`min |M z - b|²`. The factors are:

| factor | variables | whitened rows |
|---|---|---|
| state cost | x_k | `Q^½` (rhs 0) |
| control cost | u_k | `R^½` (rhs 0) |
| dynamics | x_k, u_k, x_{k+1} | `[-P^½ A  -P^½ B  P^½]` (rhs 0) |
| prior | x_0 | `P^½ I` (rhs `P^½ x_init`) |

Q, R and P are taken to be diagonal. So `Q^½` and `R^½` are element-wise
square roots. `P^½` is `2^(e/2)`, and multiplying by it is just an addition
to the floating-point exponent. No multiplier is needed.

## 2. Eliminating one variable

Eliminating a variable v works like this:

1. Gather every factor that touches v.
2. Stack them into a small dense matrix, with columns
   `[v | separator variables | rhs]`.
3. Triangularise that matrix with Householder QR.

The top rows of the result, `[R_vv  S_vs | d_v]`, form a *conditional*,
which defines v once the separators are known. The rows below form a new
factor on the separators, which replaces everything that was gathered.

Along the chain, a sweep from the left alternates between two kinds of
elimination. Each matrix has at most 3·NX = 15 rows and 2·NX+NU+1 = 13
columns.

* **state x_k**:
  * Rows: `Q^½`, the dynamics factor to x_{k+1}, and the factor carried
    from the previous elimination (for x_0, the prior instead).
  * Columns: `[x_k | u_k | x_{k+1} | rhs]`.
  * Result: NX conditional rows, and NX+NU rows of new factor on
    (u_k, x_{k+1}).
* **control u_k**:
  * Rows: `R^½` and the carried factor on (u_k, x_{k+1}).
  * Columns: `[u_k | x_{k+1} | rhs]`.
  * Result: NU conditional rows, and NX rows of new factor on x_{k+1}.

This design triangularises **all** variable columns of each matrix, not
only the eliminated variable's. The conditional rows are the same either
way. The difference is that the new factor then comes out as a small upper
triangle. So the carried factor never grows, and one RAM region of NX+NU
rows holds it at every step.

## 3. Two engines meeting in the middle

The design holds two identical engines (`fg_engine`). Each engine contains:

* a RAM (`fg_ram`);
* matrix-construction logic;
* a partial-QR block (`partial_qr`);
* a back-substitution block with its own conditional store and solution
  memory (`back_sub`).

With MID = N/2 the work is split as follows:

| phase | left engine (SIDE=0) | right engine (SIDE=1) |
|---|---|---|
| WHITE | both RAMs receive the same whitened model rows | ← |
| SWEEP | eliminates x_0, u_0, x_1, … u_{MID-1} | eliminates x_N, u_{N-1}, x_{N-1}, … u_MID |
| XFER | receives the right engine's factor on x_MID (NX rows, copied RAM to RAM, one row per cycle) | — |
| MID | eliminates x_MID (rows: `Q^½`, own factor, imported factor) | — |
| BSMID | back-substitutes x_MID | — |
| XM | copies x_MID into the right engine's solution memory (one word per cycle) | ← |
| BS | back-substitutes x_{MID-1} … x_0 | back-substitutes x_{MID+1} … x_N |

The right engine stores the dynamics factor with its column order mirrored,
`[x_{k+1} | u_k | x_k]`, so that the frontal variable always comes first.
The two sweeps share no factor, so they run fully in parallel. The only
serial parts are the short hand-over of the factor on x_MID and x_MID's own
elimination.

Each elimination goes through four engine states:

* **READ**: reads all RAM rows (DEPTH = 3·NX+NU+2 = 19 cycles) and places
  each one by row address and step type.
* **FEED**: streams the matrix into the QR block column by column.
* **QR**: waits for the decomposition.
* **STORE**: writes the conditional rows and a header into the
  back-substitution store, one row per cycle, and the new factor rows back
  into the RAM.

RAM map (rows of 13 words):

| rows | content |
|---|---|
| 0 | `[Q^½ diag (NX) | R^½ diag (NU) | 0…]` |
| 1 … NX | dynamics row i: `[-P^½ A_i | -P^½ B_i | P^½_ii]` |
| NX+1 | `P^½ x_init` |
| NX+2 … 2NX+NU+1 | carried factor |
| 2NX+NU+2 … 3NX+NU+1 | factor imported from the other engine (left engine only) |

## 4. Partial QR: one Evaluate unit, a ring of Update units

Householder QR proceeds one column at a time. For each column:

* **Evaluate**: compute the reflection (v, β) from the current column.
* **Update**: apply it to every later column, `a ← a − β (vᵀa) v`.

The Update work dominates. The block therefore has one Evaluate unit
(`qr_evaluate`) and N_UPD Update units (`qr_update`, 4 by default).

* **Ring.** Each Update unit reads from its own FIFO (`qr_fifo`) and writes
  into the next unit's FIFO, so the units and FIFOs form a ring. A FIFO
  entry is a whole column together with its index and a *tag*: the number
  of reflections the column has already received. Columns are dealt into
  the FIFOs round-robin, so every unit has the same share of the work. A
  unit pops a column only if its tag equals the iteration being applied.
* **Overlap.** In iteration k, the unit that finishes column k+1 sends it
  straight to the Evaluate unit instead of to the ring. So the reflection
  for k+1 is being built while the remaining columns are still receiving
  reflection k.
* **Barrier.** The new reflection is broadcast to all units only once every
  column has received reflection k. The finished column k+1 leaves the
  block at the same moment.
* **Drain.** After the last variable column, the columns that are left
  (the right-hand side, and those beyond nvar) leave the ring through a
  drain arbiter.
* **Output order.** Output columns carry their index and may arrive in any
  order. The engine writes each one into its matrix by that index.

Each unit does one floating-point multiply-add per cycle. Latencies, with p
the pivot row of the iteration:

| unit | latency |
|---|---|
| Evaluate | ROWS−p+3 cycles (sum of squares, one square root, one division) |
| Update | 2·(ROWS−p)+2 cycles (dot product, then axpy) |

Measured decomposition times with N_UPD = 4:

| matrix (15 rows, zero-padded) | cycles |
|---|---|
| state step, 12 variable columns of 13 | 659 |
| control step, 7 of 8 | 354 |
| middle step, 5 of 6 | 252 |

The `overlap` output is high while Evaluate and at least one Update unit
are busy at the same time.

## 5. Back substitution

Each conditional is stored as rows of `[R_vv S_vs | d]`, with a header
giving where its frontal and separator variables live in the solution
memory:

* x_k is stored at k·NX;
* u_k is stored at (N+1)·NX + k·NU.

Conditionals are solved in reverse order of elimination, and within a
conditional from the last row up. Each row goes through four stages:

* **FETCH**: load the row.
* **PREPARE**: one multiply-subtract per cycle, `acc = d − Σ r_j z_j` over
  the known variables.
* **SOLVE**: one division by the diagonal entry.
* **WRITE**: store the result in the solution memory.

A row with n known terms takes 3+n cycles. The stages of consecutive rows
are not overlapped (see the departures below).

## 6. Input buffer and whitening

The host writes the model as fp32 words, one per cycle, to the
`input_buffer`:

| words | content |
|---|---|
| 0 … NX²−1 | A, row-major |
| NX² … | B, row-major |
| then | diag Q, diag R, diag P |
| then | x_init |

That is 52 words for NX=5, NU=2. The `whitening` unit reads one model row
per cycle and builds all whitened RAM rows in NX+2 cycles:

* P^½ is applied by exponent addition, one row in parallel.
* √q and √r take one square root per cycle.
* The RAM rows are written to both engines at once.

## 7. Arithmetic

All datapath arithmetic is IEEE-754 binary32 (`fp32_pkg`): add, multiply,
divide, square root and power-of-two scaling, all with round-to-nearest-even.
Subnormals are flushed to zero. An overflow saturates to infinity. These
functions are combinational, one operator per call. Their timing closure
(pipelining of the divider and square root) is not addressed. A testbench
checks them bit-exactly against double-precision results rounded to single
precision.

## 8. Interface and timing of the top (`fglqr_top`)

| port | direction | use |
|---|---|---|
| `ib_we, ib_waddr, ib_wdata` | in | load the problem while idle |
| `start` | in | one-cycle pulse |
| `busy`, `done` | out | `done` pulses once the trajectory is in the solution memories |
| `res_addr`, `res_data` | in/out | asynchronous read of the result, x and u addresses as in section 5 |
| `stat_parallel` | out | both engines eliminating in the same cycle |
| `stat_qr_overlap` | out | Evaluate/Update overlap in either engine |
| `stat_elim[1:0]` | out | elimination finished, left/right |

Parameters: NX (5), NU (2), N (50) and N_UPD (4). N must be at least 2.

Measured latency from `start` to `done`:

* N = 50 (defaults): 29,114 cycles, which is 0.17 ms at 167 MHz.
* N = 5: 3,792 cycles.

## 9. Departures and open points

These are points where the source publication is silent, or where this RTL
deliberately differs from it:

* **Full triangularisation.** The publication describes the QR as running
  until the eliminated variable's column is triangular. This design goes on
  to triangularise all variable columns, so that the new factor stays small
  (section 2).
* **Prior on x_0.** How the measured state enters is not described. Here it
  is a prior factor with the same weight as the dynamics.
* **Middle hand-over.** The publication says the graph is eliminated from
  both ends towards the middle, but not how the halves are joined. The
  XFER/MID/XM sequence of section 3 is this design's choice.
* **Back substitution not pipelined across rows.** The publication
  describes a pipelined FETCH/PREPARE/SOLVE/WRITE loop. Here the stages run
  one after another for each row. The cycle counts above are therefore
  somewhat pessimistic for that block.
* **No direct RAM-to-back-substitution path.** The publication's block
  diagram has one. Here the right-hand side travels inside the QR matrix as
  its last column, so the path is not needed.
* **Update unit count.** N_UPD is not given in the publication. 4 is this
  design's choice.
* **FIFO form.** The FIFO entries hold whole columns, which is wide. A
  narrower word-serial FIFO would save area.
* **Diagonal weights only.** Q, R and P are assumed diagonal. e must be
  even, so that P^½ is an exact power of two.
* **Host and surrounding system are not part of the design.** The
  publication's 1.94 ms per solve is measured on a complete FPGA system. It
  is not comparable cycle for cycle with the figures above.
* **Fixed vehicle model in the tests.** The model matrices of the evaluated
  vehicle are not published. The tests use a common linearised kinematic
  path-tracking model instead (dt = 0.1 s, wheelbase 0.5 m).

## 10. Files

| file | content |
|---|---|
| `rtl/fp32_pkg.sv` | binary32 arithmetic functions |
| `rtl/fglqr_pkg.sv` | shared defaults, engine command enum, conditional header struct |
| `rtl/input_buffer.sv` | model storage written by the host |
| `rtl/whitening.sv` | builds the whitened RAM rows |
| `rtl/fg_ram.sv` | row-wide RAM with synchronous read |
| `rtl/qr_evaluate.sv` | Householder vector and β for one column |
| `rtl/qr_update.sv` | applies one reflection to one column |
| `rtl/qr_fifo.sv` | first-word-fall-through FIFO of the Update ring |
| `rtl/partial_qr.sv` | the QR block: Evaluate, Update ring, barrier, drain |
| `rtl/back_sub.sv` | conditional store, solution memory, four-stage solver |
| `rtl/fg_engine.sv` | one engine: RAM, matrix construction, QR, back substitution |
| `rtl/fglqr_top.sv` | input buffer, whitening, two engines and the sequencer |

Testbenches (`tb/`), each self-checking and ending with a
`TB_RESULT checks=… failures=…` line:

* **Unit tests**, one per module: `tb_fp32_pkg`, `tb_qr_fifo`, `tb_fg_ram`,
  `tb_input_buffer`, `tb_whitening`, `tb_qr_evaluate`, `tb_qr_update`,
  `tb_partial_qr`, `tb_back_sub` and `tb_fg_engine`.
  * The QR test checks that the result keeps the Gram matrix MᵀM, and that
    R is upper triangular.
  * The engine test checks both sides on a 2-step problem.
* **`tb_fglqr_top`**: the end-to-end test at N = 5, two problems.
* **`tb_fglqr_full`**: the same test at the default size, N = 50.
* **Shared pieces**: both end-to-end tests use the body `tb_fglqr_core`,
  and all tests use the helper package `tb_fp_util_pkg`.

The end-to-end tests:

* compare all states and controls with a double-precision solution of the
  normal equations, to 1e-3 relative or 2e-4 of the largest entry;
* count the cycles in which both engines eliminate at once, the
  Evaluate/Update overlap cycles and the eliminations per engine;
* fail if any of those never happened.

## 11. Simulating

Plain Verilator 5 is enough. For example, the N = 5 end-to-end test:

    verilator --binary --timing --assert -Irtl -Itb \
      rtl/fp32_pkg.sv rtl/fglqr_pkg.sv tb/tb_fp_util_pkg.sv \
      rtl/qr_fifo.sv rtl/qr_evaluate.sv rtl/qr_update.sv rtl/partial_qr.sv \
      rtl/back_sub.sv rtl/fg_ram.sv rtl/input_buffer.sv rtl/whitening.sv \
      rtl/fg_engine.sv rtl/fglqr_top.sv \
      tb/tb_fglqr_core.sv tb/tb_fglqr_top.sv --top-module tb_fglqr_top
    ./obj_dir/Vtb_fglqr_top

For the full-size test, use `tb/tb_fglqr_full.sv` and
`--top-module tb_fglqr_full`. Building it takes a few minutes. For a unit
test, compile the packages, the module (and the modules below it) and its
testbench.

To change the problem size, set NX, NU, N or N_UPD on `fglqr_top`. ROWS,
COLS, DEPTH and the memory sizes all follow from these. The end-to-end
testbench model is written for NX = 5 and NU = 2.
