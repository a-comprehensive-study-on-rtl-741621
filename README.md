# SPARK: a near-L1 integer linear programming engine in SystemVerilog

An integer linear program (ILP) asks for the integer vector X that maximises
a cost R·X subject to C·X ≤ D and X ≥ 0. Solving one is mostly dot products
between constraint rows and a candidate X. Around those dot products sit a
few divisions and some control flow: convergence tests, branch decisions and
pruning. SPARK keeps the constraint matrix where it already lies, in the
core's L1 data cache. It turns the cache's SRAM arrays into a dot-product
engine and adds a small amount of logic next to the arrays for the
divisions and the control flow. The CPU then only issues three
instructions:

* **VFC** checks whether the problem is sparse.
* **VSASLE** solves it: with a sparsity-aware search if sparse, with
  Jacobi iteration if dense.
* **VBB** turns the relaxed solution into an integer one by branch and bound.

This repository is an RTL rendering of that architecture: one core's L1
cache in compute mode and the four engines that share it. Everything is
synthesizable SystemVerilog. Each block has a self-checking testbench, and
an end-to-end testbench runs the whole design at its full default size.

## 1. The cache as a dot-product unit

The L1 has 16 banks. Each bank is 256 rows × 256 columns of 8T SRAM.
An 8T cell has a separate read port, and the read bit line of a column is
precharged according to an input bit x:

* with x = 1, the sense amplifier sees the stored bit c;
* with x = 0, it sees 0.

A read therefore returns `c AND x` for every column at once. The
`pim_bank` module models this by its digital result. A compute read
returns `mem[row] & col_x` one cycle later, and the write port is
independent.

A 256-column row holds sixteen 16-bit **slots**. To form C·X for a 16-bit
X, the design gives the banks different bits of X:

* every bank stores the same rows;
* bank *b* is driven with bit *b* of X;
* bank *b*'s row buffer then holds `C AND X[b]` for every slot.

One `shift_add` per slot adds the sixteen partial products with weights
2^b, giving C·X exactly (C signed, X unsigned). One `adder_reduction` sums
the slots selected by an include mask. All of this is `pim_array`, a
three-stage pipeline (row buffer, s-a register, sum register). It accepts
one request per cycle and answers `PIM_LAT = 3` cycles later with:

* the sixteen products;
* the masked sum;
* the request's tag.

The include mask and the per-slot X values do all the work:

| what the engine wants | X on slot j | include mask |
|---|---|---|
| plain read of a row | 1 (the integer one) on every slot | none |
| Jacobi row i: Σ_{j≠i} C_ij X_j, C_ii and D_i in one access | X_j, but 1 on slot i and on the D slot | j < n, j ≠ i |
| cost R·X, or a constraint check C_i·X | X_j | j < n |

Applying the integer 1 to a slot returns its stored value unscaled. That
is how D and the diagonal coefficient come out of the same access as the
dot product.

**Number formats** (this design's choice):

* C, D and R are signed 16-bit integers.
* X is unsigned Q8.8: 16 bits, one per bank, 8 fraction bits.
* A product has 32 bits and a reduced sum 36 bits, both in X scale.

**Row layout**: one constraint per row.

* Slots 0..14 hold the coefficients of up to 15 variables.
* Slot 15 holds D.
* The cost vector R is a row of its own, with slot 15 unused.

A problem is therefore limited to n ≤ 15 variables and m ≤ 256 constraint
rows.

## 2. Instructions and the top level

`spark_top` is one core's accelerator. Its interface:

* A **control register** (`cfg_we`, `cfg_compute`) switches the L1 between
  cache mode and compute mode.
* In **cache mode**, `rd_*` reads rows back like a cache: the data arrives
  after `PIM_LAT` cycles. An instruction issued in cache mode is answered
  with `instr_reject`.
* The **fill port** (`fill_*`) writes rows in either mode. It stands for
  cache fills and stores; the cell's write port is separate from the port
  used for compute.
* **Instructions** (`instr_valid`, accepted when `instr_ready`) carry:
  the opcode, the first row, m, n, the cost row, Jacobi's error limit and
  iteration cap, and max/min. `instr_done` pulses once when the
  instruction finishes.
* The **architectural results** are:
  * VS (`vs_sparse`);
  * VX, the current real-valued solution, which the CPU can also load with
    `vx_we` as Jacobi's starting point;
  * VC, the cost;
  * VB, the integer solution, with `vb_found`.

Statistics ports expose the internal counters. These include the
cardinality count, Jacobi iterations and final L1 norm, B&B nodes,
branches, prunes and infeasible candidates, potential-solution count and
divider table hits.

| instruction | VS = 0 (dense) | VS = 1 (sparse) |
|---|---|---|
| VFC | FC engine sets VS | FC engine sets VS |
| VSASLE | SLE engine (Jacobi) → VX | SA engine → VX, VC |
| VBB | B&B engine → VB, VC | NOP (B&B engine stays idle) |

The PIM array and one subtract/divide unit (`result_calc`) are shared. The
engine that runs owns them; assertions in the top check that at most one
requester drives them.

## 3. Sparsity detection (FC engine, VFC)

`fc_engine` reads the m rows, one per cycle, as plain reads. It counts the
non-zero coefficients of each row:

* **Cardinality (CC) row:** exactly one non-zero coefficient and D ≠ 0,
  i.e. a bound X_k ≤ D. It increments a 32-bit counter and writes D into
  the CC array at variable k.
* **All-zero row:** dropped.
* **Any other row:** its address goes into the C array, a 256-entry queue
  of general constraints.

The problem is sparse when the CC count equals n, which means every
variable has its own bound. `done` comes m + PIM_LAT + 2 cycles after
`start`.

The CC value is D itself. That is right for the bound X_k ≤ D; a row
c·X_k ≤ D with c ≠ 1 is taken as X_k ≤ D without dividing by c.

## 4. Sparse solve (SA engine)

With every variable bounded, each general constraint i is cut with the
n − 1 bound planes of the other variables. Each cut gives a **potential
solution** (PS). For every k with C_ik ≠ 0:

    X_k = (D_i − Σ_{j≠k} C_ij·CC_j) / C_ik ,   X_j = CC_j for j ≠ k

`sa_engine` does this with two array accesses per row:

1. A plain read of row i fetches the C_ik and D_i.
2. A MAC with X = CC fetches every product C_ij·CC_j and their sum.

Then it issues one subtract/divide per k per cycle: the numerator is
D_i − (sum − C_ik·CC_k). Each result is clamped to [0, CC_k] and stored as
(k, value) in the 256-entry PS array.

Each PS is then costed with one MAC against R. The costs go into the
256-entry PC array and a running maximum picks the answer. With no general
constraint, the CC vector itself is the answer.

The source's example:

* constraints X1 ≤ 5, X2 ≤ 3 and 2X1 + 3X2 ≤ 12, cost 4X1 + 5X2;
* the two PS are (1.5, 3) at cost 21 and (5, 0.67) at cost 23.3;
* the hardware returns the second.

## 5. Dense solve (SLE engine, Jacobi)

`sle_engine` solves the square system formed by rows base..base+n−1 as
equalities:

    X_i ← (D_i − Σ_{j≠i} C_ij X_j) / C_ii

Each row is one PIM access (see the table in section 1). Rows are issued on
consecutive cycles, so the array, the divider and the write into the Iter2
queue overlap. When all n new values are in Iter2, one cycle:

* copies Iter2 into Iter1;
* forms the L1 norm Σ|X2 − X1|;
* stops if the norm is at most `err` or the iteration count has reached
  `max_iter`.

One iteration takes n + PIM_LAT + 3 cycles.

The engine also accepts a **fixed-variable mask**. A fixed X_v keeps a
given value and its row is not solved. This is how branch and bound reuses
the solver without writing new constraint rows into the cache.

The divider is approximate and piecewise linear, so Jacobi can end in a
limit cycle a few LSBs wide instead of converging exactly. An error limit
of about 0.2 per variable (48·n in units of 2⁻⁸) converges reliably in the
tests. With a tighter limit, expect the solver to stop at `max_iter`.

## 6. Branch and bound (B&B engine)

This is the most involved block. `bb_engine` searches for an integer X
starting from the relaxed solution in VX. It has no solver of its own:
every node is solved by the SLE engine, with the node's branch decisions
applied as fixed variables.

**Evaluating a candidate X** takes m + 1 PIM accesses.

1. *Snap.* Values within 4/256 of an integer are rounded to it. Variables
   at index n and above are cleared.
2. *Verify.* One MAC per constraint row.
   * A candidate whose values are all integers must meet every row
     exactly, so a reported solution is always exactly feasible.
   * A fractional candidate skips the rows that Jacobi solved as
     equalities, because they hold by construction. The other rows may
     exceed D by |D|/16 + 1/8, to absorb the divider's error.
3. *Bound.* One MAC with R gives F(X).
4. *Classify.*
   * Infeasible: counted and dropped.
   * All-integer: replaces the incumbent if better.
   * Fractional: becomes a node. Its branching variable is the unfixed
     variable with the largest fractional part.

**Node queue.** The queue has 1024 entries. Each entry holds:

* a valid bit;
* the bound;
* the parent index;
* the variable this node fixed and its value;
* the branching variable and its relaxed value.

The node's full set of fixed variables is rebuilt by walking the parent
chain, so each node stores only one branch decision.

**Search loop.**

1. **Prune.** In one cycle, every valid node whose bound cannot beat the
   incumbent is invalidated (parallel comparison against all 1024 bounds).
2. **Select.** A scan picks the valid node with the best bound. If there is
   none, the search ends.
3. **Walk.** The parent chain is followed to collect the fixed variables.
4. **Branch.** Two children are solved on the SLE engine, one with
   X_v = floor(x_v) and one with X_v = floor(x_v) + 1. Each is evaluated
   as above.

At the root, the floor of the relaxed X is evaluated as well. When it is
feasible, it becomes the first incumbent and pruning has a bound from the
start.

**Worked example.** The problem is 3X1 + X2 ≤ 10, X1 + 2X2 ≤ 8, maximise
X1 + X2.

* The root relaxation is (2.4, 2.8).
* The floor (2, 2) is the first incumbent, at cost 4.
* The engine branches on X2:
  * X2 = 2 gives (2.67, 2) with bound 4.67;
  * X2 = 3 gives (2.33, 3) with bound 5.33.
* Branching the second child on X1:
  * X1 = 2 gives (2, 3), a new incumbent at cost 5;
  * X1 = 3 is infeasible.
* The remaining node (bound 4.67) is then pruned.

**How far to trust it.** Every child is solved as a set of equalities, so
the search only visits points on the constraint planes and can miss the
optimum. The integer point x = 0 is not tried either. On random
2–4-variable problems, the search found an integer solution for about two
thirds of the problems. For maximisation problems it found the brute-force
optimum about half the time. A reported solution is always integral,
exactly feasible and costed exactly. Queue overflow drops nodes and counts
them.

## 7. The regularizing divider

Division appears in every Jacobi update and every potential solution.
`reg_divider` replaces it with Mitchell's logarithmic approximation:

* For each operand, find the leading one, giving exponent k and mantissa
  fraction f.
* Subtract the top 8 fraction bits (m = 8) and the exponents.
* Rebuild 1 + (fa − fb), or 2 + (fa − fb) with the exponent reduced by one
  when the difference is negative.

Plain Mitchell division is off by up to about 12%. A 64-entry × 8-bit
correction table (64 bytes) fixes most of that. The table is indexed by
the top three fraction bits of each operand and holds, for each cell, the
exact quotient at the cell's centre minus the Mitchell quotient. An entry
is non-zero only where that correction exceeds 1%.

Over 6,500 random operand pairs (quotient ≥ 64):

| divider | mean error | maximum error |
|---|---|---|
| with the table | 0.8% | 5.5% |
| plain Mitchell, on the operands where the table fires | 4.7% | — |

The table's resolution limits the worst case. More index bits shrink it.

Edge cases:

* Divide by zero saturates.
* A zero numerator gives zero.
* `result_calc` wraps the divider with the subtraction D·2⁸ − sum, sign
  handling, a register, and a clamp of X to [0, 255.996].

## 8. Where this design departs from, or adds to, the published architecture

* **Bit-planes across banks.** All banks store the same rows and bank b
  gets X bit b, following the published block diagram of the dot-product
  path. The text instead speaks of one shift-add per 16 columns *per
  bank*. Here there is one shift-add per slot across the banks, and one
  shared subtract/divide rather than one per bank. With replicated rows, a
  second unit would only compute the same row again.
* **Throughput.** The text mentions 32 16-bit MACs per cycle. A 256-column
  row holds 16 slots, and this design does 16 MACs per access.
* **Capacity.** The text gives the L1 both as 32 KB and as 16 × 256 × 256
  bits (128 KB). The second is built.
* **One row per constraint.** A 64-byte line holds 32 coefficients; here a
  256-bit row holds 15 coefficients plus D. Problems wider than 15
  variables, or constraints split over several lines, are not supported.
  Neither is streaming problems larger than the cache through the
  prefetcher.
* **Branches as equalities.** The published B&B adds the inequality
  constraints X ≤ floor(x) and X ≥ ceil(x) to the constraint matrix and
  re-solves. Here each child fixes X = floor(x) or X = floor(x) + 1 near
  memory and Jacobi solves the rest as equalities. This keeps the cache
  contents unchanged, but it visits fewer integer points, so the search is
  a heuristic (section 6).
* **No intermediate queues in Jacobi.** The published SLE pipeline writes
  the dot products into queues and then reads them for the subtraction.
  Here the array's response feeds the subtract/divide unit directly in the
  next cycle. Only the Iter1/Iter2 queues of X are kept.
* **Level order of the node queue.** The published description enqueues
  bounds after each level of the branching tree. Here the node with the
  best bound is expanded first.
* **Branching rule.** The text branches on the largest fractional part;
  an algorithm figure writes a minimum. The largest fractional part is
  built.
* **This design's choices:**
  * the numeric formats;
  * the tolerances;
  * the floor/floor+1 children;
  * best-bound node selection;
  * fixed variables instead of added constraint rows for B&B;
  * clamping a PS to its own bound;
  * the instruction handshake.
* **Outside the design.** The CPU pipeline, cache tags, L2 and the stride
  prefetcher that feed the accelerator are not part of this RTL. Their
  signals are the top's ports.

## 9. Timing summary (clock cycles)

| operation | latency |
|---|---|
| PIM access (array → s-a → sum) | 3, fully pipelined |
| subtract/divide | 1 |
| VFC over m rows | m + 5 |
| one Jacobi iteration, n variables | n + 6 |
| SA engine, per general row | 2 PIM round trips + n + 1, then 4 per PS for costing |
| B&B candidate evaluation | about m + 5 for verification, 5 for the cost, 1 to decide |
| B&B node selection | one cycle per allocated node (scan) |

## 10. Files and simulation

`rtl/`:

* `spark_pkg.sv` — types and constants;
* the datapath: `pim_bank`, `shift_add`, `adder_reduction`, `pim_array`,
  `reg_divider`, `result_calc`;
* the engines: `fc_engine`, `sa_engine`, `sle_engine`, `bb_engine`;
* the top: `spark_top`.

`tb/` holds one self-checking testbench per module, `tb_<module>.sv`. Each
prints `TB_RESULT checks=N failures=M` and has a watchdog. `tb_spark_top`
runs the complete program described above at the default size and counts
each mechanism:

* cache read, reject, mode switch;
* sparse and dense detection;
* SA path, Jacobi convergence and iteration cap;
* VBB NOP;
* B&B branching, pruning and infeasible candidates;
* divider table correction.

A mechanism that never occurs is a failure.

To simulate with Verilator, from the repository root:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_spark_top \
        -y rtl -y tb +libext+.sv rtl/spark_pkg.sv tb/tb_spark_top.sv
    ./obj_dir/Vtb_spark_top

Replace `tb_spark_top` with any other testbench name. The package must
come first on the command line. The full-size top test runs in a few
seconds.

To change the size or behaviour:

* The bank count and X width are tied together (one X bit per bank); the
  array checks this at elaboration.
* Node-queue, PS and C-array depths are parameters of `spark_top`.
* The divider's mantissa width is `M_BITS` in `reg_divider`.
* The B&B tolerances are parameters of `bb_engine`.
