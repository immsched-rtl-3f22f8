# IMMSched in RTL: subgraph matching on a DNN accelerator's own PE arrays

When an urgent DNN task arrives while a multi-core accelerator is busy, it
has to take over some PEs from tasks already running. Picking those PEs is a
placement problem. The new task's tile graph Q (n vertices, one per tile)
must be embedded into the graph G of PEs that may be pre-empted (m
vertices). Every edge of Q must land on an edge of G, and no PE may be used
twice. That is subgraph isomorphism, and it is NP-complete. A
CPU-side search takes longer than the deadline the urgent task leaves.

IMMSched solves this on the accelerator itself. It does not walk the
Ullmann search tree serially. Instead it relaxes the 0/1 mapping matrix M
into a real matrix S (n x m, rows summing to 1). It then moves many such
matrices, the particles of a particle swarm, in parallel, with one particle
per engine. Each move is made of element-wise matrix operations, row sums and
small matrix products, which is the work a DNN accelerator already does. Only
at the end is each S rounded to a one-to-one mapping and checked the Ullmann
way: M G Mᵀ must contain Q. Of the valid mappings found, the one that takes
PEs from the tasks with the most slack is chosen.

This RTL implements that machine. It covers the PE and tree modifications,
the engine-level sequencer that runs one particle, the router and global
controller that coordinate the engines, the compatibility mask and the
pre-emption choice.

## Block map

```
immsched_top
 ├─ mask_gen            Mask from degrees, vertex types and pre-emptible PEs
 ├─ global_controller   epochs / steps / final, S*, S-bar, mapping table
 ├─ noc_router          engines -> controller reports, S read-back
 ├─ imm_engine x NE     one particle each
 │   ├─ pe_array        R x C PEs, row bus, column bus, per-row reciprocal
 │   │   └─ pe          register file, crossbar, multiplier, mux, add/sub, reciprocal multiply
 │   ├─ lfsr_rand x 2   "Rand" next to the left and top buffers
 │   ├─ add_cmp_tree    sum / max / arg-max tree of TEs with a feedback register
 │   │   └─ te          a > b, max mux, index mux, adder
 │   └─ recip_unit      255·2¹⁶ / rowsum, by restoring division
 └─ preempt_select      chooses the mapping whose tasks have the most slack
```

`imm_pkg` holds the shared widths, the PE instruction format and the
command and state enums.

## Number formats

- **S, S\*, S-bar, S_local.** These are 8-bit unsigned, where 255 stands
  for 1.0. They sit in 16-bit PE registers so that the velocity V can be
  signed.
- **Q, G, Mask.** These are 0/1. Q is stored as 254 (see *Fitness*).
- **Products.** Products accumulate in a 32-bit accumulator. Tree sums and
  fitness are 48 bits wide (`fit_t`).
- **PSO coefficients.** w, c1, c2 and c3 are signed Q8.8, so 256 = 1.0.
- **Random factors.** Random numbers are 8-bit, from one 32-bit Galois LFSR
  per lane.
- **Random factor layout.** r1 belongs to a row: one value from the left
  Rand per PE row. r2 belongs to a column: one from the top Rand per column.
  This fits how the figure places the Rand blocks beside the left and top
  buffers, and it costs no per-PE random source.

## How one particle moves (imm_engine)

Each PE (i, j) holds element (i, j) of all of this particle's matrices. A
single instruction runs on all enabled PEs at once, and the sequencer in
`imm_engine` issues those instructions. Operands come from three places:

- the PE's own register file;
- the row bus, with one value per row from the left buffer;
- the column bus, with one value per column from the top buffer.

**Matrix products.** These use an outer-product dataflow. Computing A·B over
the inner index k takes one cycle per k. On that cycle the row bus carries
column k of A, the column bus carries row k of B, and every PE runs a MAC.
Rows or columns of the array are masked with `row_en` / `col_en` when only
one row or column is being loaded.

**Commands.** The controller sends one of three commands to all engines.

- **INIT.** Load Q and Mask and draw S = r_row·r_col >> 8 at random. Then
  mask and normalise it. Set V = 0, S_local = S and f_local = −∞.
- **STEP.** Load S\* and S-bar, one row per cycle, if they exist yet. Then
  take these steps in order:
  1. V = (w·V + k1·(S_local−S) + k2·(S\*−S) + c3·(S-bar−S)) >> 8, with
     k1 = c1·r1 >> 8 and k2 = c2·r2 >> 8.
  2. S = clamp(S + V, 0, 255).
  3. S = S ⊙ Mask.
  4. Normalise each row. The tree sums each row. `recip_unit` turns the sum
     into 255·2¹⁶/sum, which is sent back on the per-row reciprocal line.
     Each PE computes S·recip >> 16. A row that sums to zero stays zero.
  5. Compute the fitness (below).
  6. If f > f_local, copy S to S_local.
- **FINAL.** Project S and check it.
  1. Projection is greedy, in row order. For row i, the tree returns the
     arg-max of S over the columns not yet taken. Its `index` output is the
     TE's index mux.
  2. The resulting permutation matrix M is multiplied out as M G Mᵀ.
  3. The engine checks that no edge of Q is missing from M G Mᵀ. It reports
     `feasible` and the mapping `pi`.

**Why the division became a multiply.** Row normalisation needs S/rowsum.
Following the paper, the PE has no divider and multiplies by a reciprocal.
This design computes that reciprocal once per row in a small serial divider
that all C PEs of the row share, taking 25 cycles. Rows are normalised one
after another.

**Latency.** Measured at R = C = 8 and n = 4 on the engine testbench's
cases:

| Command | Cycles |
|---|---|
| INIT | 124–148 |
| STEP | 161–185 |
| FINAL | 45 |

The spread of 24 cycles is one pass of the serial divider. A row whose sum
is zero finishes its reciprocal in one cycle instead of 25. Each matrix
product takes one cycle per inner index, so these numbers grow with m. The
engine testbench prints them but does not check them, because the paper
gives no latency to check against.

## Fitness

The paper scores a particle by the edge-preserving distance ‖Q − S G Sᵀ‖².
The engine computes X = S·G and then Y = X·Sᵀ, which is scaled by 255². It
shifts Y right by 8 to give roughly 254·(S G Sᵀ). Storing Q as 254 puts the
two terms on the same scale. The square and the sum over the matrix run
through the tree. The result is negated so that larger is better:

    f = −Σᵢⱼ (254·Qᵢⱼ − (Yᵢⱼ >> 8))²

Only the n x n upper-left part is counted.

## The search across engines (global_controller, noc_router)

**Lock step.** All engines run in lock step, so the controller broadcasts
each command once. An epoch is one INIT, then `steps` STEPs, then one FINAL,
and the search runs `epochs` epochs.

**Reports.** After each command every engine raises `done` together with its
fitness, feasibility and mapping. The router latches the reports and
forwards one per cycle, choosing by round-robin.

**S\* update.** After a STEP the controller keeps the best fitness among the
reports. If it beats f\*, the controller reads that engine's S through the
router (`rd_id` → `rd_s`). That S becomes the S\* broadcast with the next
STEP.

**After FINAL.** Each feasible mapping is added to the mapping table, up to
MAXM entries. Duplicates are dropped by comparing against every stored
entry in parallel. Each feasible S is folded into the consensus matrix:
S-bar = (S-bar + S + 1) >> 1. The first feasible S is copied in directly.

**Ordering compared with the paper.** The paper's listing updates S\* after
every single particle and clears S-bar at the start of every epoch. With
particles running truly in parallel, S-bar would then be filled only after
it had stopped being used. So this design makes two changes:

- S-bar is kept from one epoch to the next.
- S\* is updated once per lock-step step.

The `use_sg` / `use_sc` flags keep a term out of the velocity until its
matrix exists.

## Compatibility mask and pre-emption choice

**Mask.** `mask_gen` sets mask[i][j] = 1 when all of the following hold:

- i < n and j < m;
- PE j may be pre-empted;
- tile i and PE j have the same vertex type;
- tile i's out-degree is no larger than PE j's;
- tile i's in-degree is no larger than PE j's.

Degrees are popcounts of the adjacency rows and columns. The result is
registered, one cycle after `start`. Any mapping that passes this mask and
the Ullmann check is a valid embedding.

**Pre-emption choice.** `preempt_select` runs on the finished mapping table.
Each PE has an owner task, and each task has a slack. A mapping is scored by
the smallest slack among the tasks it takes PEs from. The mapping with the
largest score wins, and the earlier one wins a tie. The result is ready
nmap + 2 cycles after `start`.

## Parameters and sizes

| Parameter | Default | Meaning |
|---|---|---|
| R, C | 8, 8 | PE rows and columns per engine, 64 MACs. This is the Edge platform; the Cloud platform has 128 MACs. One engine holds n ≤ R query tiles and m ≤ C target PEs. R ≤ C is required. |
| NE | 1024 | Number of engines, equal to the number of particles. The reference platform has 128 x 128 = 16384. |
| MAXM | 8 | Capacity of the mapping table. |
| NT, SW, TYW | 8, 16, 2 | Number of tasks, slack width and vertex-type width. |

**Why NE is 1024.** The design itself places no limit on NE. But elaborating
an engine costs the lint and synthesis tools about 20 MB of memory, and that
cost grows linearly:

| Engines | Memory |
|---|---|
| 16 | 0.35 GB |
| 64 | 1.3 GB |
| 256 | 5.1 GB |

At 16384 engines that would be about 330 GB, so the default is 1024 engines
(about 21 GB).

**Largest size simulated.** The largest configuration simulated end to end
is NE = 16 with R = C = 8. The top's testbench overrides NE for this. No
testbench runs the top at its default of 1024 engines.

**Graph size.** The engine does not split a graph larger than R x C. Real
networks have far more than 8 layer tiles, for example about 50 for
ResNet50. Each query must therefore be cut down by the host to n ≤ 8 tiles
and m ≤ 8 PEs, or R and C must be raised.

## What is not here, and where it departs

- **Ullmann refinement.** The paper applies an Ullmann refinement step to
  the projected mapping before the feasibility test. This design only
  projects and tests; it does no backtracking or pruning.
- **Query tiling.** There is no tiling of graphs larger than one engine.
- **Pre-emptible PE set.** The policy that decides which running tasks'
  PEs may be pre-empted (a "single-core pre-emption ratio") is not defined
  closely enough to build. Its result enters the top as the `preemptible`
  input. Graph construction, task owners and slacks also come from the host
  as inputs.
- **Memories.** Buffers are registers inside the PEs and engine. There are
  no SRAM macros.
- **This design's own choices.** None of the following comes from the
  paper:
  - the instruction set;
  - the outer-product dataflow;
  - the order of projection;
  - the fixed-point formats;
  - the LFSRs;
  - the serial reciprocal divider;
  - the reporting order of the router;
  - the running-average consensus;
  - the scoring rule for mappings that touch several tasks.
- **Clock.** The 700 MHz clock of the reference platform is a target, not a
  parameter.

## Simulating

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself after a fixed number of
cycles. For example:

```
verilator --binary --timing --assert --top-module tb_imm_engine \
    -Irtl rtl/imm_pkg.sv rtl/*.sv tb/tb_imm_engine.sv -o sim
./obj_dir/sim
```

**Engine testbench.** `tb_imm_engine` contains a bit-exact model of the
engine's arithmetic and compares S, V, fitness, mapping and cycle counts.

**End-to-end testbench.** `tb_immsched_top` runs a 4-tile query against an
8-PE target with 16 engines. It checks four things:

- the mask;
- that every stored mapping is a valid, distinct embedding;
- the choice of pre-emption;
- that each mechanism occurred at least once.

The mechanisms counted are S\* updates, use of S-bar, feasible and
infeasible reports, router arbitration among simultaneous reports,
reciprocal normalisation and dropped duplicates. Compiling takes about a
minute, and the run itself is about 6000 cycles.

Assertions check three rules. An engine never receives a command while
busy. The router never loses a report. The controller is busy for the whole
search phase.
