# An in-tree operations accelerator for tree-parallel Monte-Carlo Tree Search

Tree-parallel Monte-Carlo Tree Search (MCTS) runs many workers against one
shared search tree. Each worker repeats four phases:

1. **Selection:** walk down from the root, at each node following the child
   edge with the largest *UCT* weight.
2. **Expansion:** add one new child at the end of the walk.
3. **Simulation:** play the game from that new state to get a reward.
4. **BackUp:** add the reward to every edge on the walk.

The simulations are independent and parallelise well. The in-tree phases do
not: every worker reads and writes the same tree. On a multi-core CPU, each
pair of workers that meet at the same node waits for at least two cache or
memory round trips. That wait limits how many workers the search can use.

This RTL moves the tree itself into on-chip memory and leaves everything
else to a host processor:

- The host keeps the environment states (a table from node index to game
  state) and runs the simulations.
- The accelerator holds only the tree structure and its statistics. It
  performs Selection, the bookkeeping half of Expansion, BackUp and the
  tree flush at the end of a move.

Per iteration, only one reward per worker goes in and two node indices per
worker come out. The design follows the FPGA architecture published by Meng
et al., "Accelerating Monte-Carlo Tree Search on CPU-FPGA Heterogeneous
Platform". Section 9 lists where this RTL departs from that architecture.

The default configuration is the Atari-Pong setting:

| Parameter | Default | Meaning |
|---|---|---|
| `F` | 6 | fanout: actions per node |
| `D` | 9 | tree height limit |
| `P` | 128 | workers |

## 1. The one idea: a tree that never moves

The tree is stored as a **full F-ary tree, allocated at compile time**. Every
possible node has a fixed home, whether it exists yet or not. Three things
follow from this:

- **Node numbering.** Nodes are numbered breadth-first. The root is 0, its
  children are 1..F, their children follow, and so on. A node index fixes
  the node's depth and its whole path from the root. It is also the key the
  host uses for its state table.
- **Storage layout.** The tree is cut two ways:
  - **By root child.** Root child `c` and everything below it belong to
    sub-tree pipeline `c mod n`, where `n = min(P, F)`. Each pipeline owns
    `RPP = ceil(F/n)` root children.
  - **By level.** Inside a pipeline, depth `k` (k = 1..D-1) lives in its own
    bank. Bank `k` holds `RPP * F^(k-1)` node entries. Each entry holds the
    F edges to its children plus two small counters.
- **Addressing.** Two pipelines never touch the same bank, and two stages of
  one pipeline never touch the same bank. So every access takes one cycle
  and no access ever conflicts. No pointers are stored:
  - a depth-1 node has entry address `c / n`;
  - child `e` of the node at entry `a` sits at entry `a*F + e` of the next
    bank.
- **Growth.** "Inserting" a node means marking it present in its parent's
  counter and initialising its edge. Nothing is allocated.
- **Flush.** Dropping the tree means clearing the counters. Nothing is
  erased.

At the defaults the deepest bank has 6^7 = 279,936 entries per pipeline. The
whole tree has 12.1 million node slots, far more than the 56K nodes a Pong
move uses. Section 10 works through what this costs.

## 2. Data kept per edge and per node

All shared types live in `mcts_pkg`.

**Edge (`edge_t`, 104 bits):**

| Field | Width | Meaning |
|---|---|---|
| `uct` | 32, signed Q15.16 | the weight compared during Selection |
| `w` | 48, Q31.16 | sum of rewards backed up through the edge |
| `n` | 16 | visit count |
| `o` | 8 | virtual losses still outstanding |

**Node entry (`cnt_t`):** two counters.

- `ins` counts the children already inserted.
- `clm` counts the children already handed to workers for expansion. It may
  run ahead of `ins` within one iteration.

A node with `ins < F` is a **leaf**. A worker that reaches a leaf ends its
Selection there:

- if `clm < F`, it claims child `clm` as the node `s'` to expand, so workers
  in the same iteration never expand the same child twice;
- otherwise it returns `s` with no expansion.

Children are filled in slot order 0, 1, 2, and so on. A worker stops at most
at depth D.

The parameter `EXPAND_ALL = 1` selects the variant used for board games such
as Gomoku:

- The first worker to reach a leaf claims all F children at once, so `clm`
  jumps to F.
- Workers that reach the same leaf later in the iteration expand nothing.
- The result names child 0 as `s'`. The other children are its F-1
  successors in the numbering.

## 3. The weight and its arithmetic (`uct_calc`)

    uct = W/N + beta * sqrt( ln(Np) / N )  -  O * VL

- `Np` is the visit count of the parent node.
- `beta` is the exploration constant: √2 (92682 in Q16).
- `VL` is a constant virtual loss: 0.1 (6554 in Q16).

Virtual loss works in two steps. Each worker that selects an edge lowers its
weight by VL at once, which pushes the next workers elsewhere. BackUp gives
the VL back.

Everything is fixed point with 16 fractional bits. The comparators are
therefore plain signed integer compares, and each compare takes one cycle:

- **ln.** The leading-one position gives the integer part of log2. A
  17-entry table of log2(1 + i/16) with linear interpolation gives the
  fraction. The result is multiplied by ln 2.
- **Square root.** A bit-serial restoring integer square root, unrolled into
  combinational logic.
- **Mean.** A signed division `W/N`.
- **Unvisited edge.** An edge with `N = 0` gets the largest weight, less its
  virtual losses. Every child is therefore tried once before any child is
  revisited.
- **Saturation.** The result saturates at both ends.

The test `tb_uct_calc` holds the result within about 0.003 (plus a small
term that grows with the exploration term) of real arithmetic.

## 4. Selection: distributor, crossbar, pipelines

    rewards ──► BackUp ─┐
                        ▼
    Worker Distributor ──► FIFO ──► crossbar 1-to-n ──► FIFO 1 ─► pipeline 1 (D-1 stages) ─┐
      (root bank + CLUTs)                         └──► FIFO n ─► pipeline n               ─┤
            └─ workers that stop at the root ─────────────────────────────────────────────┴► result buffer ─► results

### Worker Distributor (`worker_distributor`, `clut`, `root_level_bank`)

The root's F edges are registers, so all of them can be read at once. The
distributor finds the best root edge in one cycle with a **comparison
look-up table (CLUT)**:

- There are C(f,2) comparators, one per pair of inputs. Each sets a bit when
  the first input is at least the second, so ties go to the lower index.
- The bit pattern is the address of a table of 2^C(f,2) entries. Each entry
  names the input that wins all its comparisons.
- With f = 6 that is 15 comparators and a 32K-entry table of 3-bit
  indices. `clut` writes the table as a function of its address, and
  synthesis builds the look-up logic from that.

If `F` exceeds `CLUT_F` (6), the weights go through two levels of CLUTs with
a register between them. Gomoku's F = 36 uses six tables, then one.

Timing per worker:

| Configuration | Cycles per worker | Cycle breakdown |
|---|---|---|
| One CLUT level | 2 | compare, then write VL into the chosen root edge |
| Two CLUT levels | 3 | first level, second level, then write VL |

When the root itself is still a leaf, the distributor claims a child for the
worker and sends it straight to the result buffer. Otherwise it sends a
token `(worker, depth 1, position c, entry c/n)` into the FIFO. It stalls
when that FIFO is full.

### Crossbar and FIFOs (`crossbar_switch`, `sync_fifo`)

The crossbar sends the token to the FIFO of pipeline `c mod n`.

Each FIFO is a plain registered FIFO with valid/ready on both sides. Its
depth is `FIFO_D`, 4 by default.

### Sub-tree selection pipeline (`subtree_pipeline`, `selection_stage`)

Stage `k` looks at the worker's node at depth `k`, reading bank `k`. A stage
serves one worker at a time:

| Cycle | What the stage does |
|---|---|
| 0 | Accept the worker. Read its node's counters and edge 0. At a leaf, claim a child and finish. |
| 1 .. F-1 | Read one edge per cycle. One two-input comparator keeps the best so far; ties go to the lower slot. |
| F | Lower the winner's weight by VL and raise its `o`. Record (entry, slot) in this level's memoization buffer. Move the token to the child. |

A worker that must choose a child therefore occupies a stage for F+1
cycles. A worker that stops at a leaf occupies it for one cycle. A worker
that has already finished passes a stage in one cycle (a **bypass**).

While stage k serves one worker, stage k+1 serves an earlier one. When the
next stage is busy, the stage holds its output (a **stall**). Within a
pipeline, workers keep their order, so the tree the hardware searches is the
one a sequential run of workers 0, 1, 2, … would see.

The last stage, k = D-1, ends the worker at the chosen depth-D child. That
child is never expanded.

The result buffer collects results from the n pipelines and the distributor
through a round-robin arbiter. It stores each result at its worker number,
then streams them out in worker order. A claimed child becomes an insertion
request in the pipeline that owns it.

## 5. Node Insertion (`node_inserter`)

Insertion starts only after every worker has finished Selection. Each
pipeline then drains its own queue, one insertion per cycle, with all
pipelines working in parallel. Each insertion does two things:

- it writes the new edge: `uct = UCT_MAX`, all counts zero;
- it raises the parent's `ins`.

With `EXPAND_ALL`, one request writes all F children, one per cycle. At the
root, all claimed children are inserted in a single cycle.

## 6. BackUp in two cycles (`memo_buffer`, `backup_updater`)

During Selection, each stage records which (entry, slot) it took for each
worker. There is one memoization buffer per level, with one word per worker
and a valid bit. BackUp therefore never walks back up the tree.

When worker j's reward arrives, its BackUp takes two cycles:

| Cycle | What happens |
|---|---|
| A | Every level reads worker j's memo word and the edge it names, and registers them. |
| B | D-1 `backup_updater` units plus the root updater write every traversed edge at once. Each does `n+1`, `w+V`, `o-1` and recomputes `uct`. The memo words are invalidated. |

Rewards may arrive every other cycle, so P workers take 2P cycles.

To compute `ln(Np)`, each edge takes as its parent count the new count of
the edge above it:

- the root's edges take the root count plus one;
- the level-1 edges take the new count of the root edge the worker used;
- and so on down the path.

## 7. Tree flush (`tree_flush`)

After a move has been searched, the host sends `CMD_FLUSH`. Any outstanding
BackUp is finished first. Then:

1. The best root child, from the distributor's CLUT, becomes the new root
   and is reported on `new_root_slot`. The root bank clears its counters and
   takes over that child's visit count.
2. A sweep clears the counters of every node entry, one entry address per
   cycle, in all banks in parallel.

The sweep takes `RPP * F^(D-2)` cycles: 279,936 at the defaults (2.8 ms at
100 MHz). The same sweep runs once after reset, so the banks need no reset
of their own.

The host renumbers its state table so that the chosen child becomes node 0.

## 8. Operating the unit (`mcts_accel`)

Parameters of `mcts_accel`:

| Parameter | Default | Meaning |
|---|---|---|
| `F`, `D`, `P` | 6, 9, 128 | fanout, height limit, workers |
| `CLUT_F` | 6 | inputs per comparison look-up table |
| `BETA`, `VL` | 92682, 6554 | √2 and 0.1 in Q16 |
| `FIFO_D` | 4 | depth of each token FIFO |
| `EXPAND_ALL` | 0 | 1: a worker expands all F children of its leaf |

The field widths in `mcts_pkg` bound the parameters: F ≤ 63, P ≤ 256,
D ≤ 15, and a node index must fit in 32 bits.

| Port group | Signals | Description |
|---|---|---|
| command | `cmd_valid/ready`, `cmd` | `CMD_ITER` or `CMD_FLUSH`, accepted when `phase_o` is `PH_IDLE` |
| rewards | `rew_valid/ready`, `rew_data` | P rewards, signed Q15.16, worker 0 first |
| results | `out_valid/ready`, `out_res` | P `result_t` in worker order: worker, `s`, `s'`, expansion flag, depth of `s` |
| flush | `new_root_valid`, `new_root_slot` | new root after a flush |
| status | `phase_o`, `ev_*` | phase and single-cycle event strobes (stall, bypass, leaf, insert, …) |

`CMD_ITER` runs these phases:

1. `PH_BU` (skipped on the first iteration): the P rewards for the previous
   iteration's workers.
2. `PH_SEL`: Selection.
3. `PH_INS`: Node Insertion.
4. `PH_OUT`: the P results go out.

Between commands, the host simulates from each `s'` (or from `s` when no
child was claimed) and stores the new states under the `s'` indices.

Clock and reset: one clock, with a synchronous active-high `rst`. After
reset the unit runs the counter sweep and then goes to `PH_IDLE`.

## 9. Where this RTL departs from the published architecture

**Design choices where the architecture says nothing:**

- the stream interfaces;
- the leaf/claim rule and its two counters;
- constant virtual loss (the architecture allows either a constant or a
  visit-proportional virtual loss);
- the number formats and the logarithm/square-root method;
- tie-breaking toward the lower index;
- FIFO depth;
- the bank-port multiplexing by phase;
- one memo buffer per level rather than one per worker.

**Behaviour that differs or is missing:**

- **Stage cycle count.** A stage takes F+1 cycles per worker: F compares and
  one virtual-loss write. The published text gives exactly F cycles for the
  comparison and does not say where the write goes.
- **Two-level CLUT.** It adds a pipeline register, giving 3 cycles per
  worker rather than 2.
- **BackUp refreshes only the traversed edge.** Its siblings keep the
  exploration term computed at their own last update, although the parent's
  visit count has grown since.
- **Flush keeps less than it could.** It keeps only the new root's visit
  count. The new root's children are not copied into the root bank: they are
  re-expanded from its state. The published text says only that the root
  bank is updated "with the new root information".
- **Flush on a partly expanded root.** If the root has fewer than F children
  inserted, the CLUT may choose a slot that was never inserted. The host
  should flush only after the root is fully expanded, which is normal after
  a search of thousands of iterations.
- **Phases do not overlap.** BackUp of one iteration never runs alongside
  Selection of the next.
- **No host interface.** The PCIe/DMA shell and the host software are not
  included. The three streams stand in for the shell.

## 10. Sizes and the two evaluated games

- **Pong** (F = 6, D = 9, up to 56K nodes, 8–128 workers) is the default
  build.
  - There are 6 pipelines of 8 stages.
  - Per pipeline, the banks hold (6^8 - 1)/5 = 335,923 entries of six
    104-bit edges. Over the six pipelines that is 12.1M edges, about
    1.26 Gbit.
  - That is above the on-chip SRAM of a mid-size FPGA. The static full-tree
    layout trades memory for conflict-free single-cycle access. A tree of
    height 9 is far larger than the 56K nodes a move uses.
  - Fewer workers are set with `P`; then `n = min(P, 6)`.
- **Gomoku 6×6** (F = 36, D = 5, up to 48K nodes) needs `F = 36, D = 5`.
  - That build has 36 pipelines of 4 stages and a two-level CLUT, and about
    62M edges (6.5 Gbit) in full-tree form.
  - It is simulated (`tb_mcts_gomoku`) with `EXPAND_ALL = 1`, so each
    worker expands all 36 children of its leaf.

## 11. Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=… failures=…` and has a watchdog.

The system tests share `mcts_host_model`. It plays the host and runs a
reference MCTS in real arithmetic, worker by worker.

- **Path check.** The hardware's path is read back from the selected node's
  index. Each step must take an edge within 0.01 of the model's best.
- **Result checks.** The stop node, the claim and the expanded child must
  match the model exactly.
- **BackUp timing.** BackUp must take exactly 2 cycles per worker.
- **New root.** The flush must pick a best root child.
- **Mechanism counts.** Each of these must happen at least once:
  distributor stall, stop at a leaf root, stop at a leaf in a pipeline,
  bypass, stage stall, BackUp write, insertion, worker with nothing to
  expand, and flush.

| Testbench | Configuration | Iterations |
|---|---|---|
| `tb_mcts_accel` | F=4, D=4, P=32, FIFO depth 2 | 24, with flushes |
| `tb_mcts_full` | all defaults (F=6, D=9, P=128), including the 280K-cycle sweeps | 4, then a flush |
| `tb_mcts_gomoku` | F=36, D=5, P=128, `EXPAND_ALL` | 6, then a flush |

`tb_selection_stage` checks the F+1-cycle stage interval.
`tb_worker_distributor` checks the 2- and 3-cycle distributor intervals.
`tb_subtree_pipeline` checks results, insertion at one per cycle and BackUp
at 2 cycles per worker for a single pipeline.

To run a test with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -Wno-lint -Wno-style \
      --top-module tb_mcts_accel -y rtl -y tb +libext+.sv -Irtl \
      rtl/mcts_pkg.sv tb/tb_mcts_accel.sv
    obj_dir/Vtb_mcts_accel

The full-size test builds in under a minute and runs in seconds.

## 12. Files

All files are in `rtl/`.

| Module | Role |
|---|---|
| `mcts_pkg` | widths, types, defaults, node-index function |
| `mcts_accel` | top level: phase control, result buffer, root BackUp |
| `worker_distributor`, `clut`, `root_level_bank` | the root level |
| `crossbar_switch`, `sync_fifo` | routing to the pipelines |
| `subtree_pipeline` | one pipeline: its stages, banks, memo buffers, updaters and inserter |
| `selection_stage`, `subtree_bank`, `memo_buffer`, `backup_updater`, `uct_calc`, `node_inserter` | the parts of a pipeline |
| `tree_flush` | new root and counter sweep |

Each file opens with a comment on its function, timing, and which parts
follow the architecture and which are this design's choice.
