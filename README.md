# AWB-GCN SpMM engine: sparse-matrix multiplication that rebalances its own workload

Graph convolutional networks spend almost all of their time multiplying a very sparse
adjacency matrix A, whose rows follow a power law, by dense or moderately sparse matrices. If
the rows of A are spread evenly over many processing elements (PEs), a few PEs receive the
heavy rows. The rest sit idle while those few finish, and utilization can fall far below
half. This engine computes C = S x B column by column on an array of PEs, and corrects that
imbalance in hardware while it runs, using three mechanisms of increasing reach:

* **Distribution smoothing.** Each new task can go to any of the nearest PEs (up to `HOPS`
  away), whichever has the shortest task queue.
* **Remote switching.** After each output column (a "round"), the engine measures which PEs
  finished first and last. It then swaps a computed number of rows between the pairs. The
  swap is refined over the following rounds.
* **Evil-row remapping.** A row too heavy for switching is found by a profiling PE (the
  Super-PE) and spread over four helper PEs (Labor-PEs), whose partial sums an adder tree
  combines.

The columns of one matrix product share the same sparsity pattern, so a balance found in one
round pays off in every later round.

The RTL is SystemVerilog (IEEE 1800-2017). It builds with Verilator 5 and with the slang
front end of Yosys. The top module is `awb_spmm_engine`.

## One round, end to end

Each round multiplies the sparse matrix S by one dense column of B:

1. `col_start` begins the round. `spmmem` streams the stored non-zeros of S (column-major
   order) `LANES` = NPE at a time.
2. For each non-zero (row i, column j, value a), the dense element b = B[j] is looked up in
   `dcm`.
3. `shuffle_switch` turns row i into a task {PE, slot, a, b}:
   * The owner PE is i / ROWS and the slot is i mod ROWS.
   * If the Distribution Switch Table says the owner has handed its first `nsw` slots to a
     partner PE, the task goes to the partner instead.
   * If row i is a remapped evil row, the task goes to one of the group's Labor-PEs and to
     the spare slot `ROWS` of that PE's bank.
4. `omega_network` is a log2(NPE)-layer network of buffered 2x2 routers. It carries each
   task to the output of its PE, with backpressure.
5. `smoothing_unit` places the task into the least-loaded task queue within `HOPS` of that
   PE.
6. Each PE (`pe`) pops tasks and reads the partial sum from the ACC bank named in the task.
   That bank may belong to a neighbour up to `HOPS` away. The PE runs the multiply-add in a
   `T`-cycle pipelined MAC (`mac_unit`) and writes the result back into the same bank.
7. When the stream has ended and every PE is idle, the controller reads out the evil-row
   banks. Their shares go through the adder tree (`evil_row_acc`). The ACC banks are then
   read out one slot per cycle (`out_valid`, `out_slot`, `out_data[p]` = row p*ROWS +
   out_slot).
8. `output_mux` puts the rows back in their original order:
   * switched slots are read from the partner bank;
   * evil rows are taken from the adder tree;
   * ReLU is applied if requested.
9. Finally the autotuner (`pesm`, `ugt`, `wdc`) updates the table for the next round, and
   `col_done` pulses.

Read-out comes before tuning, so the table used to read a column is the one that built it.

## Accumulation hazards

A MAC takes `T` cycles, so two tasks for the same row issued less than `T` cycles apart
would both read the old partial sum. Because smoothing lets up to 2*HOPS+1 PEs write one
bank, the check has to span PEs. Before issuing a task, a PE compares the task's
(bank, slot) tag with three sets of tags:

* the tags in its own MAC pipeline;
* the tags in the MAC pipelines of every PE up to 2*HOPS away;
* the pending tags (stall-buffer entries and queue head) of the lower-indexed PEs in that
  range.

The third comparison gives a fixed priority that cannot deadlock: the lowest-indexed
contender always proceeds. A hazardous queue head moves into a stall buffer of `T` entries,
and the queue behind it keeps flowing. Stall-buffer entries are retried first. Each bank
has one write port per possible writer, and no two writers ever hit the same slot in one
cycle (an assertion checks this).

## The autotuner

**PE status monitor (`pesm`).** Every cycle the PE idle signals are XORed with their values
from the previous cycle. PEs that have just gone idle become candidates in a one-bit-per-PE
candidate buffer.

* An arbiter takes one candidate per cycle and never takes a neighbour of its last pick, so
  each pick comes from a different crest or trough.
* The first `K` picks are the under-loaded PEs. A sliding window of the last `K` picks
  holds the over-loaded PEs once every PE has finished.
* Tuple k pairs the k-th earliest finisher with the k-th latest. Each PE's pick time is
  stored with it.
* The monitor also reports when the PEs of the previously switched tuples went idle.

**Utilization gap tracker (`ugt`).** This block converts a time gap into a number of rows.

* The gap of the first tuple in the first round is stored as G1. The threshold is
  G1 >> `G`.
* A counter subtracts the threshold from the gap once per cycle. The number of subtractions
  q (at most 2^(G+1)) indexes the table TfSFL[q] = min(ROWS, (q * ROWS/2) >> G).
* The lookup takes q + 2 cycles.
* The sign of the result follows which side of the pair is still the slower one.

**Workload distribution controller (`wdc`).** This block holds the Distribution Switch
Table: for each PE, a partner and a count `nsw`. The Shuffle Switches read it. Between
rounds the controller does three things:

1. **Finishes evil-row profiling.** It turns the Super-PE's result into an evil-row
   entry and undoes the temporary swap.
2. **Updates tracked tuples.** It re-measures each tuple switched in the last two rounds
   and adds the signed correction to its row count: N_new = N_old + correction, clamped to
   0..ROWS. A tuple that reaches zero is released. After two updates a tuple is frozen.
3. **Adds new tuples.** Each new tuple gets N = TfSFL(q) rows swapped. The exception is
   when the first tuple's gap is too large: (slow time >> `BETA`) > fast time. Then the
   slow PE's entire workload is swapped onto its group's Super-PE for one round.

While that PE's workload runs on the Super-PE, `evil_profiler` counts non-zeros per slot
and keeps the slot with the most. Switched PEs and Super-PEs are masked from further
selection.

## Evil rows

PEs form groups of `GROUP` = 128:

* PE 0 of each group is the Super-PE.
* The four Labor-PEs sit at offsets 3, 35, 67 and 99.
* In the reduced test configurations the spacing is GROUP/4, starting at offset 3.

A remapped row's non-zeros are spread over the Labor-PEs. The choice of Labor-PE rotates
by lane and by cycle. Each Labor-PE accumulates its share in the spare slot `ROWS` of its
own bank. After the round, the four shares are read and summed by the adder tree, and the
sum is returned in place of the original row. Each group holds one remapped row.

## Number format

Operands and results are IEEE single precision. `awb_pkg` holds a compact multiplier and
adder:

* subnormals are flushed to zero;
* results are truncated, not rounded;
* overflow saturates to the largest finite value;
* there are no NaN or infinity special cases.

Results therefore differ from a correctly rounded float reference by a few units in the last
place. The order of summation also depends on the schedule.

## Parameters

| Parameter | Default | Meaning |
|---|---|---|
| `LOG` | 10 | NPE = 2^LOG PEs (1024) and Omega outputs |
| `ROWS` | 16 | rows per PE per pass (16384 rows in all) |
| `T` | 4 | MAC latency in cycles; also the stall-buffer size |
| `HOPS` | 2 | reach of distribution smoothing |
| `TQ_DEPTH` | 8 | task-queue depth |
| `OBUF` | 2 | buffer depth per Omega router output |
| `NNZ_MAX` | 16384 | capacity of the sparse-matrix memory |
| `DCM_DEPTH` | NPE*ROWS | capacity of the dense-column memory |
| `K` | 4 | PE tuples selected per round |
| `TRACK` | 2 | rounds a tuple keeps being corrected |
| `GROUP`, `LABOR` | 128, 4 | PEs per Super-PE group; Labor-PEs per group |
| `TW` | 24 | width of cycle counts |
| `G` | 3 | threshold shift of the gap tracker |
| `BETA` | 1 | shift in the evil-row test |

The following values were chosen for this implementation: `ROWS`, `T`, `TQ_DEPTH`, `OBUF`,
`NNZ_MAX`, `TW`, `G` and `BETA`. The others (1024 PEs, 2 hops, 4 tuples, 2 tracked rounds,
128-PE groups with 4 Labor-PEs) are the numbers of the published design.

## Capacity

At the defaults, one pass holds up to 16384 result rows and 16384 non-zeros. That is enough
for the adjacency-matrix product of the small citation graphs:

* Cora: 2708 nodes, about 13,200 non-zeros.
* Citeseer: 3327 nodes, about 12,200 non-zeros.

Larger graphs, and the sparse feature products of the first layer, have to be cut into row
blocks and non-zero blocks by whoever loads `spmmem` and `dcm`. This engine has no blocking
controller.

## Differences from the published design

* **Not built: the dense-format task distributor.** The published design also has a
  distributor for dense-format operands (several queues per PE with one-hop smoothing).
  Only the sparse, Omega-network path is here.
* **Not built: multi-engine pipelining.** There is no chaining of several engines for
  intra- and inter-layer pipelining, and no off-chip memory interface.
* **Not built: diagonal skipping.** Skipping of diagonal elements for switched PEs is not
  implemented.
* **Finishing time includes the MAC.** A PE counts as finished when its queue, stall buffer
  and MAC are all empty, not only its queue.
* **Pick time.** The monitor records the cycle a PE is picked by the arbiter, not the cycle
  it went idle. When several PEs finish together, the later picks get slightly late times.
* **Slot-for-slot swapping.** Remote switching swaps whole slots one for one between the two
  PEs of a tuple. The published design only says that rows are re-targeted.
* **Profiling can hit the wrong PE.** Smoothing spreads a heavy row's tasks over its
  neighbours. The PE that finishes last may then be a neighbour of the row's owner. In that
  case profiling finds a light row, and the remapping it triggers does little. The
  published design does not address this interaction.
* **Sequential tuning.** The autotuner works between rounds from recorded times, not
  alongside the running round. It takes a few dozen cycles per round.

## Verification

Every module in `rtl/` has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<n>`. Highlights:

* **Single blocks.** Random traffic against reference models, with exact checks of
  latency and backpressure where the block defines them. Examples:
  * `mac_unit`: exactly `T` cycles;
  * `ugt`: q + 2 cycles;
  * `omega_network`: one cycle per layer;
  * `spmmem`: ceil(n / LANES) cycles per stream.
* **`tb_awb_spmm_engine`.** Configuration: 16 PEs, 4 rows per PE and one 16-PE group.
  * The 64 x 64 matrix contains a 48-non-zero evil row, a heavy cluster and background
    entries.
  * Eight columns are multiplied, the last with ReLU. Every result row is checked against a
    double-precision reference.
  * The test requires each mechanism to occur at least once: smoothing forwards, RaW
    stalls, network backpressure, switches, switch updates, profiling and an evil-row
    remap.
  * It also requires utilization to improve. It rises from about 0.30 in the first round to
    about 0.49 in the last, and the round shrinks from 250 to about 117 cycles.
* **Default size.** The engine was not simulated at its default size of 1024 PEs. At that
  size Verilator turns the design into about 2 GB of C++, which would take well over an hour to compile. A
  128-PE build was also started but did not finish. The largest configuration simulated
  end to end is the 16-PE, 64-row test above. Every block except the top was simulated on
  its own at small parameters, and the complete engine was checked for syntax and
  elaboration at 1024 PEs.

To simulate, for example:

    verilator --binary --timing --assert -y rtl +libext+.sv --top-module tb_awb_spmm_engine \
        rtl/awb_pkg.sv tb/tb_awb_spmm_engine.sv -o sim && ./obj_dir/sim

The package `rtl/awb_pkg.sv` is named explicitly; the modules are found through `-y rtl`.
