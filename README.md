# SwiftSpatial in SystemVerilog: a spatial-join filter accelerator

A spatial join pairs every object of one dataset with every object of another
whose shapes intersect. Real systems split this into two steps: a cheap
*filter* step that compares minimum bounding rectangles (MBRs), and an
expensive *refinement* step that checks exact geometry for the pairs that pass
the filter. This RTL implements the filter step as a hardware accelerator in
the style of SwiftSpatial (Jiang et al., "SwiftSpatial: Spatial Joins on
Modern Hardware").

The main idea is that both common join algorithms reduce to many small joins
between two *tiles* of a few objects each:

* **R-tree synchronous traversal.** Both datasets are indexed by R-trees. Two
  nodes are joined entry by entry. Where two directory entries intersect,
  their children form a new node pair to join. Where two leaf entries
  intersect, their objects form a result.
* **PBSM (partition-based spatial merge).** The host cuts space into tiles
  and joins each tile of one dataset with the same tile of the other.

The accelerator makes the small join fast and runs many of them in parallel.
A *join unit* evaluates one entry pair per clock cycle with a plain nested
loop. Sixteen join units work side by side. An on-chip scheduler runs the
traversal itself, so the host is not involved between node pairs.

## Block diagram

```
                    +-------------------------------------------------+
 start/mode/policy  |                    scheduler                    |
 ------------------>|  traversal FSM | level metadata | task cache     |
                    +-------+---------------------------^-----+-------+
                            | (node pair, unit id)      |     | level start,
                            v                           |     | task reads
 node memory <----- +--------------+                    |     v
 (256-bit reads)    |  read_nodes  |                 +--------------------+
                    +--------------+                 | task_queue_manager |<--> task memory
                     | R / S beats to unit j         +--------------------+
                     v                                  ^ task bursts
      +------ per join unit j (x N_JU) ------+         |
      | fifo R, fifo S -> join_unit -> burst_buffer ---+
      +--------------------------------------+         | result bursts
                                                        v
                                               +---------------+
                                               | write_results |--> result memory
                                               +---------------+
```

Blocks talk through valid/ready handshakes and FIFOs. The memory controller
and the DRAM channels are outside this design. The top module,
`swiftspatial_top`, has three memory ports, one per address space. A system
maps them onto its memory channels.

## Data formats

All widths are set in `rtl/ss_pkg.sv`.

| Item | Format |
|------|--------|
| coordinate | 32-bit IEEE-754 single, as a bit pattern |
| MBR (`mbr_t`) | left, right, bottom, top, back, front (3-D). 2-D data has back = front = 0 |
| entry (`entry_t`) | MBR + 32-bit id: an object id in a leaf, a child node pointer in a directory node |
| node header (`node_meta_t`) | leaf flag, 8-bit entry count, 32-bit pointer |
| pair (`pair_t`) | two 32-bit ids, 8 bytes: a result (object, object) or a task (node, node) |

**Comparing floats without a float unit.** A comparison `a >= b` maps each
coordinate to a key that orders like an unsigned integer:

* for a positive number, set the sign bit;
* for a negative number, invert all bits;
* map -0 onto +0 first.

Then compare the keys as integers. NaN is not supported.

**Node memory layout.** Node `p` takes `MAX_ENTRIES + 1` consecutive 256-bit
words, starting at word `p * (MAX_ENTRIES + 1)`. The first word is the header.
The rest are the entries, each in the low bits of its word. A directory
entry's id is the child's node number `p`.

**Task memory** holds one pair per 64-bit word. The host writes the level-0
tasks at `task_base`:

* for synchronous traversal, the single pair (root R, root S);
* for PBSM, every tile pair.

Each later level is written right after the previous one.

**Result memory** receives one result pair per 64-bit word, from
`result_base` upward with no gaps. `result_count` says how many were written.

## The join unit (`join_unit`)

This is the heart of the design.

**Control.** The unit cycles through a small state machine:

1. Wait for both headers (from the R FIFO and the S FIFO).
2. Copy the entries into two local SRAMs, one entry per cycle per side.
3. Join.
4. Drain the pipeline.
5. Flush the burst buffer.
6. Check the finish signal.

**Datapath.** The join is a three-stage pipeline that accepts one entry pair
per cycle:

* **A.** Read entry `i` of R and entry `j` of S into the object registers.
  `j` runs fastest.
* **B.** Evaluate the six comparisons in parallel and AND them:
  * `r.right >= s.left` and `s.right >= r.left`;
  * `r.top >= s.bottom` and `s.top >= r.bottom`;
  * `r.front >= s.back` and `s.front >= r.back`.

  Stage B also registers the id pair and whether it is a result or a task.
* **C.** Offer the pair to the burst buffer if the predicate holds.

A full burst buffer stalls all three stages together. No pair is lost or
repeated.

**Output kind.** The pair's kind depends on the two nodes:

* If both nodes are leaves, the output is a result.
* Otherwise it is a task for the next traversal level.

**Mixed node pair.** When one node is a leaf and the other a directory, the
design follows the textbook synchronous traversal:

* the leaf node as a whole, i.e. the union MBR of its entries, is compared
  with each child of the directory node;
* the output task is (leaf node, child).

The union is built while the entries are loaded. The paper does not say how
its hardware handles this case.

**Timing.** A `c_r x c_s` join takes:

* `max(c_r, c_s)` cycles of loading;
* `c_r * c_s` cycles of joining;
* about 5 cycles of overhead.

A 16 x 16 node pair therefore takes 277 cycles after the headers arrive,
about 1.08 cycles per predicate. With `MAX_ENTRIES = 32`, a 32 x 32 pair takes
about 1061 cycles, close to the 1066 cycles (including memory reads) that the
paper measures for its join unit.

Loading the next node pair does not overlap with joining the current one. The
join-unit FIFOs hide the memory latency, but not the loading time.

## Burst buffers and the two pullers

A join unit's output is scattered: an 8-byte pair now and then. Sixteen units
writing such pairs directly would waste most of the DRAM bandwidth. Each join
unit therefore feeds a `burst_buffer`.

**Closing a burst.** A burst is closed in two cases:

* when it reaches `BURST_PAIRS` pairs (512 pairs = 4 KB);
* when the join unit signals the end of a node pair.

All outputs of one node pair are of one kind, so a burst is all results or all
tasks.

**Inside the buffer.** There are two FIFOs:

* a data FIFO of `BUF_PAIRS` pairs;
* a descriptor FIFO of closed bursts, each `{length, kind}`.

A burst becomes visible only after the previous one has been fully drained, so
two consumers can never mix bursts.

**The two pullers.** `write_results` and `task_queue_manager` each contain a
`burst_arbiter`. The arbiter scans the buffers round-robin for a burst of its
own kind (results, or tasks). It takes one burst whole, then moves on.

**Results.** `write_results` gives each result the next address from a
counter. Consequences:

* results of different units are packed one after another;
* no join unit has to reserve memory in advance.

**Tasks.** `task_queue_manager` does the same for tasks, from the level's
write base, and counts them (`level_count`). It also serves the scheduler's
task reads. Reads and writes share one memory port:

* a pending read goes before the next write burst;
* a write burst that has started runs to its end.

## Scheduler (`scheduler`)

**Synchronous traversal, breadth first.** Each level runs like this:

1. `lvl_start` tells the task queue manager where to write the next level.
   That is right after the current level's tasks.
2. The scheduler reads the current level's tasks into its task cache in bursts
   of up to `TASK_CACHE_DEPTH` tasks. It asks again only when the cache is
   empty.
3. It dispatches each task with a join unit number to the read unit.
4. When the level is complete, `level_count` becomes the next level's size.
   `{base, count}` of each level is kept in the level metadata cache.
5. A level that produced no task ends the join. The scheduler then raises
   `finish`, which stops the join units, and `done`.

**When a level is complete.** This is the subtle part. A task is not finished
when its join unit finishes: its outputs may still sit in a burst buffer or in
flight to memory. The scheduler declares the level over only when all of the
following hold:

* every dispatched task has been reported by its unit (`pair_done`);
* every burst buffer is empty;
* the read unit, the result writer and the task queue manager are all idle.

Only then is `level_count` final.

**Dispatch policies.** There are two:

* **Round-robin (static):** tasks go to units 0, 1, 2, … in turn. The
  dispatcher waits for the unit whose turn it is.
* **First-idle (dynamic):** each task goes to the lowest-numbered unit with
  no task.

A unit may hold `MAX_OUTSTANDING = 2` tasks: one joining, and one waiting in
its input FIFOs.

**PBSM** is a single level of leaf-leaf tile pairs. No tasks are produced.

## Read unit (`read_nodes`)

For each dispatched task the read unit:

1. reads both headers;
2. forwards them to the chosen unit's R and S FIFOs, with the pointer field set
   to the node's own number (the join unit needs it in the mixed case);
3. reads the R entries and then the S entries as one run of sequential reads,
   forwarding each word as it returns.

It handles one task at a time.

## Using the top module

1. Hold `rst_n` low, then release it. A falling edge of `rst_n` resets the
   design.
2. Load the two trees (or the PBSM tiles, each as a leaf node of at most
   `MAX_ENTRIES` objects) into node memory, and the level-0 tasks into task
   memory.
3. Drive `mode`, `policy`, `task_base`, `n_init_tasks` and `result_base`, and
   pulse `start` for one cycle.
4. Wait for `done`. Read `result_count` pairs from `result_base`.

A new join needs a new reset.

**PBSM duplicates.** An object that spans several tiles is copied into each of
them. A pair found in two tiles is then reported twice. Removing those repeats
(e.g. the reference-point method) is left to the host.

| Parameter (top) | Default | Meaning |
|---|---|---|
| `N_JU` | 16 | join units |
| `MAX_ENTRIES` | 16 | node size (entries per node) |
| `BURST_PAIRS` | 512 | burst threshold (4 KB) |
| `BUF_PAIRS` | 1024 | burst buffer capacity |
| `IN_FIFO_DEPTH` | 32 | each join unit's R and S input FIFOs |
| `TASK_CACHE_DEPTH` | 64 | scheduler task cache |

The 16 join units, the node size of 16 and the 4 KB burst are the paper's main
configuration. The buffer, FIFO and cache sizes are not given by the paper.

## Where this design departs from the paper

* **Implementation language.** The paper's accelerator was written in HLS C++
  for an FPGA at 200 MHz. This is hand-written RTL, and its clock rate and
  resource use on an FPGA have not been measured.
* **Memory interface.** The memory interface (three ports, word layouts, node
  layout) is this design's own.
* **Mixed leaf/directory pairs.** These follow the software algorithm (leaf
  node's union MBR against each child).
* **Level metadata.** At level start the task queue manager receives only
  the write address for the next level, not the current level's task count.
  It does not need the count: the scheduler issues the reads.
* **Level end.** The task queue manager has no separate "level finish" input.
  A level ends when the scheduler opens the next level or finishes.
* **Completion reports.** Join units report each finished node pair to the
  scheduler (`pair_done`). The paper's scheduler must know this too but does
  not say how.
* **Static PBSM scheduling.** This is realised as round-robin rather than a
  precomputed task-to-unit map.
* **Traversal depth.** Traversal stops after `MAX_LEVELS = 16` levels. That is
  far deeper than any tree with 16 entries per node and 32-bit ids.
* **Joins per reset.** Only one join runs per reset.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_join_unit` | Random node pairs of all four leaf/directory combinations, 2-D and 3-D, negative coordinates, against a software model. Per-pair counts and flushes, the finish signal. The cycle count of full joins with no output stall (16x16 in 277 cycles) |
| `tb_burst_buffer` | Burst lengths and kinds from threshold and end-of-pair closing, pair order, back-pressure when full |
| `tb_write_results` | Consecutive addresses from the base, no lost, repeated or mixed bursts, tasks never written as results, `clear`. Rate: 64 buffered results in at most 76 cycles |
| `tb_task_queue_manager` | Tasks of a level stored contiguously, `level_count`, reads interleaved with writes under random memory stalls |
| `tb_read_nodes` | Every beat of random tasks under random memory latency. Rate: a 16x16 task in at most 44 cycles |
| `tb_scheduler` | Multi-level traversals and PBSM with a modelled environment. The level barrier, contiguous level bases, round-robin order, first-idle choice, outstanding limit, cache refills only when empty, the level metadata cache |
| `tb_swiftspatial_top` | The whole design at reduced size (4 units, 8-entry nodes, 8-pair bursts). Synchronous traversal and PBSM with both policies. Results compared with a brute-force join. Each mechanism is counted and must occur: output stalls, threshold and end-of-pair bursts, each node-pair kind, three levels, cache refills, both policies, finish |
| `tb_swiftspatial_full` | The whole design with every parameter at its default. A 581 x 157 object join by synchronous traversal and by PBSM, compared with a brute-force join |

With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/ss_pkg.sv tb/tb_swiftspatial_top.sv --top-module tb_swiftspatial_top
./obj_dir/Vtb_swiftspatial_top
```

Replace the name to run another testbench. The memories in the end-to-end
testbenches are behavioural models with random stalls and latency.

**Broken variants.** For each block a deliberately broken variant was
simulated, and the block's testbench caught it. The variants were:

* a comparator removed;
* an off-by-one burst threshold;
* a missing address increment;
* an uncleared level count;
* S entries read from the R node;
* a frozen round-robin pointer;
* swapped R/S FIFOs.

**Lint.** Verilator reports lint warnings of two kinds:

* **Reset used both ways.** The assertions use `rst_n` synchronously
  (`disable iff`), while the flip-flops use it asynchronously.
* **Unused or unconnected signals.** These are status bits and the debug
  outputs of helper blocks.

Neither kind is a circuit problem.

## Limits worth knowing

* **Throughput.** One read unit serves all join units and handles one task at
  a time. In synchronous traversal, where node pairs are small and random,
  node loading rather than joining usually sets the pace. In the full-size
  test, PBSM ran about three times faster than traversal on the same data.
* **Level barrier.** The barrier between levels waits for every unit. A level
  with few tasks leaves most units idle.
* **Addressing.** Addresses and ids are 32 bits wide, counted in words. That
  is enough for trees of 10 million objects: about 17 million 256-bit node
  words per tree.
