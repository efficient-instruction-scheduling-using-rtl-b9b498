# Issue-time-prediction scheduler with real-time load delay learning

An out-of-order core normally wakes up and selects instructions from a
reservation station: every cycle, every waiting entry compares its source tags
against the results being produced, and a selector picks the oldest ready
ones. That logic is power hungry and scales badly. This design replaces it
with something much simpler:

* each functional unit gets its own small **priority queue**, and only the uop
  at the head of a queue may issue;
* a queue is ordered by a **predicted issue time**, worked out for each uop at
  dispatch from the data-flow graph and the expected delays of its producers;
* those delays are **learned at run time**. Loads that miss the L1 cache take
  a variable time, and that time tends to repeat from one loop iteration to
  the next. The actual delay (completion cycle minus issue cycle) of every
  missing load is remembered per PC in a **DelayCache**. The next time the
  same load is dispatched, its consumers are predicted to issue that much
  later. They sink in their queues, and independent work moves ahead of them.

The RTL here is the scheduling back end of such a core: the dependency
tracking, the DelayCache, the predictor, the queues with their steering, a
register scoreboard and the ROB bookkeeping. Fetch, decode, renaming, the
register file, the functional units, the load/store unit and the caches are
conventional. They are not part of the RTL. The top module takes renamed uops
in and hands issued uops out.

## The prediction

For a uop `c` with producers `p`:

    T_delay(p) = T_complete(p) - T_issue(p)
    T_pred(c)  = max( now, max_p [ T_pred(p) + T_delay(p) ] )

`now` is the cycle the uop is dispatched. A uop with no producer still in
flight is predicted to issue immediately.
`T_pred` values are absolute cycle numbers from a free-running 32-bit counter.
All comparisons are wrap-safe: `a` is earlier than `b` when the sign bit of
`a - b` is set.

The delay a producer contributes depends on its kind:

| producer                                   | `T_delay` used                     |
|--------------------------------------------|------------------------------------|
| load whose PC hits in the DelayCache       | last learned delay of that PC      |
| load without history                       | L1 hit time, 4 cycles              |
| integer / branch                           | 1 cycle                            |
| floating point                             | 3 cycles                           |

Using the L1 hit time for loads without history is deliberate. The first time
through a loop, nothing is delayed needlessly. After one iteration the
learned delays take over.

Example (the hmmer fragment the design was motivated by). Load (1) feeds
add (2), which feeds store (3). Loads (4) and (5) feed add (6). Say (1) is
dispatched at cycle 0 with no history. Then:

* (2) is predicted at 4 and (3) at 5.
* (4) and (5) reach the load/store queue at cycles 2 and 3 and are predicted
  there, so they move in front of the older store and fill the gap.

Now suppose (1) takes 20 cycles because it misses. On the next pass, (2) and
(3) are predicted 20 and 21 cycles after (1), and everything that does not
depend on it moves ahead of them.

## Where the timing information lives

The prediction needs, for each source register, two values from the producer:
its predicted issue time and its expected delay. The design keeps them as
follows.

* **Dependency Table (DT)**: one byte per physical register (256). The byte
  is a valid bit plus the 7-bit ROB index of the in-flight uop that last
  wrote the register. It is written at dispatch. It is cleared when that uop
  retires, but only if the entry still names that uop. It has 12 read ports
  (4 uops x 3 sources) and 4 write ports.
* **ROB**: besides the usual in-order bookkeeping, each of its 128 entries
  records:
  * the uop's PC;
  * its predicted issue time and expected delay (written at dispatch);
  * whether its PC hit in the DelayCache;
  * the cycle it issued.

  The completion cycle and the L1-miss flag are used when the completion
  arrives, so they are not stored.

  A consumer reaches the producer's timing through the DT's ROB index.
* **DelayCache**: 512 direct-mapped entries, each holding:
  * a 32-bit partial tag;
  * the 32-bit issue time and the 32-bit completion time of the last
    training load (12 bytes);
  * a valid bit.

  The set index is `PC[8:0]`. The delay is their difference, computed on
  read. Each dispatched uop reads it once, with its own PC (4 read ports),
  and the result is kept in its ROB entry for its consumers.

Because the DelayCache is read when the *producer* dispatches, a consumer
sees the delay that was current at that time. A text-literal reading would
look the delay up again when the consumer dispatches, using the producer's
PC. That needs 12 read ports rather than the 4 the DelayCache is sized with.
The two differ only when the entry is retrained in between.

**Training.** Only the load/store port carries loads, so at most one load
completes per cycle. That matches the DelayCache's single write port. When a
load completes, its PC, issue cycle and completion cycle are written if:

* it missed L1; or
* its PC already had an entry when it was dispatched.

The second case keeps a learned PC up to date when the load starts hitting
again. Every iteration retrains. There is no confidence counter.

**Loads that depend on a store.** A store-set predictor, outside this RTL,
may decide that a load probably reads what an older store writes. It names
that store on the uop as a ROB index (`mdep_vld`, `mdep_rob`). The store then
counts as one more producer of the load, with the store's predicted time and
its static delay of 4 cycles:

* If the store is in the same dispatch group, its fresh prediction is used.
* Otherwise its timing is read from its ROB entry. This makes 16 ROB timing
  reads per cycle: 12 for register producers and 4 for stores.

Loads and stores share one queue. The load's prediction is therefore at
least 4 cycles later than the store's, and the queue order alone issues the
store first. No separate memory-ordering check is needed to keep them in
order. The named store must not have retired yet; keeping that true is the
store-set predictor's job.

## Queues, steering and issue

There are five queues, one per unit, 13 entries each:

| port | unit        |
|------|-------------|
| 0, 1 | integer     |
| 2    | fp          |
| 3    | branch      |
| 4    | load/store  |

**Priority queue** (`priority_queue`). A chain of slots kept sorted by
predicted issue time. In one cycle every slot compares its key with the key
being inserted and does one of three things:

* keeps its entry;
* takes the new one;
* takes its upper neighbour's entry (everything behind the insertion point
  shifts down one place).

A removal shifts the chain up by one. Insertion and removal can happen in the
same cycle. A uop inserted with the earliest time is at the head on the next
cycle. Equal keys keep arrival order, so uops with the same prediction leave
oldest first. This is the single-cycle form of a systolic priority queue: each
slot sees only its neighbours and the broadcast new entry. The free position
is always just after the tail, so no free list is needed.

**Steering** (`pq_steering`). A uop may only enter a queue of its own type.
For the two integer queues:

1. If one queue's tail (its last, lowest-priority entry) produces one of the
   uop's sources, the uop follows it there ("tail dependency").
2. Otherwise it goes to the emptier queue. Ties go to port 0.

Each queue takes at most one uop per cycle. If the chosen integer queue is
full or already taken this cycle, the other one is used. Dispatch is in
program order: it stops at the first uop of the group that cannot be placed,
or when the ROB is full. A single full queue therefore stalls the front end.

**Issue** (`execution_engine`). A queue's head issues when all its sources
are marked computed in the register scoreboard and its unit asserts
`port_rdy`. A head that waits blocks only its own queue. There is no
selection logic across queues.

The scoreboard keeps one bit per physical register:

* it is cleared when a writer is dispatched;
* it is set at the clock edge after that writer's completion arrives on `wb`.

A consumer can therefore issue at the earliest one cycle after its producer
reports completion.

Misprediction costs nothing in correctness, only in time. A uop whose
prediction was too early reaches the head and blocks its queue until its
sources are ready.

## Top level: `its_core`

| port group                     | direction | meaning                                                            |
|--------------------------------|-----------|--------------------------------------------------------------------|
| `in_vld[4]`, `in_uop[4]`       | in        | renamed uops, oldest first (`uop_t` in `its_pkg`)                  |
| `in_accept[4]`                 | out       | prefix of the group taken this cycle (same-cycle handshake)        |
| `port_rdy[5]`                  | in        | unit on each port can take a uop                                   |
| `iss_vld/iss_rob/iss_uop/iss_pred[5]` | out | uop leaving each queue, its ROB index and predicted time          |
| `wb[5]`                        | in        | completions (`wb_t`: ROB index, destination, `l1_miss`)            |
| `ret_vld/ret_rob/ret_uop[4]`   | out       | in-order retirement, up to 4 per cycle, no back-pressure           |
| `now`                          | out       | cycle counter used for all timestamps                              |
| `ev_*`                         | out       | tail-dependency steering, DelayCache hits and writes, blocked heads, dispatch stall |

The three handshakes work like this:

* **Dispatch.** A uop accepted in cycle *t* enters its queue at the edge
  that ends *t*. It can issue from cycle *t+1*.
* **Issue.** `iss_*` is combinational from the queue heads.
* **Completion.** A completion presented on `wb` in cycle *t*:
  * is recorded as `T_complete = t`;
  * wakes consumers from *t+1*;
  * if it comes from port 4 and is a load, may write the DelayCache at the
    edge.

The units must report a completion on the port the uop issued from. The
DelayCache training reads the load's PC from the ROB.

`uop_t` carries:

* the PC (48 bits);
* the class (`CLS_INT/FP/BR/MEM`);
* an `is_load` bit;
* an optional destination register;
* up to three source registers;
* an optional store dependence (`mdep_vld`, `mdep_rob`).
 All sizes are parameters or `its_pkg` constants:

| constant / parameter | value |
|----------------------|-------|
| `WIDTH`              | 4     |
| `ROB_SIZE`           | 128   |
| `NUM_PREGS`          | 256   |
| `DC_ENTRIES`         | 512   |
| `PQ_DEPTH`           | 13    |
| `NUM_PORTS`          | 5     |
| `L1_HIT_LAT`         | 4     |
| `TS_W`               | 32    |

## Files

| file (`rtl/`)              | what it is                                               |
|----------------------------|----------------------------------------------------------|
| `its_pkg.sv`               | sizes, `uop_t`, `pq_entry_t`, `wb_t`, `ts_before`, static delays |
| `dependency_table.sv`      | DT                                                       |
| `delay_cache.sv`           | DelayCache                                               |
| `issue_time_predictor.sv`  | the two equations for a 4-uop group, with in-group bypass |
| `reorder_buffer.sv`        | ROB with timing fields                                   |
| `priority_queue.sv`        | one sorted queue                                         |
| `pq_steering.sv`           | queue choice and dispatch acceptance                     |
| `reg_scoreboard.sv`        | per-register ready bits                                  |
| `execution_engine.sv`      | five queues + scoreboard + head issue rule               |
| `its_core.sv`              | top                                                      |

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each one
compares the module against an independent model with random and directed
stimulus.

`tb_its_core` runs the hmmer-style loop for 300 iterations (3600 uops) at the
default sizes. The loop has:

* three loads, with latencies that change between iterations (30 or 12
  cycles, 4 cycles, and 60 or 4 cycles);
* two stores;
* a compare and a conditional move;
* an induction add, a branch and an fp multiply.

Its reference model recomputes every prediction from its own record of learned
delays. It checks that:

* the predicted time attached to each issued uop matches the reference;
* no uop issues before its sources are complete;
* uops retire in program order;
* a load tied to a store issues after it.

The testbench models the store-set predictor: load (5) is tied to the
previous iteration's store (9) while that store has not retired.

It also requires that each mechanism happens at least once: reordering inside
a queue, a blocked head, tail-dependency steering, DelayCache hits and writes,
a learned miss delay deferring a consumer, a dispatch stall, and a load tied
to a store. It reports about 0.29 uops per cycle on this deliberately
miss-heavy loop.

`tb_hmmer_example` runs the nine-instruction example from "The prediction"
above, two iterations, at the default sizes. Load (1) is given a 20-cycle
miss. The test checks every predicted time against values worked out by hand
from the data flow. It also checks that the load/store port issues
(1), (4), (5), (3), (9), so both independent loads overtake the older store.
In the second iteration, the dependants of (1) must be predicted 20 cycles
after it, not 4:

| uop | predicted, iteration 1 | predicted, iteration 2 |
|-----|------------------------|------------------------|
| (1) load          | +0  | +0  |
| (2) add           | +4  | +20 |
| (3) store         | +5  | +21 |
| (4) load          | +2  | +2  |
| (5) load          | +3  | +3  |
| (6) add           | +7  | +7  |
| (7) cmp           | +8  | +21 |
| (8) cmov          | +9  | +22 |
| (9) store         | +10 | +23 |

Times are relative to the dispatch of (1). The load/store queue takes one uop
per cycle, so (3), (4) and (5) are dispatched one cycle apart. Nothing else
competes for the units here, so the actual issue cycles are the same in both
iterations. The learned delay changes only the queue order, and that matters
when other work is waiting.

To simulate with Verilator (from the directory holding `rtl/` and `tb/`):

    verilator --binary --timing --assert -Irtl -Itb --top-module tb_its_core \
        rtl/its_pkg.sv rtl/*.sv tb/tb_its_core.sv -o sim && ./obj_dir/sim

Any other testbench works the same way with its own `--top-module`. Each one
prints `TB_RESULT checks=N failures=M`.

## What this RTL does not do, and where it departs from the original description

* **Outside this RTL.** Fetch and decode, register renaming (map table and
  free list), the register file, the functional units, the LSU, the
  store-set predictor itself (only its output is used), caches and DRAM are
  not included.
  The testbench models the unit and memory latencies.
* **Recovery and exceptions.** Branch-misprediction recovery and exceptions
  are not modelled: there is no flush path. The learned delays do not need
  retraining after a flush.
* **Queue structure.** The queues are a single-cycle compare-and-shift form
  rather than a pipelined two-register-per-cell systolic array. They have no
  free list.
* **Queue entry size.** The original sizing quotes 1 byte per queue entry. The
  entries here hold the full uop and a 32-bit key.
* **Queue count.** One table of the original sizing reads "5 x 2 x 13"; the
  configuration used here is 5 x 13.
* **Port mix.** The text also mentions a Nehalem-like port mix (3 generic, 1
  load, 2 store). The five-port mix (2 int, 1 fp, 1 branch, 1 load/store) was
  used, because it is the one given with the queue count. The Skylake-style
  port scalings (8 and 10 ports) would need a different class-to-queue map.
* **Choices of this design, not fixed by the description:**
  * a DT entry is a ROB index;
  * the DelayCache field split, tag width and index bits;
  * 32-bit timestamps;
  * the fp delay of 3 cycles;
  * the "now" lower bound;
  * in-group bypass;
  * in-order dispatch stop;
  * one-cycle wakeup through the scoreboard;
  * retire width 4;
  * active-low asynchronous reset of the valid bits and pointers only (the
    DelayCache and ROB payloads are plain RAM);
  * refreshing a learned PC even when its load hits;
  * treating a load's predicted store as one more producer (the description
    says only that store sets are passed to the predictor).
* **DelayCache lookup timing.** As noted above, the DelayCache is read at the
  producer's dispatch, not again at each consumer's dispatch.
