# Dynamic merge point predictor

Some conditional branches cannot be predicted well by any branch predictor:
their direction depends on data. A core that uses *control independence*
does not need to guess such a branch. It needs to know where the two sides
of the branch join again, the **merge point**. Instructions after that point
run on both paths, so they can be kept when the branch turns out to go the
other way.

This RTL implements a hardware predictor that learns merge points while the
program runs. It follows the design in S. Pruett and Y. Patt, *Dynamic Merge
Point Prediction* (TR-HPS-2020-001, UT Austin, 2020). It does not use the
compiler or the code layout. It learns from branch mispredictions. After a
misprediction the core holds the instructions it fetched down the wrong path.
The predictor keeps those PCs. Then it watches the correct-path instructions
retire. The first correct-path PC that also appeared on the wrong path is
where the two paths met.

A second, smaller part, the **confidence-cost predictor**, decides per branch
whether to use the merge prediction at all. It chooses it for branches that
are predicted with low confidence, or that are predicted with medium
confidence but take a long time to resolve.

## What a prediction contains

A merge point prediction for a branch has three fields:

| field | meaning |
|---|---|
| merge PC | the PC where both paths join |
| merge distance | the number of dynamic instructions after the branch within which the merge PC is expected (0 = the first instruction after the branch) |
| register set | a bit vector with one bit per architectural register (bit *i* = register R*i*). It holds every register that an instruction between the branch and the merge point (a *gap* instruction) may write. Instructions after the merge point that read only other registers do not depend on the branch. |

The paper calls this set the *independent register set*, because registers
outside it are independent of the branch. In hardware it is stored as the
registers the gap writes. A gap write to a register outside it proves the
prediction wrong.

Example (a hammock, from the paper's figures). Branch `x80500` is
mispredicted. The wrong side holds `ADD R0`, `SUB R5`, `MUL R4`, then the
join `AND R4` at `x8051C`, then `NOT R2`. The correct side holds `SHF R0`,
`DIV R1`, a branch, and then `x8051C`. The learned prediction is merge PC
`x8051C`, distance max(3, 3) = 3, register set {R0, R1, R4, R5}.

## Learning: the wrong path buffer (`wrong_path_buffer`, `entry_create`)

The WPB is a 128-entry, 4-way set-associative buffer indexed by PC. It has
LRU replacement and a single valid/tag register that holds the mispredicted
branch's PC. Learning one merge point is a small state machine with three
phases.

1. **Fill (ROB walk).** When a misprediction is detected, the core walks its
   reorder buffer from the instruction after the branch and presents one
   wrong-path instruction per cycle. Each instruction is stored with:
   - its *wrong-path distance*: 0, 1, 2, and so on;
   - its *wrong-path register set*: the OR of the destinations of all
     wrong-path instructions so far, its own included.

   For the example above the stored sets are {R0}, {R0,R5}, {R0,R4,R5},
   {R0,R4,R5} and {R0,R2,R4,R5}. The fill stops for one of three reasons:
   - the ROB has no more instructions (`walk_end`);
   - 100 instructions have been copied (the maximum distance);
   - the branch's own PC comes up again (the wrong path looped back).
2. **Wait.** Instructions older than the branch are still retiring. The
   buffer ignores them until the mispredicted branch itself retires. The core
   flags that instruction with `ret_mispred`.
3. **Compare.** Every correct-path instruction that retires indexes the
   buffer.
   - **Hit:** the PC is the merge point. The buffer reports three things: the
     stored wrong-path distance and set, its own correct-path distance (how
     many correct-path instructions came before this one), and its
     correct-path set (their destinations ORed).
   - **No merge point:** 100 correct-path instructions pass without a hit, or
     the branch PC retires again. The buffer invalidates itself
     (`inval_dist`, `inval_loop`).

`entry_create` turns a hit into a new table entry. The distance is the
larger of the two path distances, because the runtime path is not known. The
register set is the OR of the two sets. The counter starts at 4.

A set-associative WPB can lose a wrong-path PC when more than four of them
map to one set. That merge point is then missed (a false negative). The
paper reports this for fewer than 1% of cases. The `evicted` output pulses
when it happens.

## Predicting: the merge point predictor table (`merge_predictor_table`)

The table has 128 entries in 4 ways (32 sets). It is indexed by the low PC
bits of the branch and tagged with the rest. Each way holds a valid bit,
tag, merge PC, distance, register set and a 3-bit saturating counter. One
branch can own several ways, one per merge point. The nearest join (D in the
paper's example) and a farther, always-correct join (F) can both be learned.

- **Lookup** (combinational, in parallel with the branch predictor and BTB).
  All matching ways are hits. The selected prediction is the one with the
  highest counter. Ties go to the shortest distance, and a remaining tie to
  the lowest way. A shorter distance reserves less of the instruction window.
  The lookup also outputs every way and a match mask, because all matching
  entries go to the update list.
- **Install.** A new entry takes an invalid way if there is one. Otherwise
  the victim is the way with the smallest counter, then the largest distance.
  Re-learning an existing branch/merge-PC pair refreshes its distance and set
  and keeps its counter.
- **Write-back** from the update list finds its way by branch tag and merge
  PC. It replaces the counter, distance and set there. If the entry was
  evicted meanwhile, the write-back is dropped.

## Checking and training: the update list (`update_list`)

This block is the hardest to follow. It also decides when the core must
flush.

When a merge prediction is used, every matching table entry is copied into
the 8-entry, fully associative update list. The one actually used is marked
`selected`. Each entry goes through four states:

- `WAIT`: the branch has not retired yet. `squash_waiting` frees all waiting
  entries when the core throws those branches away.
- `ACTIVE`: entered when the branch PC retires. The age is the index of each
  later retired instruction, counted from 0. An active entry ends at the first
  of these:
  - the merge PC retires at age ≤ distance: **correct**;
  - the age reaches the distance and the instruction is not the merge PC:
    **incorrect**;
  - the branch PC retires again before the merge PC: **incorrect**;
  - a gap instruction writes a register outside the set: **incorrect**.
- `DONE`: the counter has moved +1 (correct) or −1 (incorrect), saturating
  at 0 and 7. The entry waits for write-back.
- `FREE`: written back (one per cycle, lowest index first).

For the selected entry the same rules give the outcome of the prediction
that the core acted on. `pred_correct` or `pred_wrong` pulses once, in the
cycle the outcome becomes known. `pred_wrong` is the top's `mp_flush`: the
core must recover as it would after a branch misprediction.

**Two policies** are selected by the `update_max` input:

- **MPP** (`update_max = 0`): the rules above.
- **MPPmax** (`update_max = 1`): *UPDATE_MAX*. Each entry stays active until
  its age reaches the maximum distance (100), whatever its own distance.
  - If the merge PC was seen, the counter goes up and the distance becomes
    the age at which it was seen, if that is larger. Distances only grow, so
    accuracy rises.
  - If it was never seen, the counter goes down.

  The outcome of the prediction the core used is still judged against its
  own stored distance. The paper reports MPPmax as about 14 points more
  accurate than MPP on average, at the cost of larger predicted distances.

## Choosing between branch and merge prediction (`confidence_cost`, `branch_latency_table`)

Each branch gets a confidence level and a latency class:

- **Conf-Low:** the 3-bit counter of TAGE's longest matching table is weak,
  meaning value 3 or 4 with "taken" = 4..7.
- **Conf-High:** not Conf-Low, and the JRS estimator reports high
  confidence.
- **Conf-Med:** all other branches.
- **Lat-High:** the branch latency table's running average resolve latency
  is above 50 cycles. Each resolution updates the average as
  avg ← 0.9·new + 0.1·old, in integer cycles rounded to nearest:
  (9·new + old + 5) / 10.

|          | Conf-Low | Conf-Med | Conf-High |
|----------|----------|----------|-----------|
| Lat-Low  | merge    | branch   | branch    |
| Lat-High | merge    | merge    | branch    |

The latency table has 256 untagged entries indexed by PC[7:0] and holds
10-bit averages. The paper gives no size for it.

## Front end (`fetch_redirect`)

The fetch PC reads the branch predictor, the BTB and the merge predictor
together. The branch path is the BTB target when the branch is predicted
taken (and hits in the BTB), otherwise PC + instruction size. When the merge
predictor hits and the confidence-cost predictor says "merge", fetch goes to
the merge PC instead. The predicted distance and register set go out with it
to whatever control-independence mechanism the core uses.

## Top level (`merge_point_predictor`)

```
 fetch_pc ──► merge_predictor_table ──► fetch_redirect ──► next_pc, merge_predicted, merge_dist, merge_regs
          ──► confidence_cost ───────────┘      │
                                                └─► update_list (allocate all matches)
 walk_*  ──► wrong_path_buffer ─► entry_create ─► table install
 ret_*   ──► wrong_path_buffer (compare), update_list (verify) ─► table write-back, mp_flush, mp_correct
 lat_upd_* ─► branch latency table
```

Port groups (all plain signals; the struct types are in `mpp_pkg`):

| group | ports | notes |
|---|---|---|
| mode | `update_max` | 0 = MPP, 1 = MPPmax |
| fetch | `fetch_valid`, `fetch_is_cond_br`, `fetch_pc`, `fetch_inst_size`, `bp_taken`, `btb_hit`, `btb_target`, `tage_ctr`, `jrs_high` | results of the core's own predictors |
| prediction | `next_pc`, `merge_predicted`, `merge_dist`, `merge_regs`, `conf`, `lat_high`, `lat_avg` | combinational in the fetch cycle |
| latency | `lat_upd_valid`, `lat_upd_pc`, `lat_upd_cycles` | cycles from prediction to end of execution, measured by the core |
| ROB walk | `walk_start`, `walk_br_pc`, `walk_valid`, `walk_inst`, `walk_end` | one instruction per cycle |
| retire | `ret_valid`, `ret_inst`, `ret_mispred`, `squash_waiting` | one instruction per cycle, in program order |
| events | `mp_flush`, `mp_correct`, `new_merge_point`, `wpb_inval_dist`, `wpb_inval_loop`, `wpb_evicted`, `ul_alloc_drop`, `table_writeback`, `wpb_busy`, `ul_occupancy` | single-cycle pulses except the last two |

An `inst_t` is `{pc[31:0], dst_valid, dst[3:0]}`.

**Timing.**
- Fetch: lookup, decision and next PC are combinational in the fetch cycle.
  The update list is allocated at the clock edge that ends that cycle.
- Learning: a WPB hit appears one cycle after the hitting instruction is
  presented on the retire port. The new entry is written at the next edge, so
  it can be predicted two cycles after the merge PC retires.
- Verification: the update list gives its verdict in the cycle the deciding
  instruction is presented. The trained entry is in the table two edges
  later, or later if several write-backs queue up.

**Storage at the default sizes:** about 21,000 flip-flops (the table
≈ 11.5 kbit, WPB ≈ 6.5 kbit plus 0.25 kbit of LRU state, update list ≈ 0.8 kbit, latency table
2.5 kbit). All arrays are flip-flops, so every entry can be read and cleared
in parallel.

## Sizes

| parameter | here | paper |
|---|---|---|
| predictor table | 128 entries, 4 ways | 128 entries, 4-way, 1.6 KB |
| wrong path buffer | 128 entries, 4 ways, LRU | 128 entries, 4-way, 1 KB, LRU |
| update list | 8 entries, fully associative | 8 entries, 113 bytes |
| maximum distance | 100 | 100 |
| confidence counter | 3 bits | 3 bits |
| Lat-High threshold | > 50 cycles | 50 cycles |
| PC width | 32 bits | not given (x86) |
| architectural registers | 16 | not given (the example uses R0–R5) |
| latency table | 256 × 10 bits | not given |

The paper gives byte totals but not field widths. A table entry here is 90
bits (27 tag, 32 merge PC, 7 distance, 16 registers, 3 counter, 1 valid).
The paper's total works out to 100 bits per entry, so it probably uses wider
PCs.

## Choices this RTL makes where the paper is silent

- One instruction per cycle on the walk and retire ports. The paper's core
  retires four per cycle, so a real core would need a small queue in front
  or replicated comparators.
- A single WPB. In one place the paper's text speaks of several WPBs, but
  its configuration table and block diagram have one. A new misprediction
  overwrites whatever the buffer held.
- Wrong-path sets include the instruction's own destination, as the paper's
  example shows. The correct-path set excludes the hitting instruction, whose
  destination the wrong-path set already has.
- New table entries start with counter 4.
- The same pair learned again refreshes its distance and keeps its counter.
  A write-back to an evicted entry is dropped.
- UPDATE_MAX keeps the larger of the old distance and the merge age. The
  paper says both "set to the age" and "strictly increases". This design
  follows the second where they differ.
- A retiring branch PC activates all waiting entries of that PC. Allocations
  that find the update list full are dropped (`ul_alloc_drop`).
- The TAGE counter encoding is unsigned 0..7, taken when ≥ 4.
- The BTB target is used only on a BTB hit.
- Reset is asynchronous and active low, and clears every valid bit, counter
  and average.

## Known differences from the paper's figures

- The example prediction printed beside the control-flow-graph figure shows
  a register vector `111011…`. For the two paths drawn there, this RTL would
  learn {R0, R1, R4, R5}, which is `110011` in the same R0-first order. The
  figure does not explain how its vector was formed.
- The block diagram draws a single "Predicted Entry" connection to the update
  list. The text says that all matching entries are inserted, and this RTL
  follows the text.

## Not included

The rest of the core is outside this RTL; its signals are ports:
- the ROB, which supplies the walk and retire streams;
- the TAGE predictor (`bp_taken`, `tage_ctr`);
- the JRS confidence estimator (`jrs_high`);
- the BTB;
- the latency measurement.

The paper takes these from earlier work or from its baseline core. It also
gives no evaluation RTL, so the accuracy and MPKI results it reports (95%
accuracy, a 43–56% MPKI reduction on SPEC CPU2006 integer) are not
reproduced here. That would need a core model running the benchmarks.

## Files and simulation

`rtl/` holds one module or package per file:
- `mpp_pkg.sv`: types and sizes;
- `merge_predictor_table.sv`, `wrong_path_buffer.sv`, `entry_create.sv`,
  `update_list.sv`, `branch_latency_table.sv`, `confidence_cost.sv`,
  `fetch_redirect.sv`: the blocks;
- `merge_point_predictor.sv`: the top.

`tb/` holds one self-checking testbench per module. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it covers |
|---|---|
| `tb_merge_point_predictor` | end to end at the default sizes: learning, prediction, confirmation, the three flush causes, both WPB invalidations, WPB and table eviction, update-list overflow, both confidence-cost paths, two merge points of one branch, UPDATE_MAX distance growth; counts each |
| `tb_wrong_path_buffer` | the paper's five-instruction example with its register-set vectors, hammock, loop-back and distance limits, LRU eviction |
| `tb_update_list` | every end condition, both policies, saturation, overflow, squash; the UPDATE_MAX lifetime of exactly 100 instructions |
| `tb_merge_predictor_table` | random operations against a way-exact reference model |
| `tb_confidence_cost`, `tb_branch_latency_table` | the full decision table; the running average against real arithmetic; the threshold boundary |
| `tb_entry_create`, `tb_fetch_redirect` | random vectors |
| `tb_workload_hammocks` | a synthetic workload (below), run under both policies, with every used prediction checked against an independent reference |

Run one testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl --top-module tb_merge_point_predictor \
    rtl/mpp_pkg.sv rtl/*.sv tb/tb_merge_point_predictor.sv -Mdir obj
./obj/Vtb_merge_point_predictor
```

Every testbench runs in well under a second.

**Synthetic workload.** `tb_workload_hammocks` builds a program of 12
hammocks shaped like the paper's example:
- two sides of 1–8 instructions;
- a join block D;
- a rare block E that bypasses D;
- a common block F;
- on 40% of passes, an extra block on the taken side that lengthens it.

A third of the branches are 50/50 and get a weak TAGE counter. A third are
95% biased and confident. A third are 80% biased and resolve slowly, so the
latency table makes them merge-predicted. The driver walks up to 40
wrong-path instructions after each misprediction.

With the default sizes, 2,500 dynamic branches per policy gave:

| | used | accuracy | coverage of hard/slow branches |
|---|---|---|---|
| MPP | 1,648 | 84% | 83% |
| MPPmax | 1,431 | 93% | 80% |

MPPmax's distances grow to cover the longer taken side. The remaining
failures come from the rare E path: D never comes, and E writes registers
outside the set. The numbers depend on this synthetic program and say
nothing about SPEC. Sizes are parameters of the top
(`MPT_ENTRIES`, `MPT_WAYS`, `WPB_ENTRIES`, `WPB_WAYS`, `UL_ENTRIES`,
`LAT_ENTRIES`, `LAT_THRESH`). PC width, register count, maximum distance and
counter width are package constants in `mpp_pkg`.
