# Software-directed speculation control: RTL

Speculative-execution attacks (Spectre and its relatives) and speculative-fetch
attacks (which read a victim's branch decisions back out of the pattern history
table) both exploit work the core does before it knows the work is on the
correct path. Hardware-only defences cannot tell which instructions really
depend on an unresolved branch, so they hold back almost everything behind one.
They also cannot tell which branches are confidential, so their only front-end
defence is to switch the branch predictor off.

The design here lets software say both things. The compiler or developer
attaches 11 bits to every instruction. The hardware then:

* keeps a confidential branch out of the branch predictor and stops fetching
  behind it until it resolves (the *front-end restriction*);
* holds back only the instructions that the compiler says depend on a live
  unresolved branch, and frees them when *that* branch resolves (the
  *branch-dependency restriction*);
* falls back to restricting everything after a branch whenever the software
  gave no information (legacy code), or for indirect jumps (the *back-end
  restriction*);
* sends every load to memory, even when an older store supplies its data,
  so that store-to-load bypass leaves no trace in the cache.

The scheme was published as "SpecControl" in *Mitigating Speculation-based
Attacks through Configurable Hardware/Software Co-design* (Hajiabadi, Agarwal,
Diavastos, Carlson). This RTL implements the hardware side of that scheme. It
is an independent implementation, and the points where it departs from the
publication or fills gaps in it are listed below.

## The per-instruction marking

| bits (this RTL) | field                   | meaning |
|-----------------|-------------------------|---------|
| 10              | front-end restricted    | confidential branch (Res_FE) |
| 9               | back-end restricted     | execute only when non-speculative (Res_BE) |
| 8               | BD informed             | the compiler analysed this instruction |
| 7:4             | BranchID                | static ID of this branch (16 IDs, reused) |
| 3:0             | Dependent BranchID      | the most recent branch this instruction truly depends on |

The field widths are the original ones. The bit order is this
implementation's choice. On x86 the field would ride in prefix bytes. Here it
arrives as an 11-bit `sc_prefix_t` plus a `prefix_present` flag. An
instruction with no prefix is treated as not analysed: its IDs are INVALID.
The publication names the INVALID case but gives it no encoding.

`sc_marking_decode` maps the field to three markings:

* **Restriction**: `Res_FE` when the front-end bit is set (it wins if both
  are set), else `Res_BE` when the back-end bit is set, else `Res_no`.
* **Dependency of any instruction**: `BD_valid` when BD informed is 1,
  `BD_no` when it is 0, `BD_invalid` when there is no prefix.
* **Branch marking**: the same three cases for the branch itself (`BR_valid`,
  `BR_no`, `BR_invalid`).

A *barrier* is a `BR_invalid` branch, or an indirect jump not marked `BR_no`.
Every younger instruction waits for a barrier.

## How an instruction is held back

Each reorder-buffer entry (`sc_rob_restrict`) carries two hold bits. It may
execute (`can_exec`) only when both are clear.

**Restricted: the branch-dependency hold.** The Unresolved Branches Table
(`sc_ubt`) maps BranchID to the dynamic sequence number of the live
instance of that branch.

* **Branch enters.** A `BR_valid` branch writes its slot in the UBT. The
  table is direct-mapped, with 16 entries indexed by BranchID. If the slot
  is still held by an unresolved branch (an older instance of the same ID,
  or, in a smaller table, another ID that maps to the slot), insertion into
  the reorder buffer stalls until that branch resolves.
* **Dependent instruction enters.** A `BD_valid` instruction looks up its
  Dependent BranchID. On a hit it stores `<BranchID, sequence number>` and
  sets Restricted. The sequence number pins the dependency to one dynamic
  instance, so IDs can be reused freely.
* **Branch resolves.** Every entry whose stored pair matches the branch is
  freed in the same edge, and the branch's UBT slot is released.
* **Same-cycle case.** A lookup that hits the branch resolving in that very
  cycle is ignored, so an entry is never left Restricted for ever.

**Backend Restricted: the speculation-source hold.** It is set on entry when:

* the instruction is `Res_BE`, or
* an unresolved barrier is already in the buffer, or
* the instruction has no prefix and any branch is unresolved.

It clears when no older barrier is unresolved. For `Res_BE` and unprefixed
instructions, it clears only when no older branch or indirect jump of any kind
is unresolved, so the instruction can no longer be squashed.

The publication describes the barrier release as a sweep that starts at the
resolving barrier and stops at the next barrier. This RTL clears the bit from
an age-ordered scan instead ("is anything older still unresolved?"). The
result is the same when barriers resolve in order. When a younger barrier
resolves first, the scan keeps its followers held, whereas the sweep as
written would free them.

The age scans (`older_scan` in `sc_rob_restrict.sv`) are two linear
prefix-ORs over the circular buffer. One covers the entries at or after the
head pointer; the other covers the wrapped part.

**Groups of instructions.** Up to eight instructions enter the reorder
buffer per cycle. The lanes of one group see each other as if they had
entered one after another:

* a `BR_valid` branch in an older lane counts as a UBT hit for a younger
  lane that depends on its BranchID;
* two branches that map to the same UBT slot cannot enter together; the
  group stops at the younger one;
* an unresolved branch or barrier in an older lane back-end restricts the
  younger lanes exactly as if it were already in the buffer.

The group always enters as a prefix: the first lane that cannot enter
(buffer full, slot busy, squash in progress) stops the lanes behind it.

**Front end.** `sc_fetch_guard` watches the fetched group of up to eight
instructions. For a `Res_FE` branch or indirect jump:

* the predictor lookup is masked for its lane in the cycle it is fetched;
* the younger lanes of the same group are dropped (`fetch_keep` = 0);
* fetch stalls from the next cycle until that branch resolves;
* the predictor update is masked when it resolves.

Fetch stops right behind the guarded branch, so it is always the youngest
instruction in flight, and any squash also releases the guard. `Res_FE` on a
non-branch has no effect in this RTL.

**Loads and older stores.** A load that matches an older store whose
outcome is still open would normally take the store's data and skip the
cache, and that skipped access is visible to an attacker. `sc_stl_guard`
searches a 114-entry store queue for the youngest older store with the
same address and forwards its data. It still sends the load to memory in
every case (`ld_mem_req` = `ld_valid`), so the cache sees the same
access whether or not the load matched. `PROTECT = 0` gives the usual
behaviour, skipping memory on a match, for comparison. `sc_top` contains
it. The store-queue contents come in through the `sq_*` ports and the
load through `ld_*`, because the queue that holds them is the core's.

## Timing

| event at clock edge *t*                        | visible after *t* | after *t+1* |
|------------------------------------------------|-------------------|-------------|
| instruction enters                             | its hold bits     |             |
| `BR_valid` branch resolves                     | dependents free; UBT slot free | a stalled branch with that ID can enter |
| barrier / last older branch resolves           |                   | Backend Restricted clears |
| `Res_FE` branch fetched                        | `fetch_stall` = 1 |             |
| `Res_FE` branch resolves or squash             | `fetch_stall` = 0 |             |
| misprediction                                  | younger entries gone, tail rewound, UBT entries of squashed branches freed | |

## Modules

| file                      | role |
|---------------------------|------|
| `rtl/sc_pkg.sv`           | field, marking and enum types; wrap-safe sequence compare |
| `rtl/sc_marking_decode.sv`| 11-bit field to Res/BD/BR markings and barrier flag |
| `rtl/sc_fetch_guard.sv`   | front-end restriction and predictor masks, `WIDTH` = 8 lanes |
| `rtl/sc_ubt.sv`           | Unresolved Branches Table, `ENTRIES` = 16, `PORTS` = 8 lookup/insert lanes |
| `rtl/sc_rob_restrict.sv`  | reorder-buffer restriction state, `DEPTH` = 512, 8-wide insert and in-order commit |
| `rtl/sc_top.sv`           | everything wired; the baseline core connects through its ports |
| `rtl/sc_stl_guard.sv`     | store-queue search for loads that never skips the memory access, `SQ_ENTRIES` = 114 |

In `sc_top`, the core drives the following ports:

* `fetch_*`: a fetched group of up to eight instructions per cycle; it
  gets back `fetch_keep`, the lanes that go on to decode;
* `disp_*`: up to eight instructions per cycle into the reorder buffer,
  with valid/ready per lane; each gets its entry's index and sequence
  number;
* `resolve_*`: one resolving branch per cycle, with its index and a
  mispredict flag;
* `done_vec`: completed entries;
* `sq_*` and `ld_*`: the store queue and a load searching it; the load
  gets back the forwarding store and `ld_mem_req`.

In every group, lane 0 is the oldest and the valid lanes are contiguous
from lane 0. Up to eight entries retire per cycle on `commit_*`.

The core must issue only entries whose `can_exec` bit is set (an assertion checks
this). The following are outside this RTL:

* the predictor itself (gated by `bpu_lookup_en` and `bpu_update_en`);
* caches, rename, issue queues and execution units;
* the load/store queue, apart from its search in `sc_stl_guard`.

## Departures from the published design

* **Width.** Fetch, dispatch and commit are eight wide, as in the evaluated
  core. Only one branch resolves per cycle; the publication does not give
  a resolve width.
* **Load/store queue.** The publication says only that loads are always
  sent to memory, even when they match an older unresolved store.
  `sc_stl_guard` builds that search with these simplifications:
  * addresses are compared whole, with no access sizes or partial overlaps;
  * forwarded data is still used.

  The rest of the queue is the core's.
* **UBT "full".** For a direct-mapped table, "full" is read as "the slot for
  this BranchID is busy". Each slot stores the whole BranchID as a tag, so
  smaller tables (2, 4 or 8 entries) work unchanged. Tables larger than 16
  entries, which the publication evaluates as 64 and "unlimited", need wider
  IDs; the publication does not say how those would be indexed.
* **Fetch redirections.** The publication also says that speculative fetch
  redirections are prevented, against port-contention attacks on
  simultaneous multithreading, but gives no mechanism. Beyond the stall
  behind a `Res_FE` branch, nothing of that is built here.
* **Instructions without a prefix** wait for every older unresolved branch.
  The publication says such an instruction "depends on the most recent
  branch"; waiting for all of them is the safe superset.
* **`Res_BE` release** happens when no older speculation source is left. The
  publication says "when the instruction becomes safe and guaranteed to
  commit", which for loads also involves the memory system.
* **Left to the implementation.** The publication leaves open the sequence
  number width (32 bits here), the reset (synchronous, active low), squash
  handling and all cycle timing. The choices made here are in the module
  headers.

## Simulating

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`.

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/sc_pkg.sv tb/tb_sc_top.sv --top-module tb_sc_top
./obj_dir/Vtb_sc_top
```

* `tb_sc_marking_decode` checks all 12288 field, presence and kind
  combinations exhaustively.
* `tb_sc_fetch_guard` and `tb_sc_ubt` run random operations against small
  reference models, with all eight lanes.
* `tb_sc_stl_guard` fills a 114-entry store queue with random entries and
  addresses from a small pool, so that matches are frequent. A reference
  search must agree on the forwarding store, and the protected instance
  must send every load to memory.
* `tb_sc_rob_restrict` is directed. With 8 entries and one lane it walks
  through every rule above, using the BranchIDs 1001, 1011, 1100 and 1101
  of the usual illustration. It covers the ID-reuse stall, the exact
  release edge, the barrier release, `Res_BE`, a legacy branch, a squash, a
  full buffer and in-order commit. A second, four-lane instance checks one
  group with a slot clash, in-group dependencies and barriers, and a
  four-wide commit.
* `tb_sc_top` runs the full-size design (512 entries, 16-entry UBT) for
  20000 cycles.
  * **Stimulus.** A random instruction stream with random markings, fetched
    and dispatched in groups of up to eight, branches resolved out of
    order, 10 % of them mispredicted, and phases without execution that
    fill the buffer.
  * **Reference model.** Independent of the RTL, it recomputes each cycle
    which entries may execute.
  * **Safety check.** The hardware must never allow an entry the model
    forbids.
  * **Liveness check.** The hardware must allow, within 3 cycles, every
    entry the model allows.
  * **Coverage.** Each mechanism is counted and must occur: front-end block,
    predictor lookup and update masks, fetch-group cut, UBT stall, full
    buffer, squash, dependency release, back-end release, multi-lane
    dispatch, in-group dependency and multi-entry commit.
  * **Store-to-load search.** Beside the rest, a random 114-entry store
    queue and a random load every cycle: every load must go to memory, and
    a forwarding store must be valid, older than the load and match it.

  The run takes about a second. `tb_sc_top_ubt2` and
  `tb_sc_top_fetch_attack` run the same store-to-load checks.

* `tb_sc_top_fetch_attack` is a speculative-fetch penetration test. A
  small victim loop with a branch on a secret bit runs through the
  full-size design. A behavioural branch predictor (2-bit counters and a
  global history) sits in the testbench and sees only what
  `bpu_lookup_en` and `bpu_update_en` let through. With the branch marked
  `Res_FE`, the predictor ends in the same state for both secret values.
  Unmarked, its counter for that branch differs, which is the leak. The run
  also reports what the marking costs: fetch stalls behind the secret
  branch every iteration. A second phase runs loops in which 25, 50, 75 or
  90 % of the branches are marked `Res_FE` and checks that the stall time
  grows with that share while unmarked branches keep using the predictor.
  A third phase mimics the cryptographic programs by their counts of
  sensitive and total static branches (from 0 of 0 up to 4 of 46). For
  each count it runs a loop with one independent and one dependent
  instruction per branch and checks that sensitive branches stay away
  from the predictor, the others use it, dependent instructions wait for
  their branch, and fetch stalls only when some branch is sensitive.
* `tb_sc_top_ubt2` repeats the `tb_sc_top` run with a two-entry UBT, the smallest
  table size evaluated for the scheme. IDs then share slots, so dispatch
  stalls more often and fewer instructions find their branch.

To change sizes, override `ROB_DEPTH` (a power of two), `UBT_ENTRIES` (a
power of two, at most 16), `FETCH_W`, `DISP_W`, `COMMIT_W`, `SQ_ENTRIES` and `ADDR_W` on `sc_top`. The BranchID width `ID_W` and the
sequence width `SEQ_W` are in `sc_pkg`.
