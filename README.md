# A trie-join accelerator core for graph pattern matching

Finding small patterns in a graph (paths, triangles, 4-cycles) is a
multi-way join of the graph's edge relation with itself. For example, the
triangle query `cycle3(x,y,z) = R(x,y), S(y,z), T(z,x)` joins three copies of
the edge list. Pairwise join plans build large intermediate tables. A
*worst-case optimal* join avoids them. It binds one variable at a time and,
for each variable, intersects the sorted value lists of every relation that
mentions it. This design is that kind of join engine, in RTL. Its parts:

- a depth-first controller over the join variables;
- a leapfrog intersection unit, built on binary search;
- a child-range lookup for trie-shaped relations;
- a cache of partial join results, so that a sub-result depending only on
  some earlier variables is computed once and then reused.

The core runs up to 32 hardware threads at once. Each unit keeps the state
of every thread in a small store indexed by thread id. Units pass work to
each other through queues. While one thread waits for memory, the others
keep the units busy.

The organisation follows the TrieJax architecture (cached trie join in
hardware, with units named Cupid, MatchMaker, LUB and Midwife). Encodings,
widths, handshakes and several policies are this design's own. They are
listed under "Departures and limits" below.

## Relations as tries

Every relation is stored sorted and as a trie, one level per attribute:

- **Level 0:** an array of the distinct first-attribute values.
- **Child ranges:** for node `i` of a level, `cr[i]` and `cr[i+1]` are the
  start and end offsets of its children in the next level's value array.
  The array therefore has one more entry than the level.
- **Level 1:** one concatenated array of all child values, sorted within each
  parent.

Example for `R = {(1,1),(1,2),(2,2),(3,4),(4,5)}`:

```
Rx            = 1 2 3 4
Rx child rngs = 0 2 3 4 5
Ry            = 1 2 2 4 5
```

The children of `x=1` (position 0) are `Ry[0:2] = {1,2}`.

Memory is word-addressed and every value is 32 bits. A graph is usually
stored twice: a forward trie (edges by source) and a backward trie (edges by
destination). Then any query variable can be the first level of some
relation.

## How a query runs

```
 host ─cfg─► query store ─► Cupid ──job──► MatchMaker ──► LUB ──LD─┐
                              │  ▲            ▲   │          ▲      │
                              │  └─MatchDone──┘   │          └─LUBDone
                              ├──job──► Midwife 0 ┘ (ranges)        │
                              ├──job──► Midwife 1 ┘                 │
                              ├──► PJR cache                        │
                              └──► ST unit ──line writes──► memory  │
                                     read arbiter ◄── LD of LUB, Midwife 0/1
                                          └──► read port (read-only caches)
```

### Cupid: the join controller

For each thread, Cupid stores:
- the current variable (`depth`);
- the thread's own first variable (`root`);
- for every variable bound so far, its value, its positions in both arrays
  and the ends of both ranges.

Only one thing happens per cycle. In priority order:
1. an answer from MatchMaker;
2. a thread from the internal queue (continue, backtrack, next cached value);
3. a freshly spawned thread;
4. the start of a static thread.

When a match arrives at variable `d`:
- **Last variable:** Cupid writes the result record to the ST unit and
  queues the thread to look for the next match.
- **Otherwise:** it steps to `d+1`. Each of that variable's two array slots
  is either a first-level array, sent to MatchMaker with its full range, or a
  child array. For a child array, the parent position recorded at an earlier
  variable is turned into a child-ranges address and sent to Midwife `k`.

On "no match" the thread steps back to `d-1` and asks for the match after
the one it had there. A thread whose own first variable is exhausted ends.
When all threads have ended, Cupid tells the ST unit to append the DONE token.

### MatchMaker and LUB: leapfrog intersection

A MatchMaker job has two ranges. A range comes either with the job from
Cupid or from Midwife `k` for slot `k`, in any order; a range that has
already arrived is never overwritten.

Once both ranges are known, MatchMaker asks LUB to:
1. load the first value of array 0;
2. binary-search it in array 1.

Each LUB answer is the first position whose value is >= the search value:
- **Equal:** a match. MatchMaker reports the value, both positions and both
  range ends.
- **Past the end:** no match.
- **Otherwise:** the larger value found becomes the search value in the
  other array, starting one past that array's current position.

Each LUB probe is one memory read, and the thread is parked in LUB's thread
store until the read returns.

### Midwife

Midwife turns a parent position into a child range. Its single read returns
the two words `cr[i]` and `cr[i+1]`, and it answers with
`[base+cr[i], base+cr[i+1])`. There are two Midwife units, one per array slot
of a variable.

### Threads

**Static threads.** `start` launches `static_thr` threads (1 to 32). Each
takes an equal slice of the first array of the first variable.

**Dynamic spawning** (`dyn_en`). Spawning happens when a thread matches a
variable that is not the last one and a thread slot is free:
- The new thread gets a copy of the state.
- The new thread continues the same variable after the match.
- The old thread's `root` moves below the match, so it only explores that
  subtree and ends when the subtree is done.

No work is done twice. Idle thread slots are filled wherever the search tree
branches.

### Why the internal queues are twice as deep as the thread count

A thread is always in exactly one place: a unit's queue, a unit's thread
store or a memory request. Inter-unit queues hold 32 entries, so they can
never refuse a thread that exists.

Cupid's own loop queue is the exception. When all 32 threads wait in it, the
event that pops one also needs to push it back in the same cycle. That queue
is therefore 64 deep.

## The partial-join-results (PJR) cache

In `path3(x,y,z) = R(x,y), S(y,z)`, the set of `z` values depends only on
`y`. The query marks:
- one *cached variable* `c`, here `z`;
- a *key mask* over the earlier variables, here `{y}`.

When Cupid steps into `c`, it probes the cache with the masked key values:
- **Hit:** the thread takes the values of `c`, with their array positions,
  one per cycle from the cache entry. MatchMaker is not used.
- **Miss:** the thread opens an entry in the insertion buffer, if the buffer
  has a free slot and no open entry has the same key. The thread becomes a
  *member* of that entry, and every value it finds for `c` is appended.

A partly built entry must never be visible, which leads to the following
rules:

- **Insertion buffer.** Entries are filled there. Only a complete entry is
  copied into the cache, one record per cycle, and its tag becomes valid
  after the last record.
- **Path check.** An entry remembers the values of every variable before
  `c` from the thread that opened it. An append from any other path is
  refused. Another thread may reach the same key along a different path
  while the entry is open; it simply computes without the cache.
- **Thread counter.** The entry counts the member threads:
  - a member that spawns a helper below the key makes the helper a member
    (+1);
  - a member that backtracks out of `c`, or ends below it, leaves (-1).
  
  At zero, every path under the key has been explored and the entry is
  complete.
- **Overflow.** An entry has at most 20 records. One more append marks it
  overflowed, and it is dropped instead of committed.
- **No eviction.** The cache is direct mapped by a hash of the key. A
  completed entry whose line is already taken is dropped, so a line that a
  thread is reading never changes under it. The whole cache is cleared at
  `start`.

At default size the cache has:
- 16384 entries × 20 records × 96 bits (value + two positions) ≈ 3.75 MB
  of data;
- tags (key, count, valid) ≈ 0.28 MB.

It is split into 4 banks by the low index bits.

## The query format

The host writes 34 words through `cfg_we/cfg_addr/cfg_wdata` before pulsing
`start`.

| word | contents |
|---|---|
| 0 | `[2:0]` number of variables (1–4), `[3]` cache enable, `[5:4]` cached variable, `[9:6]` key mask, `[15:10]` static threads, `[16]` dynamic spawning |
| 1 | result base address |
| 2+4(2v+s) | slot `s` of variable `v`: `[0]` first level, `[2:1]` parent variable, `[3]` parent slot |
| 3+4(2v+s) | value array base |
| 4+4(2v+s) | length (first-level arrays only) |
| 5+4(2v+s) | child-ranges base of the parent level (child arrays only) |

A child slot names the variable and slot whose matched position is its
parent. Path-3 over a forward trie `F`:

| variable | slot 0 | slot 1 |
|---|---|---|
| x | F level 0 | F level 0 |
| y | F level 1, parent (x, slot 0) | F level 0 |
| z | F level 1, parent (y, slot 1) | F level 1, parent (y, slot 1) |

The cache is on for `z`, keyed by `y`. A variable that appears in only one
relation, like `x` and `z` here, is given the same array in both slots, so
the intersection is the array itself.

Cycle queries use the backward trie for the relation that closes the cycle.
For example, `T(z,x)` becomes a child of `x` in the backward trie, and it is
checked when `z` is bound.

## Results and memory ports

- **Result records.** Each record is 4 words, with variables beyond the
  query's count set to 0.
- **Line writes.** Records are packed four to a 16-word line, and each line
  is written with one write on `wr_*`.
- **End of a query.** The DONE token, a record of all ones, follows the last
  result, then the partial line is written. `done` rises after that last
  write.
- **Reads.** A read (`rd_*`) returns the two words at `addr` and `addr+1`,
  tagged with `{unit, thread}`, and may return out of order.

The read port is where the read-only L1/L2 caches and the host memory system
connect. They are not part of this RTL.

## Parameters (`triejax_top`)

| parameter | default | meaning |
|---|---|---|
| `NUM_THREADS` | 32 | hardware threads; every thread store and queue scales with it (power of two) |
| `PJR_ENTRIES` | 16384 | cache entries (power of two, ≥ 4) |
| `PJR_ENTRY_SIZE` | 20 | records per entry |
| `IB_ENTRIES` | 16 | insertion-buffer entries |

Shared widths (`tj_pkg`): 32-bit values and addresses, up to 4 variables,
2 arrays per variable, 16-word lines.

## Departures and limits

- **At most two arrays per variable and four variables.** Path-3, Path-4,
  Cycle-3 and Cycle-4 fit. Clique-4, where every variable is in three
  relations, cannot be expressed. A general MatchMaker would leapfrog over
  any number of arrays.
- **Simpler thread split.** The static split (equal slices of the first
  array) and the spawn rule are simple choices. They are not tuned.
- **Small Cupid thread store.** It holds about 700 bits per thread (about
  2.8 KB in all). That is smaller than a store sized for longer queries.
- **Cache policy.** Direct mapped, no replacement, cleared per query. One
  cached variable per query.
- **Serial units.** One event per cycle per unit. There are no duplicated
  LUB units, and there is no banking-aware scheduling of cache accesses.
- **No timing closure.** Nothing here has been timed against a clock target.
  The combinational cache probe and record read are the longest paths.

## Verification

Every unit has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_lub` | 3000 searches, 32 threads in flight, out-of-order memory: position, exhausted flag, value against a linear scan |
| `tb_midwife` | child ranges against the offsets array, out-of-order answers |
| `tb_matchmaker` | MatchMaker + LUB: first common value and positions against a merge reference; ranges from job and Midwife in all orders |
| `tb_cupid` | Cupid with a small PJR cache and behavioural MatchMaker/Midwife: full result sets of Path-3, Cycle-3, Cycle-4 against brute force |
| `tb_pjr_cache` | reference model of hits, records, allocation, path check, counters, commit/overflow/taken outcomes |
| `tb_write_buffer` | line packing, DONE token, line count, write stalls |
| `tb_query_store` | random queries encoded, written in random order, decoded |
| `tb_rd_arbiter` | grant/tag correctness, response steering, round-robin fairness |
| `tb_triejax_top` | whole core at default parameters (see below) |

`tb_triejax_top` builds the following workload:
- a random 28-node graph with a high-degree hub, laid out as forward and
  backward tries;
- compiled Path-3, Path-4, Cycle-3 and Cycle-4 queries, run in 8
  configurations: 1 to 32 static threads, dynamic spawning on and off, cache
  on and off, random read and write stalls.

Behind it is a behavioural memory that answers reads out of order.

For every run, it reads the results back from memory. It checks that the set
matches a brute-force evaluation, with nothing repeated or missing, and that
the DONE token is present.

It also counts each mechanism over all runs and fails if any never happened:
spawns, backtracks, cache hits, allocations, commits, overflows, read
back-pressure, write stalls, reordered answers, static multithreading, and
static-only mode.

To run one, with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_triejax_top \
    rtl/tj_pkg.sv tb/tb_triejax_top.sv -o sim && obj_dir/sim
```

`tb/mem_model.sv` and `tb/ld_mem.sv` are behavioural memories used only by
the testbenches.
