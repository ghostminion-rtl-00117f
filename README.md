# GhostMinion cache system in SystemVerilog

Spectre-style attacks use the timing of the cache system as a channel. A
speculative load that is later squashed still leaves its line in the cache,
and the attacker times an access to that line. Hiding speculative lines in a
side buffer (as MuonTrap and InvisiSpec do) closes the channel from
squashed code to later code. It leaves a second channel open, *backwards in
time*. A younger speculative instruction can change what an older, still
running instruction sees. It can evict the older one's line, take the last
miss register, or make a hit out of a miss. The older instruction's timing
then depends on code that may yet be squashed.

GhostMinion closes both channels with one rule, called *temporal order* here.
Every instruction carries a timestamp in program order. A timing effect may
only flow from an older (or equal) timestamp to a newer one, never back.
Non-speculative work is visible to everyone. Each structure below enforces
the rule in its own way:

| mechanism | where | what it stops |
|---|---|---|
| speculative lines live only in a small GhostMinion beside each L1 | `ghostminion` | speculative fills and evictions in the L1/L2 |
| TimeGuarded reads: a line is visible only to readers at least as new as the load that brought it | `ghostminion` | an older load hitting on a younger load's line |
| TimeGuarded fills: a fill may take only a free way or a way holding a line at least as new as itself | `ghostminion` | a younger load evicting an older load's line |
| free-slotting: a committed load moves its line to the L1 and frees the GhostMinion way | `ghostminion` + `nspec_cache` | starvation of the small buffer |
| squash wipe: one cycle clears every line newer than the squash point | `ghostminion` | state left behind by wrong-path code |
| leapfrogging: an older miss steals the MSHR of the newest owner, which fails and retries | `mshr_file` | a younger miss blocking an older one |
| timeleaping: an older miss to a line a younger one is already fetching restarts the request under its own timestamp | `mshr_file` | an older miss finishing early because a younger one started first |
| failures cascade: a request leapfrogged at the L2 fails the L1 MSHR and its loads | `nspec_cache` + top | contention hidden at one level showing at the next |
| commit-only prefetcher training, only at the level the line came from | `stride_prefetcher` + top | speculative addresses training the L2 prefetcher |
| Shared/Invalid-only lines, non-coherent copies replayed at commit | `ghostminion` | speculative coherence-state changes |
| oldest-first arbitration of shared ports | `ts_arbiter` | a younger request winning a port over an older one |
| in-order issue to non-pipelined units | `fu_timeguard` | a younger division occupying the divider ahead of an older one |

## Timestamps and how to compare them

`ts_alloc` hands out one timestamp per dispatched instruction, up to eight
per cycle. Timestamps wrap at 2 × ROB = 384. At most 192 instructions are in
flight at once, so the modular distance tells which is older: `a` is older
than or equal to `b` when `(b − a) mod 384 ≤ 192`. `gm_pkg` defines this as
`ts_le`, along with `ts_lt` and `ts_add`. After a squash at timestamp `t`,
numbering restarts at `t + 1`.

Many places rank two requests against each other: MSHR victim selection,
arbiters, the response port and issue order. All of them use one key,
`key_newer(a_spec, a_ts, b_spec, b_ts)`. Non-speculative requests rank as the
oldest of all, because their effects are allowed to be seen by everyone.
Among speculative requests the timestamp decides.

## The GhostMinion (`ghostminion.sv`)

The GhostMinion is a set-associative buffer: 2 KiB and 2-way by default,
with 64-byte lines, so 16 sets. Each line holds:

- a tag;
- the timestamp of the load that brought it in;
- the level the data came from (L2 or memory);
- a non-coherent flag.

This metadata is kept in flops so that a squash can compare every line's
timestamp in the same cycle. The line data is a plain array.

- **Read** (combinational, alongside the L1 lookup). `rd_hit` means a
  matching line with `line.ts ≤ reader.ts` exists. A match that is too new
  raises `rd_guarded` and counts as a miss. The reader then goes to the L2
  exactly as if the line were absent.
- **Fill** (registered, decision combinational in `fill_ok`). The fill takes
  a free way if the set has one. Otherwise it takes the way holding the newest
  line whose timestamp is ≥ the filler's. If no such way exists, the fill is
  dropped and the data still reaches the load.

  Evicting a line of equal or newer timestamp is safe. Only instructions that
  are at least as new as the filler could ever notice the eviction.

  Two statements in the published description disagree here. One says only
  *strictly* more speculative lines may be overwritten. The figure and the
  sliding-window footnote allow equal timestamps. This design allows equal.
- **The same line twice.** A line can sit in the GhostMinion twice with
  different timestamps. This happens when an older load misses on a line a
  younger load brought in: the older load must not see that copy, so it
  fetches and records its own.
- **Commit.** The committing load looks up its line: same address, line
  timestamp ≤ the load's timestamp. `cm_hit` returns the data, which the top
  writes into the L1 as a commit writeback. The way is freed at the next
  edge. `cm_nc` marks a non-coherent copy, and the core must replay that load.
- **Squash.** Every line strictly newer than `sq_ts` is invalidated at the
  next edge, in one cycle.
- **Invalidate.** A coherence invalidation removes the line whatever its
  timestamp.

**Same-cycle rules.** A fill from an instruction squashed in the same cycle
is dropped. A fill hit by an invalidation of the same line in the same cycle
is dropped too. A line filled in a cycle is not touched by that cycle's squash
or invalidation loops.

The instruction-side GhostMinion is the same module with `COHERENT = 0`.

## Miss registers that respect age (`mshr_file.sv`)

Each MSHR records four things:

- the line address;
- the owner's timestamp and speculative bit;
- up to `TGTS` waiting requesters (targets), each with its own timestamp;
- a generation number.

An allocation attempt is decided combinationally. It has exactly one of the
following outcomes (`a_act`):

1. **merge**: an MSHR for the same line exists, and its owner is not newer.
   The request joins it as a target.
2. **timeleap**: an MSHR for the same line exists, and its owner *is*
   newer. The entry is restarted with the new request as owner and the
   generation is bumped. The targets already waiting, all newer than the
   new owner, fail and retry.
3. **alloc**: a free entry is taken.
4. **leapfrog**: no entry is free, but some owner is newer. The entry with the
   newest owner is taken over and its targets fail.

   Always choosing the *newest* victim matters for security. A request of
   intermediate age then cannot infer whether two other requests matched.
5. **reject**: everything is owned by older requests. The requester fails
   and retries later, exactly as if the MSHRs were full.

Failures are reported one cycle later in `fail_mask`, one bit per requester
id.

**Issue and responses.** Downstream requests are issued oldest first. They
carry the owner's timestamp, so the next level can apply the same rules. When
a restarted entry receives the response to its earlier request, the response
is recognised by its stale generation and ignored.

**Failures from below.** If the next level reports that an entry's request
failed there (`dfail`), the entry is freed and all its targets fail. This is
the cascading leapfrog.

**Squash.** A squash frees unissued entries whose owner was squashed. An
issued entry stays as an *orphan*: it waits for its data and drops it, and any
request may leapfrog it.

## A cache level (`nspec_cache.sv`)

The same module is the L1D, the L1I and the L2. A request passes through
`LAT` pipeline stages and is looked up at the last one. At the L1 the
GhostMinion is looked up at that stage too, through the `lk_*`/`side_*`
ports. A hit in either answers the request `LAT` cycles after it was
accepted. A miss goes to the MSHRs.

**Misses.**

- Non-speculative misses fill the cache when they complete. A commit
  writeback (`wb_*`) also fills it.
- Speculative misses never fill the cache. Their data goes up with a level
  tag, and the top records it in the GhostMinion.

Replacement is round-robin per set.

**The response port** serves two sources: hits leaving the last stage and
miss completions. When both want it in one cycle, the older request wins. A
losing hit stalls the pipeline, and a losing completion holds `drsp_ready`
low. `resp_valid` never depends on `resp_ready`, so levels can be chained
without combinational loops.

**Storage and reset.** A set's metadata (valid bits, tags, round-robin
pointer) is one memory word, and the data is one word per line, so both can
become RAMs. Nothing in them is reset. Instead, after reset the cache sweeps
its sets invalid, one set per cycle, with `req_ready` low. That takes 512
cycles for the L1D and 4096 for the L2.

## The rest of the system (`ghostminion_top.sv`)

The top is one core's share of the hierarchy, with the sizes of the
evaluated system as defaults:

| part | configuration |
|---|---|
| L1D | 64 KiB, 2-way, 2 cycles, 4 MSHRs, 32 load-queue ids |
| L1I | 32 KiB, 2-way, 2 cycles, 4 MSHRs |
| D and I GhostMinions | 2 KiB, 2-way each |
| L2 | 2 MiB, 8-way, 20 cycles, 20 MSHRs |
| L2 prefetcher | stride, 64-entry reference prediction table |
| dispatch | 8 timestamps per cycle |

**The L2 port.** The L1D, the L1I and the prefetcher share the L2 request
port through `ts_arbiter`, oldest first. Prefetches count as non-speculative.

**L2 requester ids.** The L2 identifies requesters as `{source, L1 MSHR
index}`. An L2 response can name MSHRs of both L1s at once. It leaves the L2
only when every L1 it names has taken it.

**Cascading failures.** An L2 failure of an L1 MSHR's request is fed back as
`dfail`, so the loads waiting on that MSHR fail too.

**Commit.** A load commit (`cm_*`) moves the line from the D GhostMinion into
the L1D. If the line originally came from the L2 or memory, the commit also
trains the stride prefetcher with the load's PC.

**Instruction fetch.** Fetches use the timestamp of the fetched instruction.
`icm_*` is the commit of that instruction.

**The divider.** `fu_timeguard` is the issue guard of the non-pipelined
divider. Operations leave its queue in program order, and only the head may
issue. `held` shows a ready younger division waiting for an older one.

**Events.** `ev` gives a one-cycle pulse per mechanism, for statistics.

**What is outside the top.**

- Main memory connects through the `mem_*` ports. Their tag is the L2 MSHR
  index plus a generation. `mem_rsp_nc` marks a line held Exclusive or
  Modified by another core.
- Coherence invalidations enter through `inv_*`.
- The core drives the load, commit, fetch and squash ports.

## What departs from the published design, and what is missing

- Only one core's hierarchy is built. In the evaluated system a 4-core chip
  shares the L2, and a coherence protocol decides when a copy is
  non-coherent. Here that information arrives on ports; the protocol itself
  is not built.
- The L3 drawn in the system overview is not built: the evaluated
  configuration has none. The TLB and page-walk GhostMinions, mentioned
  only in passing, are not built either.
- Stores, dirty data and writebacks to memory are not modelled. The
  hierarchy carries read data only.
- These details are choices of this design; the published description does
  not give them:
  - the line size (64 B);
  - replacement;
  - the pipeline shape;
  - MSHR targets and generations;
  - orphan handling;
  - the reset sweep;
  - the prefetcher's table layout;
  - the arbitration tie-breaks.
- GhostMinion lines may be duplicated, as described above.
- Only the divider has an issue guard. A core would add one per
  non-pipelined unit (integer divide, floating divide, square root).

## Simulating

Each module has a self-checking testbench in `tb/`. Every testbench prints
`TB_RESULT checks=<n> failures=<m>` and stops itself with a watchdog. Compile
`gm_pkg.sv` first, for example:

```
verilator --binary --timing --assert -Irtl --top-module tb_ghostminion \
    rtl/gm_pkg.sv rtl/ghostminion.sv tb/tb_ghostminion.sv
./obj_dir/Vtb_ghostminion
```

| testbench | what it checks |
|---|---|
| `tb_ghostminion` | the read/fill/commit/squash/invalidate rules, worked through on the example sets from the published figures (two sets of four ways) |
| `tb_mshr_file` | merge, alloc, the leapfrog example (a TS25 miss steals the TS28 entry from a full file), reject, timeleap, stale responses, squash orphans, failures from below |
| `tb_nspec_cache` | hit latency, speculative misses leaving the cache unchanged, non-speculative and writeback fills, side hits, leapfrogging, port arbitration |
| `tb_ts_alloc`, `tb_ts_arbiter` | wrap-around and squash rewind; oldest-first grants against a reference |
| `tb_stride_prefetcher` | training, confidence and the prefetch target |
| `tb_fu_timeguard` | in-order issue, no issue before the operands are ready or while the unit is busy, squash |
| `tb_gm_size_sweep` | one minion per size from 128 B to 4 KiB side by side: fill to capacity, overflow dropped, older fill evicts the newest line, TimeGuarding, squash count |
| `tb_ghostminion_top` | end-to-end run at full size (see below) |

`tb_ghostminion_top` runs the full-size top with its default parameters. A
behavioural memory, `tb/mem_model.sv`, stands in for DRAM with a fixed
60-cycle latency. The test provokes every mechanism on purpose and checks the
resulting latencies:

- a memory miss (≥ 82 cycles);
- a GhostMinion hit (2 cycles);
- an older load that is TimeGuarded and goes to memory;
- a commit move followed by an L1 hit;
- speculative misses leaving the L2 untouched;
- a dropped fill, and an older fill evicting a newer line;
- leapfrogging, timeleaping and rejection;
- the squash wipe and an orphaned miss;
- a non-coherent replay and a coherence invalidation;
- a prefetch that turns a later load into an L2 hit;
- the instruction side;
- the divider guard.

It then runs random traffic and checks every returned line against the
memory's data formula. Each line holds its line address XORed into
`0xD47A0000`, repeated 16 times. Finally it counts each event and reports a
failure for any mechanism that never occurred. It includes the L2's
4096-cycle reset sweep and finishes in well under a second of simulation
time.
