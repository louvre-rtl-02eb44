# Louvre: ordering by versions instead of by draining

Under release consistency (the model of ARM64, in its RC_sc form), a core
needs ordering instructions for synchronisation: load-acquire (`ldar`),
store-release (`stlr`) and full fences. A conventional out-of-order core
enforces them bluntly:
- A fence may not retire until the store buffer is empty.
- Loads after a fence may not run ahead of it.
- Any speculative load whose cache line is invalidated is squashed.

Every fence therefore costs roughly one store-buffer drain. When a store
misses in the cache, that is a memory round trip.

Louvre makes the ordering explicit. Each memory access gets a small
number, its **version**, when it issues. The rule is that an access of a
higher version must not become visible before a po-older access of a
lower version ("po" means program order). Accesses of equal version are
unordered with respect to each other. With that in place:
- a fence can retire as soon as it reaches the head of the reorder buffer;
- stores can leave an *unordered* store buffer out of order, as long as
  their versions allow it;
- a load is squashed on an invalidation only when a version comparison
  shows that an ordering constraint on it is still pending.

The hardware is small:
- two version registers;
- a 10-bit tag on every LSQ and store-buffer entry (800 bits for a 64-entry
  LSQ and a 16-entry store buffer);
- two minimum-version trees;
- a short queue of in-flight load-acquires and fences.

This repository is synthesizable SystemVerilog for that ordering unit. It
attaches to an out-of-order core. The core itself and the caches are not
included; their connections are ports of the top module, `louvre_top`.

## Versions

Two registers produce the versions:
- `vr` is the version given to ordinary accesses;
- `lfvr` (last fence version) counts ordering instructions.

At issue, in program order:

| instruction   | version it gets | register update                      |
|---------------|-----------------|--------------------------------------|
| load, store   | `vr`            | none                                 |
| load-acquire  | `vr`            | `lfvr++`                             |
| store-release | `vr + 1`        | `lfvr++`                             |
| full fence    | (none)          | `lfvr++`, then `vr = lfvr`           |

Why this works:
- **Store-release.** It gets `vr + 1`, so it is ordered after every
  access issued before it. Later accesses keep `vr`, so they are *not*
  ordered after it. This is the one-way barrier of a release.
- **Load-acquire.** It shares `vr` with the accesses that follow it. The
  acquire ordering (later accesses may not overtake it) is not in the
  versions at all; it is enforced by the ordering queue (below).
- **Full fence.** It lifts `vr` past every version handed out so far.
  Everything after it is therefore ordered after everything before it.

A worked sequence from reset:

| op    | version | lfvr | vr |
|-------|---------|------|----|
| m1    | 0       | 0    | 0  |
| ldar  | 0       | 1    | 0  |
| m3    | 0       | 1    | 0  |
| stlr  | 1       | 2    | 0  |
| m5    | 0       | 2    | 0  |
| fence | -       | 3    | 3  |
| m6    | 3       | 3    | 3  |

`version_regs` applies the table to a two-wide issue bundle as a chain
within one cycle. A fence in slot 0 already raises the version of slot 1.

**Overflow.** The registers only grow. If an ordering instruction finds
`lfvr` at its largest value (1023 for 10 bits), the unit does four things:
1. It refuses the bundle (`iss_ready` low) and enters a drain state
   (`ovf_draining`).
2. It waits until ROB, LSQ, store buffer and ordering queue are all empty.
3. It resets both registers to 0 (`ovf_reset` pulses).
4. It lets issue resume.

At about 10 ordering instructions per 1000 instructions, this happens
roughly once every 100,000 instructions.

**Branches.** Versions are assigned on the speculative path. Every branch
therefore saves (`vr`, `lfvr`), as seen by that branch, in a checkpoint.
The checkpoint id comes from the core. A misprediction (`flush_valid`,
`flush_ckpt`) restores the pair. It also restores the ordering-queue tail
and cancels a pending overflow drain.

## The two minimum versions

Most decisions compare one version with the smallest version still held
by a structure:
- `v_min,sb` is the smallest version in the store buffer;
- `v_min,lsq` is the smallest version in the load/store queue.

`min_version_tree` computes each minimum with a balanced binary tree of
two-input comparators:
- 15 comparators for 16 entries, 63 for 64;
- sizes that are not a power of two are padded with invalid leaves;
- on equal versions the lower entry index wins.

The tree is combinational from the entries' registers. The minimum is
therefore exact in every cycle and never lags an insertion or removal by a
cycle. That costs depth: six comparator levels for the LSQ. A pipelined
minimum would also be correct if it only ever under-reports. That variant
is not built.

## Retirement (`retire_gate`)

At the head of the reorder buffer:
- **Store or store-release:** retires at once and moves into the store
  buffer. It needs only a free entry there (`stall_sb_full` otherwise).
- **Full fence:** retires at once. This is where Louvre saves the drain.
- **Load or load-acquire:** retires once satisfied, *and* only if its
  version is not greater than `v_min,sb`. A store of a lower version still
  in the buffer must become visible first (`stall_version`). For example,
  in `store A; fence; load B`, B is held at the head until A has left the
  store buffer.
- **Anything else:** retires when done.

One instruction retires per cycle.

## The unordered store buffer (`versioned_store_buffer`)

Sixteen entries. Each holds:
- address, data and version;
- a *requested* flag and a *line available* flag;
- an age matrix row, where `older[i][j]` means entry j entered before
  entry i.

A store may complete (write the L1 data cache) when **all** of these hold:
1. its line is available (write permission granted);
2. no older store to the same address is still in the buffer;
3. its version equals `v_min,sb`, **or** it is the oldest store in the
   buffer.

The oldest store can never be ordered after anything, so it may go
whatever its version. Among the eligible stores, the oldest is preferred,
then the lowest index. One store completes per cycle.

What the rule does:
- stores of the same version drain in any order, so a hit need not wait
  behind a miss;
- a store of a higher version waits for every lower one;
- a store-release waits exactly for the accesses before it.

For example: S1 (version 0, a miss), S2 (store-release, version 1),
S3 (version 0, a hit). S3 writes first, then S1 when its line arrives,
and S2 last.

Interface to the cache, a simple protocol of this design:
- **Request:** the buffer asks for write permission for one entry per
  cycle (`creq_*`), always the lowest-index entry that has not asked.
- **Grant:** the cache answers later with `cgnt_valid`/`cgnt_idx`. The
  line is assumed to stay writable until the store has written it.
- **Write:** completion is offered on `cwr_*`. `cwr_by_age` marks a store
  that goes only because it is the oldest.

Store-to-load forwarding (`fwd_*`) returns the data of the *youngest*
buffered store to the same word address. It uses the address CAM and the
age matrix.

**Write combining** (`sb_write_combine`, enabled by the parameter
`WRITE_COMBINE`, off by default). A new store may be merged into a
buffered store instead of taking an entry. Three conditions apply:
- the buffered store is the youngest one to the same word address;
- it has the *same version* as the new store;
- it is not being offered for completion in that cycle.

The merge replaces the entry's data. It is accepted even when the buffer
is full. Stores of different versions are never merged: the merged store
would otherwise become visible together with, and so possibly before,
stores it is ordered after. Turning the option on makes `ins_ready`
depend on the incoming address and version.

## Squash on invalidation (`lsq_version_tags`, `orq`)

A conventional core squashes every speculatively satisfied load whose line
is invalidated. Louvre squashes such a load only if one of these holds:
- its version > `v_min,sb`: a store ordered before it by a fence is still
  buffered; or
- its version > `v_min,lsq`: an access ordered before it is still in the
  LSQ; or
- a load-acquire that is still in flight has a version <= the load's.

The third test exists because a load-acquire and the loads after it share
one version, so no minimum can reveal that ordering. The ordering queue
supplies it. `orq` is a FIFO of in-flight load-acquires and full fences:
- they enter at issue with their version and leave when they retire;
- its output is the version of the oldest in-flight load-acquire.

The test uses `>=`. It therefore also squashes loads of the same version
that are *older* than the load-acquire. That is safe, but more than
strictly needed: the queue records versions, not ages.

`lsq_version_tags` keeps, beside the core's own LSQ and indexed by the
same entry number:
- the version;
- a load flag;
- a satisfied flag;
- the cache line the load read.

In the cycle of an invalidation it produces two masks:
- `squash_mask`: the loads to re-execute;
- `base_squash_mask`: what a conventional core would have squashed.

A squashed load keeps its entry and version and simply executes again.

## Top level and timing (`louvre_top`)

The top wires the five blocks together and exposes six groups of
connections to the core and the cache:

1. **Issue.** `iss_valid`, `iss_op`, `iss_lsq_idx` and `iss_ckpt` come in
   for up to two instructions. `iss_ready` and `iss_version` go back; both
   are combinational. A bundle is accepted only whole. The outputs
   `orq_stall` and `ovf_draining` tell why it was not.
2. **Execute.** `sat_*` reports satisfied loads. `fwd_*` is the
   forwarding lookup.
3. **Snoop.** `inv_valid`/`inv_line` in; `squash_mask` and
   `base_squash_mask` out, in the same cycle.
4. **ROB head.** Op, version, done flag, and a store's address and data
   come in; `retire` goes out.
5. **Cache.** `creq_*`, `cgnt_*`, `cwr_*`.
6. **Recovery.** `flush_valid`, `flush_ckpt`.

The core provides `rob_empty` and frees the LSQ entries of retired or
flushed accesses with `lsq_free_mask`.

All state changes at the rising edge. Reset is synchronous and active low
(`rst_n`). Every decision (issue, retire, completion, squash) is
combinational from registered state and the current inputs.

Default sizes:

| parameter | default | meaning                              | origin          |
|-----------|---------|--------------------------------------|-----------------|
| VER_W     | 10      | version bits                         | evaluated value |
| ISSUE_W   | 2       | memory instructions issued per cycle | evaluated value |
| LD_PORTS  | 2       | loads satisfied per cycle            | evaluated value |
| LSQ_N     | 64      | LSQ entries                          | evaluated value |
| SB_N      | 16      | store-buffer entries (32 also works) | evaluated value |
| ORQ_DEPTH | 16      | ordering-queue entries               | own choice      |
| NUM_CKPT  | 16      | version checkpoints                  | own choice      |
| ADDR_W    | 32      | address bits                         | own choice      |
| DATA_W    | 64      | store data bits                      | own choice      |
| LINE_OFF  | 6       | log2 of the cache-line size in bytes | own choice      |
| WRITE_COMBINE | 0   | same-version write combining         | own choice (option described, not evaluated) |

At these sizes yosys' coarse synthesis gives about 4,800 word-level cells,
4,500 flip-flop bits and 576 memory bits. Most of it is the store buffer's
address and data and the LSQ line tags. It reports no latches, no
combinational loops and no multiply-driven nets.

## Where this design goes beyond or departs from the original description

- **Version rules.** The prose describes incrementing `lfvr` on "any
  fence". The version table and the worked example also increment it for
  load-acquire and store-release, and give store-release `vr + 1`. The
  table is followed.
- **Same-address stores** never overtake each other in the store buffer.
  The original does not discuss them.
- **A full store buffer** holds a store at the ROB head. The original says
  stores retire "immediately".
- **The squash test against load-acquires** uses `>=` on versions, which
  is conservative (see above).
- **Own choices, not specified in the original:** the ordering-queue
  organisation and depth, the checkpoint count and mechanism, the cache
  handshake, the retire width, the tie-breaking, and the address, data and
  line sizes.
- **Write combining** is described only as an option in the original. It
  is built here but off by default.
- **Not included:** the core (fetch/decode/rename, issue queue, 192-entry
  ROB, functional units, LSQ address and data path) and the cache
  hierarchy (L1 64 KB, L2 512 KB, L3 8 MB, MESI coherence, 8 cores). The
  testbench of the top plays these parts in a simplified form. The
  performance results of the original evaluation (IPC, store latency,
  fence residency) cannot be reproduced with this RTL alone.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench                   | what it checks |
|-----------------------------|----------------|
| `tb_min_version_tree`       | 16, 64 and 5 entries against a linear search, with many ties |
| `tb_version_regs`           | the worked sequence (one and two per cycle); the overflow point (exactly 1,023 ordering instructions accepted from reset); then 40,000 random cycles against a reference model, with overflows, checkpoints, flushes and stalls |
| `tb_orq`                    | the queue against a reference FIFO, with flushes to checkpoints still in flight |
| `tb_versioned_store_buffer` | the S1/S2/S3 example, then a reference model of eligibility, selection, requests, forwarding and full stalls |
| `tb_lsq_version_tags`       | directed squash and no-squash cases for each of the three conditions, then a random reference model |
| `tb_retire_gate`            | directed retirement cases, then random heads |
| `tb_sb_write_combine`       | the store buffer with write combining on: directed merge, no-merge and full-buffer cases, then a reference model that merges |
| `tb_louvre_top`             | end to end at the default sizes (below) |

`tb_louvre_top` runs the whole unit at the default sizes, with no
parameter overrides. The testbench acts as:
- a 64-entry ROB;
- a random instruction stream with three mixes (normal, ordering-heavy,
  store-heavy);
- loads that hit or miss;
- branches, 20% of which mispredict;
- random invalidations;
- a cache with slow and fast write grants.

It keeps its own model of the versions, the ordering queue, the LSQ tags
and the store buffer, and checks every decision in every cycle. It also
checks that no store completes before a po-older store of lower version.
It retires 9,000 instructions and at least one version overflow, about
47,000 cycles (under a second of simulation time). It counts 14 mechanisms
and fails if any never occurs:
- fences and store-releases retiring early;
- loads held by `v_min,sb`;
- squashes, squashes caused only by a load-acquire, and filtered
  invalidations;
- out-of-order, minimum-version and by-age completions;
- full-buffer and full-queue stalls;
- overflow, flush and forwarding.

Build and run any testbench with plain verilator (the testbenches raise some
width warnings, hence `-Wno-fatal`), from the directory that
holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_louvre_top \
    -y rtl rtl/louvre_pkg.sv tb/tb_louvre_top.sv -o sim
./obj_dir/sim +verilator+rand+reset+2
```

## Files

| file                          | contents |
|-------------------------------|----------|
| `rtl/louvre_pkg.sv`           | the instruction-class enum and helper functions |
| `rtl/min_version_tree.sv`     | comparator tree for `v_min,sb` and `v_min,lsq` |
| `rtl/version_regs.sv`         | `vr`/`lfvr`, version assignment, overflow, checkpoints |
| `rtl/orq.sv`                  | ordering queue |
| `rtl/versioned_store_buffer.sv` | unordered versioned store buffer |
| `rtl/sb_write_combine.sv`     | merge-target search for write combining |
| `rtl/lsq_version_tags.sv`     | LSQ version tags and the squash filter |
| `rtl/retire_gate.sv`          | retirement rules |
| `rtl/louvre_top.sv`           | the complete ordering unit |
| `tb/tb_*.sv`                  | the testbenches above |
