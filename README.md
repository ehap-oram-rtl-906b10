# EHAP-ORAM: a crash-consistent Path ORAM controller for non-volatile memory

Oblivious RAM hides which memory locations a program touches: each program
access is turned into the read and rewrite of a whole random path of a binary
tree of encrypted blocks held in main memory. When that main memory is
non-volatile (phase-change memory, for example), the tree survives a power
failure, but the controller's on-chip state does not. The stash (blocks read
from the tree but not yet written back) and the position map (which path each
block lives on) are volatile. A crash in the middle of an access can therefore
leave the persistent tree and the persistent position map disagreeing, and
blocks are lost.

EHAP-ORAM closes that gap with three small hardware additions to a Path ORAM
controller:

* a **temporary PosMap** that parks a block's new path id until the block has
  really been written to that path, so the persistent map never points to a
  path that does not yet hold the block;
* a **backup block**: when a block is read for an access, a copy of it as it was
  read is written back to its *old* path in the same eviction, so the old map
  entry stays valid while the block's new copy may still sit in the stash;
* a **drainer** and two battery-backed **write pending queues (WPQs)**, one for
  evicted data blocks and one for changed PosMap entries. The drainer frames
  each eviction with `start` and `end`. Nothing of a round reaches memory
  before `end`, and everything does after it, even across a power failure.

This repository holds synthesizable SystemVerilog for the controller, a
behavioural model of the memory side, and self-checking testbenches that
inject power failures and check recovery.

## Path ORAM in one page

The ORAM tree has levels 0 (root) to L. Each node ("bucket") holds Z block
slots, and every leaf names a path: path id `p` is the chain of buckets from
the root to leaf `p`. A block header carries the program address, the path id
and the encryption IVs; an unused slot holds a dummy block. Invariant: a block
mapped to path `p` is either in the stash or in some bucket on path `p`.

The default configuration is a 4 GB tree of 64-byte blocks: L = 23 (2^23
leaves, 2^24 - 1 buckets), Z = 4, so a path has Z*(L+1) = 96 slots. The stash
holds C = 200 blocks. The position map has one path id per logical block,
2^26 entries of 24 bits (192 MB).

An access to block `a`:

1. **Check stash.** If `a` is there, serve it. Done.
2. **PosMap access.** Read `a`'s path id `l`; draw a fresh random `l'`.
3. **Load path.** Read all 96 slots of path `l` into the stash.
4. **Update stash.** Give `a` path id `l'`; apply the write data.
5. **Evict.** Rewrite all 96 slots of path `l`. Fill from the deepest bucket
   upward with stash blocks allowed there, and pad with dummies.

A block may sit in the bucket at level `k` of path `l` only if its own path id
agrees with `l` in the top `k` bits (of L). That is the only placement rule.

## What goes wrong on a crash, and what EHAP-ORAM changes

In plain Path ORAM the PosMap already says `l'` after step 2, but block `a`
reaches path `l'` only when some later eviction writes it there. In between,
its only copy is in the stash. A crash in that window loses it. A crash during
step 5 is worse: part of path `l` is already overwritten, and the blocks that
were there are gone.

EHAP-ORAM changes steps 2, 4 and 5:

* **Step 2.** `(a, l')` goes into the temporary PosMap, not into the PosMap.
  The PosMap keeps `l`.
* **Step 4.** Besides the updated `a` (path id `l'`), the stash gets a backup
  copy `(a, l)` with the data as read. The backup is eligible at every level
  of path `l`, and eviction prefers backups, so it always goes back onto path
  `l`.
* **Step 5.** Every slot written (real, backup or dummy) goes through the drainer into
  the data block WPQ. Each evicted *regular* block with a temporary-PosMap entry
  releases that entry into the PosMap WPQ. After the 96th slot the drainer
  raises `end`, and the round is committed in both queues at once. Only then do the
  queues drain. A drained PosMap entry goes to the persistent PosMap table and
  into the on-chip PosMap at the same moment.

After a crash, the persistent PosMap and the tree therefore always agree.
Suppose block `a`'s new copy reached the tree. Then its PosMap entry was in the
same committed round and says `l'`. Suppose instead it did not. Then the
PosMap still says `l`, and the backup `(a, l)` is on path `l`. Finally, suppose
the crash came before `end`. Then neither queue released anything of that
round, and path `l` still holds what it held before the access.

## Copies, backups and the path-load rules

This is the part of the design that needs the most care. A block can now have
several copies in the tree, such as a backup and a regular copy, or an old
backup that no longer matters. The controller must pick the right one when it
loads a path.
Each loaded real block `x` (header path id `x.leaf`) is first compared with the
PosMap entry for `x.addr` (a PosMap read per loaded block):

| loaded copy | PosMap says | stash holds | action |
|---|---|---|---|
| any | ≠ `x.leaf` | - | outdated copy (an old backup): drop; the eviction overwrites it |
| regular | = `x.leaf` | nothing of `x` | insert |
| regular | = `x.leaf` | a regular copy with the same path id (restored from a backup earlier on this path) | replace it, the regular copy is newer |
| regular | = `x.leaf` | otherwise | drop |
| backup | = `x.leaf` | nothing of `x` | insert as a regular block: the newer copy was lost in a crash, the backup is the data |
| backup | = `x.leaf` | regular copy with another path id, no backup | keep as a backup: the block's newer copy is only on chip, so this backup is still its only durable copy and must be written back |
| backup | = `x.leaf` | otherwise | drop |

A stale backup is never invalidated by an extra write, which would reveal
where the block used to be. It simply fails the PosMap comparison the next
time its path is loaded, and that path's eviction overwrites it.

The "keep as a backup" row matters in normal operation, not only after a
crash. Suppose the accessed block `a` did not fit on path `l` and stays in the
stash under `l'`. Then a later access to another path that crosses `(a, l)`'s
bucket must carry the backup back out. Otherwise the eviction overwrites the
only durable copy of `a`.

## Recovery

After power returns, the controller is reset. The stash and the temporary
PosMap are empty, since reset clears them. A pulse on `rec_start` then copies
the persistent PosMap table into the on-chip PosMap. It reads one entry per
request over the `pm_rd` port, NBLK entries in all. From then on, ordinary
accesses find every block through the rules above. A block whose only copy is
a backup is promoted to a regular block when its path is loaded.

## Blocks

| module | role |
|---|---|
| `ehap_pkg` | widths, block header and queue entry records, event strobes |
| `ehap_oram` | top: the step sequencer and the wiring of all blocks |
| `stash` | C-entry associative block buffer: lookup, free-slot search, eviction candidate per (path, level) |
| `posmap` | on-chip position map, one-cycle synchronous read |
| `temp_posmap` | T-entry associative table of (address, new path id) |
| `drainer` | start/end framing of a round, routing to the two WPQs |
| `wpq` | write pending queue with uncommitted/committed regions; instantiated twice |
| `addr_logic` | (path id, level, slot) to NVM byte address |
| `leaf_rng` | fresh path ids (LFSR) |

Parameters of `ehap_oram` and their defaults:

| parameter | default | meaning |
|---|---|---|
| `L` | 23 | tree height (levels 0..L) |
| `Z` | 4 | slots per bucket |
| `C` | 200 | stash blocks |
| `T` | 200 | temporary PosMap entries (sized like the stash so it cannot overflow first) |
| `DWPQ` | 96 | data block WPQ entries, at least Z*(L+1) |
| `PWPQ` | 96 | PosMap WPQ entries; Z*(L+1) covers the worst case of one entry per slot |
| `NBLK` | 2^26 | logical blocks (PosMap entries) |
| `SEED` | `32'hACE1_2468` | path id generator seed |

Header format (`blk_t`, 570 bits): `valid` (0 = dummy), `bk` (backup copy),
32-bit address, 24-bit path id (the low L bits are used), 512-bit data. The
IV fields of a real block header belong to the encryption engine, which is not
part of this RTL.

## Interfaces and timing

All ports are valid/ready, synchronous to `clk`, with an active-low
asynchronous `rst_n`.

* `req_*` / `resp_*`: one request at a time from the last-level cache.
  `req_ready` is high only when the sequencer is idle. `resp_valid` pulses
  once with the read data (the old data for a write) and `resp_hit` (served
  from the stash).
* `nvm_rd_*`: slot reads, one outstanding at a time; the response carries the
  slot's block.
* `nvm_wr_*`: the data block WPQ's drain.
* `pm_wr_*`: the PosMap WPQ's drain to the persistent PosMap table.
* `pm_rd_*`: table reads during recovery.
* `power_fail`: one-cycle pulse. The sequencer stops until reset. Both
  queues drop an open round and keep draining a committed one.
* `events`: one-cycle strobes (stash hit, queue stall, backup, new block,
  stale drop, restore from backup, backup kept, PosMap entry persisted,
  eviction round) for counters.

Cycle counts, with an NVM read latency of `R` cycles after acceptance:

* stash hit: `resp_valid` rises one cycle after the request is accepted;
* miss: about 5 cycles, plus `R + 2` per dummy slot or `R + 3` per real slot,
  for all Z*(L+1) slots; then 1 to 2 cycles to the response. At full size with
  `R = 4` and an empty tree this is 581 cycles;
* eviction: 1 + Z*(L+1) cycles after the response; `end` follows one cycle
  later;
* the queues then drain at the pace of the memory's ready signals. A following
  miss waits for both queues to empty (a `queue_stall` event). It never reads a
  path whose last write is still queued. A stash hit does not wait.

## How closely this follows the design described

These parts follow the published design directly:

* the five access steps;
* the temporary PosMap, sized like the stash (200 entries);
* the backup block, written back to the old path;
* the drainer issuing `start` and `end` to both queues;
* two 96-entry WPQs in the persistence domain;
* persisting only the PosMap entries that changed, to a PosMap table in a
  trusted NVM region;
* all default sizes.

These are choices of this implementation, where the description gives no
detail:

* the exact path-load rules above, including the "keep as a backup" case;
* backup-first eviction;
* no separate invalidation writes. The published description marks blocks
  invalid in the tree when a path is loaded, and marks a backup invalid once its
  block is persisted on the new path. Here nothing is written during a load,
  and an outdated copy is recognised by comparing its path id with the PosMap;
* merging the PosMap when an entry drains rather than at `end`;
* waiting for empty queues before the next miss;
* one outstanding slot read;
* the recovery reload sequence;
* the breadth-first tree layout;
* the LFSR as the path id source;
* the header encoding of dummy and backup blocks;
* a 24-bit path id field for a 23-bit leaf number. The published sizing of a
  PosMap WPQ entry uses 32 + 24 bits, while L = 23 needs only 23.

## Limitations

* **Blocks left in the stash.** A block loaded from path `l` that does not fit
  back during the eviction has no durable copy until a later eviction places
  it. This applies to a block that was not the target of the access, so it has
  no backup. The scheme described does not cover this case, and this RTL does
  not add anything for it. The end-to-end testbench reports how many such
  blocks existed at each injected crash and exempts them from its
  no-loss check. With Z = 4 such blocks are rare, but they are possible.
* **No encryption.** Blocks cross the NVM ports in plaintext. An AES
  counter-mode engine, with the IV1 and IV2 fields in the header, belongs on
  those ports.
* **PosMap size.** The full-size on-chip PosMap is a 192 MB array. This is
  faithful to the table-based configuration, but in silicon it would be a
  trusted memory region, not on-die storage.
* **Not built:**
  * the oblivious (cmov-style) rewrite of the whole PosMap table;
  * the recursive-PosMap variant, which stores the map as a second ORAM tree;
  * the "full persistency" and "full NVM" comparison designs;
  * multi-channel memory.
* **Not secure as shown.** The LFSR is not a secure random source, and the
  timing of an access depends on how many real blocks a path holds.
  Stash-hit accesses skip the path access entirely, as the step list
  describes.

## Verification

Each module has a self-checking testbench in `tb/`. Every testbench prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

| testbench | what it checks |
|---|---|
| `tb_stash` | lookup priority, free slot, occupancy, and eviction choice for every (path, level), against a prefix-rule reference |
| `tb_posmap` | one-cycle read latency against a reference, and that a read in the cycle of a write to the same entry returns the old value |
| `tb_temp_posmap` | inserts, updates, removals and overflow, against a reference table |
| `tb_wpq` | nothing uncommitted is released, order is kept, a power failure drops the open round, committed data drains |
| `tb_drainer` | start with begin, routing, `end` exactly one cycle after the last slot, power failure abandons the round |
| `tb_addr_logic` | bucket and byte address against a root-to-leaf walk, at L = 23 |
| `tb_leaf_rng` | LFSR sequence, hold, coverage of all path ids |
| `tb_ehap_oram` | end to end at L = 3, Z = 4, 44 blocks (see below) |
| `tb_ehap_oram_workload` | the top at its defaults under three synthetic miss streams (streaming, scattered over 64 MB, hot set), 826 accesses checked against a reference memory, with per-stream latency and peak stash occupancy |
| `tb_ehap_oram_full` | the top at its defaults: 28 accesses over the whole 2^26-block address space, 96 slot reads and writes per round |

`tb_ehap_oram` first reloads the PosMap and runs random reads and writes
against a reference memory. It then injects three power failures: at a random
moment, inside an eviction round, and during a path load. After each one it
waits for the queues to drain, resets, and reloads the PosMap. It then works
out each block's value from the memory model's contents alone. It checks
three things:

* that value was once written to the block;
* it is no older than the last value made durable by a committed round;
* the controller returns exactly that value.

The test requires each mechanism to occur at least once: stash hit, queue
stall, backup, first-touch block, stale drop, restore from backup, backup
kept, PosMap persist, crash inside an open round, and recovery.

At full size the workload test sees a mean miss latency of about 710 cycles
(NVM read latency of 4 cycles) and a peak stash occupancy of 25 of 200. It
starts from a PosMap holding a random-looking labelling, as a reload from the
persistent table leaves it. The on-chip PosMap has no reset. If it were left
all-zero, every first touch would go to path 0, where remapped blocks fit only
near the root, and the stash would fill. A system must therefore run the
reload (`rec_start`) at every boot, and the table must be initialised once
with random path ids.

`tb/nvm_model.sv` models the memory side for the testbenches. It stores the
tree slots and the PosMap table sparsely, has a fixed read latency, and
applies random back-pressure to writes.

To run a testbench with Verilator (5.x):

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/ehap_pkg.sv rtl/*.sv tb/nvm_model.sv tb/tb_ehap_oram.sv \
  --top-module tb_ehap_oram -Mdir obj_tb
./obj_tb/Vtb_ehap_oram
```

For a unit testbench, list `rtl/ehap_pkg.sv`, the module's file and its
testbench. The full-size run needs about 300 MB of memory for the position
map.
