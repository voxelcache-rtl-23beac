# VoxelCache: a key/pointer store inside the data caches

Online mapping systems for robots and 3D reconstruction (voxblox, InfiniTAM,
OpenChisel, FIESTA and similar) keep the map as a sparse set of *voxel
blocks*. A hash table maps each block's integer coordinate (kx, ky, kz) to a
pointer to the block's storage. Every depth frame casts rays through the map,
and every voxel a ray touches costs a hash-table lookup. These lookups
dominate the run time, yet a single map update touches only a few hundred
distinct blocks.

VoxelCache keeps those recent coordinate-to-pointer translations in the
processor's own data caches. A few ways of every cache set are *reserved*.
A reserved line holds key/pointer pairs instead of ordinary memory data, and
it is addressed by a hash of the key instead of a virtual address. A lookup
that hits returns the pointer within a cache access time, with no
hash-table walk in software. A lookup that misses returns "invalid", and
software falls back to its ordinary hash table. A miss never generates a
memory access, so the reserved section behaves as a cache of the software
table, not as a second copy in memory.

This repository gives RTL for the VoxelCache additions to one core's memory
pipeline:

- the instructions;
- the load-store queue mode flag;
- the pseudoaddress hash;
- the reserved-line lookup and replacement logic of L1D and L2;
- the controller that walks them.

It does not include the core or the ordinary cache data path.

## Reserved lines and what is in them

`reserve_cache_lines m, lvl` sets a *mode* bit on the first `m` ways of every
set of cache level `lvl` and invalidates those lines. Ordinary loads and
stores never allocate into a line whose mode bit is set. `unreserve_lines`
clears the bits again. The main CPU configuration reserves:

- 1 of the 4 ways of a 32 KiB L1D;
- 2 of the 8 ways of a 256 KiB L2.

The GPU configuration reserves 1 of the 4 ways of a 128 KiB L1D, and only
there.

A reserved line stores `PAIRS` slots. Each slot is a 12-byte key (three
signed 32-bit coordinates) followed by an 8-byte pointer, so 20 bytes:

    CPU, 64-byte line:   key1 | ptr1 | key2 | ptr2 | key3 | ptr3 | (4 bytes unused)
    GPU, 128-byte line:  six such pairs, 120 bytes, 8 unused

In the RTL a line is `pair_t [PAIRS-1:0]`, with pair 0 in the low bits and
the key in the low 96 bits of a pair (`vc_pkg`). Each slot also has a valid
bit and an LRU age. These belong to the line's state bits, next to its tag
and mode bit, not to its data bytes.

The all-zero pointer is the *invalid value*:

- a failed lookup returns it;
- `voxcache_remove` writes it.

## Pseudoaddress: how a key finds its line

A key is mapped to a line number called the pseudoaddress:

    pa = hash(kx, ky, kz) % NR
    hash = (kx * 73856093) ^ (ky * 19349669) ^ (kz * 83492791)   (32-bit wrap)

`NR` is the number of reserved lines in the outermost level that holds them:

- CPU: 512 L2 sets × 2 ways = 1024;
- GPU: 256 L1D sets × 1 way = 256.

Each level splits `pa` its own way: `set = pa % SETS` and `tag = pa / SETS`.
So a key has exactly one home set per level, and the tag tells which
pseudoaddress a reserved line currently holds.

Because NR equals the number of reserved L2 lines, every pseudoaddress has a
slot of its own in L2. L2 reserved lines are never evicted at the default
sizes. L1D, with 128 reserved lines, holds only an eighth of them and
replaces lines by LRU.

Keys whose pseudoaddresses collide share a line of `PAIRS` slots. When more
than `PAIRS` such keys are live, the within-line LRU decides which pair is
dropped. The dropped key simply misses on its next lookup.

The hash multipliers are the usual spatial-hash primes, and this design
chose them. Any hash can be substituted in `vc_pseudoaddr`. The modulo uses a
constant `NR`, which synthesizes to a mask when NR is a power of two.

## Two-level lookup

A lookup goes through these steps:

1. **L1D line probe.** The line with tag `pa / SETS` is searched among the
   valid reserved ways of set `pa % SETS`.
2. **L1D line hit.** All `PAIRS` keys of the line are compared at once.
   - If the key is present, its pointer is returned, and the slot and the
     line become most recently used.
   - If the key is absent, the invalid value is returned and the lookup
     ends. It does **not** go on to L2, because an L1D line that is present
     is as new as the L2 copy (inserts are written through).
3. **L1D line miss.**
   - GPU configuration: return invalid.
   - CPU configuration: probe L2 the same way.
4. **L2 line hit.**
   - If the key is present, its pointer is returned, and the whole line is
     copied into L1D (over the L1D set's LRU reserved line).
   - If the key is absent, invalid is returned and nothing is copied.
5. **L2 line miss.** Return invalid. Nothing is fetched from memory.

An insert (or a remove, which is an insert of the invalid value) goes through
these steps:

1. Take the current line: from L1D if it is there, else from L2, else start
   an empty line.
2. Place the pair with the within-line policy:
   - overwrite the pointer if the key is already present;
   - else use the lowest empty slot;
   - else replace the slot with the oldest age.
3. Write the resulting line, with its slot states, to L1D (over the same tag,
   or a free reserved way, or the LRU reserved way) and through to L2.

The insert reports in its status whether the key was already present.

The walk is in `vc_controller`. The key compare and slot policy are in
`vc_line_logic`. The tag match and line replacement for one level are in
`vc_cache_level`.

## Replacement at two granularities

- **Within a line** each slot keeps an exact age, `0..PAIRS-1`.
  - Touching a slot (a lookup hit or an insert) makes it 0 and ages every
    valid slot that was younger.
  - An insert into a full line takes the slot whose age is `PAIRS-1`.
  - An exact order of 3 slots needs more than the 2 bits per line that a
    tight budget would allow. This design spends 3 bits per slot (`AGE_W`)
    instead.
- **Across lines** a set keeps one LRU order over all its ways, reserved and
  ordinary.
  - A VoxelCache line write picks among the reserved ways only.
  - For ordinary data, `vc_cache_level` offers `nm_victim`: the LRU way
    whose mode bit is clear. The host cache uses it for its fills and
    reports its hits on `nm_touch`. So ordinary traffic and key/pointer
    lines never evict each other.

## Instructions and the load-store queue

| mnemonic | operands | effect |
|---|---|---|
| `reserve_cache_lines` | ways, lvl | reserve the first `ways` ways of level `lvl` (1 = L1D, 2 = L2) |
| `voxcache_lookup` | state, rd1, rd2, r1 | look up key → `r1`; `state` = found |
| `voxcache_insert` | status, rd1, rd2, r1 | insert key with pointer `r1` |
| `voxcache_remove` | status, rd1, rd2 | insert key with the invalid value |
| `unreserve_lines` | – | release every reserved line of both levels |

The key is read from two 64-bit registers:

- `rd1[31:0]` is kx;
- `rd1[63:32]` is ky;
- `rd2[31:0]` is kz.

The instruction reads 16 bytes, of which 12 are stored.

`vc_isa_unit` computes the pseudoaddress and pushes each memory instruction,
ordinary loads and stores included, into the 32-entry load-store queue. Each
queue entry carries a mode flag:

- voxel-mode entries go to `vc_controller`;
- address-mode entries leave through the `va_*` port to the host cache.

The reserve and unreserve instructions wait until the queue is empty, the
controller is idle and no sweep is running. They then start a sweep that
rewrites the mode bits of one set per clock: 128 cycles for L1D and 512 for
L2. VoxelCache requests are held while a sweep runs.

Reserving ways that held ordinary data must evict that data first. That
data belongs to the host cache, so at each step of a reserve sweep
`flush_set` / `flush_ways` (`l1_flush_*`, `l2_flush_*` at the top) name the
ways of that set that are changing from ordinary to reserved. The host cache
must write those lines back and invalidate them in the same cycle. There is
no back-pressure on this interface: a host that needs more time has to stall
the sweep externally, which this design does not provide. Unreserving needs
no flush, because reserved lines are only a cache of the software table and
are simply dropped.

The opcode values, the operand layout and the `vc_instr_t` format are this
design's own.

## Timing

| event | cycles from acceptance by the controller | from instruction issue at the top |
|---|---|---|
| settled in L1D (hit, or L1D line hit with key miss) | `L1_LAT` = 1 | 2 |
| reaches L2 | `L1_LAT + L2_LAT` = 5 | 6 |

The extra cycle at the top is the load-store queue.

The controller handles one request at a time. Line writes, including the L2
write-through, are issued in the cycle the response is decided and take
effect at the next edge. So the write-through does not lengthen an insert.

The result is a one-cycle `resp_valid` pulse carrying the instruction's `id`.

Reset is synchronous and active low. It leaves no lines reserved.

## Module map and parameters

| module | role |
|---|---|
| `vc_pkg` | key, pair, slot-state, request and instruction types; `INVALID_PTR` |
| `vc_pseudoaddr` | hash and `% NR` |
| `vc_line_logic` | parallel key compare, within-line LRU, slot choice (combinational) |
| `vc_cache_level` | mode bits, reserve/unreserve sweep and its flush requests, tags and reserved-line storage of one level, line LRU, ordinary-way victim |
| `vc_controller` | lookup/insert walk through L1D and L2, latencies, write-back and write-through |
| `vc_lsq` | 32-entry in-order queue with per-entry mode flag |
| `vc_isa_unit` | instruction decode, key extraction, configuration fencing |
| `voxelcache_top` | all of the above for one core |

`voxelcache_top` defaults (the CPU configuration):

- `L1_SETS = 128`, `L1_WAYS = 4`, `L1_MAX_RSV = 1`, `L1_LAT = 1`;
- `L2_SETS = 512`, `L2_WAYS = 8`, `L2_MAX_RSV = 2`, `L2_LAT = 4`;
- `PAIRS = 3`, `LSQ_DEPTH = 32`;
- `NR = 1024` (derived).

For the GPU configuration, set `HAS_L2 = 0`, `PAIRS = 6` and
`L1_SETS = 256`. With these, NR becomes 256, misses stop at L1D, and the
`l2_*` outputs are tied off.

Storage for reserved lines is built only for the first `*_MAX_RSV` ways of
each level. A `reserve_cache_lines` with more ways than that is clamped. In
a real cache the reserved lines would reuse the existing data and tag arrays.
Here they are separate arrays, because the host's arrays are not part of the
design.

## Capacity against the mapping workloads

- One map update touches roughly 100–160 distinct voxel blocks at 10 cm
  resolution.
- Software hit rates of a fully associative buffer level off at about 400
  entries.
- The CPU configuration holds 384 pairs in L1D and 3072 in L2.
- The GPU configuration holds 1536 pairs in L1D.

All the CPU and GPU mapping workloads at 5, 10 and 15 cm therefore fit their
per-update working set. The synthetic map update in `tb_workload_map_update`
touches at most 256 distinct blocks per frame at 5 cm, 86 at 10 cm and 42 at
15 cm. It resolves 97–99 % of its lookups from the reserved lines. That rate
is high because consecutive voxels along a ray share a block, so it says
nothing about the real datasets. Resolution changes only how many distinct blocks an
update touches.

## Where this design departs from, or fills gaps in, the source description

- **Key size.** The key is described both as 12 bytes (the line format) and
  as 16 bytes (the instruction). 12 bytes are stored, and the fourth word of
  the register pair is ignored.
- **Within-line LRU width.** The state budget stated for a CPU line (3 bits
  per line for the LRU and the mode bit) is too small for exact LRU over 3
  slots. This design uses exact ages of 3 bits per slot, plus a valid bit
  per slot.
- **L1D write miss.** The description both forwards an L1D write miss to L2
  and evicts an L1D line to insert there. This design does both:
  - the line is read from L2 if present;
  - it is modified;
  - it is installed in L1D;
  - it is written through to L2.
- **L2 read hit.** One table copies the line to L1D on any L2 line hit. The
  text copies it only when the key is found, and this design follows the
  text.
- **Step numbering.** The step numbers of the lookup walk differ between
  the text and its flow figure. Only the steps themselves are implemented.
- **Pseudoaddress placement.** The pseudoaddress is computed before the
  load-store queue, as the text says, not after it as the block figure
  might suggest.
- **Things the description leaves open, chosen here:**
  - the hash function;
  - the invalid-pointer encoding (zero);
  - the opcode encoding;
  - the register layout of the key;
  - one sweep step per set per cycle;
  - the blocking controller (one VoxelCache request in flight);
  - strict in-order issue from the load-store queue (no disambiguation or
    store-to-load forwarding);
  - the meaning of the insert status (key already present);
  - LRU updates on a line hit with key miss;
  - synchronous reset.
- **Not built:**
  - the processor core;
  - the ordinary cache data path and coherence;
  - main memory;
  - the GPU's SM load/store unit.

  These are outside the VoxelCache additions. The top exposes their
  interfaces (`va_*`, `*_nm_*`).
- **Cache-level write and touch in one cycle.** If a line write and a
  normal-mode touch reach a cache level in the same cycle, the touch is
  dropped.

## Verification

Every module has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=M`, and each has a cycle watchdog.

| testbench | what it checks |
|---|---|
| `tb_vc_pseudoaddr` | hash and modulo against a 64-bit reference, for two values of NR |
| `tb_vc_line_logic` | random operations on 3- and 6-slot lines against a timestamp LRU model |
| `tb_vc_cache_level` | sweep timing and flush requests, tag match, free-way and LRU line choice, ordinary-way victim |
| `tb_vc_controller` | directed latency checks (1 and 5 cycles); 3000 random operations against a two-level reference model, for both the CPU and the GPU configuration |
| `tb_vc_lsq` | ordering, mode routing, back-pressure, full and empty |
| `tb_vc_isa_unit` | decode, key extraction, remove value, configuration fencing |
| `tb_voxelcache_top` | whole design at its default parameters (see below) |
| `tb_voxelcache_top_gpu` | the same traffic at the GPU configuration |
| `tb_workload_map_update` | a synthetic map update (per-voxel TSDF ray walk plus an ESDF-style neighbourhood pass, 8×8×8-voxel blocks) at 5, 10 and 15 cm voxels; checks every pointer and reports hit rate and blocks per frame |

`tb_voxelcache_top` runs at the default parameters. It issues:

- reservations;
- a ray-casting style stream of lookups and inserts over a moving fan of
  rays;
- removes;
- interleaved ordinary loads and stores;
- unreserve and re-reserve.

It checks every result against a software model and the latencies of 2 and
6 cycles. It also counts each mechanism and fails if any never happens:

- L1D hit;
- L2 hit with write-back;
- L1D and L2 line miss;
- within-line eviction;
- L1D line eviction;
- load-store queue stall;
- sweep, with the flush requests of each reserve step checked;
- address-mode traffic.

To simulate with Verilator 5, for example:

    verilator --binary --timing --assert -Irtl rtl/vc_pkg.sv \
        tb/tb_voxelcache_top.sv -y rtl --top-module tb_voxelcache_top
    ./obj_dir/Vtb_voxelcache_top

Replace the testbench name to run any other one. All of them run in seconds.
