# Trimma metadata controller in SystemVerilog

A hybrid memory pairs a small fast tier (for example HBM3) with a large slow tier
(DDR5 or NVM) and moves hot 256 B blocks into the fast tier. The memory controller
therefore has to translate every physical address into the device address where
the block currently lives. With a large slow-to-fast capacity ratio, high
associativity and small blocks, the remap table becomes both big (it covers every
block of both tiers) and slow to consult.

Trimma attacks both costs with two observations:

* Most blocks are never moved, so their mapping is the identity. A table that
  only stores entries for moved blocks can be far smaller, and the space that it
  would have used can hold cached data instead.
* An on-chip cache of remap entries wastes most of its capacity on those
  identity entries. Identity mappings can be held as single bits, 32 blocks to a
  line, in a separate small structure.

This RTL implements the controller that does this: the two-level in-memory remap
table (**iRT**), the split remap cache (**iRC**, made of a *NonIdCache* and an
*IdCache*), FIFO victim selection that can take over unused table blocks, and the
access/migration sequencer that ties them together. It is written from the
published description of the design. The memory devices, the processor and the
DRAM command scheduling are not part of it. A behavioural memory model stands in
for them in the testbenches.

## Memory organisation

Memory is split into `NSETS` sets (default 4). The set index sits directly above
the 8-bit block offset, so a physical address is `{tag, set, offset}`. Inside a
set, every 256 B block has a *tag*. Device addresses have the same form. Fast
slots are numbered first, then slow slots:

| per-set tag range                         | contents                                        |
|-------------------------------------------|-------------------------------------------------|
| `[0, INT_BLKS)`                           | iRT index blocks (always metadata)              |
| `[INT_BLKS, META_BLKS)`                   | iRT leaf blocks; used as cache while unallocated |
| `[META_BLKS, FAST-FLAT)`                  | cache area                                      |
| `[FAST-FLAT, FAST)`                       | fast flat area (software visible)               |
| `[FAST, FAST+SLOW)`                       | slow memory (software visible)                  |

Fast slot `s` of set `k` is fast-memory block `s*NSETS + k`. Slow tag `t` is
slow-memory block `(t-FAST)*NSETS + k`. A physical tag is the device tag of the
block's *home*. Software only addresses flat and slow tags. With the default
`FLAT_PER_SET = 0` the controller works as a DRAM cache (called Trimma-C
below). With a non-zero flat area it also provides flat mode (Trimma-F): a slow
block is swapped with a flat block rather than copied.

At the default size each set has 655 360 fast and 20 971 520 slow blocks. That is
640 MB of fast and 20 GB of slow memory in total, a 32:1 ratio. From these sizes
the table needs `LEAF_BLKS = ceil((FAST+SLOW)/64) = 337 920` and
`INT_BLKS = ceil(LEAF_BLKS/2048) = 165` blocks per set.

## The remap table (iRT): fixed places, bits for the upper level

The table of a set is a complete two-level radix tree laid out at fixed
addresses:

* **Leaf level.** The entry of tag `t` is word `t & 63` of leaf block
  `t >> 6`. A leaf block holds 64 four-byte entries.
* **Index level.** Bit `L` of the set's index bit vector says whether leaf
  block `L` is allocated. Each 256 B index block holds 2048 such bits.

Every location is a function of `(set, tag)` alone. No pointers are stored, and
the index word and the leaf entry can be requested back to back without waiting
for each other (`irt_ctrl`, `IRT_LOOKUP`).

An entry is 32 bits: bit 31 valid, bit 30 dirty, bits 29:0 the tag it points to.
An entry is *absent* when its leaf block is unallocated or its valid bit is 0.
An absent entry means the block is at home. The lookup must mask the leaf word
when the index bit is 0, because an unallocated leaf block may be holding cached
data.

A block stays at home until it is moved. When it is moved, two entries are
written:

* the forward entry `entry[b] = f` (block `b` lives in fast slot `f`);
* the inverse entry `entry[f] = b` (slot `f` holds block `b`).

The inverse entry tells the controller who occupies a slot when that slot is
chosen as a victim. It also carries the dirty bit. A leaf block is allocated
(its 64 words zeroed, then its index bit set) the first time one of its entries
is needed. After an entry is cleared, the 64 words of its leaf are scanned, and
the leaf is freed (index bit cleared) if none is valid. Blocks move only between
their home and one fast slot, never from one non-home place to another. An
evicted block therefore always goes straight home.

The index word read by a lookup is kept in `irt_ctrl`. An update that follows on
the same word then needs no second read.

## Using unused metadata blocks as cache

Leaf blocks are allocated lazily, so most of the leaf region is free at any
time, and victim selection treats those slots like cache slots:

* **Victim choice (`victim_sel`).** The unit walks a per-set FIFO pointer over
  `[INT_BLKS, FAST)`. It skips a leaf slot whose index bit is 1.
* **Index-bit buffer.** The index bits come from fast memory. Each set has one
  32-bit buffer word on chip, so a run of 32 leaf slots costs one read.
* **Prefetch.** The FIFO order makes the next word predictable. While the
  selector is idle and the metadata port is free, it checks one set per cycle.
  If that set's FIFO pointer is on a leaf slot whose word is not buffered, the
  word is fetched ahead of time (`idx_prefetch` event). A later victim request
  then normally finds its bits on chip.
* **Coherence.** The buffers snoop every metadata write, so they cannot go
  stale.

Metadata has priority over data. When the controller has to allocate a leaf
block that currently caches a data block, that data block is evicted first,
however hot it is (`meta_evict` event). It is written back if dirty.

## Access sequence of `trimma_ctrl`

One request is handled at a time:

1. **Locate.** Look up the iRC: both halves are read in parallel, and the result
   comes 3 cycles later.
   * NonIdCache hit: gives the remapped tag.
   * IdCache hit: the block is at home.
   * Miss in both: walk the iRT. Then fill the NonIdCache (valid entry) or the
     IdCache (absent entry).
2. **Access.** Read or write the word at the device address, and return the
   response. A write to a block cached in fast memory sets the dirty bit in its
   inverse entry.
3. **Replace (only after a slow-memory access).**
   * If the block's home is a flat slot that another block has displaced, the
     displaced block is restored first.
   * Otherwise `victim_sel` supplies a slot. Its occupant is evicted: written
     back if dirty, swapped back if the slot is a flat slot. Then the new block
     is copied in (cache or leaf slot) or swapped in (flat slot).
4. **Update.** Allocate leaves as needed, which may evict (see above). Write the
   forward and inverse entries. Clear the old entries, freeing empty leaves.
   Invalidate every touched address in both iRC halves.

Steps 3 and 4 are written as two nested subroutines inside one state machine:

* EVICT(slot) looks up the occupant, moves it home, clears both entries and
  invalidates the iRC.
* ENSURE_LEAF(tag) allocates the leaf of `tag` and may itself call EVICT for the
  block cached in that leaf's slot.

Each subroutine keeps its return state in a register.

There is one corner case. A victim slot can be the very leaf block that the new
entries need. Filling it and then allocating the leaf would evict the block that
was just brought in. The controller rejects such a victim and asks
`victim_sel` for the next one.

Every mechanism produces a one-cycle pulse on the `events` output: index-bit
prefetches, iRC hits of each kind, iRT walks, fast/slow accesses, migrations, use of a metadata slot,
writebacks, swap-backs, leaf allocation and freeing, metadata-priority
evictions, and skipped victims. The testbenches count these pulses.

## The remap cache (iRC)

| part | organisation | line | index |
|------|--------------|------|-------|
| NonIdCache (`nonid_cache`) | 2048 sets × 6 ways | tag, valid, 30-bit pointer | address bits [18:8] |
| IdCache (`id_cache`) | 256 sets × 16 ways | 35-bit super-block ID, 32 identity bits | XOR fold of the super-block ID (bits [47:13]) to 8 bits |

The two parts together match the payload of a 64 kB conventional remap cache:
75 % holds real mappings and 25 % holds identity bits.

* **Exclusivity.** A fill into one part removes the address from the other, so
  at most one part hits (an assertion in `irc` checks this).
* **Invalidation.** It clears the NonIdCache line and the single identity bit.
* **Storage.** Each set is one SRAM row: all ways plus a FIFO replacement
  pointer. It is read and written back in one cycle.
* **Reset.** The rows are cleared one per cycle. `ready` and hence `init_done`
  stay low until that is done.

## Interfaces and timing

All ports of `trimma_ctrl` are valid/ready. Read responses come back in order, at
least one cycle after the request.

| port group | purpose |
|------------|---------|
| `req_*`, `rsp_*` | word reads and writes from the last-level cache; one outstanding |
| `dat_*` | demand word access. `dat_fast` selects the tier, `dat_addr` is a device byte address |
| `mig_*` | 256 B block moves: `MIG_FILL` (slow→fast copy), `MIG_WRITEBACK` (fast→slow), `MIG_SWAP`; `mig_done` closes each |
| `md_*` | 32-bit metadata reads/writes in fast memory (writes are posted) |
| `events` | mechanism pulses (`events_t` in `trimma_pkg`) |

Three units share the `md_*` port, one at a time:

* the boot sequencer, during boot;
* `victim_sel`, while it chooses a victim or has a prefetch in flight;
* `irt_ctrl`, the rest of the time.

A prefetch starts only while `irt_ctrl` is idle. No other read is then
outstanding, and in-order responses always reach the unit that asked.

* **Boot.** After reset the controller zeroes all index blocks (`NSETS × INT_BLKS
  × 64` word writes) before raising `init_done`. That takes about 48 500 cycles at
  the default size with the testbench memory model.
* **Latency.** With an iRC hit, a request costs the iRC latency (3 cycles) plus
  the data access. A miss adds two metadata reads.
* **Replacement.** It runs after the response is sent, but the next request
  waits for it.

## Where this design departs from, or goes beyond, the published description

* **Migration policy.** Every slow-memory access migrates its block. The original
  design leaves the policy open. One consequence in cache mode: an identity
  entry is invalidated right after it is filled, so IdCache hits occur only for
  flat-area blocks that are at home. The cache-mode test therefore does not
  expect IdCache hits. The flat-mode test does.
* **Serialization.** Requests are serialized, and replacement is not overlapped
  with later requests.
* **Table placement.** Each set's table is contiguous in that set's slot
  numbering, which interleaves the sets in device addresses. The description
  speaks of one continuous reserved region holding the tables of all sets.
* **Own choices.** The following are all choices of this design: the entry
  encoding (valid/dirty bits), the empty-leaf scan, zeroing of new leaves, boot
  clearing, the IdCache hash, the in-set FIFO replacement of both iRC halves,
  the self-slot victim rejection, the per-set layout of the prefetched index-bit
  buffers and the port protocols.
* **Pointer width.** Two of the 32 entry bits are flags, so a pointer reaches
  2^30 blocks (256 GB) per set. The full 32-bit pointer of the original
  design would reach 1 TB per set.
* **iRC latency.** It is set to 3 cycles (`IRC_LAT`), the figure quoted for a
  conventional remap cache of the same capacity.
* **Fixed constants.** Blocks are fixed at 256 B and the table at two levels.
  64 B or 4 kB blocks, or deeper tables, would need changes to `trimma_pkg` and
  `irt_ctrl`.
* **Capacity limit.** The table is reserved in full. A 64:1 ratio at 20 GB slow
  memory needs 332 963 reserved blocks per set, but only 327 680 fast blocks
  exist. A start-up assertion reports this. Ratios up to 48:1 fit.

## Files

| file | contents |
|------|----------|
| `rtl/trimma_pkg.sv` | shared constants, entry/event types |
| `rtl/nonid_cache.sv`, `rtl/id_cache.sv` | the two iRC halves |
| `rtl/irc.sv` | parallel lookup, fill and invalidate, latency padding |
| `rtl/irt_ctrl.sv` | iRT lookup / write / clear / allocate engine |
| `rtl/victim_sel.sv` | FIFO victim selection with prefetched index-bit buffers |
| `rtl/trimma_ctrl.sv` | top level: access and replacement sequencer |
| `tb/hybrid_mem_model.sv` | behavioural fast/slow memory with latencies and random stalls |
| `tb/trimma_driver.sv` | request generator (hot-set, sweep or skewed stream) with reference memory and event counters |
| `tb/trimma_env.sv` | controller + memory model + driver, for multi-instance benches |
| `tb/tb_*.sv` | one self-checking testbench per block, plus end-to-end tests |

### Testbenches

* **Unit benches.** `tb_nonid_cache`, `tb_id_cache` and `tb_irc` run at the
  default sizes. `tb_irc` also checks the 3-cycle lookup latency. `tb_irt_ctrl`
  and `tb_victim_sel` use 2 sets of 256 fast and 4096 slow blocks. Each bench
  compares against values computed in the bench.
* **`tb_trimma_ctrl`.** Cache mode with 2 sets of 128 fast / 2048 slow blocks and
  a tiny iRC (8×2, 4×2), so the FIFO wraps many times. It issues 4000 random
  requests with a drifting hot set and checks every read against a reference
  memory. Every mechanism except swaps and IdCache hits must occur.
* **`tb_trimma_flat`.** The same with a 40-slot flat area. Every mechanism must
  occur.
* **`tb_trimma_workloads`.** Three controllers in cache mode, each at 2 sets of
  256 fast / 8192 slow blocks (the 32:1 ratio) with an iRC cut by 64 in sets.
  They run three synthetic streams: a drifting hot set, sequential sweeps over
  twice the fast capacity, and a steeply skewed long-tail distribution. These
  stand in for multi-program, array and graph/key-value codes. The bench
  reports the fast-memory serve rate, the iRC hit rate and the metadata-slot
  migrations of each stream, and it checks every read. It also reports the
  share of fast memory the table really occupies at the end of each run. The
  fully reserved table takes 52 %, which is (32+1)·4/256 at this ratio. In one
  run the sweep used 4 %, the skewed stream 31 % and the hot set 39 %.
* **`tb_trimma_full`.** The top at its default parameters. It checks the boot
  write count, then runs 3000 checked requests. At this size the FIFO does not
  wrap during the run, so evictions are left to the reduced tests.

Each bench prints `TB_RESULT checks=<n> failures=<n>` and has a watchdog.

### Simulating

With Verilator 5:

```sh
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/trimma_pkg.sv tb/tb_trimma_ctrl.sv --top-module tb_trimma_ctrl
./obj_dir/Vtb_trimma_ctrl
```

Replace `tb_trimma_ctrl` with any other testbench name. The top-level sizes are
parameters of `trimma_ctrl`:

* `NSETS`, `FAST_PER_SET`, `SLOW_PER_SET` and `FLAT_PER_SET` set the memory
  organisation.
* `NONID_SETS`/`NONID_WAYS` and `ID_SETS`/`ID_WAYS` set the iRC.
* `IRC_LAT` sets the iRC latency.

`FAST_PER_SET` must leave room for the reserved table: `META_BLKS + FLAT_PER_SET
< FAST_PER_SET`.
