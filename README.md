# Flat ORAM controller in SystemVerilog

A program running inside a secure processor can have its memory encrypted and still give itself away through the *addresses* it touches in DRAM. A write-only ORAM hides the pattern of writes: every block written to DRAM goes to a uniformly random physical location, whatever the program wrote. Reads are left in the clear. The model assumes an adversary who can see write traffic, for example by taking snapshots of memory, but cannot usefully watch the read addresses.

The hard part of a write-only ORAM is finding a random location that is free. Flat ORAM keeps an **occupancy map (OccMap)**: a bit-mask with one bit per physical block. To write a block, the controller:

1. draws a random location;
2. if the OccMap bit says it is free, writes the block there;
3. if not, reads the live block that sits there, re-encrypts it, writes it back to the same place (to an observer this looks like any other write), and draws again.

With physical memory twice the size of the working set, about half the draws succeed, so a write costs about two DRAM writes on average.

This repository holds a synthesizable controller that does this, together with its unit tests and an end-to-end test against a behavioural DRAM model.

## Where everything lives: one id space, four levels

The controller handles three kinds of blocks, and each kind needs a position:

- **data blocks**;
- **OccMap blocks**: 1024 occupancy bits each, one 128-byte block;
- **PosMap blocks**: each holds 32 write counters of 32 bits.

All three share one *unified id space*, built as a stack of levels (`flat_oram_pkg::level_base/level_count`):

| level | ids | contents |
|---|---|---|
| 0 | `[0, N_DATA)` | data blocks |
| 0 | `[N_DATA, N_DATA + 2^PHYS_AW/1024)` | OccMap blocks |
| 1 | next `ceil(level0/32)` ids | PosMap blocks holding counters for level 0 |
| 2 | next `ceil(level1/32)` ids | PosMap blocks holding counters for level 1 |
| 3 | next `ceil(level2/32)` ids | PosMap blocks holding counters for level 2 |
| on chip | `onchip_posmap`, one entry per level-3 block | counters for level 3 |

At the default size (4 GB of data in 8 GB of DRAM, 128-byte blocks) the counts are:

- level 0: 2^25 data blocks and 65,536 OccMap blocks;
- level 1: 1,050,624 PosMap blocks;
- level 2: 32,832 PosMap blocks;
- level 3: 1,026 PosMap blocks, so the on-chip map has 1,026 counters.

OccMap blocks are placed in level 0 next to the data, so they are relocated exactly like data when they change. No separate mechanism is needed to hide OccMap updates.

**Positions are not stored; they are computed.** A block with id `a` and counter `c` lives at `PRF(a || c) mod 2^PHYS_AW` (`pos_gen`). Every eviction attempt increments the counter, so every attempt goes to a fresh random location. A counter of 0 is reserved to mean "never written": such a block reads as all zeros and owns no DRAM location. As a result, reset needs no memory initialisation. The start-up placement described further below is optional.

**The PLB.** The PLB (PosMap lookaside buffer, 256 entries of 128 bytes) caches PosMap and OccMap blocks on chip. To find a block's counter, the controller walks up the levels until it finds an ancestor PosMap block that is in the PLB, or reaches the on-chip map. It then fetches the missing blocks down that chain, top first, into the PLB.

A PLB entry that is modified becomes dirty. When a dirty entry is displaced, it goes to the **stash**, the same buffer that holds dirty data blocks. It is then written to a fresh random location like everything else. If a PLB fill finds its block in the stash, it takes the block from there ("stash pull") instead of DRAM.

## The eviction loop

`flat_oram` is one FSM. Whenever the stash is not empty and no read is waiting (or a background phase is forcing it), the FSM takes the lowest occupied stash slot and runs the following steps.

1. **Vacate the old copy (once per block).** The stash entry carries `old_valid`, meaning an older copy of the block still occupies a DRAM location. If `old_valid` is set and the counter is not zero:
   - the controller computes the old location from the *current* counter;
   - it brings that location's OccMap block into the PLB;
   - it clears the bit;
   - it clears `old_valid`.

   From this point the stash holds the only live copy of the block.
2. **New attempt.** The controller:
   - makes sure the PosMap block that holds this block's counter is in the PLB;
   - increments the counter;
   - computes `s = PRF(a || c)`;
   - makes sure the OccMap block covering `s` is in the PLB.
3. **Test.**
   - *Vacant:* the block is encrypted with a fresh nonce and MACed, written to `s`, and its stash slot is freed. Then the OccMap bit is set.
   - *Occupied (collision):* the line at `s` is read and re-encrypted with a fresh nonce, and written back unchanged. The loop returns to step 2.

Each PLB fill may displace a dirty block into the stash, so evicting one data block can generate more stash traffic. The counter update in step 2 and the OccMap update in step 3 dirty PLB entries, which are relocated in turn. The design contains this cascade in three ways:

- a large PLB;
- a reserve of stash slots that write-backs may not use (`BE_RESERVE`);
- **background eviction** (`bg_evict`): once the stash reaches `STASH_SIZE - BE_RESERVE`, reads are held off and only evictions run, until occupancy falls to `BE_LOW`.

Several orderings in the loop are deliberate. They are the subtle part of the controller.

- **Old location is derived, not carried.** A classic write-only ORAM remembers the old location next to the cached copy of the data. Here it is recomputed from the counter at the time of eviction, so it cannot be stale when a block is written back twice before being evicted.
- **Vacate before the first increment.** The old location is a function of the counter, so the old bit must be cleared while the counter still names the old location.
- **A block may leave its slot during its own eviction.** A PosMap or OccMap block in the stash can be pulled back into the PLB by a fill made *for its own eviction*: for example, the OccMap block covering a new location may be the very block being evicted. After every PLB operation the FSM checks that the slot still holds the block it is evicting. If not, the attempt is abandoned and the block continues from the PLB.
- **The parent counter is read before the fill.** When a chain of PosMap blocks is fetched into a direct-mapped PLB, the child may land on the parent's index. The child's counter is therefore read from the parent before the parent's slot can be reused.
- **Write-backs are held off briefly.** The write-back port is held off while the stash is being edited by the PLB victim/fill steps and by the vacancy test. A write-back can then never land in a slot that is about to be freed.

## Reads

For a read of data block `a`, the controller checks in this order:

1. **The stash.** If `a` is there, it answers at once with no DRAM access.
2. **The counter.** It looks up the counter through the PLB and PosMap chain. If the counter is zero, it answers with all zeros.
3. **DRAM.** Otherwise it reads the line at `PRF(a || c)`, decrypts it and checks the MAC.

The response (`rd_resp_*`) carries:

- the data;
- the physical address that was read, or all ones if no DRAM access was needed;
- `auth_ok`.

A failed MAC check also raises the sticky `integrity_error` output and counts in `stats.integrity_fails`.

## Integrity and encryption

Every DRAM line is 1152 bits: `{nonce, Enc(mac), Enc(data)}`.

- **Nonce.** It is a 64-bit counter of DRAM writes and is stored in the clear. Because every write has a new nonce, the re-encrypted copy written on a collision looks fresh.
- **Encryption.** Counter-mode style: keystream word `i` is `PRF(key ^ i, nonce)`.
- **MAC.** The tag is `MAC(a || c || data)`. Because the counter goes into the tag, replaying an old copy of a block fails the check (freshness), not only tampering with it.

**The PRF in `flat_oram_pkg::prf64` is a placeholder.** It is a keyed splitmix64-style mixing function, chosen to be small and fast to simulate. It is *not* cryptographically secure. A real implementation replaces `prf64` (and with it `pos_gen`, `crypt_engine` and `pmmac`) with AES. The interfaces do not change. The key is a 64-bit input port here.

## Periodic mode

Even with random write locations, the *timing* of accesses can leak information. With `periodic_en` set, `periodic_timer` releases exactly one access slot `PERIOD` (100) cycles after the previous access ended, and every slot writes DRAM:

- **a read slot** serves the read, then rewrites a randomly chosen location (read, re-encrypt, write back);
- **an eviction slot** runs one eviction attempt, plus a dummy rewrite if the attempt wrote nothing;
- **an idle slot** does a dummy rewrite.

A dummy rewrite of a vacant location writes a fresh encryption of junk there. The location stays vacant in the OccMap.

## Start-up placement

Raising `init_start` makes `oram_init` feed the `N_DATA` data blocks, all zeros, into the write-back path. The normal eviction loop then gives each block a random vacant location. This is the up-front placement of all blocks at boot. Because of the zero-counter convention it is optional: without it, blocks are placed when they are first written. At full size, start-up placement takes 2^25 evictions.

## Module map

| file | role |
|---|---|
| `rtl/flat_oram_pkg.sv` | constants, types, PRF, id-space geometry, `stats_t` |
| `rtl/flat_oram.sv` | top: the controller FSM; instantiates everything below |
| `rtl/stash.sv` | 100 fully associative dirty-block slots with lookup, insert-or-merge, lowest-slot head |
| `rtl/plb.sv` | 256-entry direct-mapped PosMap/OccMap cache with dirty and old-copy flags |
| `rtl/onchip_posmap.sv` | counters of the top PosMap level |
| `rtl/occmap_bit.sv` | read and set/clear one bit of an OccMap block |
| `rtl/pos_gen.sv` | `PRF(a \|\| c) mod 2^PHYS_AW` |
| `rtl/crypt_engine.sv` | keystream XOR over data and MAC |
| `rtl/pmmac.sv` | MAC computation and compare |
| `rtl/bg_evict.sv` | background-eviction hysteresis and write-back admission |
| `rtl/periodic_timer.sv` | access-slot timer for periodic mode |
| `rtl/oram_init.sv` | start-up placement feeder |
| `tb/dram_model.sv` | behavioural DRAM: sparse array, fixed latency, one request at a time |

### Top-level ports

| signals | meaning |
|---|---|
| `rd_req_valid/ready/addr`, `rd_resp_valid/data/pos/auth_ok` | read a data block (valid/ready request, one-cycle response pulse) |
| `wb_valid/ready/addr/data/dirty` | last-level-cache write-back; clean ones are acknowledged and dropped |
| `dram_req_valid/ready/we/addr/wdata`, `dram_resp_valid/rdata` | block-addressed DRAM port, one outstanding request |
| `key`, `periodic_en`, `init_start/init_busy` | secret key, mode and start-up control |
| `stash_count`, `bg_active`, `integrity_error`, `stash_overflow`, `stats` | status and event counters |

### Parameters and defaults

| parameter | default | meaning |
|---|---|---|
| `N_DATA` | 2^25 | 4 GB working set of 128-byte blocks |
| `PHYS_AW` | 26 | 8 GB of physical DRAM (50 % utilisation) |
| `PLB_ENTRIES` | 256 | 32 KB |
| `STASH_SIZE` | 100 | blocks |
| `PERIOD` | 100 | cycles |

The table above gives the published configuration. `BE_RESERVE = 16` and `BE_LOW = 64` are this design's own choices. Larger DRAM (16 or 32 GB) only needs `PHYS_AW = 27` or `28`, and a larger stash only needs `STASH_SIZE`.

## How far it can be trusted

**What the tests show.** The unit testbenches compare each block against an independent reference model (`tb/tb_ref_pkg.sv`) with random stimulus.

**The end-to-end test** (`tb/tb_flat_oram.sv`) uses 2048 data blocks in 4096 locations, a 16-entry PLB and a 40-entry stash, so that every mechanism occurs often. It runs:

- start-up placement;
- 1500 random reads and dirty/clean write-backs, checked against a shadow memory;
- a write-back burst that triggers background eviction;
- a tampered DRAM line, which must fail the MAC check;
- a periodic-mode phase, which checks slot spacing and that every slot writes DRAM;
- a final read of every block.

The test prints how often each mechanism happened: collisions, stash read hits, PLB dirty victims, stash pulls, background phases, dummy rewrites, clean drops and integrity failures. It fails if any of them never happened. Collisions run at about 0.7 per eviction, as expected at 50 % utilisation.

**The sweep test** (`tb/tb_flat_oram_sweep.sv`, with the harness `tb/oram_workload.sv`) runs the same random write-heavy workload through seven controllers side by side. The configurations cover:

- physical memory 2x, 4x and 8x the working set;
- stash sizes 50, 100 and 200;
- DRAM latencies 50, 100 and 200 cycles.

It checks data and MACs, and also the trends the construction predicts. For a utilisation `u`, each successful eviction should cost about `u/(1-u)` collisions: 1, 1/3 and 1/7 for the three memory sizes. The test measures 1.00, 0.30 and 0.13. Smaller stashes enter background eviction more often, and completion time grows with latency.

**The full-size test** (`tb/tb_flat_oram_full.sv`) runs the controller at its default size, with 100-cycle DRAM. It writes back and reads back blocks at both ends of the id space, and reads a block that was never written. It then runs periodic mode at the 100-cycle period. Accesses must start at least 100 cycles apart, and each one must evict a block or rewrite a random location.

**Known limits:**

- **The PRF is a placeholder.** It is not cryptographic (see above).
- **The stash can still overflow under adversarial locality.** The reserve and background eviction make overflow unlikely, not impossible. An overflow raises `stash_overflow` and trips an assertion.
- **The PosMap is not compressed.** PosMap blocks hold plain 32-bit counters. A compressed PosMap with group counters and small per-block offsets would fit more counters per block. It is not built.
- **The datapath is not pipelined.** It handles one DRAM request at a time, and the MAC and keystream are computed combinationally in one cycle. That is fine for simulation, but a real design would pipeline the AES units.

## Simulating

With verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/flat_oram_pkg.sv tb/tb_ref_pkg.sv tb/dram_model.sv \
    rtl/*.sv tb/tb_flat_oram.sv --top-module tb_flat_oram
./obj_dir/Vtb_flat_oram
```

Replace `tb_flat_oram` with any other testbench in `tb/` (for example `tb_stash` or `tb_flat_oram_full`; `tb_flat_oram_sweep` also needs `tb/oram_workload.sv`). Every testbench ends by printing `TB_RESULT checks=<n> failures=<m>` and has a watchdog. The end-to-end test runs in well under a minute. To explore other sizes, change the parameter list on the `flat_oram` instance in `tb/tb_flat_oram.sv`.
