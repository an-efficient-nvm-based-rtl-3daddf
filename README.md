# A memory hierarchy whose backup always fits in the capacitor

An intermittently powered processor runs from a capacitor that a harvester
charges. When the supply collapses, whatever volatile state the program needs
must be copied into non-volatile memory using only the energy left in that
capacitor. The capacitor is fixed, so the energy of the backup must be fixed
too. With a plain write-back SRAM L1 it is not fixed: any number of L1 blocks
between zero and the whole cache may be dirty when power fails.

This design removes that uncertainty. The SRAM L1 data cache is never allowed
to hold more than **K = M + N dirty blocks**. A backup therefore copies at most
K blocks plus the register file into an STT-RAM backup region, and so needs a
known, bounded energy. The capacitor can be sized for it once: for a given
capacitor energy, K is the number of STT-RAM block writes that energy pays for
after the register file has been saved. The default sizes are K = 16, M = 12
and N = 4, with a 6-bit write counter.

The hierarchy is:

```
 CPU (outside) ──word req──► l1_dcache (SRAM, 16 KB, 4-way, 64 B blocks)
                              ├── dbt  : M-entry dirty block table
                              └── wbq  : N-entry write-back queue
                                   │ block req (fills, evictions, WBQ drain)
                                   ▼
                             llc (STT-RAM, 128 KB, 16-way, LRU, write-back)
                                   │
 CPU fetch ──► l1_icache (16 KB) ──► llc (instruction instance, read only)
                                   │
                               mem_arb ──► PCM main memory, 128 MB (outside)

 power_fail ─► backup_ctrl ◄──► backup_region (STT-RAM, K slots + registers)
                 ▲   ▲
                 │   └── register file of the CPU (outside)
                 └────── L1 backup / restore port
```

`nvm_ic_top` wires these together. The CPU, its register file, the PCM and the
supply monitor are not part of the RTL. They appear as ports.

## Keeping the dirty count bounded

Two small structures beside the L1 track every dirty block.

**Dirty block table (`dbt`).** This is a fully associative table with M
entries. Each entry is `{valid, set, way, WC}`. `{set, way}` points at a block
in the L1 array, and WC (write counter) counts the writes that block has taken
since it entered the table. The table replaces its *least frequently written*
(LFW) entry, which is the valid entry with the smallest WC. Ties go to the
lowest index.

**Write-back queue (`wbq`).** This is a FIFO of N `{set, way}` locations.
These blocks are still dirty in the L1 but are no longer in the DBT. The L1
drains the queue in the background. It reads the head block from the L1 data
array and writes it to the LLC. When the LLC acknowledges, it clears the
block's dirty bit and pops the entry.

The L1 applies these rules on every write hit:

| situation | action |
|---|---|
| block clean, DBT not full | set D, new DBT entry with WC = 1 |
| block clean, DBT full, WBQ not full | DBT's LFW entry moves to the WBQ tail; the new block takes its DBT entry with WC = 1 |
| block clean, DBT full, WBQ full | **stall** the write until the drain frees a WBQ slot |
| block dirty, in the DBT | WC += 1 (see saturation below) |
| block dirty, in the WBQ | data written in the L1 only; the queued write-back will carry it |
| block is the one whose drain is in flight | write waits for the LLC acknowledge, then is a write to a clean block |

One ordering rule keeps the drain exact: a drain never starts in the same
cycle in which a write hit updates the block at the WBQ head. Otherwise it
could copy the block just before the write lands and then mark the block
clean, which would lose that write.

Read hits and all misses behave as in a conventional write-back,
write-allocate cache. A dirty victim chosen by a miss is written to the LLC
straight away. Its DBT entry is dropped, or its WBQ slot is cancelled in place.
A cancelled slot still travels to the head and is popped there without a
write. At every clock `dirty_count <= M + N` holds, checked by an assertion
in `l1_dcache`, and every dirty block is in the DBT or the WBQ.

### Write-counter saturation

WC has WC_W bits (6 by default). Suppose a write hits a DBT entry whose WC is
already at 2^W − 1. Then WC is not incremented. Instead, 2^(W−1) is
subtracted from **every** entry, stopping at zero. With W = 5 and counters
{19, 17, 31, 3}, a write to the third entry gives {3, 1, 15, 0}. Subtraction
keeps the counters in order, much as halving would, and it stops any counter
from wrapping. The description this design follows calls the operation both
"a logical right shift" and "subtract 2^(W−1)", but its worked example only
fits the subtraction, so the RTL subtracts.

## Power failure: backup and restore

`backup_ctrl` watches `power_fail`. This signal is a level that stays high
until the volatile reset. The sequence is:

1. **Quiesce.** `bk_req` goes high. The L1 finishes its current operation,
   including a WBQ drain or miss already in flight. It then stops accepting
   CPU requests and answers with `bk_ack`. The instruction cache stops taking
   fetches too. The backup waits until it is idle, so no memory transaction
   is in flight when the supply goes.
2. **Registers.** Each of the NR = 32 register-file words is read through
   `rf_rd_*` and written into the backup region.
3. **Blocks.** All K slots are written, one after another. Slot *i* < M
   copies DBT entry *i*. Slot M + *j* copies WBQ position *j*, counted from
   the head. A slot holds `{valid, set, way, tag, WC, 512-bit data}`, which
   is 1 + 8 + 15 + 6 + 512 = 542 bits. Empty entries are written too, with
   valid = 0. That makes the backup time independent of the dirty count:
   (NR + K) × (10 + 1) + 1 = **529 cycles** from `bk_ack`, since an STT-RAM
   write takes 10 cycles and the handshake adds one.
4. **Seal.** An *image valid* flag in the backup region is set, and
   `shutdown` rises.

When power returns, the volatile domain sees `rst_n`. The L1, DBT, WBQ and
all controllers restart empty. The LLC and the backup region keep their
contents. If the image flag is set, the controller reads everything back
(STT-RAM read, 2 cycles):

- it writes the registers through `rf_wr_*`;
- it reinstalls each valid slot as a valid, dirty L1 block at its old
  `{set, way}`;
- it re-creates its DBT entry, with the saved WC, or its WBQ entry, in the
  saved order.

Then it clears the flag and raises `running`. Because the DBT and WBQ are
rebuilt exactly, the bound on dirty blocks still holds after the restore.
Clean L1 contents are lost. They are refetched from the LLC on demand.

Two resets exist. `rst_n` is the volatile reset, asserted at every power-up.
`nv_rst_n` initialises the non-volatile state once, before first use: the
LLC tags, valid, dirty and age bits, and the image flag.

## Timing

The clock period is 2 ns. All latencies are in clocks, counted from the
handshake cycle c0:

| access | latency |
|---|---|
| L1 read hit | response in c0 + 1 |
| L1 write hit | response in c0 + 2 (more if it stalls on a full WBQ or an in-flight drain) |
| LLC read hit / write hit | c0 + 2 / c0 + 10 |
| LLC miss | adds the PCM access (35 read, 100 write, from the memory model) and one STT-RAM write to install |
| backup region read / write | 2 / 10 |
| backup | 529 cycles after `bk_ack`, always |

Blocks move as single 512-bit transfers with valid/ready handshakes. Each
port allows one outstanding request, and every request gets one response.

## Where this RTL departs from, or adds to, the architecture it implements

- Only the main configuration is built. That is LFW replacement with the
  backup region. The least-recently-written (LRW) policy and the variants
  without a backup region are not built.
- Only the sizes of the instruction caches (16 KB L1, 128 KB LLC) are given.
  They are built as the simplest read-only L1 (`l1_icache`) plus a second
  `llc` instance. Both LLCs share the PCM port through `mem_arb`, a
  round-robin arbiter that serves one request at a time. Stores are not
  seen by the instruction side, so self-modifying code is not supported.
  The instruction side takes no part in the backup, because it never holds
  modified data.
- The evaluated system runs at 480 MHz in one place and states a 2 ns clock
  in another. The RTL is written in cycles, so this does not affect it.
- Written here without a specification, as the simplest working choice:
  - when the WBQ drains (as soon as it is non-empty and the LLC port is free);
  - cancelling WBQ slots and DBT entries when a miss evicts a dirty block;
  - the L1 victim choice (first invalid way, then per-set round-robin);
  - the 32-bit CPU word;
  - write-allocate without fetching in the LLC;
  - the backup slot layout and the image flag;
  - the handshakes and reset behaviour.
- The STT-RAM and PCM arrays are not modelled as devices. The LLC and backup
  region are ordinary arrays with the STT-RAM cycle latencies. PCM is a
  behavioural model in the testbench.
- The capacitor, the supply monitor and the CPU core are outside the RTL.

## Files

| file | content |
|---|---|
| `rtl/nvm_pkg.sv` | geometry, latencies, shared types (`loc_t`, `blk_req_t`, `cpu_req_t`, `events_t`) |
| `rtl/dbt.sv`, `rtl/wbq.sv` | dirty block table, write-back queue |
| `rtl/l1_dcache.sv` | L1 data cache controller with the write-hit rules and the drain |
| `rtl/llc.sv` | STT-RAM LLC, LRU, write-back to PCM |
| `rtl/backup_region.sv`, `rtl/backup_ctrl.sv` | backup region and its controller |
| `rtl/l1_icache.sv`, `rtl/mem_arb.sv` | L1 instruction cache, PCM arbiter between the two LLCs |
| `rtl/nvm_ic_top.sv` | top level |
| `tb/*_tb.sv` | one self-checking testbench per module |
| `tb/blk_mem_model.sv`, `tb/nvm_tb_pkg.sv` | memory model with configurable latency; initial-content function |

Every module exposes one-cycle event pulses:

- DBT insert and replace;
- WC saturation;
- WBQ-full stall, drain wait, drain and WBQ hit;
- L1 miss and dirty evict;
- LLC hit, miss and dirty evict;
- I-cache miss and instruction-LLC miss.

The top bundles them in `ev`. They are meant for counting, as the end-to-end
testbench does.

## Simulating

Every testbench is self-checking. Each one prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/nvm_pkg.sv tb/nvm_tb_pkg.sv rtl/*.sv tb/blk_mem_model.sv \
  tb/nvm_ic_top_tb.sv --top-module nvm_ic_top_tb
./obj_dir/Vnvm_ic_top_tb
```

Replace `nvm_ic_top_tb` with `dbt_tb`, `wbq_tb`, `l1_dcache_tb`, `llc_tb`,
`l1_icache_tb`, `backup_region_tb` or `backup_ctrl_tb` for the unit tests.

- **`nvm_ic_top_tb`** runs the whole design at its default sizes. It issues
  60,000 random CPU reads and writes over an address range larger than the
  LLC, with hot blocks that saturate the write counters. Alongside them it
  fetches instructions from a separate code region. It injects power
  failures at random points. It compares every read with a reference memory
  and checks the read- and write-hit latencies. It also checks the fixed
  backup length and that every register survives each failure. It counts
  each mechanism above and fails if any of them never happened. It finishes
  in a few seconds.
- **`nvm_ic_top_cfg_tb`** runs the same test with a 32-block budget split
  as M = 26, N = 6. The backup then takes (32 + 32) × 11 + 1 = 705 cycles.
- **`dbt_tb`** replays the saturation example above. It then runs random
  operations against a reference model.
- **`llc_tb`** checks LRU victim order directly. It also runs random traffic
  against a reference.
- **`l1_dcache_tb`** puts a reference memory behind the cache. It checks
  data, latencies, the dirty bound, the stall and a backup/restore pass.

To explore other sizes, override `M`, `N` and `WC_W` on `nvm_ic_top`. The
backup region, slot width and counters follow from them. Any M ≥ 1 and N ≥ 1
is accepted.
