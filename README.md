# MigrantStore hardware: TLB hysteresis field, RAPid buffer and migration DMA

Phase-change memory (PCM) is dense and leaks little, but it is slower than
DRAM (about 2x for reads and 6x for writes, counting the whole access) and
wears out after 10^9 to 10^12 writes. MigrantStore puts a small DRAM (128 MB
next to an 8-GB PCM) in front of it. This DRAM is not a hardware cache. It
is ordinary physical memory that the operating system manages: a page lives
in PCM until the OS *migrates* it into a DRAM frame. From then on, normal
address translation sends accesses to the DRAM, so no tag store is needed.

Left to itself, this scheme has the same weakness as a DRAM cache. Many
pages would be copied in and thrown out before they had been used enough to
pay for the copy. Three small pieces of hardware let the OS avoid that at
low cost. This repository contains their RTL:

| Mechanism | What it does | RTL |
|---|---|---|
| Migration hysteresis | A page is migrated only after its 16th off-chip miss while in PCM. The count lives in the TLB entry and the page-table entry. | `ms_tlb`, `hyst_field_update` |
| Page sub-blocking | The same field holds one dirty bit per 512-byte sub-block while the page is in DRAM. On eviction, only dirty sub-blocks are written back to PCM. | `ms_tlb`, `hyst_field_update`, `migration_dma` |
| RAPid buffer | "Recently accessed page id" buffer in the memory controller. It lists the DRAM frames touched since the last migration. The OS replacement code reads this list instead of scanning page tables. | `rapid_buffer`, `ms_mem_ctrl` |
| Migration DMA with demand priority | Copies a page in and writes the victim's dirty sub-blocks out, in 64-byte bursts spread over the banks. Demand requests go ahead of bursts. | `migration_dma`, `ms_mem_ctrl` |

`migrantstore_top` connects these blocks. The cores, the caches, the OS
trap handler and the memory chips stay outside, attached through its ports.

## Where a page is

The physical address space holds both memories:

| Physical address | Memory | Page number |
|---|---|---|
| `0x0_0000_0000` – `0x1_FFFF_FFFF` | PCM, 8 GB | bits 32:13 (20 bits) |
| `0x2_0000_0000` – `0x2_07FF_FFFF` | MigrantStore DRAM, 128 MB | frame = bits 26:13 (14 bits) |

Bit 33 selects the DRAM. This map is a choice of this RTL. All that is
needed is that one controller can tell the two memories apart by address.
Pages are 8 KB, blocks and bursts 64 bytes, and sub-blocks 512 bytes
(16 per page). `ms_pkg` holds these constants and the helpers
`pcm_block_addr`, `ms_block_addr` and `is_ms_addr`.

Each page-table entry (`pte_t`) holds, besides the frame number:

* an `in_ms` bit, set by the OS when the page enters MigrantStore;
* the usual reference and dirty bits;
* a 16-bit `field`, whose meaning depends on `in_ms`.

When a page leaves MigrantStore, its PCM copy has not been freed. The OS
kept that "stale" page aside and points the entry back to it. Its clean
sub-blocks are still correct, which is why only dirty sub-blocks need
writing back.

## The shared count / dirty field

This part needs the most care, because one field does two jobs and the
hardware changes it as a side effect of ordinary TLB accesses.

**Page in PCM (`in_ms = 0`): hysteresis count.** Counting every access
would be wrong, because cache hits never reach PCM and only add noise. So
only off-chip misses are counted. A core does not normally tell its TLB
that an access missed off chip. The assumed core therefore marks the miss
when its data returns and replays the access, and the replay reaches the
TLB with `acc_offchip = 1`. The TLB already rewrites the entry on every
access to set the reference bit. In the same write, `hyst_field_update`
adds one to the count, which sits in the low 5 bits and saturates at the
threshold. On the replay that brings the count to `HYST_THRESHOLD` (16),
`trap_valid` is raised in the same cycle. The trap names the virtual page
(`trap_vpn`) and its PCM page (`trap_ppn`). It is the PCM fault that
starts a migration.

**Page in MigrantStore (`in_ms = 1`): sub-block dirty bits.** A store sets
bit `offset[12:9]`, the dirty bit of the 512-byte sub-block it touches.
Again this happens in the write that already sets the page's dirty bit.
The off-chip flag plays no part here.

**Keeping the page table current.** A TLB entry that is replaced or shot
down is always returned on `evict_*`, with its current field. The walker or
OS stores it back into the page table. When the OS writes a new entry for a
page that has just moved, it writes the field as zero. That clears the dirty
bits of an incoming page and restarts the count of an outgoing one.

Two cases are easy to get wrong:

* A plain TLB hit with `acc_offchip = 0` never changes a PCM page's count.
* Once a count has reached 16, every later off-chip miss to that page traps
  again, until the OS migrates the page and rewrites its entry.

## One migration, step by step

1. The replayed miss traps. The L2 miss that caused it stays stalled until
   step 5. All four memory operations finish before the page tables change.
2. The trap handler picks a DRAM frame, usually the least recently used
   one, and shoots down the TLB entries of both pages. The returned entries
   carry the victim's final dirty bits.
3. It writes a `dma_cmd_t` to `mig_cmd_*`. The command holds the demand
   page's PCM page, the frame, and, if the frame is occupied, the victim's
   stale PCM page and its dirty bits.
4. `migration_dma` works in two phases. The victim phase runs only if
   the frame is occupied. For each victim block, the engine asks the L2 to
   flush its copy (`flush_valid`/`flush_addr`, answered by `flush_ack`).
   If the block's sub-block is dirty, the engine reads the block from DRAM
   and writes it to the stale PCM page. The demand phase then flushes,
   reads from PCM and writes into the frame each of the 128 blocks. Every
   read or write is a single 64-byte request.

   Up to 16 requests are in flight at once, so a page's bursts are spread
   over the banks. Each request holds a *slot* with a one-block buffer. The
   slot number travels as the request `id`, so read data may come back in
   any order. A slot whose data has returned writes it out before the next
   read is issued. The demand phase starts only when every victim slot has
   drained, so the frame is never overwritten before the victim's blocks
   have been read. The L2 acknowledges a flush only after any write-back it
   causes has been accepted, so the DMA always reads current data.
5. While the DMA runs, the handler reads the RAPid buffer and updates its
   LRU list. It then pulses `rapid_clear`. When `mig_done` pulses, it
   rewrites the two page-table entries and lets the stalled miss go on.

A migration makes 2·128 + 2·8·(dirty victim sub-blocks) bursts, that is,
reads and writes. It issues 128 flushes, or 256 when the frame held a
victim.

## RAPid buffer

Every demand request that the controller accepts for the DRAM inserts its
frame number into the buffer. The buffer has 20 entries and is circular,
with a write pointer:

* A frame that is already listed is not added again. The buffer keeps
  distinct pages, in order of their first touch since the last clear.
* When a 21st distinct frame arrives, it overwrites the oldest entry, and
  the `overflow` flag records that the list is now truncated.
* The OS reads the buffer through `rapid_rd_idx` → `rapid_rd_id`, a
  combinational read. Index 0 is the newest entry. `rapid_count` says how
  many entries are valid. The OS should do its whole scan in one cycle, or
  while no demand traffic to the DRAM is accepted; otherwise an insert
  shifts the indices during the scan.
* `rapid_clear` empties the buffer. A frame inserted in the same cycle as
  the clear becomes the single entry left.

Migration bursts do not insert, because they are not program accesses.

## Demand-first arbitration

`ms_mem_ctrl` routes each request by address bit 33. It has two requesters
(demand and DMA) and two devices (PCM and DRAM). When both requesters want
the same device in the same cycle, the demand request wins. Every DMA
request is a single 64-byte burst, so demand accesses get in between the
bursts of a migration. This keeps a migration from shutting out ordinary
misses to busy PCM banks.

The controller writes the requester into each request's `src` field, and
the device returns `src` with its response. If both devices answer the same
requester in the same cycle, the PCM answer goes first and the DRAM answer
waits, because its `rsp_ready` is held low. Bank queues and bank scheduling
are left to the device side.

## Interfaces and timing

* All blocks use one clock and an active-low asynchronous reset.
* Memory requests use valid/ready with an `ms_pkg::mem_req_t` payload. The
  payload is one whole 64-byte block: `src`, an `id` chosen by the
  requester, `we`, the block-aligned `addr` and 512-bit `wdata`. The
  response returns `src` and `id`, so a requester with several requests
  in flight can match the answers. A request must not change while it waits; an
  assertion checks this.
* Devices answer every request, writes included, with a `mem_rsp_t`.
  Requesters always accept responses.
* TLB translation, `acc_hit` and `trap_*` are combinational in the access
  cycle. The entry update, refill (`fill_*`) and shoot-down (`inv_*`) take
  effect at the next clock edge. `evict_*` is valid for one cycle after the
  refill or shoot-down that caused it. A refill and a shoot-down must not
  come in the same cycle; an assertion checks this.
* The DMA accepts a command only when idle (`mig_cmd_ready`). `mig_busy`
  stays high until it is done, and `mig_done` pulses once at the end.

## Parameters

| Parameter | Default | Source |
|---|---|---|
| Page / block / sub-block size | 8 KB / 64 B / 512 B | as evaluated |
| PCM / MigrantStore size | 8 GB / 128 MB | as evaluated |
| `HYST_THRESHOLD` | 16 | as evaluated (8 and 64 were also tried) |
| `RAPID_ENTRIES` | 20 | as evaluated |
| `TLB_ENTRIES` | 64, fully associative, round-robin replacement | choice of this RTL |
| `DMA_MAX_OUT` | 16 bursts in flight | choice of this RTL (equal to the DRAM bank count) |
| Virtual address | 48 bits | choice of this RTL |

Geometry is fixed in `ms_pkg`. The four counts are module parameters of
`migrantstore_top`.

## How this RTL relates to the published design

The following follow the published description: the shared field (a count
for PCM pages, dirty bits for DRAM pages); counting only off-chip misses;
migrating at threshold 16; a 20-entry RAPid buffer in the memory controller
that overwrites its oldest entry; demand priority between 64-byte migration
bursts; write-back of dirty sub-blocks only; L2 flushes for each burst; and
stalling the triggering miss until the whole migration ends.

The following are choices of this RTL, because the description leaves them
open:

* the address map;
* the size and organisation of the TLB;
* the bit layout of the count and its saturation;
* dropping repeated frames in the RAPid buffer, with no move to the front;
* not inserting DMA traffic into the RAPid buffer;
* the two-phase order inside the DMA and its 16 slots;
* the handshakes.

Known departures:

* **Migration time.** The published system gives about 6000 cycles of
  memory time per migration. That figure benefits from row-buffer hits in
  both memories. The device model used here has 64 PCM banks and 16 DRAM
  banks with the published latencies, but no row hits. Against it, a
  migration takes 8,000–10,500 cycles on average, depending on how many
  victim sub-blocks are dirty.
* **Bus width.** The published bus is 256 bits wide. Here a request
  carries a whole 512-bit block, and splitting it into beats is left to the
  device interface.

Not in this RTL: the cores and their replay logic, except for the
`acc_offchip` flag; the caches, coherence and interconnect; the PCM array
with its selective-update write drivers; the DRAM; the page tables; and the
trap-handler software. The evaluated variants that are not the main design
are also not built: write-only migration, and 128-byte sub-blocks, which
need a 64-bit field. A threshold of 8 or 64 is just a parameter value. A
threshold of 1 gives the no-hysteresis variant.

## Files

`rtl/`: `ms_pkg.sv` (constants, types, address helpers),
`hyst_field_update.sv`, `ms_tlb.sv`, `rapid_buffer.sv`, `ms_mem_ctrl.sv`,
`migration_dma.sv`, `migrantstore_top.sv`.

`tb/`: one self-checking testbench per block (`tb_<module>.sv`), and
`mem_model.sv`, a behavioural banked memory device. Blocks are interleaved
over its banks at 64-byte granularity. Each bank serves one request at a
time with set read and write latencies, and responses leave through a
queue. It stores data sparsely, and a block never written reads as a
pattern computed from its address.

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself
through a watchdog:

* `tb_hyst_field_update` checks the count sequence, the trap on exactly the
  16th miss, and the dirty bits against offsets.
* `tb_ms_tlb` uses an 8-entry TLB against a reference page table, checking
  translations, traps and every written-back field.
* `tb_rapid_buffer` compares the buffer with a queue model, covering
  repeats, overflow and clears.
* `tb_ms_mem_ctrl` uses random demand and DMA traffic against a shadow
  memory, and checks priority, response routing and RAPid contents.
* `tb_migration_dma` runs four migrations (empty frame, partly dirty, clean
  and fully dirty victim) against an 8-bank memory. It checks data, burst
  counts, flush-before-read, and that the bursts overlap.
* `tb_migrantstore_top` runs the whole design at its default parameters,
  with the published device latencies (1 memory cycle = 10 core cycles).
  It makes 6000 loads and stores over 96 pages and uses a software LRU over
  32 frames driven by the RAPid buffer. It checks every load's data through
  about 76 migrations, the trap timing, the TLB write-backs, the RAPid
  contents, and that the mean migration time stays within 3x of 6000
  cycles. It also counts each mechanism and fails if one never occurs. It
  runs about 2.8 million cycles, taking roughly 15 s.

To simulate, for example the top:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/ms_pkg.sv tb/tb_migrantstore_top.sv --top-module tb_migrantstore_top
./obj_dir/Vtb_migrantstore_top
```

For a lint of the RTL, run `verilator --lint-only -Wall -y rtl rtl/ms_pkg.sv
rtl/migrantstore_top.sv`. The remaining warnings are unused package
constants and unused bits, such as the low page-offset bits that the field
update does not need.

## Evaluated workloads

The design stores no data itself. A workload fits if its footprint fits
the 8-GB PCM that the 34-bit physical address space covers. Footprints are
the published ones: Apache about 500 MB, OLTP 5 GB, SPECjbb 300 MB, FFT
256 MB and LU 128 MB. All of them fit.

The 256-MB MigrantStore of the sensitivity study does not fit the default
address map, because it needs a 15-bit frame number. 128-byte sub-blocks
do not fit the 16-bit field either.
