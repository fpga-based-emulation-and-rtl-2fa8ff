# HeteroMem on HeteroBox: device-side memory tiering for a CXL memory expander

A CXL Type-3 memory expander gives a host more memory, but the memory behind it is slower
than local DRAM. Tiering systems keep frequently used ("hot") pages in fast memory and
push rarely used ("cold") pages to slow memory. Most of them do this in the host operating
system: they sample accesses, pick pages, and copy them with the CPU.

This design does all of that **inside the memory device**, where every access is seen.

- The device puts a translation layer between the host physical address (hPA) and the
  device physical address (dPA).
- It profiles the translated read stream to find hot pages in slow memory and cold pages
  in fast memory.
- It swaps each hot/cold pair with its own migration engine and rewrites the translation.

The host always sees the same data at the same hPA and never knows that pages moved.

The design also needs a device whose memory actually has a fast and a slow part. For
experiments, one DRAM is made to look like several regions with different latency and
bandwidth. That is done by an emulation stage placed just before the memory controller.
The two halves are:

| Part | Modules | Job |
|---|---|---|
| HeteroMem (tiering) | `hm_remapping_unit`, `hm_profiling_unit`, `hm_migration_unit` and their helpers | Translate, profile and migrate |
| HeteroBox (emulation) | `hb_emulation_logic`, `hb_region_classifier`, `hb_config_regs` | Give address regions their own read latency and bandwidth |
| Observation | `hm_access_counter` | Count memory traffic per 2 MB region |

`heteromem_top` connects both halves. It sits between a CXL controller (CXL.mem requests in,
CXL.io register accesses in) and a DRAM memory controller. Neither controller is part of
this RTL.

```
 CXL.mem ──► remapping unit ──(translated reqs)──► arbiter ──► emulation logic ──► memory
 (host)      │  ▲   │  remapping cache                 ▲           (latency /      controller
             │  │   └─ translated reads ─► profiling   │            bandwidth)
             │  │                           unit       │                │
             │  └──── (hot, cold) pairs ◄─────┘        │                │
             └─ mu_en ─► migration unit ───────────────┘                │
 host read data ◄── responses routed by tag source ◄─────────────────────┘
 CXL.io ───► BAR registers (region set-up, tiering knobs, statistics)
```

## Address spaces and the tables in memory

Memory is managed in 4 KB pages. At the default size of 16 GB there are 4,194,304 pages.
The first `FAST_PAGES` device pages (4 GB, 1,048,576 pages) are fast memory; the rest are
slow.

Two tables live at the start of fast memory:

| Table | Device byte address | Entry for page p | Size |
|---|---|---|---|
| Forward (hPA page → dPA page) | `p*4` | 32-bit entry | 16 MB |
| Reverse (dPA page → hPA page) | `N_PAGES*4 + p*4` | 32-bit entry | 16 MB |

- Each 64-byte memory line holds 16 entries. Entry `p % 16` sits in bits `[32*(p%16) +: 32]`.
- Together the two tables use `rsv_pages = ceil(N_PAGES*8 / 4096)` pages, 8,192 at the
  default size. These pages are reserved: the host must not use hPA pages below
  `rsv_pages`.
- Because the host sees identity at power-on, hPA pages below `rsv_pages` point at the
  tables themselves. The profiling unit never offers a table page as a cold page, so the
  tables never move.
- A 32-bit entry could address 16 TB of 4 KB pages. Only the low 22 bits are used at the
  default size.

**Power-on.** After reset the remapping unit writes both tables as the identity mapping,
one line per cycle: 2 × 262,144 = 524,288 writes at the default size. During the same time
it clears the remapping cache and the two access bitmaps. Host requests are refused until
`init_done` rises. In simulation this takes 524,289 cycles.

## Translating a host request

Every CXL.mem request goes through `hm_remapping_unit`.

1. **Cycle 0.** The request is accepted. The remapping cache is looked up with the table
   line index (hPA page / 16).
   - The cache is direct-mapped, 32,768 lines of 64 bytes (2 MB).
   - Its read is registered, like a block RAM.
2. **Cycle 1.** The request enters the in-order request FIFO.
   - *Hit:* the page number is replaced by the cached entry first.
   - *Miss:* a read of the table line is also queued, with tag source `SRC_FILL`.
3. **FIFO head.**
   - A translated request leaves at once.
   - A missing request waits for its table line. The line arrives in the fill queue, is
     written into the cache, and the request is translated with it.
   - Memory answers in order, so the fill queue and the missing requests line up one to
     one. Two misses to the same line each fetch it; misses are not merged.
4. A round-robin arbiter merges table reads with translated requests. A second arbiter
   (`hm_req_arbiter` in the top) merges the remapping unit with the migration unit.

A cache hit reaches the memory side 2 cycles after the host request is accepted; the tests
check this. A miss adds one table read to the path.

Every translated **read** is also shown to the profiling unit as a dPA page number. Writes
are not profiled.

**Response routing.** All read responses come back through one channel. Each tag carries a
source field (`hm_pkg::src_e`):

| Source | Goes to |
|---|---|
| `SRC_HOST` | Back to the host, unchanged |
| `SRC_FILL` | The remapping unit's fill queue |
| `SRC_REV` | The migration transaction |
| `SRC_MIG` | The migration unit; the tag id numbers the read |

The host must send requests with source `SRC_HOST`. Its 16-bit id is returned untouched.

## The migration transaction

This is the hardest part of the design, because three things must change together:

- the data of two pages,
- four table entries in memory,
- any copy of those entries in the remapping cache.

Meanwhile the host must never observe a half-finished state.

A migration request carries two **device** pages: a hot page in slow memory and a cold page
in fast memory. The remapping unit handles it in six steps:

1. **Block and drain.** Stop accepting host requests. Wait until the translation pipeline,
   the request FIFO and all table reads are empty. Host requests already in memory
   complete before anything of the migration, because memory is in order.
2. **Read the reverse table.** Issue the reads of the reverse entries of both pages (tag
   `SRC_REV`, id 0 = hot, 1 = cold). Right after issuing them, pulse `mu_en` to start the
   migration unit, so the swap overlaps the wait for the two entries.
3. **Learn the host pages.** When both entries return, the unit knows `hpa_hot` and
   `hpa_cold`, the host pages that live on the two device pages.
4. **Rewrite the tables.** Issue four byte-masked writes, 4 bytes each:
   - `fwd[hpa_hot] = cold dPA`
   - `fwd[hpa_cold] = hot dPA`
   - `rev[cold dPA] = hpa_hot`
   - `rev[hot dPA] = hpa_cold`

   The two forward entries are also updated in the remapping cache if their lines are
   resident, so the cache never holds a stale mapping.
5. **Wait for the migration unit's `done`.** It may already have arrived.
6. **Unblock.** Count the migration and accept host requests again.

**The swap itself** (`hm_migration_unit`) runs as follows.

- It reads the 64 lines of both pages without waiting for responses, alternating: hot
  line 0, cold line 0, hot line 1, and so on.
- Each returned line is buffered and written to the same line of the *other* page.
- A write is allowed as soon as the read of the line it overwrites has been **issued**.
  Memory executes in order, so that read has then taken its data before the write lands.
  This keeps the swap correct without waiting for every read to return.
- Writes have priority over reads. The buffer holds all 128 lines, so it never overflows.
- One swap is 128 reads and 128 writes. The tests count both.

**Correctness rests on one property: the memory controller executes requests in the order
it accepts them.** A memory controller that reorders reads around writes to the same line
would break both the swap and the miss handling.

## Finding hot and cold pages

`hm_profiling_unit` splits the translated read stream by dPA: below `FAST_PAGES` is fast
memory, at or above it is slow memory.

**Hot pages in slow memory** are found by a Count-Min Sketch (`hm_cms_hot_detector`):

- 4 lanes × 1,024 saturating 8-bit counters, with one hash function per lane.
- Each slow read increments its four counters. The smallest of the four is the estimate.
- If the estimate exceeds `HOT_THRESHOLD` (default 8), the page is hot.
- A hot bit per counter stops a page from being reported twice. A page is reported only if
  one of its four hot bits is still clear, and reporting sets all four.
- Counters and hot bits are cleared every `CMS_PERIOD` cycles (default 1,000,000). This
  bounds the error, which grows with the length of the stream the sketch has seen.
- The hash is multiplicative: page × (odd constant per lane), keeping the top 10 bits of
  the 32-bit product.

**Cold pages in fast memory** are found by a ping-pong bitmap (`hm_pingpong_bitmap`):

- There are two bitmaps with one bit per fast page.
- During a period, one bitmap records reads and the other, holding the previous period,
  is scanned. Each clear bit is a page that was not read for a whole period, and it is
  sent out as a cold page. Each word is cleared as it is scanned.
- At the end of the period (`BITMAP_PERIOD`, default 1,000,000 cycles) the rest of the
  scanned bitmap is cleared and the two bitmaps swap roles.
- The scan reads one 64-bit word per cycle and emits one cold page per cycle. It stalls
  while the cold pages buffer (64 entries) is full.
- Just after reset both bitmaps are empty, so in the first period every fast page above the
  tables counts as cold.

**Pairing and rate limit.**

- When a hot page appears, one cold page is taken from the buffer and the pair goes into
  the migration FIFO (32 entries).
- If the buffer is empty or the FIFO is full, the hot page is dropped and counted in
  `HOT_DROPPED`.
- Pairs leave the FIFO toward the remapping unit at most `MIG_LIMIT` per `MIG_WINDOW`
  cycles, default 32 per 100,000. At 200 MHz that is 128 KB promoted per 0.5 ms, about
  256 MB/s.
- Pairs leave only while `HM_CTRL.mig_enable` is set.

## Emulating slow memory (HeteroBox)

`hb_emulation_logic` delays read **responses**, not requests, so the DRAM keeps working at
full speed.

- **Timestamp.** A 32-bit register counts cycles.
- **Tag on accept.** When a read is accepted, `hb_region_classifier` finds its region: the
  lowest-numbered enabled region whose inclusive `[START, END]` contains the address. The
  value `timestamp + LATENCY[region]` is pushed into a tag FIFO. The request itself goes
  to memory unchanged.
- **Release.** Responses are pushed into a response FIFO. A response is released when:
  - the timestamp has passed the tag at the head (compared wrap-safe), and
  - the region's bandwidth counter is below its `BANDWIDTH` register.
- **Bandwidth counters.** Each region's counter counts released responses. All counters
  are cleared every `BW_INTERVAL` cycles. Addresses in no region are neither delayed nor
  limited.
- **Resulting latency.** A read sees about `max(LATENCY + 2, memory latency + 2)` cycles
  through this stage.
  - Small latency settings are hidden by the memory's own latency.
  - In the tests a fast read takes 15 cycles end to end and a slow one 132.
- **Limits.** Writes pass through undelayed. A read is accepted only while the tag FIFO
  (64 entries) has room, which caps outstanding reads and keeps the response FIFO from
  overflowing.

The reset configuration is the main one: two regions.

| Region | Device bytes | Latency | Bandwidth |
|---|---|---|---|
| 0 (fast) | `[0, FAST_PAGES*4K-1]` | 0 cycles | unlimited |
| 1 (slow) | the rest, up to 16 GB | 128 cycles | unlimited |

Up to four regions can be configured.

## Access counters

`hm_access_counter` is observation hardware. It keeps one 32-bit counter for each 2 MB of
device memory: 8,192 counters for 16 GB.

- **What it counts.** Every request the memory controller accepts increments the counter
  of its 2 MB region. That includes host traffic after translation, table reads and
  writes, and migration traffic.
- **Reading.** The host reads a counter through the `acc_rd_*` port: index in, value out
  one cycle later.
- **Wrap-around.** Counters wrap. Sampling all of them at a fixed interval and taking
  differences gives a map of where traffic lands over time. For example, it shows whether
  hot data has gathered in the fast region.
- **Wrap time.** At one access per cycle and 200 MHz, a counter wraps after about 21 s.
- **Reset.** After reset a sweep clears the array, one counter per cycle.

The counters do not influence any tiering decision.

## Register map (CXL.io BAR)

All registers are 64 bits wide, at the byte offsets below (`hb_config_regs`).

- **Timing.** A write takes effect on the next cycle. Read data is valid, with
  `mmio_rvalid`, one cycle after `mmio_rd`.
- **Write side effects.** Writing `REGION_NUM` above 4 stores 4. Status registers are
  read-only.

| Offset | Name | Reset |
|---|---|---|
| 0x000 | REGION_NUM | 2 |
| 0x008 | BW_INTERVAL (cycles) | 1024 |
| 0x100 + 0x20·r | region r START, +0x08 END (inclusive), +0x10 LATENCY (cycles), +0x18 BANDWIDTH (responses per interval) | see above; BANDWIDTH 0xFFFF |
| 0x200 | HM_CTRL, bit 0 = migration enable | 1 |
| 0x208 | FAST_PAGES | 1,048,576 |
| 0x210 | HOT_THRESHOLD | 8 |
| 0x218 | CMS_PERIOD (cycles) | 1,000,000 |
| 0x220 | BITMAP_PERIOD (cycles) | 1,000,000 |
| 0x228 | MIG_LIMIT (pairs per window) | 32 |
| 0x230 | MIG_WINDOW (cycles) | 100,000 |
| 0x300 | INIT_DONE | read-only |
| 0x308 | MIGRATIONS | read-only |
| 0x310 | HOT_PAGES | read-only |
| 0x318 | COLD_PAGES | read-only |
| 0x320 | HOT_DROPPED | read-only |
| 0x328 | CACHE_MISSES | read-only |

`FAST_PAGES` may be lowered (for example to 2 GB or 1 GB) for experiments with less fast
memory. Region 0 and region 1 should then be moved to match.

## Interfaces of `heteromem_top`

| Port group | Protocol |
|---|---|
| `host_req_*` | valid/ready. `mem_req_t` = 34-bit byte address (64-byte aligned), `we`, 64-bit byte enable, 512-bit data, tag `{src, id}`. |
| `host_rsp_*` | valid-only. `mem_rsp_t` = 512-bit data and the request's tag. Read responses return in request order. |
| `mmio_*` | register port above. |
| `acc_rd_en`, `acc_rd_idx`, `acc_rd_valid`, `acc_rd_data` | access counter read. Data is valid one cycle after `acc_rd_en`. |
| `mc_req_*` / `mc_rsp_*` | the memory controller. It must execute requests in order and return reads valid-only. |
| `init_done`, `migrating` | status. |

The top's parameters are `N_PAGES`, `FAST_PAGES`, `CACHE_LINES`, `CMS_D`, `CMS_W`,
`CMS_CNT_W`, `EMU_FIFO_DEPTH` and `ACC_SHIFT` (log2 of the bytes per access counter). Their defaults are the main configuration: 16 GB of memory,
4 GB of it fast, a 2 MB cache, and a 4 × 1024 sketch of 8-bit counters.

## What follows the published design, and what is this design's own

These parts follow the published design:

- **HeteroBox:**
  - the timestamp register and the latency-tagged FIFO;
  - the response FIFO and per-region bandwidth counters with an interval reset;
  - registers in BAR space.
- **Tables and translation:**
  - forward and reverse tables of 4-byte entries at the start of fast memory;
  - a remapping cache backed by an in-order miss FIFO.
- **Migration transaction:** block the host, read the reverse table, start the migration
  unit right after those reads, rewrite the tables, and unblock when both are done.
- **Profiling:** the fast/slow split of the read stream; a Count-Min Sketch with
  saturation, a minimum estimate, a threshold, hot bits and a periodic reset; a ping-pong
  bitmap; a cold pages buffer; the pairing of hot and cold pages; a limit of 32 pairs per
  100,000 cycles.
- **Migration unit:** a swap with non-blocking reads and a write as soon as data returns.

These are this design's own choices:

- Register layout and widths, including the units of the bandwidth register (responses
  per `BW_INTERVAL` cycles).
- Tag source field for response routing.
- Identity initial mapping.
- Direct-mapped cache organisation.
- Drain-before-migrate.
- In-place cache update during a migration.
- Hash functions.
- All FIFO depths.
- Bitmap word width and scan order.
- Drop rule for unpaired hot pages.
- Write-issue rule of the migration unit.
- Reset values of the threshold, the periods and the bandwidth interval.

**Which stream feeds the sketch.** The published description is inconsistent here. It says
hot pages are looked for in slow memory, and also, once, that the sketch profiles the stream
to fast memory. This design feeds the sketch with the **slow-memory** stream, since only hot
slow pages can be promoted.

**What is not included:**

- the CXL controller, the memory controller and DRAM;
- the host driver and the configuration tool that fill the registers;

## Simulating

All testbenches are self-checking. Each ends by printing
`TB_RESULT checks=<n> failures=<n>` and has a cycle watchdog.

- **Memory model.** `tb/mem_model.sv` is a behavioural in-order memory with a configurable
  latency and random back-pressure. A line never written reads back as a known pattern of
  its address (`tb_pkg::pattern`), so data checks need no preloading.
- **Build and run.** Each testbench builds with plain Verilator, for example:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_heteromem_top \
  rtl/hm_pkg.sv tb/tb_pkg.sv rtl/hm_fifo.sv rtl/hm_req_arbiter.sv rtl/hm_remap_cache.sv \
  rtl/hm_remapping_unit.sv rtl/hb_region_classifier.sv rtl/hb_emulation_logic.sv \
  rtl/hb_config_regs.sv rtl/hm_cms_hot_detector.sv rtl/hm_pingpong_bitmap.sv \
  rtl/hm_profiling_unit.sv rtl/hm_migration_unit.sv rtl/hm_access_counter.sv \
  rtl/heteromem_top.sv \
  tb/mem_model.sv tb/tb_heteromem_top.sv -Mdir obj -o sim && obj/sim
```

| Testbench | What it establishes |
|---|---|
| `tb_hb_region_classifier` | random regions and addresses against a reference search, including inclusive ends and priority |
| `tb_hb_config_regs` | reset values, every register's write/read, the one-cycle read timing, clamping, status pass-through |
| `tb_hb_emulation_logic` | exact added latency over a sweep of latency values, two regions at once, unmapped addresses, write pass-through, the bandwidth cap per interval |
| `tb_hm_req_arbiter` | per-source order, no loss, no starvation under full load |
| `tb_hm_remap_cache` | hits, misses, fills, in-place updates against a reference model |
| `tb_hm_migration_unit` | both pages swapped exactly, under random back-pressure; the swap finishes within a cycle bound |
| `tb_hm_cms_hot_detector` | threshold behaviour, single reporting, saturation, periodic reset |
| `tb_hm_pingpong_bitmap` | exactly the unread pages of the last period are reported, for several periods |
| `tb_hm_profiling_unit` | pairing, drops, rate limit per window, enable bit |
| `tb_hm_remapping_unit` | data through random reads/writes and 12 migrations against a reference; tables stay inverse permutations; hit latency of 2 cycles; host blocked during migration |
| `tb_hm_access_counter` | random accesses and reads against a reference count, one-cycle read timing, wrap-around, nothing counted during the clearing sweep |
| `tb_heteromem_top` | end to end at 64 pages (see below) |
| `tb_heteromem_full` | end to end at the default size |

**The end-to-end testbench.** `tb_heteromem_top` runs 64 pages of which 16 are fast, with a
2-line cache.

- It checks the register reset values, fast and slow latency, and the bandwidth cap.
- It checks that no migration happens while migration is disabled.
- It then runs a 6,000-request mixed workload that hammers more slow pages than there are
  cold fast pages.
- It checks every read against a reference model, and every migration's result in the
  tables.
- It counts each mechanism and fails if one never happened: cache hit, cache miss, hot
  page, cold page, pair formed, migration, host blocked, rate limit, hot page dropped,
  bandwidth stall, tag-FIFO full, latency wait, bitmap swap, accesses counted in more
  than one region.
- At the end, all 16 access counters (16 KB regions at this size) must equal the requests
  the memory model received. A typical run has
  15 migrations and 33 drops.

**The full-size testbench.** `tb_heteromem_full` instantiates the top with no parameter
overrides: 16 GB, 4 GB fast, a 2 MB cache.

1. It runs the 524,288-write initialisation.
2. It writes and then repeatedly reads one slow page until the sketch reports it.
3. It checks that the page was swapped into a fast page above the tables, with all four
   table entries right.
4. It checks that the data reads back intact and now at fast latency.
5. It checks the access counters of the 2 MB regions involved.

It runs in seconds, because the memory model stores only written lines.

## Limits worth knowing

- **Memory order.** The memory controller must be in order, as described above.
- **Host access during a migration.** The host is stalled for the whole migration: the
  drain, the two table reads, the four table writes and the 256-line swap. At 128 cycles
  of slow latency that is a few hundred cycles.
- **Lost profiling information.**
  - Hot pages found while no cold page is buffered are dropped. They are found again only
    after the next sketch reset.
  - Reads recorded during the bitmaps' power-on clearing are lost.
  - Accesses during the access counters' clearing sweep are not counted.
- **Repeated cold pages.** A cold page may be reported again in a later period while it is
  still waiting in the buffer, so the same page can be swapped twice. The tables stay
  consistent, because every swap goes through the reverse table.
- **Emulation scope.** Only reads are delayed and limited by the emulation. Writes are
  posted.
