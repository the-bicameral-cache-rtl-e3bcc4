# Bicameral Cache — RTL of a split scalar/vector data cache

A vector processor issues two very different kinds of memory references.
Scalar loads and stores touch a few bytes at a time and reuse them often. Vector
loads and stores sweep through long runs of consecutive data and seldom come back.
If one cache serves both, the vector streams push out the small scalar working set,
and every vector line that comes in costs a whole line transfer.

The Bicameral Cache gives each kind of reference its own cache:

* The **Scalar Cache (SC)** is a conventional set-associative cache with short
  lines.
* The **Vector Cache (VC)** is a fully associative cache with few, very long lines.
  Each line is split into sectors that are valid and dirty independently, so a long
  line can be filled and written back piece by piece.

A sector (64 bytes) is the only unit that ever moves between the caches and main
memory. The two caches never hold the same sector at once. A reference is looked up
first in the cache of its own type (the *native* lookup), then in the other one (the
*cross* lookup), and only then sent to memory.

Two further mechanisms sit around the caches:

* **Write buffers.** Each cache has a write buffer that lets dirty evictions leave
  quietly, with policies that decide when they are written back.
* **Memory-side prefetcher.** A very simple prefetcher in the memory controller uses
  idle DRAM banks to fill the rest of a vector line.

This repository holds synthesizable SystemVerilog for the two caches and their write
buffers, the cache controller, the memory controller with its per-bank DRAM timing
model and the prefetcher. A self-checking testbench comes with each block. One more
covers the whole hierarchy at full size, and eight drive it with the memory traffic
of common vector kernels.

## 1. The configuration

| Item | Default | Where |
|---|---|---|
| Address | 32 bits (4 GB of DRAM) | `bc_pkg::ADDR_W` |
| Sector | 64 B = 512 bits; also the bus width | `bc_pkg::SECTOR_W` |
| Scalar Cache | 256 sets × 4 ways × 64 B lines = 64 KB | `SC_SETS`, `SC_WAYS` |
| SC write buffer | 8 lines, separate from the SC | `SC_WB_LINES` |
| Vector Cache | 64 lines × 16 sectors × 64 B = 64 KB, fully associative | `VC_LINES`, `VC_SECTORS` |
| VC write buffer | up to 8 of the 64 VC lines, flagged in place | `VC_WB_LINES` |
| Eager write-back threshold | SC 8 (full), VC 5 (half plus one) | `SC_WB_THRESH`, `VC_WB_THRESH` |
| Replacement / write policy | LRU / write-back, in both caches | — |
| Lookup latency | 1 cycle native, +1 cycle cross | controller FSM |
| DRAM | 8 banks × 32768 rows × 256 columns of 64 B | `N_BANKS`, `ROW_W`, `COL_W` |
| DRAM timing | RAS 28, CAS 11, PRE 11 cycles | `T_RAS`, `T_CAS`, `T_PRE` |
| Per-bank request queue | 8 entries (this design's choice) | `QDEPTH` |

Address fields:

```
SC   : tag [31:14] | set [13:6]    | byte [5:0]
VC   : tag [31:10] | sector [9:6]  | byte [5:0]
DRAM : row [31:17] | bank [16:14]  | column [13:6] | byte [5:0]
```

The DRAM map is Row-Bank-Column, and one column holds one sector. A whole 1 KB VC
line therefore lies in one row of one bank. A prefetch of the next sector of a line
is always a row-buffer hit when that row is still open.

## 2. Blocks and how they connect

```
              core_req_t (one sector, scalar/vector, byte mask)
                   |
          +--------v---------------------------------------+
          | bicameral_cache (controller FSM)               |
          |   scalar_cache  <-> sc_write_buffer            |
          |   vector_cache (with embedded write buffer)    |
          +--------+----------------------^----------------+
     mem_req_t     | (demand reads,       | mem_rsp_t (demand data,
                   |  SC and VC writes)   |  prefetched sectors)
          +--------v----------------------+----------------+
          | mem_ctrl                                       |
          |   8 x FCFS queue -> 8 x dram_bank timing model |
          |   vc_prefetcher                                |
          |   shared DRAM data port                        |
          +--------+---------------------------------------+
                   | dram_en/we/addr/wdata/rdata
               DRAM devices (outside the design)
```

| File | Contents |
|---|---|
| `rtl/bc_pkg.sv` | Widths, the request and response structs, the event structs, byte merge |
| `rtl/scalar_cache.sv` | SC arrays, lookup, LRU, victim choice |
| `rtl/sc_write_buffer.sv` | 8-entry age-ordered buffer, lookup/restore, write-back of the oldest entry |
| `rtl/vector_cache.sv` | VC arrays with per-sector v/d bits, LRU, embedded write buffer and its write-back engine |
| `rtl/bicameral_cache.sv` | The controller: native/cross lookup, migration, miss handling, emptying policies, prefetch fills |
| `rtl/dram_bank.sv` | Two-state (row closed / row open) timing model of one bank |
| `rtl/vc_prefetcher.sv` | Chooses a bank and sector to prefetch |
| `rtl/mem_ctrl.sv` | Bank queues, bank scheduling, data port, responses |
| `rtl/bc_top.sv` | `bicameral_cache` + `mem_ctrl`; the top |

The processor and the DRAM chips are not part of the design. At the top they
appear as ports:

* The core issues one sector reference at a time. A vector instruction that spans
  several sectors becomes several references, one per sector.
* The DRAM side is a plain one-sector-per-access data port. Read data returns one
  cycle after the access.

## 3. What happens to a reference

The controller (`bicameral_cache`) handles one reference at a time. Each state below
takes one cycle unless it waits.

**Native lookup (`S_IDLE`, the cycle after acceptance).**

* A scalar reference looks in the SC and the SC write buffer.
* A vector reference looks in the VC, including lines currently flagged as
  write-buffer lines.

On a hit the access is done in this cycle; a store merges its bytes under the mask.
A hit in a write buffer also *restores* the line:

* An SC write-buffer line goes back into the SC. This may push a dirty SC victim
  into the buffer.
* A VC line simply loses its WB flag.

**Cross lookup (`S_CROSS`).**

* **Scalar reference, sector found in the VC.** The reference is served in the VC,
  and the sector stays there. Vector data is not pulled apart by an occasional
  scalar access. If the line was flagged WB, it is restored.
* **Vector reference, sector found in the SC or its write buffer.** The sector
  *migrates*. It is removed from the SC side and written into its VC line,
  allocating that line if needed. Its dirty bit goes with it, and the store (if
  any) is applied.

Migration goes one way only, from scalar to vector. A scalar hit in the VC never
moves data back.

**Double miss.**

1. The demand read goes out (`S_MEMREQ`).
2. The controller then checks the native cache's write buffer. If it holds at least
   the threshold number of lines, the write-back of its oldest line starts now.
   This is *eager emptying*.
3. Room is made for the new sector:
   * **SC.** An invalid or LRU way is chosen (`S_SALLOC`). A dirty victim goes into
     the write buffer. If the buffer is full, the controller starts a write-back and
     waits (`S_SWAIT`) until the oldest line has left. This is *compulsory
     emptying*.
   * **VC.** If the line is present, the sector simply goes into it (`S_VNEED`).
     Otherwise a line is chosen (`S_VALLOC`): a free line if there is one, else the
     LRU line that is not flagged WB. A dirty victim is flagged WB in place and
     nothing is copied. If the write buffer already holds 8 lines, the controller
     waits (`S_VWAIT`) for the oldest to be written back, then tries again.
4. When the data returns (`S_WAITMEM`), it is placed (`S_SFILL`, `S_VFILL`). The
   store is merged, and the response goes out.

**Response timing, seen from the core** (cycle 0 is the one in which `req_valid &&
req_ready`):

| Case | `rsp_valid` at cycle |
|---|---|
| Native hit | 1 |
| Cross hit or migration into a present line | 2 |
| Miss | memory latency + a few cycles |

Row-buffer hit, miss with no open row, and row conflict cost CAS, RAS+CAS and
PRE+RAS+CAS. The memory controller adds its queue and data-port stages. In an idle
system a demand read's data arrives *T*+3 cycles after the controller accepts it,
where *T* is the bank access time.

## 4. The two write buffers

They share a purpose but are built very differently. This is the least obvious part
of the design.

**SC write buffer (`sc_write_buffer`).**

* A separate 8-entry store of (address, sector) pairs, kept in age order: entry 0
  is the oldest.
* Removing an entry (write-back done, or restore) shifts the younger ones down.
* An SC line is one sector, so writing one back is a single 512-bit write request.
* `drain_start` arms the write-back of one line (the oldest).

**VC write buffer (inside `vector_cache`).**

* There is no separate storage. A dirty VC victim only gets a WB flag and a rank
  (0 = oldest). It keeps its place and its data, and it can still be hit.
* While flagged it is not a replacement candidate. So the more lines wait for
  write-back, the fewer are free for new data. That is why the VC threshold (5 of
  8) is lower than the SC's (8 of 8).
* `drain_start` starts the write-back engine on the rank-0 line. The engine sends
  that line's valid dirty sectors in ascending sector order, one write request
  each, and marks each clean when the memory controller accepts it. When none is
  left, the line is freed.
* If the line is referenced during its write-back, the engine stops. Sectors
  already sent stay clean, and the line becomes a regular line again.
* The engine never acts in a cycle in which the controller updates the VC.

**Sharing the request channel.** Demand reads take the single memory request channel
first, then SC write-backs, then VC write-backs. A write-back counts as done when the
memory controller has queued it. The bank queues are first-come first-served, so a
later read of the same sector cannot overtake it.

## 5. Memory controller, bank timing and prefetch

**Requests.** `mem_ctrl` splits each request by bank and appends it to that bank's
FIFO queue.

**Banks.** An idle bank with a queued request starts it. Its `dram_bank` counts:

* CAS if the addressed row is open,
* RAS+CAS if no row is open,
* PRE+RAS+CAS otherwise.

Rows are left open after an access (open-page). The model has two states per bank,
row closed and row open.

**Data port.** A bank that has finished its count competes for the single data
port. The lowest bank number wins. Only one read may be in flight, because the
response register must be free for its data.

**Prefetcher (`vc_prefetcher`, combinational).** It fires when no idle bank has a
queued request. It chooses the lowest-numbered idle bank whose last operation was a
VC read (demand or prefetch) of a sector that is not the last of its 1 KB line. That
bank reads the next sector. Because the line is in the same row, the read is a
row-buffer hit. Successive prefetches on one bank walk to the end of the line.

**Prefetched sectors.** A prefetched sector returns with `pf` set. The cache keeps it
only when all of these hold:

* its VC line is present and not flagged WB;
* the sector is still invalid;
* the sector is not held by the SC or its write buffer;
* it is not the sector a scalar miss is waiting for.

Anything else is dropped. A prefetch never allocates or evicts a line and does not
change the LRU order.

**Stale prefetches.** A write to the same sector may be accepted while the prefetch
is still in flight. In that case the prefetch is cancelled, because its data would
be old.

**Demand meets prefetch.** A demand read may arrive for a sector whose prefetch has
already started in its bank or is crossing the data port. The demand is then not
queued; the prefetch is relabelled as the demand's response. Without this rule, a
long vector stream often asks for the next sector just after its bank began
prefetching it. The demand would then wait behind the prefetch and pay a second
access. In the 4096-bit axpy run below, that made prefetching a net loss (111 k vs
108 k cycles); with the rule the run takes 75 k.

## 6. Where this RTL departs from, or goes beyond, the paper's description

The published description is behavioural: the design was evaluated in a
cycle-approximate simulator. Everything below is a choice made here where the
description is silent, or where two parts of it disagree.

1. **Where the VC write buffer lives.** The structural drawing shows eight WB rows
   below the 64 VC lines. The text says the buffer is *embedded* in the regular
   lines, and that WB lines serve as regular lines when available. This RTL follows
   the text: at most 8 of the 64 lines carry the WB flag.
2. **Compulsory emptying in the VC.** The description says the oldest WB line is
   written back, then the victim enters the buffer, then the new line replaces it.
   Here, the line freed by the write-back receives the new data, and the dirty LRU
   victim stays a regular line. Afterwards the same data is cached and the same
   data is waiting; only which line holds the WB flag differs.
3. **After a VC write-back the line is freed**, as a written-back SC buffer line
   leaves the SC side. The description only says that it "leaves the write buffer".
4. **Granularity and blocking.** The core interface carries one 64 B sector with a
   byte mask, and one reference is in flight at a time. Splitting vector
   instructions (128 to 4096 bits, strided or indexed) into sector references is
   the core's job and is not part of this RTL.
5. **Write-allocate** on store misses (not stated in the description).
6. **Eager emptying** checks only the write buffer of the cache that missed.
7. **Prefetch fills and exclusivity.** The exclusivity rules for prefetch fills in
   section 5 are additions here. The description does not discuss the case. Without
   these rules, a prefetch could duplicate a sector held by the SC.
8. **Memory controller details.** The following are all this design's own choices:
   * the queue depth of 8;
   * one data port with fixed bank priority and one read in flight;
   * "first available bank" read as the lowest-numbered idle bank;
   * only VC reads count as a bank's "last read" for prefetching;
   * the cancellation of stale prefetches;
   * the merging of a demand read into the prefetch of the same sector.

   Refresh and low-power states are not modelled, as in the original evaluation.
9. **Not built.** The comparison baselines (a single 128 KB unified cache, and an
   "ideal" prefetcher that fills a whole line at the cost of one sector) are not
   part of the proposed design, so they are not built. Neither are the processor
   or the DRAM devices.
10. **Reset.** Reset clears valid, dirty and WB state, LRU ages, queues and bank
    states. Data and tag arrays are not reset.
11. **Cycles around memory.** The published latencies are lookups (1 cycle each)
    and DRAM commands (RAS, CAS, PRE). This RTL adds its own register stages on top
    of those: one cycle to queue a request, one to start the bank, one on the data
    port. The cache controller also spends a cycle or two in its allocation and
    fill states. A miss therefore costs a few cycles more than the DRAM command
    time alone.

## 7. Events

`bc_top` exports one-cycle strobes that a performance counter can accumulate.

**`bc_events_t`:**

| Event | Meaning |
|---|---|
| `sc_hit`, `vc_hit` | native hit, SC or VC |
| `scalar_xhit` | scalar reference served by the VC |
| `vector_xhit` | vector reference that migrated a sector from the SC side |
| `sc_wb_restore`, `vc_wb_restore` | a write-buffer line was restored |
| `double_miss` | the reference went to memory |
| `sc_evict_wb` | a dirty SC victim was pushed into the SC buffer |
| `vc_flag_wb` | a dirty VC victim was flagged WB |
| `sc_forced`, `vc_forced` | compulsory emptying |
| `sc_eager`, `vc_eager` | eager emptying |
| `pf_fill`, `pf_drop` | a prefetched sector was used / dropped |

**`mc_events_t`:** `row_hit`, `row_empty`, `row_conflict` and `pf_issue`.
`row_empty` plus `row_conflict` is the number of DRAM row openings.

## 8. Verification

Every testbench is self-checking and ends with a line
`TB_RESULT checks=<n> failures=<n>`. Each has a cycle watchdog. Random stimulus uses
`$urandom`.

| Testbench | What it checks |
|---|---|
| `tb_dram_bank` | The three access latencies, counted in cycles, and the row-state transitions. |
| `tb_vc_prefetcher` | Random bank states against a reference choice of bank and address. |
| `tb_scalar_cache` | Random operations against a reference model of sets, LRU and dirty bits. |
| `tb_sc_write_buffer` | Random push, restore and write-back against a queue model. |
| `tb_vector_cache` | Random operations, including the write-back engine and restores, against a full reference model. |
| `tb_mem_ctrl` | Read latency *T*+3 for row empty, hit and conflict; prefetch walk to the end of a line; cancellation of a prefetch passed by a write; a demand read merged into the prefetch of its sector (one response, within CAS+3); random traffic against a reference memory. |
| `tb_bicameral_cache` | The controller with very small caches and a random-delay memory model that also injects prefetches. Every read returns the last value written; native hits answer in 1 cycle and cross hits in 2; every cache mechanism occurs. |
| `tb_bc_top` | The whole hierarchy at the default sizes, with a behavioural DRAM (`tb/dram_model.sv`). |

The `tb_bc_top` workload is an axpy-like loop over two 96 KB arrays, with
interleaved scalar traffic. The scalar traffic is built to overflow one SC set and to
hit vector data, followed by a migration phase. It checks data against a flat
reference memory and the 1- and 2-cycle hit latencies. It counts all 19 events, and
fails if any never occurs. It takes about 5700 references and 100 000 cycles.

Each testbench was also run against a copy of its module with one deliberate bug,
and reported failures. Examples of the bugs: wrong LRU victim, broken shift in the
buffer, store ignoring its byte mask, a missing PRE cost, a prefetch past the end of
the line, no stale-prefetch cancellation, and a migrated sector losing its dirty bit.

### Kernel runs

A second set of testbenches runs the memory side of eight vector kernels on the
full-size hierarchy. They share a small core model, `tb/wl_harness.sv`, which
offers five operations:

* scalar word loads and stores;
* unit-stride vector loads and stores of VL bits, one reference per sector
  touched;
* indexed (gather) vector loads, one reference per element;
* strided vector loads, one reference per element.

Every reference is checked for data and hit latency. Each kernel's final results
are checked against the same computation done by the testbench from the initial
memory contents. Floating-point kernels use an integer stand-in formula with the
same memory accesses. Inputs are scaled down so that each file simulates in
seconds.

Cycles for a run at VL = 128 / 512 / 4096 bits, prefetch off → on:

| Kernel (testbench) | Input simulated | VL 128 | VL 512 | VL 4096 |
|---|---|---|---|---|
| axpy (`tb_wl_axpy`) | 2 × 128 KB | 316 k → 113 k | 254 k → 113 k | 108 k → 75 k |
| blackscholes-like (`tb_wl_blackscholes`) | 8192 options, 6 streams | 209 k → 79 k | 185 k → 91 k | 78 k → 55 k |
| jacobi-2d (`tb_wl_jacobi2d`) | 64 × 64, 2 steps | 56 k → 30 k | 33 k → 15 k | 20 k → 12 k |
| pathfinder (`tb_wl_pathfinder`) | 32 × 1024 | 137 k → 92 k | 77 k → 35 k | 62 k → 37 k |
| mm (`tb_wl_mm`) | 64 × 64 | 421 k → 408 k | 126 k → 117 k | 126 k → 115 k |
| mv (`tb_wl_mv`) | 64 × 1024 | 147 k → 74 k | 98 k → 55 k | 93 k → 64 k |
| spmv (`tb_wl_spmv`) | random CSR, 256 rows | 32 k → 23 k | 30 k → 21 k | 29 k → 21 k |
| lavaMD-like (`tb_wl_lavamd`) | 256 particles | about 101 k both ways | about 101 k both ways | about 101 k both ways |

These are memory-side cycles of a blocking core with no computation time. They show
only that prefetching pays off for streams, as intended. They are not comparable
with speedups measured on a full processor.

Some effects are worth knowing:

* At VL = 512 in axpy, x and y fall in the same DRAM bank, in different rows. Each
  strip then reopens a row, which the row-opening counter shows; longer vectors
  amortise this.
* In lavaMD the home particle's scalar load usually finds its record in the VC.
  This is a scalar cross hit: the data is served without migration.

**What this does not show.** The whole hierarchy was checked for functional
correctness and for the latencies listed above. It was not compared against the
published speedups or miss rates, because the processor and the benchmarks are not
part of this RTL.

## 9. Running the testbenches

With Verilator 5 (timing and assertions on), from the repository root:

```sh
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/bc_pkg.sv tb/tb_bc_top.sv --top-module tb_bc_top -o sim
./obj_dir/sim
```

Use any other `tb_*` module name in place of `tb_bc_top`. The full-size test and each
kernel run simulate in a few seconds.

Sizes are parameters of `bc_top` and `bicameral_cache`. `tb_bicameral_cache` shows
how to shrink them; see its instance. Cache sizes should stay powers of two. `SC_WB_THRESH` and
`VC_WB_THRESH` must not exceed their buffer sizes.
