# Duon: page migration in a flat hybrid memory without TLB shootdowns

A flat-address hybrid memory joins a small fast memory (HBM) and a large
slow one (PCM or DDR4) into one physical address space. Hot pages should
live in the fast part, so pages are swapped between the two while programs
run. Conventionally, every swap changes a virtual-to-physical mapping. That
forces a TLB shootdown on every core and the invalidation of every cached
line of both pages.

Duon avoids this by adding a level of indirection that only memory traffic
sees. Each page keeps its **unified address (UA)** for its whole life. The
OS, the TLBs and the caches use only the UA. When a page moves, its
metadata records the **remapped frame (RA)** and a **Migrated** flag. Only
a request that misses the shared cache, and so must go to memory, is
redirected from UA to RA. Neither the translation seen by software nor the
cache tags ever change, so nothing has to be shot down or flushed. Each
TLB entry carries a copy of RA and of the flags. A small broadcast unit,
the **TLB Coherence Module (TCM)**, keeps these copies current.

This repository holds a synthesizable SystemVerilog model of the
memory-side part of the Duon proposal:

- the extended TLBs and the Extended Page Table;
- the migration controller with its hot and cold buffers and its hot and
  cold bit vectors;
- the wait queue and the migration queues;
- the TCM;
- the logic that routes shared-cache misses;
- a threshold-based hot-page detector.

The cores, the caches and the memory devices themselves sit outside, at
the ports of `duon_top`.

## Address map

The unit of migration is a page. All page numbers are unified frame numbers
(`upfn_t`, 23 bits):

| frames               | where               | default size          |
|----------------------|---------------------|-----------------------|
| 0 .. 262143          | fast memory (HBM)   | 1 GB, 262144 pages    |
| 262144 .. 4456447    | slow memory (PCM)   | 16 GB, 4194304 pages  |

- A page of 4 KB holds 64 lines of 64 bytes. A line address is
  `{frame, line}`, which is 29 bits.
- A page that has never been migrated lives in the frame whose number is
  its UA.
- A migrated page lives in frame RA. `duon_pkg::page_loc(ua, migrated, ra)`
  gives a page's current frame.
- Which frames are fast is fixed by the package constant `FAST_PAGES`.
- Data moves as 512-bit lines.

## Metadata

The **Extended Page Table** (`ept`) is built from three plain memories:

- `pt[vpn]` is the conventional entry: valid, dirty and the UA.
- `ext[ua]` holds Duon's per-page fields: the VPN, RA, Migrated, Ongoing
  Migration, Pair (swap or one-way move) and Buffer Residency (hot or cold
  buffer). It also holds an `installed` bit.
- `own[frame]` is an occupant table. It records which UA currently
  occupies each physical frame. The migration controller uses it to find
  victims and free frames.

The OS writes these tables through an install port and an eviction port.
An eviction also frees the page's frame, which is how free fast frames
appear for one-way moves.

Each core's **extended TLB** (`ext_tlb`, 4096 entries, fully associative)
holds VPN, UA, valid, dirty, RA, Migrated and Ongoing. It answers two kinds
of lookup:

- translations by VPN, for the core;
- lookups by UA, for the miss router, because a cache miss carries only
  the UA.

It also applies TCM updates, matched by UA.

## One migration, step by step

The hot-page detector counts slow-memory accesses per UA. A page that
reaches 64 accesses is handed to `migration_controller`. Below, H is the hot
page (now in slow frame S), F is the chosen fast frame and V is the page in
F.

1. **Choose.** The controller reads H's metadata. It drops the request if H
   is not installed, is already migrating, or is already in fast memory.
   A fast frame freed by an OS eviction is used first. The EPT reports
   such frames, and the controller keeps them in a 16-entry FIFO. Before
   use, each one is checked against the occupant table. This gives a
   **one-way move**: no victim, and Pair=0. Otherwise the controller scans
   fast frames round-robin through the occupant table:
   - A free frame found by the scan also gives a one-way move.
   - An occupied frame is accepted if its occupant V really lives there
     and is not migrating. The move is then a **swap**. V's entry becomes
     RA=S, Ongoing=1, Pair=1, Buffer Residency=hot.
   - The TCM broadcasts a START update for V to every TLB. The controller
     waits for the TCM's acknowledge, so no core can still be using a
     stale copy of V's flags when the data starts to move.
2. **Victim to hot buffer (swap only).** The 64 lines of F are read into
   the hot buffer.
3. **Hot page to fast frame.** Each line of H is read from S, held in the
   cold buffer, and written to F. When the write of line *k* is queued,
   bit *k* of the **hot-page bit vector** is set.
4. **Hot buffer to slow frame (swap only).** The victim's lines are written
   from the hot buffer to S. Bit *k* of the **cold-page bit vector** is set
   as each write is queued.
5. **Finish.** The final metadata is written for both pages:
   - H gets RA=F, Migrated=1, Ongoing=0.
   - V gets RA=S, Migrated=1, Ongoing=0.
   - Both get Pair equal to the kind of move and Buffer Residency=0.
   - The occupant table records H in F, and V in S (or S becomes free).

   The TCM then broadcasts DONE updates, first for V and then for H. Each
   TLB holding the page writes RA, sets Migrated and clears Ongoing. After
   the last acknowledge, the buffers and bit vectors are cleared.

A page that was migrated before can become hot again and is then moved
once more (re-migration). Its current frame is RA rather than UA, and
everything else is the same. The occupant table makes this work in both
directions. A page swapped out to S becomes an ordinary slow page living at
S, and can itself be brought back later.

The controller has one memory access outstanding at a time. Its reads and
writes go through each memory controller's **migration queue**
(`migration_queue`). This queue has priority over demand traffic, so the
memory sees migration and demand accesses in the order in which they were
decided.

## Serving the shared cache while pages move

This is the subtle part of the design, and `miss_handler` does it. Each
request from the shared cache (a read miss or a write-back) carries the
core, the UA, the line and the write data.

1. **Find the flags.** The UA is looked up in the requesting core's TLB.
   On a miss, `ext[ua]` is read instead, and the TLB is filled from it.
   The fill happens only if the page-table entry of the recorded VPN still
   points to this UA.
2. **Choose the route:**

   | request is for…                        | condition                            | served by                  |
   |----------------------------------------|--------------------------------------|----------------------------|
   | the hot page H (flags still clear)     | hot-page bit of the line set         | new fast frame F + line    |
   |                                        | line currently being copied          | wait queue                 |
   |                                        | otherwise                            | old slow location          |
   | a page with Ongoing=1 (the victim V)   | cold-page bit set (line already in S)| RA + line                  |
   |                                        | line present in the hot buffer       | hot buffer (read or write) |
   |                                        | otherwise                            | wait queue                 |
   | any other page                         | Migrated=1                           | RA + line                  |
   |                                        | Migrated=0                           | UA + line                  |

3. **Keep order.** A request that has to wait goes into the **wait queue**
   (16 entries). The queue's oldest entry and new requests take turns, one
   cycle each. While anything is waiting, a new request for H or V goes
   into the queue behind it. A write can therefore never overtake an
   earlier access to the same line.

   Writes into the hot buffer take precedence over the controller's own
   copy of the same line. The controller writes the buffer to slow memory
   only after step 2 has filled it completely. So a write made to the
   buffer is carried to S.

4. **Return read data.** Reads from the memories return with their tag.
   Data from the fast memory is forwarded first, then data from the slow
   memory, then reads served from the hot buffer (one cycle after the
   request).

These rules give the guarantee the end-to-end test checks. For every
unified line, a read returns the last value written to that line,
wherever the line was at that moment.

## TLB coherence

The TCM (`tcm`) takes one update at a time from the controller: START or
DONE, with the UA and the RA. It drives it for one cycle to all TLBs. Each
TLB applies it to any entry with that UA and answers on its own `upd_ack`
one cycle later. When every TLB has answered, the TCM pulses `ack` to the
controller.

A TLB fill and an update in the same cycle are merged, so a fill cannot
bring back stale flags. TLB misses on the translation side are served by
`tlb_walker`. It serves one core per cycle, round-robin, and fills the TLB
with UA, RA and flags from the EPT.

## Top level and timing

`duon_top` has these parameters:

| parameter     | default |
|---------------|---------|
| NCORES        | 16      |
| TLB_ENTRIES   | 4096    |
| THRESHOLD     | 64      |
| HPD_ENTRIES   | 1024    |
| WQ_DEPTH      | 16      |
| MQ_DEPTH      | 8       |
| VICTIM_FRAMES | 262144  |
| NVPAGES       | 2^23    |
| NUPAGES       | 4456448 |

Its ports:

- `core_tr_valid/vpn[c]` are the cores' translations. They return
  `core_tr_hit/ua[c]` combinationally. A miss is walked and filled within
  a few cycles. `core_tr_fault[c]` pulses for an unmapped VPN.
- `llc_req_valid/llc_req/llc_req_ready` carry shared-cache misses and
  write-backs, with a valid/ready handshake. `llc_rsp_valid/llc_rsp`
  return read data, which the cache must accept.
- `os_inst_*` and `os_inv_*` install and evict pages.
- `fmem_*` and `smem_*` connect the fast and slow memory controllers.
  Requests carry a 29-bit physical line address and a tag. Reads return
  in order.
- `mig_done`, `mig_done_pair` and the `ev_*` pulses report events.

All logic runs on one clock with an asynchronous active-low reset. The
tables (EPT and buffer contents) are memories and are not reset.

A swap moves 128 line reads and 128 line writes, one at a time. With the
memory models' latencies of 4 and 10 cycles, it takes about 1100–1800
cycles, including the three TCM round trips.

## Where this model departs from the proposal

- **The EPT is on chip.** The proposal keeps the extended page table in
  main memory, split between fast and slow memory. Here it is one set of
  on-chip arrays with combinational reads, so table-walk latency is not
  modelled. At full size it is about 8 M page-table entries plus 4.4 M
  metadata entries.
- **RA is stored at 23 bits for every page.** The proposal sizes RA at 18
  bits for fast-memory pages and 22 bits for slow-memory pages.
- **The occupant table, the free-frame FIFO, the round-robin victim scan,
  and the cold buffer as a staging buffer are this design's own.**
- **Victim lines already in the hot buffer are served from it.** The
  step-by-step description says requests to the victim are held for the
  whole migration. The bit-vector description says unmoved lines are
  served from the buffers. This model follows the second and holds only
  lines not yet in the buffer.
- **The hot page's Ongoing flag stays 0.** The step table keeps it clear
  during a migration, while the description of re-migration says the flag
  of the page being moved is set. This model keeps it clear in both cases.
  The hot page is recognised from the controller's status and its bit
  vector instead.
- **RA is written when the migration starts.** The proposal's update
  flowchart writes RA at the start; its step table shows RA only from
  step 4. The TLB has no Buffer Residency flag, so the buffer is chosen
  from the controller's status.
- **Fast frames are fixed by a package constant.** A configuration with
  256 MB of HBM needs `FAST_PAGES = 65536` in `duon_pkg`.
- **Cores, caches, memory controllers and memory devices are not part of
  the RTL.** The test benches use `tb/mem_model.sv`, a simple in-order
  memory with a fixed latency.

## Simulating

Every testbench is self-checking and prints
`TB_RESULT checks=N failures=M`. For example:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
        rtl/duon_pkg.sv tb/tb_duon_top.sv --top-module tb_duon_top
    ./obj_dir/Vtb_duon_top

- One testbench per module checks it against an independent reference:
  `tb_ext_tlb`, `tb_ept`, `tb_tcm`, `tb_page_buffer`, `tb_line_bitvec`,
  `tb_wait_queue`, `tb_migration_queue`, `tb_hot_page_detector`,
  `tb_tlb_walker`, `tb_miss_handler` and `tb_migration_controller`.
  `tb_migration_controller` checks the memory contents, flags, occupant
  table and TCM sequence after a swap, a one-way move, a refused request
  and a re-migration.
- `tb_duon_top` runs the whole design at reduced size, with 2 cores,
  16-entry TLBs and a threshold of 4:
  - random misses and write-backs from two cores, concentrated on the
    pages being moved;
  - random translations;
  - a reference model of every unified line.

  It passes only if each mechanism occurs at least once: swap, one-way
  move, re-migration, buffer service, wait queue, redirection, both kinds
  of TLB fill, translation fault, TCM acknowledge and back-pressure.
- `tb_duon_full` takes the top at its default size through one complete
  swap. It runs in well under a minute.
