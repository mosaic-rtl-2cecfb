# Mosaic: a contiguity-preserving GPU memory manager in SystemVerilog

A GPU that runs several applications at once needs virtual memory, and it runs
into a conflict there. Demand paging over the system I/O bus works best with
small 4KB pages, because a page fault then moves little data. Address
translation works best with large 2MB pages, because one TLB entry then covers
512 times as much memory and the TLBs stop missing. Mosaic gets both. Data is
always allocated and moved as 4KB base pages, but they are placed in physical
memory so that every aligned 2MB *large page frame* holds pages of only one
application, each at the slot its virtual address dictates. Once a frame is
full, it can become a large page by setting one bit in the page table. No data
is copied. When an application frees memory and a large page becomes mostly
empty, the page is split back ("splintered") and its remaining base pages are
compacted into fewer frames, so free frames come back.

The RTL implements the three parts that do this, together with the
translation hardware that benefits from it:

| part | module | job |
|---|---|---|
| CoCoA (contiguity-conserving allocation) | `cocoa` | places base pages, writes page-table entries, starts the transfers |
| In-Place Coalescer | `inplace_coalescer` | turns fully populated frames into large pages |
| CAC (contiguity-aware compaction) | `cac` | unmaps freed pages, splinters sparse large pages, migrates pages, frees frames |
| L1 TLB, one per core | `l1_tlb` | 128 base + 16 large entries, 1-cycle hit |
| shared L2 TLB | `l2_tlb` | 512 base (16-way) + 256 large entries, 2 ports, 10-cycle hit |
| shared page table walker | `page_table_walker` | up to 64 walks in flight |
| top | `mosaic_top` | wires all of the above to one memory port and one transfer port |

Helpers: `mosaic_pkg` (types and page-table formats), `tlb_array` (the
set-associative LRU array behind every TLB section), `frame_table` (per-frame
bookkeeping shared by the three engines) and `mem_arbiter` (shares the memory
port).

The default parameters describe the evaluated system:

- 30 cores;
- 3GB of GPU memory, that is 1536 frames of 2MB, each holding 512 base pages of 4KB;
- TLB sizes, ports and latencies as listed in the table above.

## 1. Memory map and page-table format

Memory is addressed in 64-bit words, so a 4KB page is `PAGE_WORDS` = 512 words
and a frame is 512 × 512 words. A physical base page number is
`ppn = {frame, slot}`, where `slot` is 9 bits.

The page tables occupy the top `PT_FRAMES` = 33 frames, starting at word
`PT_BASE = (NUM_FRAMES - PT_FRAMES) · 2^LOG_P · PAGE_WORDS`. The allocator
never hands these frames out. Each application, identified by a 3-bit ASID
(up to 8 applications), has a two-level linear table over a 32-bit virtual
space (20-bit VPN):

```
directory entry of (asid, vpn):  PT_BASE + (asid << 11) + (vpn >> 9)
leaf entry of (asid, vpn):       PT_BASE + (8 << 11) + (asid << 20) + vpn
```

These two formulas are `dir_addr` and `leaf_addr` in `mosaic_pkg`.

| entry | fields (bit 0 first) |
|---|---|
| directory (`dir_entry_t`) | bit 0 valid, bit 1 **is_large**, bit 2 has_frame, bits 13:3 frame |
| leaf (`leaf_entry_t`) | bit 0 valid, bits 20:1 ppn |

A directory entry belongs to one 2MB virtual region. It has two jobs:

- It records which frame CoCoA reserved for that region (`has_frame`, `frame`).
- Its `is_large` bit is the coalescing bit. When the bit is set, the walker
  stops at the directory entry and returns a large-page translation:
  `ppn = {frame, vpn[8:0]}`. When it is clear, the walker reads the leaf entry.

Coalescing and splintering therefore each rewrite a single word. The leaf
entries of a coalesced region stay valid underneath. That is why splintering
needs no page-table rebuild.

The page tables take 8 × 2^20 leaf words plus 8 × 2^11 directory words. That
is about 64.1MB, so 33 frames are set aside.

## 2. Allocation: CoCoA

A runtime command `ALLOC(asid, vpn, npages)` allocates a run of base pages.
The placement rule is simple: every (application, 2MB virtual region) pair
gets one frame of its own, and virtual page `v` goes to slot `v mod 512` of
that frame. This rule meets both conditions that make in-place coalescing
possible:

- a frame only ever holds one application's pages;
- pages that are neighbours in virtual memory are neighbours in the frame, and
  they are aligned to the 2MB boundary.

For each page, `cocoa` does the following:

1. It reads the directory entry. The read is skipped while the command stays
   inside the same region.
2. If the region has no frame yet, it reserves one and writes the directory
   entry.
3. It sets the page's bit in the frame's allocation bitmap, in `frame_table`.
4. It writes the leaf entry.
5. It asks the system I/O bus to transfer the page (`xfer_valid/ready`, with
   asid, vpn and ppn).

Pages that are already allocated are skipped. Free frames come from a FIFO of
frames returned by CAC. When that FIFO is empty, they come from a counter over
frames never used. If no frame is left, the command ends with `fail`. Frames
are never shared between applications. After every transfer has reported
`xfer_done`, CoCoA sends the list of frames it touched to the coalescer, one
frame per `list_valid/ready` handshake. One command may touch at most
`LIST_DEPTH` = 64 frames. A larger allocation is split into several commands.

## 3. In-place coalescing

For each frame on the list, `inplace_coalescer` reads the frame-table record.
It coalesces the frame only if all of the following hold:

- the frame is reserved;
- it is not coalesced already;
- it is not *mixed* (see CAC);
- its allocation bitmap is all ones.

When the frame is not mixed, its pages are guaranteed to sit exactly where
CoCoA put them, which is what "contiguous and aligned" means here. Coalescing
is one memory write, which sets `is_large` in the region's directory entry,
followed by a frame-table write that records it. No data moves. Base-page TLB
entries of the region may stay cached, because they still translate correctly.

## 4. Deallocation: CAC

`DEALLOC(asid, vpn, npages)` runs in three phases inside `cac`.

**Phase A, per page.**

1. Read the leaf entry. It gives the frame and slot where the page really
   lives, which may differ from its home slot after a migration.
2. Clear the leaf entry.
3. Shoot down the base-page TLB entries.
4. Clear the page's slot bit in the frame table.
5. Remember the frame.

Unmapped pages are skipped.

**Phase B, per remembered frame.**

- *Empty frame.* An empty frame is released:
  1. Its directory entry loses the frame and the large bit.
  2. If the frame was a large page, its large TLB entry is shot down.
  3. Its frame-table record is cleared.
  4. It goes back to CoCoA on `free_push`.
- *Sparse large page.* A coalesced frame with more than `FRAG_THRESHOLD` = 256
  unallocated slots is splintered:
  1. The large bit is cleared.
  2. The large TLB entry is shot down.
  3. The frame is queued for compaction.

**Phase C, compaction of the queue.** The first queued frame becomes the
destination. Each following frame of the same application is a source. CAC
moves its live pages one at a time, each into the lowest free slot of the
destination:

1. Copy the page word by word: 512 reads and 512 writes.
2. Rewrite its leaf entry to the new ppn.
3. Shoot down its TLB entry.
4. Move the bitmap bits.

When a source runs empty, it is released as in phase B. When the destination
fills up, the rest of the current source becomes the new destination. Frames
of other applications are never mixed together.

A frame that has received migrated pages no longer follows the "slot = vpn mod
512" rule. It is therefore marked **mixed** and can never be coalesced again.
It is also detached from its region's directory entry, so later allocations in
that region start a fresh frame. The directory entry stays valid; only
`has_frame` is cleared.

During phases B and C, `gpu_stall` is high. This follows the conservative
model in which the whole GPU stops while compaction runs. The cores are
expected to hold off translation requests while it is high.

**Worked example** (this is `tb_cac`, with 8-slot frames and threshold 4).

Application 1 owns coalesced frames 0 and 1 and frees pages 2–13:

1. Frame 0 keeps pages 0–1 and frame 1 keeps pages 14–15. Each now has 6 free
   slots, which is more than 4, so both are splintered.
2. In phase C, frame 0 is the destination. Pages 14 and 15 are copied into its
   slots 2 and 3, and their leaf entries now point there.
3. Frame 1 is empty and returns to the free list. Frame 0 is marked mixed.

## 5. Address translation

```
core ──req──▶ l1_tlb ──miss──▶ l2_tlb (2 ports, RR over cores) ──miss──▶ page_table_walker ──▶ memory
       ◀─hit (1 cycle)─┘  ◀── broadcast fill (resp_mask) ──┘   ◀── walk result ──────────┘
```

- **L1 TLB** (`l1_tlb`). Two fully associative LRU sections, one for base
  pages and one for large pages. Both are looked up together.
  - A hit answers on `hit_resp` one cycle after the request is accepted.
  - A miss takes an MSHR. A second miss to the same page merges into it.
    `req_ready` falls only when all MSHRs are busy.
  - The answer to a miss, a translation or a `fault`, arrives later on the
    separate `fill_resp` channel, so hits and fills never collide.
- **L2 TLB** (`l2_tlb`).
  - It accepts up to 2 requests per cycle from the 30 L1s, chosen round-robin.
  - Each accepted request spends 9 cycles in a delay line and is then looked
    up, so a hit answers 10 cycles after acceptance.
  - Misses are merged in 64 MSHRs that record a bit mask of the asking cores,
    and are sent to the walker.
  - Answers leave through a FIFO, one per cycle, as a broadcast with
    `resp_mask`. Each L1 fills from it.
  - The L2 is non-inclusive: evictions in the L2 leave the L1s alone.
- **Walker** (`page_table_walker`). It holds 64 independent walk slots. Each
  slot reads the directory entry and, unless `is_large` is set, the leaf
  entry. Slots share the memory port, and answers are matched by tag, so walks
  overlap freely. A missing translation comes back with `fault` set.
- **Shootdowns.** A shootdown `(asid, vpn, is_large)` from CAC reaches every
  TLB in the same cycle. A large shootdown removes the large entry that covers
  `vpn`.

## 6. Shared resources

- **Memory port.** `mem_arbiter` arbitrates round-robin among the walker,
  CoCoA, the coalescer and CAC.
  - It puts the client number in the top two bits of the 10-bit tag.
  - Reads return `(tag, data)` in any order. Writes return nothing.
  - Each engine has at most one read outstanding. Walker reads are tagged with
    their slot.
- **Frame table.** `frame_table` is one single-port array. Each frame has a
  record (reserved, owner ASID, virtual region, coalesced, mixed) and a
  512-bit allocation bitmap.
  - Access is by request/grant with fixed priority: CAC, then CoCoA, then the
    coalescer.
  - Read data arrives one cycle after the grant.
- **Commands.** Only one runtime command runs at a time. The coalescer may
  still be working on an earlier list while the next command starts.

## 7. Top-level interface (`mosaic_top`)

| signals | meaning |
|---|---|
| `core_req_valid/ready`, `core_req[c]` | per core: translation request (asid, vpn) |
| `core_hit_valid`, `core_hit[c]` | per core: L1 hit answer, 1 cycle after acceptance |
| `core_fill_valid`, `core_fill[c]` | per core: answer to an earlier miss (ppn, `is_large`, `fault`) |
| `cmd_valid/ready`, `cmd_op`, `cmd_asid`, `cmd_vpn`, `cmd_npages` | runtime command: `CMD_ALLOC` or `CMD_DEALLOC` |
| `cmd_done`, `cmd_fail` | end of command; allocation ran out of frames |
| `mem_req_valid/ready`, `mem_req` | GPU memory request: `{addr, wdata, we, tag}` |
| `mem_resp_valid`, `mem_resp_tag`, `mem_resp_data` | read answer |
| `xfer_valid/ready`, `xfer_asid/vpn/ppn`, `xfer_done` | system I/O transfer of one base page |
| `gpu_stall` | high during splintering and compaction |
| `ev_coalesce`, `ev_splinter`, `ev_migrate`, `ev_free` | one-cycle event pulses |
| `ptw_busy_walks` | walks in flight |

Reset is asynchronous and active low (`rst_n`). Valid/ready pairs transfer
data on a clock edge where both are high.

## 8. Parameters of `mosaic_top`

| parameter | default | where it comes from |
|---|---|---|
| `NUM_CORES` | 30 | evaluated system |
| `L1_BASE`, `L1_LARGE` | 128, 16 | evaluated system |
| `L2_BASE`, `L2_BASE_WAYS`, `L2_LARGE` | 512, 16, 256 | evaluated system |
| `L2_PORTS`, `L2_LATENCY` | 2, 10 | evaluated system |
| `PTW_WALKS` | 64 | evaluated system |
| `NUM_FRAMES` | 1536 | 3GB / 2MB |
| `LOG_P`, `PAGE_WORDS` | 9, 512 | 2MB/4KB, 4KB / 8 bytes |
| `L1_MSHRS`, `L2_MSHRS` | 8, 64 | own choice (L2 matched to the walker) |
| `PT_FRAMES` | 33 | own choice: room for 8 page tables |
| `FRAG_THRESHOLD` | 256 | own choice: half a frame |
| `LIST_DEPTH` | 64 | own choice |

## 9. Where this design departs from, or adds to, the described one

- **CoCoA and the coalescing check.** In the original system, CoCoA and the
  coalescer's check are software in the GPU runtime. Here they are hardware
  engines, so that the whole manager can run and be tested as RTL. Their
  behaviour is the described behaviour; the bookkeeping (frame table, bitmap,
  mixed flag) and every handshake are this design's own.
- **The placement policy** is the simplest one that keeps frames
  single-application and aligned: one frame per virtual region. When memory
  runs out, a command fails. It does not fall back to sharing a frame.
- **Coalescing requires every slot of a frame to be allocated.** The textual
  description demands this. One illustration in the original also shows
  partly filled frames as coalesced; the text is followed here.
- **The splinter threshold** (half a frame) and the compaction order are own
  choices. The order is: first queued frame as destination, same owner only,
  lowest free slot first. The original says only "a predetermined threshold"
  and "migrate into a single frame".
- **Page-table layout.** The original extends a conventional multi-level
  table with a large-page bit but does not lay it out. The two-level linear
  layout above is this design's.
- **TLB shootdowns** after splintering and migration are added. Without them,
  stale entries would survive.
- **MSHR counts, response FIFOs, arbitration policies and LRU
  implementation** (true LRU by age ranks) are own choices.
- **Not built:**
  - DRAM and its controller;
  - the system I/O bus;
  - the shader cores and caches.

  They appear only as ports. `tb/gpu_mem_model.sv` is a behavioural memory
  with a fixed 3-cycle read latency that stands in for the DRAM.

## 10. Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself.
Each has a watchdog. Compile with Verilator 5 from the project root, package
first:

```
verilator --binary --timing --assert -Wno-fatal rtl/mosaic_pkg.sv rtl/tlb_array.sv \
  rtl/l1_tlb.sv rtl/l2_tlb.sv rtl/page_table_walker.sv rtl/mem_arbiter.sv \
  rtl/frame_table.sv rtl/cocoa.sv rtl/inplace_coalescer.sv rtl/cac.sv rtl/mosaic_top.sv \
  tb/gpu_mem_model.sv tb/tb_mosaic_top.sv --top-module tb_mosaic_top -o sim
./obj_dir/sim
```

| testbench | what it checks |
|---|---|
| `tb_l1_tlb` | miss → L2 → fill; 1-cycle hits in both sections; LRU eviction; MSHR merge and back-pressure; shootdown |
| `tb_l2_tlb` | exactly 10-cycle hit latency; two grants per cycle; misses of two cores merged into one walk; large results serving a region; faults not cached; shootdown |
| `tb_page_table_walker` | base walk (2 reads), large walk (1 read), faults, all slots busy at once, back-pressure |
| `tb_cocoa` | placement `ppn = {frame, vpn mod P}`, PTE and frame-table contents, one transfer per new page, list sent only after the last transfer, no frame sharing, out of frames, reuse of a returned frame |
| `tb_inplace_coalescer` | full frame coalesced; partly filled, mixed and already coalesced frames left alone |
| `tb_cac` | the worked example of section 4, plus a below-threshold deallocation and a whole-frame free |
| `tb_mosaic_top` | end to end at small sizes (4 cores, 8-slot frames, 16 frames), every mechanism counted |
| `tb_mosaic_full` | the same scenario with every parameter at its default |
| `tb_mosaic_workloads` | multi-application mixes: 1–5 copies of one application and 2–5 different ones, 30 cores translating at random |

Both end-to-end testbenches follow the same scenario:

1. Allocate two full regions, which are coalesced, and one partial region.
2. Translate through a large-page walk, an L1 large hit, an L2 hit, four
   concurrent base walks, an L1 base hit and a fault.
3. Deallocate across both large pages, which splinters them, migrates pages,
   frees a frame and stalls the GPU.
4. Free the rest.
5. Reallocate, which reuses a returned frame.

The small version also runs memory out of frames. In each run, every
mechanism must happen at least once.

`tb_mosaic_full` runs at full size (30 cores, 1536 frames, 512-page frames,
512-word pages). In that run, 128 base pages of 4KB are migrated. It takes
about 25 s of simulation and 50MB of memory.

`tb_mosaic_workloads` keeps the default cores, TLBs, walker and MSHRs, but
uses 48 frames of 16 pages of 4 words. It runs nine mixes in turn:

- five homogeneous mixes, with 1 to 5 applications of 40 pages each;
- four heterogeneous mixes, with 2 to 5 applications of 70, 20, 33, 48 and 9
  pages.

For each mix, it runs these steps:

1. Every application allocates its footprint at once.
2. All 30 cores issue random translations. Every answer must lead to the
   data that the I/O model wrote for that exact page.
3. Each application frees half of its footprint. This splinters and compacts
   large pages under stall.
4. The random traffic runs again.
5. Everything is freed, and every frame must come back.

One behaviour follows from the design and is worth knowing. A large page that
keeps at least half of its pages stays coalesced. Its freed pages still
translate, to their old slots, until the frame is released.

To experiment, change the parameter list on `mosaic_top` in
`tb_mosaic_top.sv`. The testbench computes its expected values from the same
`LOG_P`/`PAGE_WORDS` it passes in.
