# NeuMMU in SystemVerilog: a throughput-first MMU for scratchpad-based NPUs

A neural processing unit keeps its working data in software-managed
scratchpads. A DMA engine fills them tile by tile, and a tile can be several
megabytes. If the NPU uses virtual addresses (needed for unified memory,
oversubscription or NUMA access to another device's memory), each tile fetch
needs thousands of address translations. They arrive almost one per cycle,
in a burst, and most of them miss in the TLB: the burst reaches a page
before the first walk for that page has come back. A GPU-style IOMMU with
eight page-table walkers becomes the bottleneck.

NeuMMU answers this with three additions, all built here:

* **Pending request merging buffer (PRMB).** Each walker has one. A request
  for a page that a walker is already translating waits in that walker's
  buffer instead of starting a second walk.
* **Many walkers.** There are 128 walkers instead of 8. The **pending
  translation scoreboard (PTS)** decides which walker a miss goes to.
* **Translation path register (TPreg).** Each walker has one. It remembers
  the upper three levels of its last walk, so most walks read one or two
  page-table entries instead of four.

This repository holds RTL for the MMU and for the DMA and scratchpads
around it, plus self-checking testbenches. The compute array is not
included.

## Block diagram

```
              tile descriptors
                    |
                    v
  +---------------------------+  xlat req (1/cycle)   +-----------------------------+
  |          dma_unit         | --------------------> |            neummu           |
  | linearise tile into 64 B  | <-------------------- |  tlb -> pts -> ptw[0..127]  |
  | transactions              |  xlat rsp (1/cycle,   |        (prmb + tpreg each)  |
  +---------------------------+   out of order)       +-----------------------------+
     |  data port        | scratchpad port                  | page-table read port
     v  (mem_*)          v                                  v (walk_mem_*)
  main memory      spm_buffer x2 (IA/OA 15 MB, W 10 MB)     main memory
                   compute-side ports (ia_b_*, w_b_*) -> compute array (not included)
```

`npu_top` holds everything in the diagram except main memory and the
compute array. Their connections are brought out as ports.

## Life of a translation

1. **TLB** (`tlb`, 2048 entries). The DMA presents `{id, va}` with
   valid/ready. The tags are read as the request enters, and the result
   comes out of a 5-stage pipeline. A request presented in cycle *t* gets
   its hit or miss in cycle *t+4*, the fifth cycle counting *t*. A hit
   goes straight to the response port.
2. **Scoreboard** (`pts`). A miss looks up the virtual page number in the
   PTS. The PTS has one entry per walker; entry *i* is valid while walker
   *i* is busy and holds the page it is translating. There are three
   outcomes, decided in the same cycle:
   * *merge*: a busy walker has the same page and a free PRMB slot. The
     request is parked in that walker's PRMB.
   * *allocate*: no such walker, but an idle one exists. The request
     starts a walk there and takes the first slot of its PRMB.
   * *block*: neither is possible. The TLB pipeline freezes, so
     `xlat_req_ready` drops and the DMA stalls.

   If every walker of a page has a full PRMB and an idle walker exists,
   a second walker is allocated to the same page instead of blocking.
   Requests are blocked only when no walker is idle and no walker of that
   page has room.
3. **Walker** (`ptw`). The walk starts where the TPreg says (see below).
   It reads one 8-byte page-table entry per level through the shared
   page-table port. An entry whose present bit (bit 0) is clear ends the
   walk as a fault. The L1 entry gives the physical page. The walker then:
   * offers the translation to the TLB (one fill per cycle across all
     walkers, round-robin);
   * drains its PRMB, one response per cycle when granted.

   Merging stays open while the PRMB drains. The walker becomes idle, and
   frees its PTS entry, once the fill is done and its PRMB is empty.
4. **Response port.** One response per cycle leaves `neummu`, with no
   back-pressure. A TLB hit has priority. Otherwise the walkers with
   pending responses are served round-robin. Responses are out of order;
   the `id` identifies each one. A faulting walk returns every merged
   request with `fault = 1`.

### Why the merge rule matters

In a tile fetch, consecutive 64-byte lines fall on the same 4 KB page: up
to 64 requests per page. Without merging, each request that misses would
start its own walk, because the first walk to that page has not yet filled
the TLB. With a 32-slot PRMB, one walk serves 32 requests. The 33rd
request for that page goes to a second walker. In the full-size end-to-end
test, 4343 of 5640 TLB misses were merged and only 1297 walks ran.

## Translation path register

Virtual addresses are 48 bits: a 12-bit page offset and four 9-bit indices
(L4 = VA[47:39] down to L1 = VA[20:12]). Each TPreg holds three pairs:

| level | tag stored     | data stored                               |
|-------|----------------|-------------------------------------------|
| L4    | L4 index       | physical page of the L3 table it points to |
| L3    | L3 index       | physical page of the L2 table              |
| L2    | L2 index       | physical page of the L1 table              |

A lookup matches the indices as prefixes. A match of L4, L3 and L2 leaves
one read (the L1 entry). A match of L4 and L3 leaves two reads. A match of
L4 alone leaves three. No match means a full 4-read walk from the root
table (`root_ppn`, the CR3 equivalent).

While walking, the walker writes each upper-level entry it reads into the
register. Writing level *L* clears the levels below it, so the register
always holds one consistent path. Tiles stream through a few large
virtual regions, so the upper indices rarely change. In the full-size
test, 1297 walks needed 1925 reads instead of 5188.

## The tile DMA

`dma_unit` takes a 2-D tile descriptor (`tile_desc_t` in `neummu_pkg`):

* `rows` rows of `row_lines` 64-byte lines each;
* rows `stride` bytes apart in virtual memory;
* packed densely in the scratchpad from line `spm_base`;
* `buf_w` selects the IA/OA buffer or the W buffer;
* `store` selects the direction.

The DMA issues one translation per cycle while the MMU accepts. It uses
the transaction index as tag, which also gives the scratchpad line. The
transfer for each line happens when its translation returns:

* **Load:** a memory read; when the data returns, it is written to the
  scratchpad.
* **Store:** a scratchpad read, then a memory write one cycle later.

A faulting translation skips its line and sets `fault`. `done` pulses when
every line has completed, and `tile_cycles` gives the tile's duration.
Tags are 17 bits, so one tile can have up to 131072 lines (8 MB).

## Interfaces and timing of `npu_top`

| group | signals | protocol |
|-------|---------|----------|
| tiles | `desc_valid/desc_ready/desc`, `done`, `fault`, `tile_cycles` | valid/ready; `done` is a 1-cycle pulse |
| page-table reads | `walk_mem_req_valid/ready/addr/tag`, `walk_mem_rsp_valid/tag/data` | valid/ready request; the response carries the walker number as tag; any latency, any order |
| tile data | `mem_req_valid/we/addr/tag/wdata`, `mem_rsp_valid/tag/data` | the memory must accept one request per cycle; read responses are tagged; any latency and order |
| compute side | `ia_b_*`, `w_b_*` | scratchpad port B, registered read (data the cycle after `re`) |
| counters | `stat_tlb_hits`, `stat_tlb_misses`, `stat_merges`, `stat_walks`, `stat_walk_reads`, `stat_block_cycles`, `stat_faults` | free-running 32-bit counts |

The reset `rst_n` is asynchronous and active low. The scratchpad contents
are not reset.

## Parameters

| parameter | default | source |
|-----------|---------|--------|
| `TLB_ENTRIES` | 2048 | paper |
| `TLB_HIT_LAT` | 5 cycles | paper |
| `TLB_WAYS` (in `neummu`) | 8 | this design |
| `N_PTW` | 128 | paper |
| `PRMB_SLOTS` | 32 | paper |
| `IA_DEPTH` | 245760 lines = 15 MB | paper |
| `W_DEPTH` | 163840 lines = 10 MB | paper |
| VA / PA width | 48 / 48 bits | VA from the paper, PA this design |
| line size | 64 bytes | this design |

Every default is the paper's number where the paper gives one; nothing is
scaled down. The page-table walk latency of 100 cycles per level is not a
parameter of the RTL. It comes from the memory: the testbench memory
answers after 100 cycles, as in the paper's setup.

## Where this RTL departs from or adds to the paper

* **TLB organisation.** The paper gives only the size and hit latency.
  The 8-way set-associative layout with round-robin victims is this
  design's choice.
* **No flush or shootdown.** There is no TLB flush, TPreg invalidation or
  shootdown port. After the page tables change, the MMU must be reset.
* **4 KB pages only.** The 2 MB large pages that the paper discusses as an
  alternative are not supported.
* **Faults are only reported.** Page-fault handling, NUMA access to remote
  memory and page migration lie outside this RTL.
* **Storage sizes.** A PRMB slot stores a 17-bit tag and a 12-bit offset.
  The TPreg is 138 bits, slightly above the paper's estimate of 16 bytes,
  because physical addresses are 48 bits here.
* **Scratchpad sizes.** The paper gives 15 MB / 10 MB in its configuration
  table and "10 MB each" in its text. The table's values are used.
* **Ports.** The page-table port and the data port are separate. The
  data port has no back-pressure, matching the paper's fixed-latency,
  fixed-bandwidth memory model.
* **Compute side not built.** The systolic array, the ReLU unit and the
  compute controller belong to the TPU-style platform and are not
  designed in the paper. The scratchpads' compute ports are left open at
  the top level.

## Files

* `rtl/neummu_pkg.sv`: widths, address layout, request/response and tile
  descriptor types.
* `rtl/tlb.sv`, `rtl/pts.sv`, `rtl/prmb.sv`, `rtl/tpreg.sv`, `rtl/ptw.sv`:
  the MMU's parts.
* `rtl/rr_arbiter.sv`: the round-robin arbiter used for the page-table
  port, the TLB fills and the responses.
* `rtl/neummu.sv`: the MMU.
* `rtl/dma_unit.sv`, `rtl/spm_buffer.sv`: the DMA and the scratchpads.
* `rtl/npu_top.sv`: the top level.
* `tb/main_memory_model.sv`: behavioural memory with a fixed latency. Its
  `map_page()` builds x86-64-style page tables on the fly.
* `tb/tb_*.sv`: one self-checking testbench per block. Each ends by
  printing `TB_RESULT checks=N failures=M`.

## Simulating

With Verilator 5, from the repository root:

```
verilator --binary --timing --assert --top-module tb_npu_top \
    -y rtl -y tb +libext+.sv rtl/neummu_pkg.sv tb/tb_npu_top.sv
./obj_dir/Vtb_npu_top
```

Replace `tb_npu_top` with any other `tb_<block>`.

`tb_npu_top` runs the whole design at its default (paper) size and takes
about ten seconds. It runs five tiles back to back:

1. An IA load whose rows each fall on one page: walks and merges.
2. A W load of 1024 pages, one line each: more pages in flight than
   walkers, so the MMU blocks the DMA.
3. The IA load again: all TLB hits, one translation per cycle.
4. A store of whole pages: more requests per page than PRMB slots, so a
   second walker is allocated to the same page.
5. A tile on an unmapped page: faults.

After each load, the testbench compares the scratchpad line by line with
memory at the reference physical addresses. It also checks that each of
these mechanisms occurred.

The block testbenches check the details:

* `tb_tlb`: 5-cycle latency, streaming, eviction, back-pressure.
* `tb_ptw`: read counts for each TPreg match depth, walk duration, merged
  responses.
* `tb_pts`: the merge, allocate and block decisions.
* `tb_neummu`: a 3000-request burst with 8 walkers.
* `tb_dma_unit`: linearisation and data movement with an out-of-order
  translator.
