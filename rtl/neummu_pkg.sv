// neummu_pkg: widths, constants and bundle types shared by the NPU memory
// management unit (TLB, pending translation scoreboard, page-table walkers
// with merging buffers and translation path registers) and the tile DMA.
//
// Address layout follows x86-64 4-level paging with 4 KB pages: a 48-bit
// virtual address is a 12-bit page offset plus four 9-bit indices
// (L4 = VA[47:39], L3 = VA[38:30], L2 = VA[29:21], L1 = VA[20:12]).
// The physical address width (48 bits), the page-table entry format
// (bit 0 = present, bits [47:12] = next-level table or page frame) and the
// width of request identifiers are this design's choices.
package neummu_pkg;

  localparam int unsigned VA_W      = 48;
  localparam int unsigned PA_W      = 48;
  localparam int unsigned PAGE_OFF_W = 12;   // 4 KB pages
  localparam int unsigned VPN_W     = VA_W - PAGE_OFF_W;   // 36
  localparam int unsigned PPN_W     = PA_W - PAGE_OFF_W;   // 36
  localparam int unsigned IDX_W     = 9;     // radix-tree index per level
  localparam int unsigned LEVELS    = 4;
  localparam int unsigned PTE_W     = 64;    // one page-table entry
  localparam int unsigned ID_W      = 17;    // translation / transaction tag
  localparam int unsigned LINE_BYTES = 64;   // one DMA memory transaction
  localparam int unsigned LINE_W    = LINE_BYTES * 8;

  typedef logic [VA_W-1:0]       va_t;
  typedef logic [PA_W-1:0]       pa_t;
  typedef logic [VPN_W-1:0]      vpn_t;
  typedef logic [PPN_W-1:0]      ppn_t;
  typedef logic [PAGE_OFF_W-1:0] off_t;
  typedef logic [IDX_W-1:0]      idx_t;
  typedef logic [ID_W-1:0]       id_t;
  typedef logic [PTE_W-1:0]      pte_t;
  typedef logic [LINE_W-1:0]     line_t;

  // Translation request from the DMA (valid/ready handshake).
  typedef struct packed {
    id_t id;
    va_t va;
  } xlat_req_t;

  // Translation response back to the DMA (valid only, one per cycle).
  typedef struct packed {
    id_t  id;
    pa_t  pa;
    logic fault;   // page not present at some level of the walk
  } xlat_rsp_t;

  // Scratchpad line address: 15 MB / 64 B = 245760 lines fit in 18 bits.
  localparam int unsigned SPM_AW = 18;
  typedef logic [SPM_AW-1:0] spm_addr_t;

  // One tile transfer for the DMA: `rows` rows of `row_lines` consecutive
  // 64-byte lines, rows `stride` bytes apart in virtual memory, packed
  // densely into the scratchpad starting at line `spm_base`.
  typedef struct packed {
    va_t         base;      // 64-byte aligned
    logic [15:0] rows;
    logic [15:0] row_lines;
    va_t         stride;    // bytes, multiple of 64
    spm_addr_t   spm_base;
    logic        buf_w;     // 0: IA/OA buffer, 1: W buffer
    logic        store;     // 0: memory -> SPM, 1: SPM -> memory
  } tile_desc_t;

  // Index of page-table level `lvl` (4..1) inside a virtual page number.
  function automatic idx_t vpn_index(vpn_t vpn, int unsigned lvl);
    return idx_t'(vpn >> (IDX_W * (lvl - 1)));
  endfunction

  function automatic logic pte_present(pte_t pte);
    return pte[0];
  endfunction

  function automatic ppn_t pte_ppn(pte_t pte);
    return pte[PA_W-1:PAGE_OFF_W];
  endfunction

endpackage
