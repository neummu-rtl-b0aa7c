// npu_top: memory side of an NPU with virtual addressing: tile DMA,
// NeuMMU (TLB, pending translation scoreboard, page-table walkers with
// merging buffers and translation path registers) and the two scratchpads.
//
// A tile descriptor given on desc_* is fetched into (or stored from) the
// IA/OA buffer or the W buffer. Each of the tile's 64-byte transactions is
// translated by the MMU and then carried out on the data memory port
// (mem_*); page-table walks read main memory through the separate walk
// port (walk_mem_*). Both memory ports are answered by the outside world
// with a tag, in any order and after any latency; mem_* must accept a
// request on every cycle. The compute array, which is not part of this
// module, reaches the scratchpads through the b-ports (ia_b_*, w_b_*).
// `done` pulses when a tile is complete; the stat_* counters expose the
// MMU's events.
//
// From the paper (Figure 2, Table 1, Section 4): the "NeuMMU + DMA" block
// between main memory and the IA/OA and W scratchpads, with the MMU
// configuration of the proposal (2048-entry TLB, 5-cycle hit, 128 walkers,
// 32 merging slots, one path register per walker). The split into a walk
// port and a data port, and the tile descriptor, are this design's choices.
module npu_top
  import neummu_pkg::*;
#(
  parameter int unsigned TLB_ENTRIES = 2048,
  parameter int unsigned TLB_HIT_LAT = 5,
  parameter int unsigned N_PTW       = 128,
  parameter int unsigned PRMB_SLOTS  = 32,
  parameter int unsigned IA_DEPTH    = 245760,   // 15 MB of 64-byte lines
  parameter int unsigned W_DEPTH     = 163840    // 10 MB of 64-byte lines
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  ppn_t                     root_ppn,
  // tile descriptors
  input  logic                     desc_valid,
  output logic                     desc_ready,
  input  tile_desc_t               desc,
  output logic                     done,
  output logic                     fault,
  output logic [31:0]              tile_cycles,
  // page-table reads
  output logic                     walk_mem_req_valid,
  input  logic                     walk_mem_req_ready,
  output pa_t                      walk_mem_req_addr,
  output logic [$clog2(N_PTW)-1:0] walk_mem_req_tag,
  input  logic                     walk_mem_rsp_valid,
  input  logic [$clog2(N_PTW)-1:0] walk_mem_rsp_tag,
  input  pte_t                     walk_mem_rsp_data,
  // tile data
  output logic                     mem_req_valid,
  output logic                     mem_req_we,
  output pa_t                      mem_req_addr,
  output id_t                      mem_req_tag,
  output line_t                    mem_req_wdata,
  input  logic                     mem_rsp_valid,
  input  id_t                      mem_rsp_tag,
  input  line_t                    mem_rsp_data,
  // compute-side scratchpad ports
  input  logic                     ia_b_we,
  input  logic                     ia_b_re,
  input  spm_addr_t                ia_b_addr,
  input  line_t                    ia_b_wdata,
  output line_t                    ia_b_rdata,
  input  logic                     w_b_re,
  input  spm_addr_t                w_b_addr,
  output line_t                    w_b_rdata,
  // MMU event counters
  output logic [31:0]              stat_tlb_hits,
  output logic [31:0]              stat_tlb_misses,
  output logic [31:0]              stat_merges,
  output logic [31:0]              stat_walks,
  output logic [31:0]              stat_walk_reads,
  output logic [31:0]              stat_block_cycles,
  output logic [31:0]              stat_faults
);
  logic      xq_valid, xq_ready, xr_valid;
  xlat_req_t xq;
  xlat_rsp_t xr;

  logic      spm_we, spm_re, spm_sel_w, sel_w_q;
  spm_addr_t spm_addr;
  line_t     spm_wdata, ia_a_rdata, w_a_rdata;

  dma_unit u_dma (
    .clk            (clk),
    .rst_n          (rst_n),
    .desc_valid     (desc_valid),
    .desc_ready     (desc_ready),
    .desc           (desc),
    .done           (done),
    .fault          (fault),
    .busy_cycles    (tile_cycles),
    .xlat_req_valid (xq_valid),
    .xlat_req_ready (xq_ready),
    .xlat_req       (xq),
    .xlat_rsp_valid (xr_valid),
    .xlat_rsp       (xr),
    .mem_req_valid  (mem_req_valid),
    .mem_req_we     (mem_req_we),
    .mem_req_addr   (mem_req_addr),
    .mem_req_tag    (mem_req_tag),
    .mem_req_wdata  (mem_req_wdata),
    .mem_rsp_valid  (mem_rsp_valid),
    .mem_rsp_tag    (mem_rsp_tag),
    .mem_rsp_data   (mem_rsp_data),
    .spm_we         (spm_we),
    .spm_re         (spm_re),
    .spm_sel_w      (spm_sel_w),
    .spm_addr       (spm_addr),
    .spm_wdata      (spm_wdata),
    .spm_rdata      (sel_w_q ? w_a_rdata : ia_a_rdata)
  );

  always_ff @(posedge clk) if (spm_re) sel_w_q <= spm_sel_w;

  neummu #(
    .TLB_ENTRIES (TLB_ENTRIES),
    .TLB_HIT_LAT (TLB_HIT_LAT),
    .N_PTW       (N_PTW),
    .PRMB_SLOTS  (PRMB_SLOTS)
  ) u_mmu (
    .clk                (clk),
    .rst_n              (rst_n),
    .root_ppn           (root_ppn),
    .xlat_req_valid     (xq_valid),
    .xlat_req_ready     (xq_ready),
    .xlat_req           (xq),
    .xlat_rsp_valid     (xr_valid),
    .xlat_rsp           (xr),
    .walk_mem_req_valid (walk_mem_req_valid),
    .walk_mem_req_ready (walk_mem_req_ready),
    .walk_mem_req_addr  (walk_mem_req_addr),
    .walk_mem_req_tag   (walk_mem_req_tag),
    .walk_mem_rsp_valid (walk_mem_rsp_valid),
    .walk_mem_rsp_tag   (walk_mem_rsp_tag),
    .walk_mem_rsp_data  (walk_mem_rsp_data),
    .stat_tlb_hits      (stat_tlb_hits),
    .stat_tlb_misses    (stat_tlb_misses),
    .stat_merges        (stat_merges),
    .stat_walks         (stat_walks),
    .stat_walk_reads    (stat_walk_reads),
    .stat_block_cycles  (stat_block_cycles),
    .stat_faults        (stat_faults)
  );

  spm_buffer #(.DEPTH(IA_DEPTH)) u_ia_buf (
    .clk     (clk),
    .a_we    (spm_we && !spm_sel_w),
    .a_re    (spm_re && !spm_sel_w),
    .a_addr  (spm_addr),
    .a_wdata (spm_wdata),
    .a_rdata (ia_a_rdata),
    .b_we    (ia_b_we),
    .b_re    (ia_b_re),
    .b_addr  (ia_b_addr),
    .b_wdata (ia_b_wdata),
    .b_rdata (ia_b_rdata)
  );

  spm_buffer #(.DEPTH(W_DEPTH)) u_w_buf (
    .clk     (clk),
    .a_we    (spm_we && spm_sel_w),
    .a_re    (spm_re && spm_sel_w),
    .a_addr  (spm_addr),
    .a_wdata (spm_wdata),
    .a_rdata (w_a_rdata),
    .b_we    (1'b0),
    .b_re    (w_b_re),
    .b_addr  (w_b_addr),
    .b_wdata ('0),
    .b_rdata (w_b_rdata)
  );

endmodule
