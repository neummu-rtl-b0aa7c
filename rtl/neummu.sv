// neummu: throughput-oriented memory management unit for an NPU.
//
// Translates the DMA's virtual addresses to physical ones. The path of one
// request:
//   1. TLB lookup (HIT_LAT cycles). A hit is answered at once.
//   2. A miss looks up the pending translation scoreboard. If a walker is
//      already translating the same page and has a free merging slot, the
//      request is parked in that walker's merging buffer; otherwise an idle
//      walker is allocated and starts a walk. If neither is possible the
//      TLB pipeline stalls, which stalls the DMA (xlat_req_ready low).
//   3. Each walker walks the 4-level page table, skipping the levels its
//      translation path register already knows, fills the TLB and returns
//      all its merged requests, one per cycle.
// Responses leave on one port, one per cycle, with no back-pressure; a TLB
// hit has priority over walker responses, which share the remaining cycles
// round-robin. Responses come out of order; the request tag identifies
// them. The walkers share one page-table read port (walk_mem_*) round-robin;
// its responses carry the walker number as tag and may come back in any
// order and with any latency. TLB fills are also arbitrated, one per cycle.
// The `stats` outputs count events for performance and energy accounting.
//
// From the paper (Section 4, Figure 10, Table 1): 2048-entry TLB with 5-
// cycle hits, N = 128 walkers each with a 32-slot merging buffer and a
// translation path register, an N-entry scoreboard, blocking when all
// walkers and slots are full. This design's choices: the arbitration of
// the shared response, memory and fill ports, and the single response
// port of one translation per cycle (the paper's DMA sends one translation
// per cycle).
module neummu
  import neummu_pkg::*;
#(
  parameter int unsigned TLB_ENTRIES = 2048,
  parameter int unsigned TLB_WAYS    = 8,
  parameter int unsigned TLB_HIT_LAT = 5,
  parameter int unsigned N_PTW       = 128,
  parameter int unsigned PRMB_SLOTS  = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  ppn_t                     root_ppn,
  // translation requests from the DMA
  input  logic                     xlat_req_valid,
  output logic                     xlat_req_ready,
  input  xlat_req_t                xlat_req,
  // translation responses to the DMA
  output logic                     xlat_rsp_valid,
  output xlat_rsp_t                xlat_rsp,
  // page-table reads
  output logic                     walk_mem_req_valid,
  input  logic                     walk_mem_req_ready,
  output pa_t                      walk_mem_req_addr,
  output logic [$clog2(N_PTW)-1:0] walk_mem_req_tag,
  input  logic                     walk_mem_rsp_valid,
  input  logic [$clog2(N_PTW)-1:0] walk_mem_rsp_tag,
  input  pte_t                     walk_mem_rsp_data,
  // event counters
  output logic [31:0]              stat_tlb_hits,
  output logic [31:0]              stat_tlb_misses,
  output logic [31:0]              stat_merges,
  output logic [31:0]              stat_walks,
  output logic [31:0]              stat_walk_reads,
  output logic [31:0]              stat_block_cycles,
  output logic [31:0]              stat_faults
);
  localparam int unsigned IW = $clog2(N_PTW);

  // ------------------------------------------------------------------ TLB
  logic      tlb_out_valid, tlb_out_ready, tlb_out_hit;
  xlat_req_t tlb_out_req;
  ppn_t      tlb_out_ppn;
  logic      fill_valid;
  vpn_t      fill_vpn;
  ppn_t      fill_ppn;

  tlb #(.ENTRIES(TLB_ENTRIES), .WAYS(TLB_WAYS), .HIT_LAT(TLB_HIT_LAT)) u_tlb (
    .clk        (clk),
    .rst_n      (rst_n),
    .req_valid  (xlat_req_valid),
    .req_ready  (xlat_req_ready),
    .req        (xlat_req),
    .out_valid  (tlb_out_valid),
    .out_ready  (tlb_out_ready),
    .out_req    (tlb_out_req),
    .out_hit    (tlb_out_hit),
    .out_ppn    (tlb_out_ppn),
    .fill_valid (fill_valid),
    .fill_vpn   (fill_vpn),
    .fill_ppn   (fill_ppn)
  );

  // ----------------------------------------------------------- scoreboard
  vpn_t           miss_vpn;
  logic           miss;
  logic           pts_merge, pts_alloc;
  logic [IW-1:0]  pts_target;
  logic [N_PTW-1:0] pts_busy, ptw_busy, ptw_slot_free, ptw_release;

  assign miss_vpn = tlb_out_req.va[VA_W-1:PAGE_OFF_W];
  assign miss     = tlb_out_valid && !tlb_out_hit;

  pts #(.N(N_PTW)) u_pts (
    .clk        (clk),
    .rst_n      (rst_n),
    .lookup_vpn (miss_vpn),
    .slot_free  (ptw_slot_free),
    .merge      (pts_merge),
    .alloc      (pts_alloc),
    .target     (pts_target),
    .alloc_en   (miss),
    .release_i  (ptw_release),
    .busy       (pts_busy)
  );

  assign tlb_out_ready = tlb_out_hit || pts_merge || pts_alloc;

  // -------------------------------------------------------------- walkers
  logic [N_PTW-1:0] w_mem_valid, w_fill_valid, w_rsp_valid;
  logic [N_PTW-1:0] w_mem_gnt, w_fill_gnt, w_rsp_gnt;
  pa_t              w_mem_addr [N_PTW];
  vpn_t             w_fill_vpn [N_PTW];
  ppn_t             w_fill_ppn [N_PTW];
  xlat_rsp_t        w_rsp      [N_PTW];

  for (genvar i = 0; i < N_PTW; i++) begin : g_ptw
    ptw #(.SLOTS(PRMB_SLOTS)) u_ptw (
      .clk           (clk),
      .rst_n         (rst_n),
      .root_ppn      (root_ppn),
      .alloc         (miss && pts_alloc && pts_target == IW'(i)),
      .merge         (miss && pts_merge && pts_target == IW'(i)),
      .req_vpn       (miss_vpn),
      .req_id        (tlb_out_req.id),
      .req_off       (tlb_out_req.va[PAGE_OFF_W-1:0]),
      .busy          (ptw_busy[i]),
      .slot_free     (ptw_slot_free[i]),
      .release_o     (ptw_release[i]),
      .mem_req_valid (w_mem_valid[i]),
      .mem_req_ready (w_mem_gnt[i] && walk_mem_req_ready),
      .mem_req_addr  (w_mem_addr[i]),
      .mem_rsp_valid (walk_mem_rsp_valid && walk_mem_rsp_tag == IW'(i)),
      .mem_rsp_data  (walk_mem_rsp_data),
      .fill_valid    (w_fill_valid[i]),
      .fill_ready    (w_fill_gnt[i]),
      .fill_vpn      (w_fill_vpn[i]),
      .fill_ppn      (w_fill_ppn[i]),
      .rsp_valid     (w_rsp_valid[i]),
      .rsp_ready     (w_rsp_gnt[i]),
      .rsp           (w_rsp[i])
    );
  end

  // ---------------------------------------------------- page-table port
  logic [IW-1:0] mem_idx;
  logic          mem_any;

  rr_arbiter #(.N(N_PTW)) u_mem_arb (
    .clk       (clk),
    .rst_n     (rst_n),
    .req       (w_mem_valid),
    .advance   (walk_mem_req_ready),
    .gnt       (w_mem_gnt),
    .gnt_idx   (mem_idx),
    .gnt_valid (mem_any)
  );

  assign walk_mem_req_valid = mem_any;
  assign walk_mem_req_addr  = w_mem_addr[mem_idx];
  assign walk_mem_req_tag   = mem_idx;

  // ----------------------------------------------------------- TLB fills
  logic [IW-1:0] fill_idx;

  rr_arbiter #(.N(N_PTW)) u_fill_arb (
    .clk       (clk),
    .rst_n     (rst_n),
    .req       (w_fill_valid),
    .advance   (1'b1),
    .gnt       (w_fill_gnt),
    .gnt_idx   (fill_idx),
    .gnt_valid (fill_valid)
  );

  assign fill_vpn = w_fill_vpn[fill_idx];
  assign fill_ppn = w_fill_ppn[fill_idx];

  // ------------------------------------------------------------ responses
  logic          hit_out;
  logic [IW-1:0] rsp_idx;
  logic          rsp_any;
  logic [N_PTW-1:0] rsp_gnt_raw;

  assign hit_out = tlb_out_valid && tlb_out_hit;

  rr_arbiter #(.N(N_PTW)) u_rsp_arb (
    .clk       (clk),
    .rst_n     (rst_n),
    .req       (w_rsp_valid),
    .advance   (!hit_out),
    .gnt       (rsp_gnt_raw),
    .gnt_idx   (rsp_idx),
    .gnt_valid (rsp_any)
  );

  assign w_rsp_gnt = hit_out ? '0 : rsp_gnt_raw;

  always_comb begin
    if (hit_out) begin
      xlat_rsp_valid = 1'b1;
      xlat_rsp = '{id: tlb_out_req.id,
                   pa: {tlb_out_ppn, tlb_out_req.va[PAGE_OFF_W-1:0]},
                   fault: 1'b0};
    end else begin
      xlat_rsp_valid = rsp_any;
      xlat_rsp       = w_rsp[rsp_idx];
    end
  end

  // ------------------------------------------------------------- counters
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stat_tlb_hits     <= '0;
      stat_tlb_misses   <= '0;
      stat_merges       <= '0;
      stat_walks        <= '0;
      stat_walk_reads   <= '0;
      stat_block_cycles <= '0;
      stat_faults       <= '0;
    end else begin
      if (hit_out) stat_tlb_hits <= stat_tlb_hits + 1;
      if (miss && tlb_out_ready) stat_tlb_misses <= stat_tlb_misses + 1;
      if (miss && pts_merge) stat_merges <= stat_merges + 1;
      if (miss && pts_alloc) stat_walks <= stat_walks + 1;
      if (walk_mem_req_valid && walk_mem_req_ready) stat_walk_reads <= stat_walk_reads + 1;
      if (miss && !tlb_out_ready) stat_block_cycles <= stat_block_cycles + 1;
      if (xlat_rsp_valid && xlat_rsp.fault) stat_faults <= stat_faults + 1;
    end
  end

`ifndef SYNTHESIS
  // the scoreboard's view of which walkers are busy must match the walkers'
  a_pts_tracks_walkers: assert property (@(posedge clk) disable iff (!rst_n) pts_busy == ptw_busy)
    else $error("neummu: scoreboard and walker states disagree");
`endif

endmodule
