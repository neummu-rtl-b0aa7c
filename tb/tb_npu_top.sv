// tb_npu_top: end-to-end test of the NPU memory side at its default size
// (2048-entry TLB, 128 walkers, 32 merging slots, 15 MB + 10 MB
// scratchpads) against the behavioural main memory (100-cycle latency),
// with page tables built for every page the tiles touch.
//
// Five tiles run back to back, in the order a layer would use them:
//   1. IA load, 256 rows x 16 lines, one row per page: walks + merges
//   2. W load, 1024 rows x 1 line, 4 KB stride: more pages in flight than
//      walkers, so the MMU blocks the DMA
//   3. IA load again: TLB hits, one translation per cycle
//   4. OA store, 8 rows x 64 lines (whole pages): 64 requests per page
//      overflow a 32-slot merging buffer
//   5. a tile on an unmapped page: faults
// After each load the scratchpad is read through its compute-side port and
// compared line by line with the memory content at the reference physical
// address; after the store, main memory is compared with the scratchpad.
// Each mechanism is counted and must occur at least once.
module tb_npu_top;
  import neummu_pkg::*;
  localparam int LAT = 100, NW = 128;
  logic clk = 0, rst_n = 0;
  ppn_t root_ppn;
  logic desc_valid = 0, desc_ready, done, fault;
  tile_desc_t desc = '0;
  logic [31:0] tile_cycles;
  logic walk_mem_req_valid, walk_mem_req_ready, walk_mem_rsp_valid;
  pa_t  walk_mem_req_addr;
  logic [$clog2(NW)-1:0] walk_mem_req_tag, walk_mem_rsp_tag;
  pte_t walk_mem_rsp_data;
  logic mem_req_valid, mem_req_we, mem_rsp_valid;
  pa_t  mem_req_addr;
  id_t  mem_req_tag, mem_rsp_tag;
  line_t mem_req_wdata, mem_rsp_data;
  logic ia_b_we = 0, ia_b_re = 0, w_b_re = 0;
  spm_addr_t ia_b_addr = '0, w_b_addr = '0;
  line_t ia_b_wdata = '0, ia_b_rdata, w_b_rdata;
  logic [31:0] stat_tlb_hits, stat_tlb_misses, stat_merges, stat_walks,
               stat_walk_reads, stat_block_cycles, stat_faults;
  int checks = 0, failures = 0;

  npu_top dut (.*);

  main_memory_model #(.LAT(LAT), .TAG_W($clog2(NW))) mem (
    .clk(clk),
    .walk_req_valid(walk_mem_req_valid), .walk_req_ready(walk_mem_req_ready),
    .walk_req_addr(walk_mem_req_addr), .walk_req_tag(walk_mem_req_tag),
    .walk_rsp_valid(walk_mem_rsp_valid), .walk_rsp_tag(walk_mem_rsp_tag),
    .walk_rsp_data(walk_mem_rsp_data),
    .data_req_valid(mem_req_valid), .data_req_we(mem_req_we), .data_req_addr(mem_req_addr),
    .data_req_tag(mem_req_tag), .data_req_wdata(mem_req_wdata),
    .data_rsp_valid(mem_rsp_valid), .data_rsp_tag(mem_rsp_tag), .data_rsp_data(mem_rsp_data));

  assign root_ppn = mem.root;
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic ppn_t ref_ppn(vpn_t v);   // scattered physical pages
    return ppn_t'((v * 36'd2654435761) & 36'h0_00FF_FFFF) | 36'h1_0000_0000;
  endfunction
  function automatic pa_t ref_pa(va_t va);
    return {ref_ppn(va[47:12]), va[11:0]};
  endfunction

  task automatic map_range(va_t base, int pages);
    for (int p = 0; p < pages; p++) mem.map_page(base[47:12] + vpn_t'(p), ref_ppn(base[47:12] + vpn_t'(p)));
  endtask

  function automatic va_t line_va(tile_desc_t d, int idx);
    return d.base + va_t'(idx / d.row_lines) * d.stride + va_t'((idx % d.row_lines) * 64);
  endfunction

  task automatic run_tile(tile_desc_t d, string what);
    while (!desc_ready) @(posedge clk);
    #1 desc = d; desc_valid = 1;
    @(posedge clk); #1 desc_valid = 0;
    while (!done) begin @(posedge clk); #1; end
    $display("%s: %0d lines in %0d cycles", what, d.rows * d.row_lines, tile_cycles);
  endtask

  // read the tile back through the compute-side port and compare
  task automatic check_loaded(tile_desc_t d, string what);
    int bad = 0;
    for (int i = 0; i < d.rows * d.row_lines; i++) begin
      automatic line_t want = mem.line_pattern({ref_pa(line_va(d, i))[47:6], 6'd0});
      if (d.buf_w) begin w_b_re = 1; w_b_addr = d.spm_base + spm_addr_t'(i); end
      else         begin ia_b_re = 1; ia_b_addr = d.spm_base + spm_addr_t'(i); end
      @(posedge clk); #1; w_b_re = 0; ia_b_re = 0;
      if ((d.buf_w ? w_b_rdata : ia_b_rdata) != want) bad++;
    end
    check(bad == 0, $sformatf("%s: %0d scratchpad lines wrong", what, bad));
  endtask

  int n_walks, n_merges, n_hits, n_blocks, n_faults, n_tp_saved, n_second_walker;
  int n_loads, n_stores;

  // a miss allocated to a new walker although a walker of the same page is busy
  always @(posedge clk) if (rst_n && dut.u_mmu.miss && dut.u_mmu.pts_alloc) begin
    for (int w = 0; w < NW; w++)
      if (dut.u_mmu.u_pts.valid_q[w] && dut.u_mmu.u_pts.tag_q[w] == dut.u_mmu.miss_vpn) begin
        n_second_walker++;
        break;
      end
  end

  initial begin
    tile_desc_t t1, t2, t4, t5;
    int bad;
    longint unsigned h0, r0, w0;
    n_second_walker = 0;
    t1 = '{base: 48'h10_0000_0000, rows: 256, row_lines: 16, stride: 48'h1000,
           spm_base: 18'd0, buf_w: 1'b0, store: 1'b0};
    t2 = '{base: 48'h20_0000_0000, rows: 1024, row_lines: 1, stride: 48'h1000,
           spm_base: 18'd0, buf_w: 1'b1, store: 1'b0};
    t4 = '{base: 48'h30_0000_0000, rows: 8, row_lines: 64, stride: 48'h1000,
           spm_base: 18'd0, buf_w: 1'b0, store: 1'b1};
    t5 = '{base: 48'h40_0000_0000, rows: 1, row_lines: 8, stride: 48'h0,
           spm_base: 18'd4096, buf_w: 1'b0, store: 1'b0};
    map_range(t1.base, 256);
    map_range(t2.base, 1024);
    map_range(t4.base, 8);
    repeat (2) @(posedge clk); #1 rst_n = 1;

    run_tile(t1, "IA load");
    check(!fault, "IA load: no fault");
    check_loaded(t1, "IA load");
    check(stat_walks >= 256 && stat_merges > 0, "IA load: walks and merges");
    n_loads++;

    r0 = stat_walk_reads;
    run_tile(t2, "W load");
    check(!fault, "W load: no fault");
    check_loaded(t2, "W load");
    check(stat_block_cycles > 0, "W load: more pages than walkers blocks the DMA");
    n_loads++;

    h0 = stat_tlb_hits;
    t1.spm_base = 18'd8192;
    run_tile(t1, "IA load (TLB warm)");
    check_loaded(t1, "IA reload");
    check(stat_tlb_hits - h0 > 3000, $sformatf("IA reload: %0d TLB hits", stat_tlb_hits - h0));
    check(tile_cycles <= 4096 + LAT + 60, "IA reload: one translation per cycle");
    n_loads++;

    w0 = mem.data_writes;
    t4.spm_base = 18'd8192;
    run_tile(t4, "OA store");
    repeat (4) @(posedge clk);
    bad = 0;
    for (int i = 0; i < 512; i++) begin
      automatic pa_t pa = {ref_pa(line_va(t4, i))[47:6], 6'd0};
      automatic va_t src = line_va(t1, i);
      if (!mem.lines.exists(pa) || mem.lines[pa] != mem.line_pattern({ref_pa(src)[47:6], 6'd0})) bad++;
    end
    check(bad == 0 && mem.data_writes - w0 == 512, $sformatf("OA store: %0d lines wrong", bad));
    n_stores++;

    run_tile(t5, "unmapped tile");
    check(fault, "unmapped tile: fault reported");

    n_walks = stat_walks; n_merges = stat_merges; n_hits = stat_tlb_hits;
    n_blocks = stat_block_cycles; n_faults = stat_faults;
    n_tp_saved = 4 * stat_walks - stat_walk_reads;
    $display("walks=%0d merges=%0d tlb_hits=%0d blocked_cycles=%0d faults=%0d walk_reads=%0d (saved by TPreg %0d) second_walker=%0d loads=%0d stores=%0d",
             n_walks, n_merges, n_hits, n_blocks, n_faults, stat_walk_reads, n_tp_saved,
             n_second_walker, n_loads, n_stores);
    check(n_walks > 0,    "mechanism: page walk");
    check(n_merges > 0,   "mechanism: PRMB merge");
    check(n_hits > 0,     "mechanism: TLB hit");
    check(n_blocks > 0,   "mechanism: blocking when walkers and slots are full");
    check(n_faults > 0,   "mechanism: page fault");
    check(n_tp_saved > 0, "mechanism: TPreg level skip");
    check(n_second_walker > 0, "mechanism: second walker for a page whose PRMB is full");
    check(n_loads > 0 && n_stores > 0, "mechanism: load and store tiles");
    check(stat_walks + stat_merges == stat_tlb_misses, "misses = walks + merges");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
