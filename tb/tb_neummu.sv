// tb_neummu: self-checking test of the MMU with 8 walkers, 4 merging slots
// and a 64-entry TLB, against the behavioural memory (100-cycle latency).
// A DMA-like burst sends one request per cycle: runs of consecutive
// 64-byte lines per page, so that many requests fall on a page that is
// already being walked. Every response must come back exactly once with
// the physical address of the reference mapping. The burst must make
// each mechanism happen: TLB hits, scoreboard merges, walks, blocking
// when all walkers and slots are full, translation-path-register savings
// (fewer than 4 reads per walk) and faults on an unmapped page.
module tb_neummu;
  import neummu_pkg::*;
  localparam int N_PTW = 8, SLOTS = 4, LAT = 100, NREQ = 3000;
  logic clk = 0, rst_n = 0;
  ppn_t root_ppn;
  logic xlat_req_valid = 0, xlat_req_ready, xlat_rsp_valid;
  xlat_req_t xlat_req = '0;
  xlat_rsp_t xlat_rsp;
  logic walk_mem_req_valid, walk_mem_req_ready, walk_mem_rsp_valid;
  pa_t  walk_mem_req_addr;
  logic [2:0] walk_mem_req_tag, walk_mem_rsp_tag;
  pte_t walk_mem_rsp_data;
  logic [31:0] stat_tlb_hits, stat_tlb_misses, stat_merges, stat_walks,
               stat_walk_reads, stat_block_cycles, stat_faults;
  logic data_rsp_valid;
  id_t data_rsp_tag;
  line_t data_rsp_data;
  int checks = 0, failures = 0;

  neummu #(.TLB_ENTRIES(64), .TLB_WAYS(4), .TLB_HIT_LAT(5), .N_PTW(N_PTW),
           .PRMB_SLOTS(SLOTS)) dut (.*);

  main_memory_model #(.LAT(LAT), .TAG_W(3)) mem (
    .clk(clk),
    .walk_req_valid(walk_mem_req_valid), .walk_req_ready(walk_mem_req_ready),
    .walk_req_addr(walk_mem_req_addr), .walk_req_tag(walk_mem_req_tag),
    .walk_rsp_valid(walk_mem_rsp_valid), .walk_rsp_tag(walk_mem_rsp_tag),
    .walk_rsp_data(walk_mem_rsp_data),
    .data_req_valid(1'b0), .data_req_we(1'b0), .data_req_addr('0), .data_req_tag('0),
    .data_req_wdata('0), .data_rsp_valid(data_rsp_valid), .data_rsp_tag(data_rsp_tag),
    .data_rsp_data(data_rsp_data));

  assign root_ppn = mem.root;
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam vpn_t BASE_VPN = 36'h0_0012_3400;
  localparam vpn_t HOLE_VPN = BASE_VPN + 36'd40;     // left unmapped

  function automatic ppn_t ref_ppn(vpn_t v);
    return ppn_t'(v * 3 + 36'h7_0000);
  endfunction

  va_t  sent_va [NREQ];
  bit   got [NREQ];
  int   nrsp = 0, bad = 0, faults_seen = 0;

  // response checker
  always @(posedge clk) if (rst_n && xlat_rsp_valid) begin
    automatic int i = int'(xlat_rsp.id);
    automatic vpn_t v = sent_va[i][VA_W-1:PAGE_OFF_W];
    nrsp++;
    if (i >= NREQ || got[i]) begin bad++; $display("dup id %0d va %h at %0t fault %0b", i, sent_va[i], $time, xlat_rsp.fault); end
    else begin
      got[i] = 1;
      if (v == HOLE_VPN) begin
        if (!xlat_rsp.fault) bad++;
        faults_seen++;
      end else if (xlat_rsp.fault || xlat_rsp.pa != {ref_ppn(v), sent_va[i][PAGE_OFF_W-1:0]}) bad++;
    end
  end

  initial begin
    int i;
    for (int p = 0; p < 80; p++)
      if (BASE_VPN + vpn_t'(p) != HOLE_VPN)
        mem.map_page(BASE_VPN + vpn_t'(p), ref_ppn(BASE_VPN + vpn_t'(p)));
    repeat (2) @(posedge clk); #1 rst_n = 1;
    // pages visited in a streaming order, 2..30 lines each, then revisited
    i = 0;
    while (i < NREQ) begin
      automatic int page  = (i < 2000) ? (i / 25) % 80 : $urandom_range(79);
      automatic int lines = $urandom_range(30, 2);
      for (int k = 0; k < lines && i < NREQ; k++) begin
        sent_va[i] = {BASE_VPN + vpn_t'(page), 6'(k), 6'(i)};
        xlat_req_valid = 1;
        xlat_req = '{id: id_t'(i), va: sent_va[i]};
        while (!xlat_req_ready) begin @(posedge clk); #1; end
        @(posedge clk); #1;
        i++;
      end
    end
    xlat_req_valid = 0;
    repeat (3000) @(posedge clk);
    check(nrsp == NREQ, $sformatf("%0d responses for %0d requests", nrsp, NREQ));
    check(bad == 0, $sformatf("%0d wrong or duplicate responses", bad));
    check(stat_tlb_hits + stat_tlb_misses == NREQ, "every request looked up once");
    check(stat_tlb_hits > 0,     $sformatf("TLB hits: %0d", stat_tlb_hits));
    check(stat_merges > 0,       $sformatf("PRMB merges: %0d", stat_merges));
    check(stat_block_cycles > 0, $sformatf("blocked cycles: %0d", stat_block_cycles));
    check(stat_walks > 0 && stat_walks + stat_merges == stat_tlb_misses, "misses = walks + merges");
    check(stat_walk_reads < 4 * stat_walks,
          $sformatf("TPreg saves reads: %0d reads for %0d walks", stat_walk_reads, stat_walks));
    check(faults_seen > 0 && stat_faults == faults_seen, $sformatf("faults: %0d", faults_seen));
    $display("stats: hits=%0d misses=%0d merges=%0d walks=%0d reads=%0d blocked=%0d faults=%0d",
             stat_tlb_hits, stat_tlb_misses, stat_merges, stat_walks, stat_walk_reads,
             stat_block_cycles, stat_faults);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
