// tb_ptw: self-checking test of one page-table walker against the
// behavioural main memory (100-cycle latency). Checks a full 4-level walk
// (4 reads, about 4 x 100 cycles), merged requests returned one per
// cycle with the right physical address, the TLB fill, the translation
// path register saving 3, 2 and 1 reads for pages sharing L4/L3/L2, L4/L3
// or only L4 with the previous walk, and faults on unmapped pages.
module tb_ptw;
  import neummu_pkg::*;
  localparam int SLOTS = 4, LAT = 100;
  logic clk = 0, rst_n = 0;
  ppn_t root_ppn;
  logic alloc = 0, merge = 0;
  vpn_t req_vpn = '0;
  id_t  req_id = '0;
  off_t req_off = '0;
  logic busy, slot_free, release_o;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  pa_t  mem_req_addr;
  pte_t mem_rsp_data;
  logic fill_valid, fill_ready = 0;
  vpn_t fill_vpn;
  ppn_t fill_ppn;
  logic rsp_valid, rsp_ready = 1;
  xlat_rsp_t rsp;
  logic data_rsp_valid;
  id_t  data_rsp_tag;
  line_t data_rsp_data;
  logic [0:0] walk_rsp_tag;
  int checks = 0, failures = 0;

  ptw #(.SLOTS(SLOTS)) dut (.*);

  main_memory_model #(.LAT(LAT), .TAG_W(1), .WALK_STALL_PCT(20)) mem (
    .clk(clk),
    .walk_req_valid(mem_req_valid), .walk_req_ready(mem_req_ready),
    .walk_req_addr(mem_req_addr), .walk_req_tag(1'b0),
    .walk_rsp_valid(mem_rsp_valid), .walk_rsp_tag(walk_rsp_tag), .walk_rsp_data(mem_rsp_data),
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
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic ppn_t ref_ppn(vpn_t v);
    return ppn_t'(v ^ 36'h5_5555_0000);
  endfunction

  // start a walk for `v` with `nmerge` extra requests merged while it runs;
  // check responses, fill, number of page-table reads and duration
  task automatic walk(vpn_t v, int nmerge, bit exp_fault, int exp_reads, string what);
    longint r0 = mem.walk_reads;
    int nrsp = 0, cyc = 0, fill_seen = 0;
    bit fill_ok = 1, rsp_ok = 1;
    off_t offs [SLOTS];
    for (int k = 0; k < SLOTS; k++) offs[k] = off_t'(k * 40 + 3);
    req_vpn = v; req_id = 0; req_off = offs[0]; alloc = 1;
    @(posedge clk); #1; alloc = 0;
    for (int k = 1; k <= nmerge; k++) begin
      check(slot_free, "slot free for merge");
      merge = 1; req_id = id_t'(k); req_off = offs[k];
      @(posedge clk); #1; merge = 0;
      cyc++;
    end
    fill_ready = 0;
    while (busy) begin
      if (fill_valid && cyc % 3 == 0) fill_ready = 1; else fill_ready = 0;
      if (fill_valid && fill_ready) begin
        fill_seen++;
        fill_ok &= (fill_vpn == v && fill_ppn == ref_ppn(v));
      end
      if (rsp_valid) begin
        nrsp++;
        rsp_ok &= (rsp.fault == exp_fault) &&
                  (exp_fault || rsp.pa == {ref_ppn(v), offs[rsp.id]});
      end
      @(posedge clk); #1; cyc++;
    end
    fill_ready = 0;
    check(nrsp == nmerge + 1, $sformatf("%s: %0d responses", what, nrsp));
    check(rsp_ok, $sformatf("%s: response contents", what));
    check(fill_seen == (exp_fault ? 0 : 1) && fill_ok, $sformatf("%s: TLB fill", what));
    check(mem.walk_reads - r0 == exp_reads, $sformatf("%s: %0d page-table reads (want %0d)",
          what, mem.walk_reads - r0, exp_reads));
    if (!exp_fault)
      check(cyc >= exp_reads * LAT && cyc <= exp_reads * (LAT + 12) + nmerge + 10,
            $sformatf("%s: walk took %0d cycles", what, cyc));
  endtask

  function automatic vpn_t mk(int i4, int i3, int i2, int i1);
    return {idx_t'(i4), idx_t'(i3), idx_t'(i2), idx_t'(i1)};
  endfunction

  initial begin
    mem.map_page(mk(1,2,3,4), ref_ppn(mk(1,2,3,4)));
    mem.map_page(mk(1,2,3,5), ref_ppn(mk(1,2,3,5)));
    mem.map_page(mk(1,2,8,5), ref_ppn(mk(1,2,8,5)));
    mem.map_page(mk(1,7,8,5), ref_ppn(mk(1,7,8,5)));
    mem.map_page(mk(3,7,8,5), ref_ppn(mk(3,7,8,5)));
    repeat (2) @(posedge clk); rst_n = 1; #1;
    walk(mk(1,2,3,4), 3, 0, 4, "cold walk with 3 merges");
    walk(mk(1,2,3,5), 0, 0, 1, "same L4/L3/L2: L1 read only");
    walk(mk(1,2,8,5), 1, 0, 2, "same L4/L3");
    walk(mk(1,7,8,5), 2, 0, 3, "same L4");
    walk(mk(3,7,8,5), 0, 0, 4, "new L4: full walk");
    walk(mk(3,7,8,6), 1, 1, 1, "unmapped L1 entry faults");
    walk(mk(9,7,8,6), 0, 1, 1, "unmapped L4 entry faults");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
