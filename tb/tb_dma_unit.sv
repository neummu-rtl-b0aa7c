// tb_dma_unit: self-checking test of the tile DMA. A reference translator
// in the testbench answers translations after a random delay (so out of
// order), mapping each virtual page to a fixed physical page, with one
// unmapped page; the behavioural memory serves the data port. Checks the
// linearised virtual addresses (rows, lines, stride), one translation
// request per cycle, the scratchpad contents after a load tile, the memory
// contents after a store tile, the fault flag, and the done pulse.
module tb_dma_unit;
  import neummu_pkg::*;
  logic clk = 0, rst_n = 0;
  logic desc_valid = 0, desc_ready, done, fault;
  tile_desc_t desc = '0;
  logic [31:0] busy_cycles;
  logic xlat_req_valid, xlat_req_ready = 1, xlat_rsp_valid = 0;
  xlat_req_t xlat_req;
  xlat_rsp_t xlat_rsp = '0;
  logic mem_req_valid, mem_req_we, mem_rsp_valid;
  pa_t  mem_req_addr;
  id_t  mem_req_tag, mem_rsp_tag;
  line_t mem_req_wdata, mem_rsp_data;
  logic spm_we, spm_re, spm_sel_w;
  spm_addr_t spm_addr;
  line_t spm_wdata, spm_rdata;
  logic walk_req_ready, walk_rsp_valid;
  logic [0:0] walk_rsp_tag;
  pte_t walk_rsp_data;
  int checks = 0, failures = 0;

  dma_unit dut (.*);

  main_memory_model #(.LAT(20), .TAG_W(1)) mem (
    .clk(clk),
    .walk_req_valid(1'b0), .walk_req_ready(walk_req_ready), .walk_req_addr('0), .walk_req_tag(1'b0),
    .walk_rsp_valid(walk_rsp_valid), .walk_rsp_tag(walk_rsp_tag), .walk_rsp_data(walk_rsp_data),
    .data_req_valid(mem_req_valid), .data_req_we(mem_req_we), .data_req_addr(mem_req_addr),
    .data_req_tag(mem_req_tag), .data_req_wdata(mem_req_wdata),
    .data_rsp_valid(mem_rsp_valid), .data_rsp_tag(mem_rsp_tag), .data_rsp_data(mem_rsp_data));

  // scratchpad model (both buffers), one-cycle read
  line_t spm [2][int];
  always @(posedge clk) begin
    if (spm_we) spm[spm_sel_w][int'(spm_addr)] = spm_wdata;
    if (spm_re) spm_rdata <= spm[spm_sel_w].exists(int'(spm_addr)) ? spm[spm_sel_w][int'(spm_addr)] : '0;
  end

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam vpn_t HOLE = 36'h4_0003;
  function automatic pa_t ref_pa(va_t va);
    return {ppn_t'(va[47:12] * 5 + 36'h900), va[11:0]};
  endfunction

  // reference translator: random delay, at most one response per cycle
  typedef struct { longint due; xlat_req_t r; } pend_t;
  pend_t pend[$];
  longint cyc = 0;
  va_t   seen_va [int];
  int    nreq = 0, req_cycles_first = -1, req_cycles_last = -1;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (xlat_req_valid && xlat_req_ready) begin
      pend.push_back('{due: cyc + 5 + $urandom_range(40), r: xlat_req});
      seen_va[int'(xlat_req.id)] = xlat_req.va;
      if (req_cycles_first < 0) req_cycles_first = int'(cyc);
      req_cycles_last = int'(cyc);
      nreq++;
    end
    xlat_rsp_valid <= 1'b0;
    begin
      automatic int sel = -1;
      for (int k = 0; k < pend.size(); k++) if (sel < 0 && pend[k].due <= cyc) sel = k;
      if (sel >= 0) begin
        xlat_rsp_valid <= 1'b1;
        xlat_rsp <= '{id: pend[sel].r.id, pa: ref_pa(pend[sel].r.va),
                      fault: pend[sel].r.va[47:12] == HOLE};
        pend.delete(sel);
      end
    end
  end

  task automatic run(tile_desc_t d, int max_cycles, output bit ok_done);
    int n = 0;
    nreq = 0; req_cycles_first = -1; seen_va.delete();
    desc = d; desc_valid = 1;
    @(posedge clk); #1; desc_valid = 0;
    while (!done && n < max_cycles) begin @(posedge clk); #1; n++; end
    ok_done = done;
  endtask

  initial begin
    tile_desc_t d;
    bit ok;
    int bad;
    longint unsigned w0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    // load: 6 rows x 20 lines, row stride 4 KB + 128 B (rows cross pages)
    d = '{base: 48'h4_0000_0000, rows: 6, row_lines: 20, stride: 48'h1080,
          spm_base: 18'd100, buf_w: 1'b1, store: 1'b0};
    run(d, 5000, ok);
    check(ok, "load tile done");
    check(nreq == 120, $sformatf("load: %0d translations", nreq));
    check(req_cycles_last - req_cycles_first == 119, "load: one translation per cycle");
    bad = 0;
    for (int r = 0; r < 6; r++) for (int c = 0; c < 20; c++) begin
      automatic int idx = r * 20 + c;
      automatic va_t va = d.base + va_t'(r) * d.stride + va_t'(c * 64);
      if (!seen_va.exists(idx) || seen_va[idx] != va) begin
        if (bad == 0) $display("va idx %0d got %h want %h", idx, seen_va[idx], va);
        bad++;
      end
      else if (!spm[1].exists(100 + idx) ||
               spm[1][100 + idx] != mem.line_pattern({ref_pa(va)[47:6], 6'd0})) bad++;
    end
    check(bad == 0, $sformatf("load: %0d wrong addresses or lines", bad));
    check(!fault, "load: no fault");
    check(busy_cycles >= 120 && busy_cycles < 250, $sformatf("load took %0d cycles", busy_cycles));
    w0 = mem.data_writes;
    // store: 2 rows x 30 lines from the W buffer to another region
    d = '{base: 48'h5_0000_0000, rows: 2, row_lines: 30, stride: 48'h2000,
          spm_base: 18'd100, buf_w: 1'b1, store: 1'b1};
    run(d, 5000, ok);
    repeat (5) @(posedge clk);
    check(ok, "store tile done");
    bad = 0;
    for (int r = 0; r < 2; r++) for (int c = 0; c < 30; c++) begin
      automatic int idx = r * 30 + c;
      automatic va_t va = d.base + va_t'(r) * d.stride + va_t'(c * 64);
      automatic pa_t pa = {ref_pa(va)[47:6], 6'd0};
      if (!mem.lines.exists(pa) || mem.lines[pa] != spm[1][100 + idx]) bad++;
    end
    check(bad == 0, $sformatf("store: %0d lines wrong in memory", bad));
    check(mem.data_writes - w0 == 60, $sformatf("store: %0d writes (want 60)", mem.data_writes - w0));
    // faulting tile: one row on the unmapped page
    d = '{base: {HOLE, 12'h0}, rows: 1, row_lines: 4, stride: 48'h0,
          spm_base: 18'd0, buf_w: 1'b0, store: 1'b0};
    run(d, 5000, ok);
    check(ok && fault, "fault reported and tile still completes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
