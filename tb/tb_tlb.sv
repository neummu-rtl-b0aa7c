// tb_tlb: self-checking test of the TLB at its default size (2048 entries,
// 8 ways, 5-cycle hits). Checks misses on an empty TLB, hits with the
// right physical page after exactly HIT_LAT cycles, a fully pipelined
// stream of one lookup per cycle, round-robin eviction when a set
// overflows, and that the pipeline holds its result while out_ready is
// low.
module tb_tlb;
  import neummu_pkg::*;
  localparam int ENTRIES = 2048, WAYS = 8, LAT = 5, SETS = ENTRIES / WAYS;
  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready, out_valid, out_ready = 1, out_hit;
  xlat_req_t req = '0, out_req;
  ppn_t out_ppn;
  logic fill_valid = 0;
  vpn_t fill_vpn = '0;
  ppn_t fill_ppn = '0;
  int checks = 0, failures = 0;

  tlb #(.ENTRIES(ENTRIES), .WAYS(WAYS), .HIT_LAT(LAT)) dut (.*);
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

  function automatic ppn_t map(vpn_t v);   // reference mapping
    return ppn_t'(v * 7 + 36'h12345);
  endfunction

  task automatic fill(vpn_t v);
    fill_valid = 1; fill_vpn = v; fill_ppn = map(v);
    @(posedge clk); #1; fill_valid = 0;
  endtask

  // one lookup, wait for its result, check hit/miss, ppn and latency
  task automatic lookup(vpn_t v, bit exp_hit, string what);
    int n;
    req_valid = 1; req = '{id: id_t'(v), va: {v, 12'h abc}};
    @(posedge clk); #1; req_valid = 0;
    n = 1;   // the cycle the request is presented counts as the first
    while (!out_valid) begin @(posedge clk); #1; n++; end
    check(out_hit == exp_hit, $sformatf("%s: hit=%0b", what, out_hit));
    check(!exp_hit || out_ppn == map(v), $sformatf("%s: ppn", what));
    check(out_req.va == {v, 12'habc} && out_req.id == id_t'(v), $sformatf("%s: request carried", what));
    check(n == LAT, $sformatf("%s: latency %0d", what, n));
    @(posedge clk); #1;
  endtask

  initial begin
    int got;
    bit seen [64];
    repeat (2) @(posedge clk); rst_n = 1; #1;
    lookup(36'h1000, 0, "cold miss");
    fill(36'h1000);
    lookup(36'h1000, 1, "hit after fill");
    lookup(36'h1001, 0, "neighbour page misses");
    // WAYS+1 pages of one set: the first one is evicted
    for (int i = 0; i <= WAYS; i++) fill(vpn_t'(36'h20000 + i * SETS));
    lookup(36'h20000, 0, "evicted by round robin");
    for (int i = 1; i <= WAYS; i++) lookup(vpn_t'(36'h20000 + i * SETS), 1, "set member kept");
    // streaming: one lookup per cycle, results one per cycle
    for (int i = 0; i < 64; i++) fill(vpn_t'(36'h3000 + i));
    got = 0;
    fork
      for (int i = 0; i < 64; i++) begin
        req_valid = 1; req = '{id: id_t'(i), va: {vpn_t'(36'h3000 + i), 12'h0}};
        @(posedge clk); #1;
      end
      begin
        @(posedge clk);
        repeat (LAT + 70) begin
          @(posedge clk); #1;
          if (out_valid && out_hit && out_ppn == map(out_req.va[47:12]) &&
              out_req.id < 64 && !seen[out_req.id]) begin
            seen[out_req.id] = 1;
            got++;
          end
        end
      end
    join
    req_valid = 0;
    check(got == 64, $sformatf("streamed hits %0d of 64", got));
    repeat (LAT + 2) @(posedge clk); #1;
    // back-pressure: result held while out_ready is low
    out_ready = 0;
    req_valid = 1; req = '{id: 5, va: {36'h3005, 12'h0}};
    @(posedge clk); #1; req_valid = 0;
    repeat (LAT + 5) @(posedge clk); #1;
    check(out_valid && out_hit && out_req.id == 5, "result held under back-pressure");
    check(!req_ready, "input stalled under back-pressure");
    out_ready = 1; @(posedge clk); #1;
    check(!out_valid, "result consumed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
