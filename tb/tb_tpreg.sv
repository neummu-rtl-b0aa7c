// tb_tpreg: self-checking test of the translation path register. Walks
// the update sequence a walker would do and checks the start level and
// table returned for virtual pages sharing 3, 2, 1 or 0 upper indices.
module tb_tpreg;
  import neummu_pkg::*;
  logic clk = 0, rst_n = 0;
  vpn_t lookup_vpn = '0;
  ppn_t root_ppn = 36'h100;
  logic [2:0] start_level;
  ppn_t start_base;
  logic upd_valid = 0;
  logic [2:0] upd_level = 0;
  idx_t upd_idx = 0;
  ppn_t upd_next = 0;
  int checks = 0, failures = 0;

  tpreg dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic vpn_t mk(int i4, int i3, int i2, int i1);
    return {idx_t'(i4), idx_t'(i3), idx_t'(i2), idx_t'(i1)};
  endfunction

  task automatic upd(int lvl, int idx, ppn_t nxt);
    upd_valid = 1; upd_level = 3'(lvl); upd_idx = idx_t'(idx); upd_next = nxt;
    @(posedge clk); #1; upd_valid = 0;
  endtask

  task automatic expect_start(vpn_t v, int lvl, ppn_t base, string what);
    lookup_vpn = v; #1;
    check(start_level == 3'(lvl) && start_base == base,
          $sformatf("%s: level %0d base %h (want %0d %h)", what, start_level, start_base, lvl, base));
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1; #1;
    expect_start(mk(1,2,3,4), 4, 36'h100, "empty register");
    // walk of (1,2,3,x): L4 entry -> 0x201, L3 -> 0x302, L2 -> 0x403
    upd(4, 1, 36'h201);
    expect_start(mk(1,2,3,4), 3, 36'h201, "after L4 only");
    upd(3, 2, 36'h302);
    upd(2, 3, 36'h403);
    expect_start(mk(1,2,3,9),   1, 36'h403, "same L4/L3/L2");
    expect_start(mk(1,2,7,9),   2, 36'h302, "same L4/L3");
    expect_start(mk(1,5,3,9),   3, 36'h201, "same L4 only (L2 index equal but path differs)");
    expect_start(mk(6,2,3,9),   4, 36'h100, "different L4");
    // a new L3 update invalidates the stored L2 level
    upd(3, 8, 36'h388);
    expect_start(mk(1,8,3,0),   2, 36'h388, "new L3, L2 invalid");
    expect_start(mk(1,2,3,0),   3, 36'h201, "old L3 gone");
    // a new L4 update invalidates L3 and L2
    upd(4, 9, 36'h299);
    expect_start(mk(9,8,3,0),   3, 36'h299, "new L4");
    expect_start(mk(1,8,3,0),   4, 36'h100, "old L4 gone");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
