// tb_pts: self-checking test of the pending translation scoreboard with 4
// walkers: allocation of idle walkers, merge on a matching page with free
// slots, allocation of a second walker when the first one's buffer is
// full, blocking when nothing is possible, and release.
module tb_pts;
  import neummu_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  vpn_t lookup_vpn = '0;
  logic [N-1:0] slot_free = '1, release_i = '0, busy;
  logic merge, alloc, alloc_en = 0;
  logic [$clog2(N)-1:0] target;
  int checks = 0, failures = 0;

  pts #(.N(N)) dut (.*);
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

  // present a miss and commit it; check the decision
  task automatic miss(vpn_t v, bit exp_merge, bit exp_alloc, int exp_target, string what);
    lookup_vpn = v; alloc_en = 1; #1;
    check(merge == exp_merge && alloc == exp_alloc && (!(merge || alloc) || target == exp_target),
          $sformatf("%s: merge=%0b alloc=%0b target=%0d", what, merge, alloc, target));
    @(posedge clk); #1; alloc_en = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1; #1;
    check(busy == '0, "idle after reset");
    miss(36'hA, 0, 1, 0, "first page allocates walker 0");
    miss(36'hB, 0, 1, 1, "second page allocates walker 1");
    miss(36'hA, 1, 0, 0, "same page merges into walker 0");
    check(busy == 4'b0011, "two walkers busy");
    slot_free = 4'b0010;                           // walker 0 buffer full
    miss(36'hA, 0, 1, 2, "full buffer: second walker for the page");
    slot_free = 4'b0110;
    miss(36'hA, 1, 0, 2, "merge into the second walker");
    miss(36'hC, 0, 1, 3, "last idle walker");
    slot_free = 4'b0000;
    miss(36'hA, 0, 0, 0, "blocked: no walker, no slot");
    check(busy == 4'b1111, "all busy");
    release_i = 4'b0010; @(posedge clk); #1; release_i = 0;
    check(busy == 4'b1101, "walker 1 released");
    miss(36'hD, 0, 1, 1, "released walker reused");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
