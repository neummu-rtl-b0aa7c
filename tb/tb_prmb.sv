// tb_prmb: self-checking test of the merging buffer. Fills it to SLOTS
// requests, checks full/empty/count against a reference set, drains it
// with random simultaneous pushes, and checks that every pushed request
// leaves exactly once with its page offset intact.
module tb_prmb;
  import neummu_pkg::*;
  localparam int SLOTS = 32;
  logic clk = 0, rst_n = 0;
  logic push = 0, pop = 0;
  id_t  push_id = '0;
  off_t push_off = '0;
  logic head_valid, full, empty;
  id_t  head_id;
  off_t head_off;
  logic [$clog2(SLOTS+1)-1:0] count;
  int checks = 0, failures = 0;
  off_t ref_set [id_t];
  id_t  next_id = 100;

  prmb #(.SLOTS(SLOTS)) dut (.*);

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

  task automatic step(bit do_push, bit do_pop);
    id_t popped;
    push = do_push; pop = do_pop;
    push_id = next_id; push_off = off_t'($urandom);
    popped = head_id;
    if (do_pop) begin
      check(head_valid, "pop with head_valid");
      check(ref_set.exists(popped), $sformatf("popped id %0d was pushed", popped));
      if (ref_set.exists(popped)) begin
        check(ref_set[popped] == head_off, "offset intact");
        ref_set.delete(popped);
      end
    end
    if (do_push) begin ref_set[push_id] = push_off; next_id++; end
    @(posedge clk); #1;
    push = 0; pop = 0;
    check(count == ref_set.num(), $sformatf("count %0d vs %0d", count, ref_set.num()));
    check(full == (ref_set.num() == SLOTS), "full flag");
    check(empty == (ref_set.num() == 0), "empty flag");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    check(empty && !full && count == 0, "empty after reset");
    for (int i = 0; i < SLOTS; i++) step(1, 0);
    check(full, "full after SLOTS pushes");
    step(0, 1); step(1, 0);              // free one slot and refill it
    for (int i = 0; i < 200; i++) begin
      automatic bit pu = ($urandom_range(1) == 1) && !full;
      automatic bit po = ($urandom_range(2) != 0) && !empty;
      step(pu, po);
    end
    while (!empty) step(0, 1);
    check(ref_set.num() == 0, "all requests returned");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
