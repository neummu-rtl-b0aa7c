// tb_spm_buffer: self-checking test of the scratchpad at its default
// depth (245760 lines, 15 MB). Writes random lines through both ports at
// random addresses spread over the whole depth, reads them back through
// the other port, and checks the one-cycle read latency and that a read
// without a read enable keeps the previous data.
module tb_spm_buffer;
  import neummu_pkg::*;
  localparam int DEPTH = 245760;
  logic clk = 0;
  logic a_we = 0, a_re = 0, b_we = 0, b_re = 0;
  spm_addr_t a_addr = '0, b_addr = '0;
  line_t a_wdata = '0, b_wdata = '0, a_rdata, b_rdata;
  int checks = 0, failures = 0;
  line_t ref_mem [int];

  spm_buffer #(.DEPTH(DEPTH)) dut (.*);
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

  function automatic line_t rnd_line();
    line_t l;
    for (int k = 0; k < LINE_W / 32; k++) l[k*32 +: 32] = $urandom;
    return l;
  endfunction

  initial begin
    int addrs [200];
    @(posedge clk); #1;
    for (int i = 0; i < 200; i++) begin
      automatic int ad;
      do ad = $urandom_range(DEPTH - 1); while (ref_mem.exists(ad));
      addrs[i] = ad;
      ref_mem[ad] = rnd_line();
      if (i % 2 == 0) begin a_we = 1; a_addr = spm_addr_t'(ad); a_wdata = ref_mem[ad]; end
      else            begin b_we = 1; b_addr = spm_addr_t'(ad); b_wdata = ref_mem[ad]; end
      @(posedge clk); #1; a_we = 0; b_we = 0;
    end
    for (int i = 0; i < 200; i++) begin
      a_re = 1; a_addr = spm_addr_t'(addrs[i]);
      b_re = 1; b_addr = spm_addr_t'(addrs[199 - i]);
      @(posedge clk); #1; a_re = 0; b_re = 0;
      check(a_rdata == ref_mem[addrs[i]], "port A reads what was written");
      check(b_rdata == ref_mem[addrs[199 - i]], "port B reads what was written");
      a_addr = spm_addr_t'(addrs[(i + 1) % 200]);
      @(posedge clk); #1;
      check(a_rdata == ref_mem[addrs[i]], "data held without read enable");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
