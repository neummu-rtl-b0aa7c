// spm_buffer: software-managed scratchpad (one of the NPU's on-chip
// buffers), DEPTH lines of 64 bytes.
//
// Two independent ports, each able to read or write one line per cycle:
// port A for the DMA, port B for the compute array. A read returns its
// line on the next cycle (rdata is registered). Both ports writing the same
// line in the same cycle leave port B's data. The scratchpad is addressed
// directly, with no translation: only the DMA's traffic to main memory is
// translated.
//
// From the paper (Table 1, Figure 2): an IA/OA buffer of 15 MB and a
// W buffer of 10 MB. The text elsewhere says "our baseline NPU employs
// 10 MB of SPM each for IA and W"; the sizes of Table 1 are the defaults
// used here (DEPTH 245760 and 163840 lines). The 64-byte line and the two
// ports are this design's choices. It is written as a plain array; a real
// chip would build it from SRAM macros.
module spm_buffer
  import neummu_pkg::*;
#(
  parameter int unsigned DEPTH = 245760
) (
  input  logic      clk,
  // port A
  input  logic      a_we,
  input  logic      a_re,
  input  spm_addr_t a_addr,
  input  line_t     a_wdata,
  output line_t     a_rdata,
  // port B
  input  logic      b_we,
  input  logic      b_re,
  input  spm_addr_t b_addr,
  input  line_t     b_wdata,
  output line_t     b_rdata
);
  line_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_we && 32'(a_addr) < DEPTH) mem[a_addr] <= a_wdata;
    if (b_we && 32'(b_addr) < DEPTH) mem[b_addr] <= b_wdata;
    if (a_re) a_rdata <= mem[a_addr];
    if (b_re) b_rdata <= mem[b_addr];
  end

endmodule
