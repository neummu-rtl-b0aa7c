// rr_arbiter: round-robin arbiter, N requesters, one grant per cycle.
//
// The requester just after the last granted one has the highest priority,
// so every persistent request is granted within N cycles. The grant is
// combinational from `req`; the priority pointer advances on a cycle where
// `advance` is high and some request was granted. Used wherever the page-
// table walkers share one port (page-walk memory reads, TLB fills,
// translation responses). The arbitration policy is this design's choice;
// the paper does not describe how the walkers share these resources.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic                 advance,
  output logic [N-1:0]         gnt,
  output logic [$clog2(N)-1:0] gnt_idx,
  output logic                 gnt_valid
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] ptr_q;   // highest-priority requester

  always_comb begin
    gnt       = '0;
    gnt_idx   = '0;
    gnt_valid = 1'b0;
    for (int unsigned k = 0; k < N; k++) begin
      int unsigned i;
      i = (32'(ptr_q) + k) % N;
      if (!gnt_valid && req[i]) begin
        gnt_valid = 1'b1;
        gnt_idx   = IW'(i);
        gnt[i]    = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      ptr_q <= '0;
    else if (advance && gnt_valid)
      ptr_q <= (32'(gnt_idx) == N - 1) ? '0 : gnt_idx + 1'b1;
  end

endmodule
