// pts: pending translation scoreboard.
//
// A fully-associative table with one entry per page-table walker, tagged
// with the virtual page number that walker is translating. Every TLB miss
// looks it up (combinationally):
//   * merge  - some entry holds the same page and its walker's merging
//              buffer still has a free slot: the request joins that walk;
//   * alloc  - otherwise, if a walker is idle, the request is given to it
//              and its entry is written with the page number;
//   * block  - otherwise (every walker busy, and no walker of this page
//              has a free slot) the request must wait.
// Merge wins over allocation, and the lowest-numbered candidate wins. An
// entry is written on the cycle `alloc_en` is high and freed when its
// walker reports `release_i` (walk finished and all merged requests
// returned).
//
// From the paper (Section 4.1, Figure 10): fully associative, N entries
// equal to the number of walkers, tagged by VPN; hit -> merge into a free
// merging-buffer slot, miss -> allocate a vacant walker, and block when
// all walkers and slots are full. This design's choice: entry i always
// belongs to walker i, so the entry's data field (the walker number) is
// the entry's position. When every walker of a page has a full buffer but
// another walker is idle, the request is allocated to the idle walker
// (a second walk of the same page) instead of blocking, following "When
// all the PTWs as well as all possible PRMB mergeable slots are full, any
// further translation requests are blocked".
module pts
  import neummu_pkg::*;
#(
  parameter int unsigned N = 128
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // lookup
  input  vpn_t                 lookup_vpn,
  input  logic [N-1:0]         slot_free,     // walker i's buffer has room
  output logic                 merge,
  output logic                 alloc,
  output logic [$clog2(N)-1:0] target,        // walker to merge into / allocate
  // update
  input  logic                 alloc_en,      // write entry `target`
  input  logic [N-1:0]         release_i,     // walker i finished
  output logic [N-1:0]         busy           // entry valid = walker busy
);
  localparam int unsigned IW = $clog2(N);

  logic [N-1:0] valid_q;
  vpn_t         tag_q [N];

  logic [IW-1:0] merge_idx, free_idx;
  logic          any_merge, any_free;

  always_comb begin
    any_merge = 1'b0;
    any_free  = 1'b0;
    merge_idx = '0;
    free_idx  = '0;
    for (int i = N - 1; i >= 0; i--) begin
      if (valid_q[i] && tag_q[i] == lookup_vpn && slot_free[i]) begin
        any_merge = 1'b1;
        merge_idx = IW'(i);
      end
      if (!valid_q[i]) begin
        any_free = 1'b1;
        free_idx = IW'(i);
      end
    end
  end

  assign merge  = any_merge;
  assign alloc  = !any_merge && any_free;
  assign target = any_merge ? merge_idx : free_idx;
  assign busy   = valid_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
    end else begin
      for (int unsigned i = 0; i < N; i++) begin
        if (alloc_en && alloc && 32'(target) == i) begin
          valid_q[i] <= 1'b1;
          tag_q[i]   <= lookup_vpn;
        end else if (release_i[i]) begin
          valid_q[i] <= 1'b0;
        end
      end
    end
  end

endmodule
