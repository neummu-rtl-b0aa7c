// tpreg: translation path register of one page-table walker.
//
// A single-entry translation-path cache. It remembers the upper part of
// the last walk: the L4 index and the L3 table it pointed to, the L3 index
// and the L2 table, the L2 index and the L1 table. A lookup with a virtual
// page number compares the indices as prefixes and returns the deepest
// level whose path matches, so the walk can start there:
//   start_level = 1  L4, L3, L2 indices match -> read only the L1 entry
//   start_level = 2  L4, L3 match             -> read L2 and L1 entries
//   start_level = 3  L4 matches               -> read L3, L2 and L1
//   start_level = 4  no match                 -> full walk from the root
// `start_base` is the physical page of the table to read first (the root
// table `root_ppn` on a miss). Lookup is combinational. The walker writes
// one level per cycle of `upd_valid` as it reads page-table entries: an
// update at level L (4, 3 or 2) stores that level's index and the next
// table's page and invalidates the deeper levels, so the stored path is
// always a consistent prefix.
//
// From the paper (Section 4.3, Figures 10 and 15): one register per walker,
// caching L4/L3/L2 entries tagged by the virtual L4/L3/L2 indices as a TPC
// does, under 16 bytes per walker. This design stores 27 index bits, 3 x 36
// page bits and 3 valid bits (138 bits, about 17 bytes) because it keeps
// 48-bit physical addresses; the prefix matching of partial paths is this
// design's reading of the per-level hit rates of Figure 15.
module tpreg
  import neummu_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // lookup
  input  vpn_t       lookup_vpn,
  input  ppn_t       root_ppn,
  output logic [2:0] start_level,
  output ppn_t       start_base,
  // update from the walker
  input  logic       upd_valid,
  input  logic [2:0] upd_level,    // 4, 3 or 2: level whose entry was read
  input  idx_t       upd_idx,
  input  ppn_t       upd_next      // table page that entry points to
);
  logic [4:2] v_q;          // v_q[L]: level L of the path is valid
  idx_t       idx_q  [2:4];
  ppn_t       next_q [2:4];

  logic m4, m3, m2;
  assign m4 = v_q[4] && idx_q[4] == vpn_index(lookup_vpn, 4);
  assign m3 = m4 && v_q[3] && idx_q[3] == vpn_index(lookup_vpn, 3);
  assign m2 = m3 && v_q[2] && idx_q[2] == vpn_index(lookup_vpn, 2);

  always_comb begin
    if (m2) begin
      start_level = 3'd1;
      start_base  = next_q[2];
    end else if (m3) begin
      start_level = 3'd2;
      start_base  = next_q[3];
    end else if (m4) begin
      start_level = 3'd3;
      start_base  = next_q[4];
    end else begin
      start_level = 3'd4;
      start_base  = root_ppn;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= '0;
    end else if (upd_valid) begin
      unique case (upd_level)
        3'd4: begin
          v_q       <= 3'b100;
          idx_q[4]  <= upd_idx;
          next_q[4] <= upd_next;
        end
        3'd3: begin
          v_q[3]    <= 1'b1;
          v_q[2]    <= 1'b0;
          idx_q[3]  <= upd_idx;
          next_q[3] <= upd_next;
        end
        3'd2: begin
          v_q[2]    <= 1'b1;
          idx_q[2]  <= upd_idx;
          next_q[2] <= upd_next;
        end
        default: ;
      endcase
    end
  end

endmodule
