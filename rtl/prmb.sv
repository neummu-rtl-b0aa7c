// prmb: pending request merging buffer of one page-table walker.
//
// SLOTS slots, each holding one translation request that waits for the
// walk its walker is doing: the request tag and the page offset of its
// virtual address (the page number is the walker's own). The request that
// starts a walk takes a slot like every merged one. `push` writes the
// lowest free slot; `pop` removes the slot shown on head_*, which is the
// lowest occupied slot. A push and a pop may happen in the same cycle.
// `full` and `empty` are registered-state functions (no combinational path
// from push/pop).
//
// From the paper (Section 4.1, Figure 10): a per-walker buffer of mergeable
// slots, each holding a VA and "other state", 32 slots in the proposed
// configuration, drained back to the DMA one request per cycle once the
// translation is known. This design's choices: the "other state" is the
// request tag, and slots are kept as a valid-bit array with priority
// selection rather than a FIFO.
module prmb
  import neummu_pkg::*;
#(
  parameter int unsigned SLOTS = 32
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  id_t  push_id,
  input  off_t push_off,
  input  logic pop,
  output logic head_valid,
  output id_t  head_id,
  output off_t head_off,
  output logic full,
  output logic empty,
  output logic [$clog2(SLOTS+1)-1:0] count
);
  localparam int unsigned SW = (SLOTS > 1) ? $clog2(SLOTS) : 1;

  typedef struct packed {
    id_t  id;
    off_t off;
  } slot_t;

  logic [SLOTS-1:0] valid_q;
  slot_t            slot_q [SLOTS];

  logic [SW-1:0] free_idx, head_idx;
  logic          any_free, any_valid;

  always_comb begin
    any_free  = 1'b0;
    any_valid = 1'b0;
    free_idx  = '0;
    head_idx  = '0;
    for (int i = SLOTS - 1; i >= 0; i--) begin
      if (!valid_q[i]) begin
        any_free = 1'b1;
        free_idx = SW'(i);
      end else begin
        any_valid = 1'b1;
        head_idx  = SW'(i);
      end
    end
  end

  assign full       = !any_free;
  assign empty      = !any_valid;
  assign head_valid = any_valid;
  assign head_id    = slot_q[head_idx].id;
  assign head_off   = slot_q[head_idx].off;
  assign count      = $bits(count)'($countones(valid_q));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
    end else begin
      if (pop && any_valid) valid_q[head_idx] <= 1'b0;
      if (push && any_free) begin
        valid_q[free_idx] <= 1'b1;
        slot_q[free_idx]  <= '{id: push_id, off: push_off};
      end
    end
  end

`ifndef SYNTHESIS
  a_no_push_when_full: assert property (@(posedge clk) disable iff (!rst_n) push |-> !full)
    else $error("prmb: push into a full buffer");
  a_no_pop_when_empty: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty)
    else $error("prmb: pop from an empty buffer");
`endif

endmodule
