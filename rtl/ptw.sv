// ptw: one page-table walker with its merging buffer (prmb) and
// translation path register (tpreg).
//
// A walk starts when the scoreboard allocates this walker to a TLB miss
// (`alloc`). The translation path register is consulted on that cycle and
// tells at which level to start and from which table. The walker then
// reads one 8-byte page-table entry per level through its memory port
// (mem_req_valid/mem_req_ready, answered later by mem_rsp_valid with the
// entry), refreshing the translation path register with every upper-level
// entry it reads. The L1 entry gives the physical page; a non-present entry
// at any level ends the walk as a fault. The new translation is offered to
// the TLB (fill_valid until fill_ready) unless the walk faulted.
//
// Requests to the same page that arrive while the walker is busy are merged
// (`merge`) into the buffer. As soon as the walk has finished the buffer is
// drained, one request per granted cycle on rsp_valid/rsp_ready, and merges
// are still accepted while it drains. When the fill is done and the buffer
// is empty the walker pulses `release_o` and becomes idle.
//
// From the paper (Sections 4.1-4.3, Figure 10): walker = PRMB + TPreg, 4-
// level x86-64 walk, merged requests returned on a cycle-by-cycle basis.
// This design's choices: the state machine, the port handshakes, and that
// merging stays open while the buffer drains.
module ptw
  import neummu_pkg::*;
#(
  parameter int unsigned SLOTS = 32
) (
  input  logic       clk,
  input  logic       rst_n,
  input  ppn_t       root_ppn,      // page of the L4 table (CR3)
  // from the scoreboard
  input  logic       alloc,
  input  logic       merge,
  input  vpn_t       req_vpn,
  input  id_t        req_id,
  input  off_t       req_off,
  output logic       busy,
  output logic       slot_free,
  output logic       release_o,
  // page-table memory reads
  output logic       mem_req_valid,
  input  logic       mem_req_ready,
  output pa_t        mem_req_addr,
  input  logic       mem_rsp_valid,
  input  pte_t       mem_rsp_data,
  // TLB fill
  output logic       fill_valid,
  input  logic       fill_ready,
  output vpn_t       fill_vpn,
  output ppn_t       fill_ppn,
  // translation responses
  output logic       rsp_valid,
  input  logic       rsp_ready,
  output xlat_rsp_t  rsp
);
  typedef enum logic [1:0] {S_IDLE, S_REQ, S_WAIT, S_DONE} state_e;

  state_e     state_q;
  vpn_t       vpn_q;
  logic [2:0] level_q;
  ppn_t       base_q;
  ppn_t       ppn_q;
  logic       fault_q;
  logic       fill_pend_q;

  // ---------------------------------------------------- translation path
  logic [2:0] tp_level;
  ppn_t       tp_base;
  logic       tp_upd;

  tpreg u_tpreg (
    .clk         (clk),
    .rst_n       (rst_n),
    .lookup_vpn  (req_vpn),
    .root_ppn    (root_ppn),
    .start_level (tp_level),
    .start_base  (tp_base),
    .upd_valid   (tp_upd),
    .upd_level   (level_q),
    .upd_idx     (vpn_index(vpn_q, 32'(level_q))),
    .upd_next    (pte_ppn(mem_rsp_data))
  );

  // ------------------------------------------------------ merging buffer
  logic head_valid, pb_full, pb_empty, pb_push, pb_pop;
  id_t  head_id;
  off_t head_off;

  assign pb_push = alloc || merge;
  assign pb_pop  = rsp_valid && rsp_ready;

  prmb #(.SLOTS(SLOTS)) u_prmb (
    .clk        (clk),
    .rst_n      (rst_n),
    .push       (pb_push),
    .push_id    (req_id),
    .push_off   (req_off),
    .pop        (pb_pop),
    .head_valid (head_valid),
    .head_id    (head_id),
    .head_off   (head_off),
    .full       (pb_full),
    .empty      (pb_empty),
    .count      ()
  );

  // ------------------------------------------------------------- control
  logic pte_ok, last_level;
  assign pte_ok     = pte_present(mem_rsp_data);
  assign last_level = (level_q == 3'd1);
  assign tp_upd     = (state_q == S_WAIT) && mem_rsp_valid && pte_ok && !last_level;

  assign busy          = (state_q != S_IDLE);
  assign slot_free     = busy && !pb_full;
  assign mem_req_valid = (state_q == S_REQ);
  assign mem_req_addr  = {base_q, vpn_index(vpn_q, 32'(level_q)), 3'b000};
  assign fill_valid    = (state_q == S_DONE) && fill_pend_q;
  assign fill_vpn      = vpn_q;
  assign fill_ppn      = ppn_q;
  assign rsp_valid     = (state_q == S_DONE) && head_valid;
  assign rsp           = '{id: head_id, pa: {ppn_q, head_off}, fault: fault_q};
  assign release_o     = (state_q == S_DONE) && !fill_pend_q && pb_empty && !pb_push;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= S_IDLE;
      fill_pend_q <= 1'b0;
      fault_q     <= 1'b0;
    end else begin
      unique case (state_q)
        S_IDLE: if (alloc) begin
          state_q <= S_REQ;
          vpn_q   <= req_vpn;
          level_q <= tp_level;
          base_q  <= tp_base;
          fault_q <= 1'b0;
        end
        S_REQ: if (mem_req_ready) state_q <= S_WAIT;
        S_WAIT: if (mem_rsp_valid) begin
          if (!pte_ok) begin
            fault_q     <= 1'b1;
            ppn_q       <= '0;
            fill_pend_q <= 1'b0;
            state_q     <= S_DONE;
          end else if (last_level) begin
            ppn_q       <= pte_ppn(mem_rsp_data);
            fill_pend_q <= 1'b1;
            state_q     <= S_DONE;
          end else begin
            base_q  <= pte_ppn(mem_rsp_data);
            level_q <= level_q - 3'd1;
            state_q <= S_REQ;
          end
        end
        S_DONE: begin
          if (fill_valid && fill_ready) fill_pend_q <= 1'b0;
          if (release_o) state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

`ifndef SYNTHESIS
  a_alloc_when_idle: assert property (@(posedge clk) disable iff (!rst_n) alloc |-> state_q == S_IDLE)
    else $error("ptw: allocated while busy");
  a_merge_when_busy: assert property (@(posedge clk) disable iff (!rst_n) merge |-> slot_free)
    else $error("ptw: merge without a free slot");
`endif

endmodule
