// dma_unit: tile DMA between main memory and the scratchpads, with
// virtual addressing through the MMU.
//
// A tile descriptor (see tile_desc_t) describes a 2-D block of a tensor:
// `rows` rows of `row_lines` 64-byte lines, rows `stride` bytes apart.
// The DMA linearises it into rows*row_lines memory transactions and sends
// one translation request per cycle (as long as the MMU accepts) tagged
// with the transaction's index. A transaction is carried out when its
// translation returns, in whatever order that happens:
//   load  - the line is read from memory at the physical address (tag =
//           index); when the data returns it is written to scratchpad line
//           spm_base + index;
//   store - scratchpad line spm_base + index is read (one cycle) and then
//           written to memory at the physical address.
// A translation that faults skips its transaction and sets `fault`. The
// tile is finished when every transaction has completed (load: data
// written; store: write issued); `done` pulses for one cycle and the DMA
// accepts the next descriptor (desc_ready). `busy_cycles` counts the
// cycles of the last tile.
//
// From the paper (Sections 2.1 and 3.3): the DMA splits IA/W tiles into
// linearised memory transactions, fetches one tile at a time and sends one
// translation per cycle, launching them all to maximise memory-level
// parallelism. This design's choices: the 2-D descriptor, 64-byte
// transactions, the memory data port that accepts one request per cycle
// with no back-pressure (the paper models memory as fixed latency and
// bandwidth), and that stores are posted.
module dma_unit
  import neummu_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // descriptor
  input  logic        desc_valid,
  output logic        desc_ready,
  input  tile_desc_t  desc,
  output logic        done,
  output logic        fault,
  output logic [31:0] busy_cycles,
  // translation
  output logic        xlat_req_valid,
  input  logic        xlat_req_ready,
  output xlat_req_t   xlat_req,
  input  logic        xlat_rsp_valid,
  input  xlat_rsp_t   xlat_rsp,
  // memory data port
  output logic        mem_req_valid,
  output logic        mem_req_we,
  output pa_t         mem_req_addr,
  output id_t         mem_req_tag,
  output line_t       mem_req_wdata,
  input  logic        mem_rsp_valid,
  input  id_t         mem_rsp_tag,
  input  line_t       mem_rsp_data,
  // scratchpad port (read data one cycle after spm_re)
  output logic        spm_we,
  output logic        spm_re,
  output logic        spm_sel_w,
  output spm_addr_t   spm_addr,
  output line_t       spm_wdata,
  input  line_t       spm_rdata
);
  tile_desc_t  d_q;
  logic        active_q;
  logic [15:0] row_q, col_q;
  va_t         row_va_q, va_q;
  logic [ID_W:0] issued_q, completed_q, total_q;
  logic        fault_q;
  logic [31:0] cyc_q;

  // store pipeline: translated transaction waiting for its SPM read data
  logic        st_valid_q;
  pa_t         st_pa_q;
  id_t         st_id_q;

  assign desc_ready = !active_q;

  // ------------------------------------------------ translation requests
  assign xlat_req_valid = active_q && (issued_q < total_q);
  assign xlat_req       = '{id: id_t'(issued_q), va: va_q};

  wire issue = xlat_req_valid && xlat_req_ready;

  // ---------------------------------------------------- completed xlats
  wire rsp_ok    = xlat_rsp_valid && !xlat_rsp.fault;
  wire rsp_fault = xlat_rsp_valid && xlat_rsp.fault;

  always_comb begin
    mem_req_valid = 1'b0;
    mem_req_we    = 1'b0;
    mem_req_addr  = xlat_rsp.pa;
    mem_req_tag   = xlat_rsp.id;
    mem_req_wdata = spm_rdata;
    spm_we        = 1'b0;
    spm_re        = 1'b0;
    spm_addr      = d_q.spm_base + spm_addr_t'(xlat_rsp.id);
    spm_wdata     = mem_rsp_data;
    if (d_q.store) begin
      // read the scratchpad line now, write memory next cycle
      spm_re = rsp_ok;
      if (st_valid_q) begin
        mem_req_valid = 1'b1;
        mem_req_we    = 1'b1;
        mem_req_addr  = st_pa_q;
        mem_req_tag   = st_id_q;
      end
    end else begin
      mem_req_valid = rsp_ok;
      if (mem_rsp_valid) begin
        spm_we   = 1'b1;
        spm_addr = d_q.spm_base + spm_addr_t'(mem_rsp_tag);
      end
    end
  end

  assign spm_sel_w = d_q.buf_w;

  // one completion per cycle at most from each source
  logic [1:0] n_done;
  always_comb begin
    n_done = 2'd0;
    if (rsp_fault) n_done = n_done + 2'd1;
    if (d_q.store ? st_valid_q : mem_rsp_valid) n_done = n_done + 2'd1;
  end

  wire last = active_q && (completed_q + (ID_W+1)'(n_done) == total_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_q    <= 1'b0;
      done        <= 1'b0;
      fault_q     <= 1'b0;
      st_valid_q  <= 1'b0;
      issued_q    <= '0;
      completed_q <= '0;
      total_q     <= '0;
      cyc_q       <= '0;
      busy_cycles <= '0;
      d_q         <= '0;
    end else begin
      done       <= 1'b0;
      st_valid_q <= d_q.store && rsp_ok;
      st_pa_q    <= xlat_rsp.pa;
      st_id_q    <= xlat_rsp.id;
      if (!active_q) begin
        if (desc_valid) begin
          active_q    <= 1'b1;
          d_q         <= desc;
          row_q       <= '0;
          col_q       <= '0;
          row_va_q    <= desc.base;
          va_q        <= desc.base;
          issued_q    <= '0;
          completed_q <= '0;
          total_q     <= (ID_W+1)'(32'(desc.rows) * 32'(desc.row_lines));
          fault_q     <= 1'b0;
          cyc_q       <= 32'd1;
        end
      end else begin
        cyc_q       <= cyc_q + 1;
        completed_q <= completed_q + (ID_W+1)'(n_done);
        if (rsp_fault) fault_q <= 1'b1;
        if (issue) begin
          issued_q <= issued_q + 1'b1;
          if (col_q + 16'd1 == d_q.row_lines) begin
            col_q    <= '0;
            row_q    <= row_q + 16'd1;
            row_va_q <= row_va_q + d_q.stride;
            va_q     <= row_va_q + d_q.stride;
          end else begin
            col_q <= col_q + 16'd1;
            va_q  <= va_q + va_t'(LINE_BYTES);
          end
        end
        if (last || total_q == '0) begin
          active_q    <= 1'b0;
          done        <= 1'b1;
          busy_cycles <= cyc_q;
        end
      end
    end
  end

  assign fault = fault_q;

endmodule
