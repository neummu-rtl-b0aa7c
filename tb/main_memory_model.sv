// main_memory_model: behavioural model of the NPU's main memory (not
// synthesizable), used by the testbenches.
//
// Two request ports, both answered after a fixed latency LAT:
//   walk port - 8-byte page-table entry reads, tagged with a walker number;
//   data port - 64-byte line reads and writes, tagged with a transaction
//               number; it accepts a request every cycle.
// At most one response per port per cycle leaves; responses that become
// due on the same cycle queue up in order. The walk port can refuse
// requests at random (WALK_STALL_PCT percent of cycles) to exercise the
// walkers' handshake. Memory content is sparse: page-table words live in
// an associative array written by map_page(), which builds a 4-level
// x86-64-style page table on the fly, allocating table pages from
// TABLE_BASE upwards. Lines never written read as line_pattern(address).
module main_memory_model
  import neummu_pkg::*;
#(
  parameter int unsigned LAT            = 100,
  parameter int unsigned TAG_W          = 7,
  parameter int unsigned WALK_STALL_PCT = 0,
  parameter logic [47:0] TABLE_BASE     = 48'h0_1000_0000
) (
  input  logic             clk,
  // walk port
  input  logic             walk_req_valid,
  output logic             walk_req_ready,
  input  pa_t              walk_req_addr,
  input  logic [TAG_W-1:0] walk_req_tag,
  output logic             walk_rsp_valid,
  output logic [TAG_W-1:0] walk_rsp_tag,
  output pte_t             walk_rsp_data,
  // data port
  input  logic             data_req_valid,
  input  logic             data_req_we,
  input  pa_t              data_req_addr,
  input  id_t              data_req_tag,
  input  line_t            data_req_wdata,
  output logic             data_rsp_valid,
  output id_t              data_rsp_tag,
  output line_t            data_rsp_data
);
  pte_t  words [pa_t];
  line_t lines [pa_t];
  pa_t   next_table = TABLE_BASE;
  ppn_t  root      = ppn_t'(TABLE_BASE >> PAGE_OFF_W);
  longint unsigned cycle = 0;
  longint unsigned walk_reads = 0, data_reads = 0, data_writes = 0;

  typedef struct { longint unsigned due; logic [TAG_W-1:0] tag; pte_t data; } wrsp_t;
  typedef struct { longint unsigned due; id_t tag; line_t data; } drsp_t;
  wrsp_t wq[$];
  drsp_t dq[$];

  initial next_table = TABLE_BASE + 48'h1000;   // root table is the first page

  function automatic line_t line_pattern(pa_t a);
    line_t l;
    for (int k = 0; k < 8; k++) l[k*64 +: 64] = {16'(k), a} ^ 64'h5a5a_0000_0000_0000;
    return l;
  endfunction

  function automatic pte_t read_word(pa_t a);
    return words.exists(a) ? words[a] : '0;
  endfunction

  // Map virtual page `vpn` to physical page `ppn`, creating tables as needed.
  function automatic void map_page(vpn_t vpn, ppn_t ppn);
    ppn_t table_ppn = root;
    for (int lvl = 4; lvl >= 2; lvl--) begin
      pa_t  ea = {table_ppn, vpn_index(vpn, lvl), 3'b000};
      pte_t e  = read_word(ea);
      if (!e[0]) begin
        e = '0;
        e[PA_W-1:PAGE_OFF_W] = ppn_t'(next_table >> PAGE_OFF_W);
        e[0] = 1'b1;
        words[ea] = e;
        next_table += 48'h1000;
      end
      table_ppn = e[PA_W-1:PAGE_OFF_W];
    end
    begin
      pa_t  ea = {table_ppn, vpn_index(vpn, 1), 3'b000};
      pte_t e  = '0;
      e[PA_W-1:PAGE_OFF_W] = ppn;
      e[0] = 1'b1;
      words[ea] = e;
    end
  endfunction

  always_ff @(posedge clk) begin
    cycle <= cycle + 1;
    walk_req_ready <= ($urandom_range(99) >= WALK_STALL_PCT);
  end

  // walk port
  always @(posedge clk) begin
    if (walk_req_valid && walk_req_ready) begin
      wq.push_back('{due: cycle + LAT, tag: walk_req_tag, data: read_word({walk_req_addr[PA_W-1:3], 3'b000})});
      walk_reads++;
    end
    walk_rsp_valid <= 1'b0;
    if (wq.size() > 0 && wq[0].due <= cycle + 1) begin
      walk_rsp_valid <= 1'b1;
      walk_rsp_tag   <= wq[0].tag;
      walk_rsp_data  <= wq[0].data;
      void'(wq.pop_front());
    end
  end

  // data port
  always @(posedge clk) begin
    if (data_req_valid) begin
      automatic pa_t a = {data_req_addr[PA_W-1:6], 6'd0};
      if (data_req_we) begin
        lines[a] = data_req_wdata;
        data_writes++;
      end else begin
        dq.push_back('{due: cycle + LAT, tag: data_req_tag,
                       data: lines.exists(a) ? lines[a] : line_pattern(a)});
        data_reads++;
      end
    end
    data_rsp_valid <= 1'b0;
    if (dq.size() > 0 && dq[0].due <= cycle + 1) begin
      data_rsp_valid <= 1'b1;
      data_rsp_tag   <= dq[0].tag;
      data_rsp_data  <= dq[0].data;
      void'(dq.pop_front());
    end
  end

endmodule
