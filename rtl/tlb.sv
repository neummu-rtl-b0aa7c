// tlb: translation lookaside buffer in front of the page-table walkers.
//
// Holds ENTRIES virtual-to-physical page translations, organised as SETS
// sets of WAYS ways indexed by the low bits of the virtual page number.
// A lookup is accepted with req_valid/req_ready; its result (hit flag and
// physical page number) comes out of a HIT_LAT-stage pipeline HIT_LAT
// cycles later together with the request's tag and virtual address. The
// whole pipeline freezes while its last stage holds a result that the
// consumer does not take (out_ready low); this is how a blocked scoreboard
// back-pressures the DMA. Fills (one per cycle) write the way picked by a
// per-set round-robin victim pointer; a fill whose page is already present
// in the set rewrites that way instead.
//
// From the paper: 2048 entries and a 5-cycle hit latency (Table 1). The
// paper does not give the organisation: the 8-way set-associative layout,
// round-robin replacement and the lookup-at-entry pipeline are this
// design's choices. The tags are looked up when the request enters, so a
// fill that lands during the HIT_LAT cycles is not seen by that request;
// it then reaches the scoreboard as a miss, where it merges with the
// walk that is still draining or starts a new one.
module tlb
  import neummu_pkg::*;
#(
  parameter int unsigned ENTRIES = 2048,
  parameter int unsigned WAYS    = 8,
  parameter int unsigned HIT_LAT = 5
) (
  input  logic      clk,
  input  logic      rst_n,
  // lookup
  input  logic      req_valid,
  output logic      req_ready,
  input  xlat_req_t req,
  // result, HIT_LAT cycles later
  output logic      out_valid,
  input  logic      out_ready,
  output xlat_req_t out_req,
  output logic      out_hit,
  output ppn_t      out_ppn,
  // fill from a completed page walk
  input  logic      fill_valid,
  input  vpn_t      fill_vpn,
  input  ppn_t      fill_ppn
);
  localparam int unsigned SETS  = ENTRIES / WAYS;
  localparam int unsigned SET_W = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned TAG_W = VPN_W - SET_W;

  typedef struct packed {
    logic             valid;
    logic [TAG_W-1:0] tag;
    ppn_t             ppn;
  } tlb_entry_t;

  typedef struct packed {
    logic      valid;
    xlat_req_t req;
    logic      hit;
    ppn_t      ppn;
  } stage_t;

  tlb_entry_t       ent_q   [SETS][WAYS];
  logic [WAY_W-1:0] victim_q[SETS];
  stage_t           pipe_q  [HIT_LAT];

  // ---------------------------------------------------------------- lookup
  logic [SET_W-1:0] rd_set;
  logic [TAG_W-1:0] rd_tag;
  logic             rd_hit;
  ppn_t             rd_ppn;

  assign rd_set = SET_W'(req.va[PAGE_OFF_W +: VPN_W]);
  assign rd_tag = TAG_W'(req.va[PAGE_OFF_W + SET_W +: TAG_W]);

  always_comb begin
    rd_hit = 1'b0;
    rd_ppn = '0;
    for (int unsigned w = 0; w < WAYS; w++) begin
      if (ent_q[rd_set][w].valid && ent_q[rd_set][w].tag == rd_tag) begin
        rd_hit = 1'b1;
        rd_ppn = ent_q[rd_set][w].ppn;
      end
    end
  end

  logic advance;
  assign advance   = !pipe_q[HIT_LAT-1].valid || out_ready;
  assign req_ready = advance;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned s = 0; s < HIT_LAT; s++) pipe_q[s] <= '0;
    end else if (advance) begin
      pipe_q[0].valid <= req_valid;
      pipe_q[0].req   <= req;
      pipe_q[0].hit   <= rd_hit;
      pipe_q[0].ppn   <= rd_ppn;
      for (int unsigned s = 1; s < HIT_LAT; s++) pipe_q[s] <= pipe_q[s-1];
    end
  end

  assign out_valid = pipe_q[HIT_LAT-1].valid;
  assign out_req   = pipe_q[HIT_LAT-1].req;
  assign out_hit   = pipe_q[HIT_LAT-1].hit;
  assign out_ppn   = pipe_q[HIT_LAT-1].ppn;

  // ------------------------------------------------------------------ fill
  logic [SET_W-1:0] wr_set;
  logic [TAG_W-1:0] wr_tag;
  logic             wr_present;
  logic [WAY_W-1:0] wr_present_way;

  assign wr_set = SET_W'(fill_vpn);
  assign wr_tag = TAG_W'(fill_vpn >> SET_W);

  always_comb begin
    wr_present     = 1'b0;
    wr_present_way = '0;
    for (int unsigned w = 0; w < WAYS; w++) begin
      if (ent_q[wr_set][w].valid && ent_q[wr_set][w].tag == wr_tag) begin
        wr_present     = 1'b1;
        wr_present_way = WAY_W'(w);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned s = 0; s < SETS; s++) begin
        victim_q[s] <= '0;
        for (int unsigned w = 0; w < WAYS; w++) ent_q[s][w].valid <= 1'b0;
      end
    end else if (fill_valid) begin
      if (wr_present) begin
        ent_q[wr_set][wr_present_way].ppn <= fill_ppn;
      end else begin
        ent_q[wr_set][victim_q[wr_set]] <= '{valid: 1'b1, tag: wr_tag, ppn: fill_ppn};
        victim_q[wr_set] <= victim_q[wr_set] + 1'b1;
      end
    end
  end

endmodule
