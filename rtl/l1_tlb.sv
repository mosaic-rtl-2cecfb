// l1_tlb: private per-core TLB with separate base-page and large-page
// sections (128 and 16 entries, fully associative, LRU, single port), as in
// the evaluated configuration, plus MSHRs for misses in flight.
//
// A request (asid, vpn) is accepted when req_valid && req_ready. Both
// sections are searched in the same cycle: the base section by (asid, vpn),
// the large section by (asid, vpn >> LOG_P). A hit is answered one cycle
// later on hit_resp (1-cycle latency). A miss to a page that already has an
// MSHR is merged into it; otherwise a free MSHR is taken and the miss is sent
// to the L2 TLB on l2_req. req_ready is low while no MSHR is free.
// The L2 answer (l2_fill) is written into the section named by its large bit,
// frees the MSHR of that page and is passed to the core on fill_resp in the
// same cycle, tagged with (asid, vpn) so the core can wake every waiting warp.
// A fill that arrives in the cycle a request for the same page is accepted
// also answers that request (the core sees both in the same cycle).
// inv drops an entry (TLB shootdown after splintering or migration).
// The sizes and latency follow the paper; the MSHR count, the two answer
// channels and the shootdown port are this design's choices.
module l1_tlb
  import mosaic_pkg::*;
#(
  parameter int unsigned BASE_ENTRIES  = 128,
  parameter int unsigned LARGE_ENTRIES = 16,
  parameter int unsigned MSHRS         = 8,
  parameter int unsigned LOG_P         = 9
) (
  input  logic        clk,
  input  logic        rst_n,
  // core side
  input  logic        req_valid,
  output logic        req_ready,
  input  xlate_req_t  req,
  output logic        hit_resp_valid,
  output xlate_resp_t hit_resp,
  output logic        fill_resp_valid,
  output xlate_resp_t fill_resp,
  // L2 side
  output logic        l2_req_valid,
  input  logic        l2_req_ready,
  output xlate_req_t  l2_req,
  input  logic        l2_fill_valid,
  input  xlate_resp_t l2_fill,
  // shootdown
  input  logic        inv_valid,
  input  tlb_inv_t    inv
);
  localparam int unsigned KEY_W = ASID_W + VPN_W;
  localparam int unsigned M_W   = (MSHRS > 1) ? $clog2(MSHRS) : 1;

  function automatic logic [KEY_W-1:0] bkey(asid_t a, vpn_t v);
    return {a, v};
  endfunction
  function automatic logic [KEY_W-1:0] lkey(asid_t a, vpn_t v);
    return {a, vpn_t'(v >> LOG_P)};
  endfunction

  // ---- lookup ----
  logic        acc;
  logic [0:0]  b_hit, l_hit;
  logic [0:0][PPN_W-1:0]   b_data;
  logic [0:0][FRAME_W-1:0] l_data;

  assign acc = req_valid && req_ready;

  tlb_array #(.SETS(1), .WAYS(BASE_ENTRIES), .NPORTS(1), .KEY_W(KEY_W), .DATA_W(PPN_W)) u_base (
    .clk, .rst_n,
    .lk_valid(acc), .lk_key(bkey(req.asid, req.vpn)), .lk_hit(b_hit), .lk_data(b_data),
    .fill_valid(l2_fill_valid && !l2_fill.fault && !l2_fill.is_large),
    .fill_key(bkey(l2_fill.asid, l2_fill.vpn)), .fill_data(l2_fill.ppn),
    .inv_valid(inv_valid && !inv.is_large), .inv_key(bkey(inv.asid, inv.vpn)), .flush(1'b0));

  tlb_array #(.SETS(1), .WAYS(LARGE_ENTRIES), .NPORTS(1), .KEY_W(KEY_W), .DATA_W(FRAME_W)) u_large (
    .clk, .rst_n,
    .lk_valid(acc), .lk_key(lkey(req.asid, req.vpn)), .lk_hit(l_hit), .lk_data(l_data),
    .fill_valid(l2_fill_valid && !l2_fill.fault && l2_fill.is_large),
    .fill_key(lkey(l2_fill.asid, l2_fill.vpn)), .fill_data(FRAME_W'(l2_fill.ppn >> LOG_P)),
    .inv_valid(inv_valid && inv.is_large), .inv_key(lkey(inv.asid, inv.vpn)), .flush(1'b0));

  // ---- MSHRs ----
  logic [MSHRS-1:0] m_valid, m_sent;
  xlate_req_t       m_req [MSHRS];

  logic           any_free, match, send_found;
  logic [M_W-1:0] free_idx, send_idx;

  always_comb begin
    any_free = 1'b0; free_idx = '0;
    match = 1'b0;
    send_found = 1'b0; send_idx = '0;
    for (int i = MSHRS - 1; i >= 0; i--) begin
      if (!m_valid[i]) begin any_free = 1'b1; free_idx = M_W'(i); end
      if (m_valid[i] && !m_sent[i]) begin send_found = 1'b1; send_idx = M_W'(i); end
      if (m_valid[i] && m_req[i] == req) match = 1'b1;
    end
  end

  assign req_ready    = any_free;
  assign l2_req_valid = send_found;
  assign l2_req       = m_req[send_idx];

  logic miss;
  assign miss = acc && !b_hit[0] && !l_hit[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_valid <= '0;
      m_sent  <= '0;
      hit_resp_valid <= 1'b0;
      hit_resp <= '0;
    end else begin
      if (l2_req_valid && l2_req_ready) m_sent[send_idx] <= 1'b1;
      if (l2_fill_valid)
        for (int i = 0; i < MSHRS; i++)
          if (m_valid[i] && m_req[i].asid == l2_fill.asid && m_req[i].vpn == l2_fill.vpn)
            m_valid[i] <= 1'b0;
      if (miss && !match) begin
        m_valid[free_idx] <= 1'b1;
        m_sent[free_idx]  <= 1'b0;
        m_req[free_idx]   <= req;
      end
      hit_resp_valid <= acc && (b_hit[0] || l_hit[0]);
      hit_resp.asid  <= req.asid;
      hit_resp.vpn   <= req.vpn;
      hit_resp.is_large <= !b_hit[0];
      hit_resp.fault <= 1'b0;
      hit_resp.ppn   <= b_hit[0] ? b_data[0]
                                 : ppn_t'({l_data[0], req.vpn[LOG_P-1:0]});
    end
  end

  assign fill_resp_valid = l2_fill_valid;
  assign fill_resp       = l2_fill;

  // A new MSHR is only taken when one is free.
  a_mshr_free: assert property (@(posedge clk) disable iff (!rst_n) acc |-> any_free);
endmodule
