// l2_tlb: shared L2 TLB with separate base-page (512 entries, 16-way set
// associative) and large-page (256 entries, fully associative) sections, LRU,
// 2 ports and 10-cycle latency, as in the evaluated configuration; it is
// non-inclusive of the L1 TLBs.
//
// Each cycle a round-robin arbiter grants up to PORTS of the NUM_CORES L1
// miss requests. A granted request travels a LATENCY-1 stage delay line and
// is then looked up in both sections; a hit is pushed into the response FIFO,
// so it reaches the L1s LATENCY cycles after it was granted at the earliest.
// A miss is merged into an MSHR for the same (asid, vpn), recording the
// requesting core in a bit mask, or takes a free MSHR. MSHRs are sent to the
// page table walker one per cycle; a walk result is written into the section
// given by its large bit (faults are not cached), frees the MSHR and enters
// the response FIFO with the MSHR's core mask. The FIFO head is broadcast on
// resp with resp_mask naming the cores that asked for it, one per cycle; the
// L1s always take it. Requests are only granted while the MSHRs and the FIFO
// are sure to have room for everything already in the delay line.
// Sizes, associativity, port count and latency follow the paper; the
// arbitration, MSHR count and FIFO are this design's choices.
module l2_tlb
  import mosaic_pkg::*;
#(
  parameter int unsigned NUM_CORES     = 30,
  parameter int unsigned BASE_ENTRIES  = 512,
  parameter int unsigned BASE_WAYS     = 16,
  parameter int unsigned LARGE_ENTRIES = 256,
  parameter int unsigned PORTS         = 2,
  parameter int unsigned LATENCY       = 10,
  parameter int unsigned MSHRS         = 64,
  parameter int unsigned RESP_DEPTH    = 16,
  parameter int unsigned LOG_P         = 9
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [NUM_CORES-1:0]   req_valid,
  output logic [NUM_CORES-1:0]   req_ready,
  input  xlate_req_t             req [NUM_CORES],
  output logic                   resp_valid,
  output logic [NUM_CORES-1:0]   resp_mask,
  output xlate_resp_t            resp,
  // page table walker
  output logic                   ptw_req_valid,
  input  logic                   ptw_req_ready,
  output xlate_req_t             ptw_req,
  output logic [CLIENT_TAG_W-1:0] ptw_req_id,
  input  logic                   ptw_resp_valid,
  output logic                   ptw_resp_ready,
  input  logic [CLIENT_TAG_W-1:0] ptw_resp_id,
  input  xlate_resp_t            ptw_resp,
  // shootdown
  input  logic                   inv_valid,
  input  tlb_inv_t               inv
);
  localparam int unsigned KEY_W  = ASID_W + VPN_W;
  localparam int unsigned SETS   = BASE_ENTRIES / BASE_WAYS;
  localparam int unsigned C_W    = (NUM_CORES > 1) ? $clog2(NUM_CORES) : 1;
  localparam int unsigned M_W    = (MSHRS > 1) ? $clog2(MSHRS) : 1;
  localparam int unsigned F_W    = $clog2(RESP_DEPTH);
  localparam int unsigned STAGES = (LATENCY > 1) ? LATENCY - 1 : 1;

  typedef struct packed {
    logic       valid;
    xlate_req_t req;
    logic [C_W-1:0] core;
  } slot_t;

  typedef struct packed {
    logic [NUM_CORES-1:0] mask;
    xlate_resp_t          r;
  } fifo_t;

  function automatic logic [KEY_W-1:0] bkey(asid_t a, vpn_t v);
    return {a, v};
  endfunction
  function automatic logic [KEY_W-1:0] lkey(asid_t a, vpn_t v);
    return {a, vpn_t'(v >> LOG_P)};
  endfunction

  // ---------------- state ----------------
  slot_t pipe_q [STAGES][PORTS];
  logic [C_W-1:0]  rr_q;
  logic [MSHRS-1:0] m_valid, m_sent;
  xlate_req_t       m_req  [MSHRS];
  logic [NUM_CORES-1:0] m_mask [MSHRS];
  fifo_t            fifo_q [RESP_DEPTH];
  logic [F_W-1:0]   rd_ptr, wr_ptr;
  logic [F_W:0]     count;

  // ---------------- occupancy ----------------
  int unsigned inflight, free_m;
  always_comb begin
    inflight = 0;
    for (int s = 0; s < STAGES; s++)
      for (int p = 0; p < PORTS; p++)
        if (pipe_q[s][p].valid) inflight++;
    free_m = 0;
    for (int i = 0; i < MSHRS; i++) if (!m_valid[i]) free_m++;
  end

  logic can_accept;
  assign can_accept = (free_m >= inflight + PORTS) &&
                      (int'(count) + int'(inflight) + PORTS + 1 <= RESP_DEPTH);

  // ---------------- round-robin grant ----------------
  slot_t          grant_slot [PORTS];
  logic [C_W-1:0] last_grant;
  logic           any_grant;
  always_comb begin
    int unsigned n;
    int unsigned idx;
    n = 0;
    req_ready = '0;
    last_grant = rr_q;
    any_grant = 1'b0;
    for (int p = 0; p < PORTS; p++) grant_slot[p] = '0;
    for (int i = 0; i < NUM_CORES; i++) begin
      idx = (int'(rr_q) + i) % NUM_CORES;
      if (can_accept && req_valid[idx] && n < PORTS) begin
        req_ready[idx] = 1'b1;
        grant_slot[n].valid = 1'b1;
        grant_slot[n].req   = req[idx];
        grant_slot[n].core  = C_W'(idx);
        last_grant = C_W'(idx);
        any_grant = 1'b1;
        n++;
      end
    end
  end

  // ---------------- lookup at the end of the delay line ----------------
  slot_t look [PORTS];
  always_comb
    for (int p = 0; p < PORTS; p++) look[p] = (LATENCY > 1) ? pipe_q[STAGES-1][p] : grant_slot[p];

  logic [PORTS-1:0]              lk_valid;
  logic [PORTS-1:0][KEY_W-1:0]   lk_bkey, lk_lkey;
  logic [PORTS-1:0]              b_hit, l_hit;
  logic [PORTS-1:0][PPN_W-1:0]   b_data;
  logic [PORTS-1:0][FRAME_W-1:0] l_data;
  always_comb
    for (int p = 0; p < PORTS; p++) begin
      lk_valid[p] = look[p].valid;
      lk_bkey[p]  = bkey(look[p].req.asid, look[p].req.vpn);
      lk_lkey[p]  = lkey(look[p].req.asid, look[p].req.vpn);
    end

  logic fill_en;
  assign ptw_resp_ready = 1'b1;  // room is reserved by can_accept
  assign fill_en = ptw_resp_valid && !ptw_resp.fault;

  tlb_array #(.SETS(SETS), .WAYS(BASE_WAYS), .NPORTS(PORTS), .KEY_W(KEY_W), .DATA_W(PPN_W)) u_base (
    .clk, .rst_n, .lk_valid, .lk_key(lk_bkey), .lk_hit(b_hit), .lk_data(b_data),
    .fill_valid(fill_en && !ptw_resp.is_large), .fill_key(bkey(ptw_resp.asid, ptw_resp.vpn)),
    .fill_data(ptw_resp.ppn),
    .inv_valid(inv_valid && !inv.is_large), .inv_key(bkey(inv.asid, inv.vpn)), .flush(1'b0));

  tlb_array #(.SETS(1), .WAYS(LARGE_ENTRIES), .NPORTS(PORTS), .KEY_W(KEY_W), .DATA_W(FRAME_W)) u_large (
    .clk, .rst_n, .lk_valid, .lk_key(lk_lkey), .lk_hit(l_hit), .lk_data(l_data),
    .fill_valid(fill_en && ptw_resp.is_large), .fill_key(lkey(ptw_resp.asid, ptw_resp.vpn)),
    .fill_data(FRAME_W'(ptw_resp.ppn >> LOG_P)),
    .inv_valid(inv_valid && inv.is_large), .inv_key(lkey(inv.asid, inv.vpn)), .flush(1'b0));

  // ---------------- walker request ----------------
  logic           send_found;
  logic [M_W-1:0] send_idx;
  always_comb begin
    send_found = 1'b0; send_idx = '0;
    for (int i = MSHRS - 1; i >= 0; i--)
      if (m_valid[i] && !m_sent[i]) begin send_found = 1'b1; send_idx = M_W'(i); end
  end
  assign ptw_req_valid = send_found;
  assign ptw_req       = m_req[send_idx];
  assign ptw_req_id    = CLIENT_TAG_W'(send_idx);

  assign resp_valid = (count != 0);
  assign resp_mask  = fifo_q[rd_ptr].mask;
  assign resp       = fifo_q[rd_ptr].r;

  // ---------------- sequential update ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < STAGES; s++)
        for (int p = 0; p < PORTS; p++) pipe_q[s][p] <= '0;
      rr_q    <= '0;
      m_valid <= '0;
      m_sent  <= '0;
      rd_ptr  <= '0;
      wr_ptr  <= '0;
      count   <= '0;
    end else begin
      automatic logic [MSHRS-1:0] mv = m_valid;
      automatic logic [F_W-1:0]   wp = wr_ptr;
      automatic logic [F_W:0]     cnt = count;
      automatic fifo_t            e;
      automatic logic             merged;
      automatic logic [M_W-1:0]   alloc_idx [PORTS];
      automatic logic [MSHRS-1:0] fresh = '0;  // taken this cycle: m_req not yet written
      // delay line
      if (LATENCY > 1) begin
        pipe_q[0] <= grant_slot;
        for (int s = 1; s < STAGES; s++) pipe_q[s] <= pipe_q[s-1];
      end
      if (any_grant) rr_q <= C_W'((int'(last_grant) + 1) % NUM_CORES);
      // pop
      if (count != 0) begin
        rd_ptr <= F_W'((int'(rd_ptr) + 1) % RESP_DEPTH);
        cnt = cnt - 1'b1;
      end
      if (ptw_req_valid && ptw_req_ready) m_sent[send_idx] <= 1'b1;
      // walk result
      if (ptw_resp_valid) begin
        e.mask = m_mask[M_W'(ptw_resp_id)];
        e.r    = ptw_resp;
        fifo_q[wp] <= e;
        wp = F_W'((int'(wp) + 1) % RESP_DEPTH);
        cnt = cnt + 1'b1;
        mv[M_W'(ptw_resp_id)] = 1'b0;
      end
      // lookups leaving the delay line
      for (int p = 0; p < PORTS; p++) begin
        if (look[p].valid) begin
          if (b_hit[p] || l_hit[p]) begin
            e.mask = '0;
            e.mask[look[p].core] = 1'b1;
            e.r.asid  = look[p].req.asid;
            e.r.vpn   = look[p].req.vpn;
            e.r.is_large = !b_hit[p];
            e.r.fault = 1'b0;
            e.r.ppn   = b_hit[p] ? b_data[p] : ppn_t'({l_data[p], look[p].req.vpn[LOG_P-1:0]});
            fifo_q[wp] <= e;
            wp = F_W'((int'(wp) + 1) % RESP_DEPTH);
            cnt = cnt + 1'b1;
          end else begin
            merged = 1'b0;
            alloc_idx[p] = '0;
            for (int i = 0; i < MSHRS; i++)
              if (!merged && mv[i] && !fresh[i] && m_req[i] == look[p].req) begin
                m_mask[i][look[p].core] <= 1'b1;
                alloc_idx[p] = M_W'(i);
                merged = 1'b1;
              end
            // a request merged with the MSHR of an earlier port this cycle
            for (int q = 0; q < p; q++)
              if (!merged && look[q].valid && !(b_hit[q] || l_hit[q]) && look[q].req == look[p].req) begin
                m_mask[alloc_idx[q]][look[p].core] <= 1'b1;
                alloc_idx[p] = alloc_idx[q];
                merged = 1'b1;
              end
            for (int i = 0; i < MSHRS; i++)
              if (!merged && !mv[i]) begin
                mv[i] = 1'b1;
                fresh[i] = 1'b1;
                alloc_idx[p] = M_W'(i);
                m_req[i]  <= look[p].req;
                m_mask[i] <= '0;
                m_mask[i][look[p].core] <= 1'b1;
                m_sent[i] <= 1'b0;
                merged = 1'b1;
              end
          end
        end
      end
      m_valid <= mv;
      wr_ptr  <= wp;
      count   <= cnt;
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) count <= (F_W+1)'(RESP_DEPTH));
endmodule
