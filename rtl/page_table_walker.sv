// page_table_walker: the walker shared by all cores, with up to WALKS (64)
// walks in flight at once, as in the evaluated configuration.
//
// A request (asid, vpn, id) takes a free walk slot (req_ready is low when all
// slots are busy). Each walk first reads the directory entry of the vpn's 2MB
// region. If the entry is invalid the walk ends with a fault. If its large
// (coalesced) bit is set the walk ends there and the translation is the large
// page frame plus the vpn's offset inside it: this early stop is what makes a
// coalesced large page cheaper to walk and lets one TLB entry cover 2MB.
// Otherwise the walk reads the leaf entry and returns its ppn, or a fault.
// Slots issue their memory reads one per cycle, lowest slot first, tagged with
// the slot number; memory may answer out of order. Finished walks leave on
// resp, lowest slot first, carrying the requester's id.
// The walk concurrency follows the paper; the two-level table layout and the
// large-page bit are this design's (see mosaic_pkg).
module page_table_walker
  import mosaic_pkg::*;
#(
  parameter int unsigned WALKS   = 64,
  parameter int unsigned LOG_P   = 9,
  parameter paddr_t      PT_BASE = paddr_t'((1536 - 33) * 512 * 512)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    req_valid,
  output logic                    req_ready,
  input  xlate_req_t              req,
  input  logic [CLIENT_TAG_W-1:0] req_id,
  output logic                    resp_valid,
  input  logic                    resp_ready,
  output xlate_resp_t             resp,
  output logic [CLIENT_TAG_W-1:0] resp_id,
  // memory (reads only)
  output logic                    mem_req_valid,
  input  logic                    mem_req_ready,
  output mem_req_t                mem_req,
  input  logic                    mem_resp_valid,
  input  logic [CLIENT_TAG_W-1:0] mem_resp_tag,
  input  word_t                   mem_resp_data,
  output logic [$clog2(WALKS+1)-1:0] busy_walks
);
  localparam int unsigned W_W = (WALKS > 1) ? $clog2(WALKS) : 1;

  typedef enum logic [2:0] { W_IDLE, W_DIR_RD, W_DIR_WAIT, W_LEAF_RD, W_LEAF_WAIT, W_DONE } wstate_e;

  wstate_e     st   [WALKS];
  xlate_req_t  wreq [WALKS];
  logic [CLIENT_TAG_W-1:0] wid [WALKS];
  xlate_resp_t wres [WALKS];

  logic free_found, issue_found, done_found;
  logic [W_W-1:0] free_idx, issue_idx, done_idx;
  always_comb begin
    free_found = 1'b0; issue_found = 1'b0; done_found = 1'b0;
    free_idx = '0; issue_idx = '0; done_idx = '0;
    busy_walks = '0;
    for (int i = WALKS - 1; i >= 0; i--) begin
      if (st[i] == W_IDLE) begin free_found = 1'b1; free_idx = W_W'(i); end
      if (st[i] == W_DIR_RD || st[i] == W_LEAF_RD) begin issue_found = 1'b1; issue_idx = W_W'(i); end
      if (st[i] == W_DONE) begin done_found = 1'b1; done_idx = W_W'(i); end
    end
    for (int i = 0; i < WALKS; i++)
      if (st[i] != W_IDLE) busy_walks = busy_walks + 1'b1;
  end

  assign req_ready     = free_found;
  assign mem_req_valid = issue_found;
  always_comb begin
    mem_req       = '0;
    mem_req.tag   = CLIENT_TAG_W'(issue_idx);
    mem_req.addr  = (st[issue_idx] == W_DIR_RD)
                  ? dir_addr(PT_BASE, LOG_P, wreq[issue_idx].asid, wreq[issue_idx].vpn)
                  : leaf_addr(PT_BASE, LOG_P, wreq[issue_idx].asid, wreq[issue_idx].vpn);
  end
  assign resp_valid = done_found;
  assign resp       = wres[done_idx];
  assign resp_id    = wid[done_idx];

  dir_entry_t  d;
  leaf_entry_t l;
  logic [W_W-1:0] r_idx;
  assign d     = dir_entry_t'(mem_resp_data);
  assign l     = leaf_entry_t'(mem_resp_data);
  assign r_idx = W_W'(mem_resp_tag);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < WALKS; i++) st[i] <= W_IDLE;
    end else begin
      if (req_valid && req_ready) begin
        st[free_idx]   <= W_DIR_RD;
        wreq[free_idx] <= req;
        wid[free_idx]  <= req_id;
      end
      if (mem_req_valid && mem_req_ready)
        st[issue_idx] <= (st[issue_idx] == W_DIR_RD) ? W_DIR_WAIT : W_LEAF_WAIT;
      if (mem_resp_valid) begin
        wres[r_idx].asid <= wreq[r_idx].asid;
        wres[r_idx].vpn  <= wreq[r_idx].vpn;
        if (st[r_idx] == W_DIR_WAIT) begin
          if (!d.valid || (d.is_large && !d.has_frame)) begin
            wres[r_idx].fault    <= 1'b1;
            wres[r_idx].is_large <= 1'b0;
            wres[r_idx].ppn      <= '0;
            st[r_idx] <= W_DONE;
          end else if (d.is_large) begin
            wres[r_idx].fault    <= 1'b0;
            wres[r_idx].is_large <= 1'b1;
            wres[r_idx].ppn      <= ppn_t'({d.frame, wreq[r_idx].vpn[LOG_P-1:0]});
            st[r_idx] <= W_DONE;
          end else begin
            st[r_idx] <= W_LEAF_RD;
          end
        end else begin
          wres[r_idx].fault    <= !l.valid;
          wres[r_idx].is_large <= 1'b0;
          wres[r_idx].ppn      <= l.ppn;
          st[r_idx] <= W_DONE;
        end
      end
      if (resp_valid && resp_ready) st[done_idx] <= W_IDLE;
    end
  end

  a_resp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    mem_resp_valid |-> (st[r_idx] == W_DIR_WAIT || st[r_idx] == W_LEAF_WAIT));
endmodule
