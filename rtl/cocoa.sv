// cocoa: Contiguity-Conserving Allocation. Places the base pages of an en
// masse allocation so that (1) a large page frame only ever holds base pages
// of one application and (2) base pages contiguous in virtual memory sit
// contiguously, and aligned, inside a frame. It then starts the transfer of
// every new base page over the system I/O bus and, once all transfers are
// done, sends the In-Place Coalescer the list of large page frames it used.
//
// Placement: every 2MB virtual region of an application gets one large page
// frame of its own (recorded in the region's directory entry); virtual page v
// goes to slot (v mod 2^LOG_P) of that frame, so ppn = {frame, v[LOG_P-1:0]}.
// A command (start, asid, vpn, npages) allocates npages pages from vpn on.
// Per page: read the directory entry (skipped while the region is unchanged),
// reserve a free frame if the region has none and write the directory entry,
// set the slot in the frame table, write the leaf PTE, issue the transfer.
// Pages already allocated are skipped. Free frames come from the returned
// frame FIFO (filled by CAC on free_push) and otherwise from a counter over
// never-used frames. With no free frame left the command ends with fail set
// (frames are never shared between applications here). done pulses for one
// cycle when the command is over; busy is high from start to done.
// A command may touch at most LIST_DEPTH frames.
// The placement goals follow the paper; the paper places this component in
// the GPU runtime, and its bookkeeping and handshakes are this design's.
module cocoa
  import mosaic_pkg::*;
#(
  parameter int unsigned NUM_FRAMES = 1536,
  parameter int unsigned PT_FRAMES  = 33,
  parameter int unsigned LOG_P      = 9,
  parameter int unsigned LIST_DEPTH = 64,
  parameter paddr_t      PT_BASE    = paddr_t'((NUM_FRAMES - PT_FRAMES) * 512 * 512)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  asid_t       cmd_asid,
  input  vpn_t        cmd_vpn,
  input  logic [VPN_W:0] cmd_npages,
  output logic        busy,
  output logic        done,
  output logic        fail,
  // frames returned by CAC
  input  logic        free_push_valid,
  input  frame_t      free_push_frame,
  // memory
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output mem_req_t    mem_req,
  input  logic        mem_resp_valid,
  input  word_t       mem_resp_data,
  // frame table
  output logic        ft_req,
  output logic        ft_we,
  output frame_t      ft_idx,
  output frame_meta_t ft_wmeta,
  output logic [(1<<LOG_P)-1:0] ft_wbitmap,
  input  logic        ft_gnt,
  input  logic        ft_rvalid,
  input  frame_meta_t ft_rmeta,
  input  logic [(1<<LOG_P)-1:0] ft_rbitmap,
  // system I/O bus transfer
  output logic        xfer_valid,
  input  logic        xfer_ready,
  output asid_t       xfer_asid,
  output vpn_t        xfer_vpn,
  output ppn_t        xfer_ppn,
  input  logic        xfer_done,
  // list of large page frames to the In-Place Coalescer
  output logic        list_valid,
  input  logic        list_ready,
  output frame_t      list_frame
);
  localparam int unsigned ALLOC_FRAMES = NUM_FRAMES - PT_FRAMES;
  localparam int unsigned L_W = $clog2(LIST_DEPTH);
  localparam int unsigned RQ  = 1 << FRAME_W;

  typedef enum logic [3:0] {
    S_IDLE, S_PAGE, S_DIR_RD, S_DIR_WAIT, S_DIR_WR, S_FT_RD, S_FT_WAIT, S_FT_WR,
    S_LEAF_WR, S_XFER, S_NEXT, S_WAIT_XFER, S_LIST, S_DONE
  } state_e;

  state_e st;
  asid_t  asid;
  vpn_t   vpn;
  logic [VPN_W:0] remaining;
  frame_t frame;
  logic   new_frame;
  logic   cache_v;
  vpn_t   cache_vlpn;
  frame_meta_t meta;
  logic [(1<<LOG_P)-1:0] bm;
  logic [VPN_W:0] outstanding;

  // free frame sources
  frame_t         rq_mem [RQ];
  logic [FRAME_W-1:0] rq_rd, rq_wr;
  logic [FRAME_W:0]   rq_cnt;
  logic [FRAME_W:0]   next_fresh;
  logic               have_free;
  frame_t             free_frame;
  assign have_free  = (rq_cnt != 0) || (next_fresh < (FRAME_W+1)'(ALLOC_FRAMES));
  assign free_frame = (rq_cnt != 0) ? rq_mem[rq_rd] : frame_t'(next_fresh);

  // frame list to the coalescer
  frame_t         list_mem [LIST_DEPTH];
  logic [L_W-1:0] l_rd, l_wr;
  logic [L_W:0]   l_cnt;

  vpn_t vlpn;
  logic [LOG_P-1:0] slot;
  assign vlpn = vpn_t'(vpn >> LOG_P);
  assign slot = vpn[LOG_P-1:0];

  dir_entry_t  d_rd, d_wr;
  leaf_entry_t l_wr_e;
  assign d_rd = dir_entry_t'(mem_resp_data);
  always_comb begin
    d_wr = '0;
    d_wr.valid = 1'b1; d_wr.has_frame = 1'b1; d_wr.frame = frame;
    l_wr_e = '0;
    l_wr_e.valid = 1'b1; l_wr_e.ppn = ppn_t'({frame, slot});
  end

  always_comb begin
    mem_req_valid = (st == S_DIR_RD) || (st == S_DIR_WR) || (st == S_LEAF_WR);
    mem_req       = '0;
    mem_req.we    = (st != S_DIR_RD);
    mem_req.addr  = (st == S_LEAF_WR) ? leaf_addr(PT_BASE, LOG_P, asid, vpn)
                                      : dir_addr(PT_BASE, LOG_P, asid, vpn);
    mem_req.wdata = (st == S_LEAF_WR) ? word_t'(l_wr_e) : word_t'(d_wr);
  end

  assign ft_req     = (st == S_FT_RD) || (st == S_FT_WR);
  assign ft_we      = (st == S_FT_WR);
  assign ft_idx     = frame;
  assign ft_wmeta   = meta;
  assign ft_wbitmap = bm;

  assign xfer_valid = (st == S_XFER);
  assign xfer_asid  = asid;
  assign xfer_vpn   = vpn;
  assign xfer_ppn   = ppn_t'({frame, slot});

  assign list_valid = (st == S_LIST) && (l_cnt != 0);
  assign list_frame = list_mem[l_rd];

  assign busy = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      done <= 1'b0; fail <= 1'b0;
      rq_rd <= '0; rq_wr <= '0; rq_cnt <= '0; next_fresh <= '0;
      l_rd <= '0; l_wr <= '0; l_cnt <= '0;
      outstanding <= '0;
      cache_v <= 1'b0; new_frame <= 1'b0;
    end else begin
      automatic logic pop_free = 1'b0;
      automatic logic [VPN_W:0] outs = outstanding;
      done <= 1'b0;
      if (xfer_done) outs = outs - 1'b1;
      case (st)
        S_IDLE: if (start) begin
          asid <= cmd_asid; vpn <= cmd_vpn; remaining <= cmd_npages;
          cache_v <= 1'b0; fail <= 1'b0;
          st <= (cmd_npages == 0) ? S_DONE : S_PAGE;
        end
        S_PAGE: st <= (cache_v && cache_vlpn == vlpn) ? S_FT_RD : S_DIR_RD;
        S_DIR_RD: if (mem_req_ready) st <= S_DIR_WAIT;
        S_DIR_WAIT: if (mem_resp_valid) begin
          cache_v <= 1'b1; cache_vlpn <= vlpn;
          if (d_rd.valid && d_rd.has_frame) begin
            frame <= d_rd.frame; new_frame <= 1'b0; st <= S_FT_RD;
          end else if (have_free) begin
            frame <= free_frame; new_frame <= 1'b1; pop_free = 1'b1; st <= S_DIR_WR;
          end else begin
            cache_v <= 1'b0; fail <= 1'b1; st <= S_WAIT_XFER;
          end
        end
        S_DIR_WR: if (mem_req_ready) st <= S_FT_RD;
        S_FT_RD: if (ft_gnt) st <= S_FT_WAIT;
        S_FT_WAIT: if (ft_rvalid) begin
          automatic frame_meta_t m = ft_rmeta;
          automatic logic [(1<<LOG_P)-1:0] b = ft_rbitmap;
          if (new_frame) begin
            m = '0; m.used = 1'b1; m.owner = asid; m.vlpn = vlpn; b = '0;
          end
          new_frame <= 1'b0;
          if (b[slot]) st <= S_NEXT;           // already allocated
          else begin
            b[slot] = 1'b1;
            st <= S_FT_WR;
          end
          meta <= m; bm <= b;
        end
        S_FT_WR: if (ft_gnt) st <= S_LEAF_WR;
        S_LEAF_WR: if (mem_req_ready) st <= S_XFER;
        S_XFER: if (xfer_ready) begin
          outs = outs + 1'b1;
          if (l_cnt == 0 || list_mem[L_W'(int'(l_wr) + LIST_DEPTH - 1)] != frame) begin
            list_mem[l_wr] <= frame;
            l_wr  <= L_W'((int'(l_wr) + 1) % LIST_DEPTH);
            l_cnt <= l_cnt + 1'b1;
          end
          st <= S_NEXT;
        end
        S_NEXT: begin
          vpn <= vpn + 1'b1;
          remaining <= remaining - 1'b1;
          st <= (remaining == 1) ? S_WAIT_XFER : S_PAGE;
        end
        S_WAIT_XFER: if (outs == 0) st <= S_LIST;
        S_LIST: if (l_cnt == 0) st <= S_DONE;
                else if (list_ready) begin
                  l_rd  <= L_W'((int'(l_rd) + 1) % LIST_DEPTH);
                  l_cnt <= l_cnt - 1'b1;
                end
        S_DONE: begin done <= 1'b1; st <= S_IDLE; end
        default: st <= S_IDLE;
      endcase
      outstanding <= outs;
      // free frame bookkeeping
      if (pop_free) begin
        if (rq_cnt != 0) rq_rd <= rq_rd + 1'b1;
        else             next_fresh <= next_fresh + 1'b1;
      end
      if (free_push_valid) begin
        rq_mem[rq_wr] <= free_push_frame;
        rq_wr <= rq_wr + 1'b1;
      end
      rq_cnt <= rq_cnt + (FRAME_W+1)'(free_push_valid) - (FRAME_W+1)'(pop_free && rq_cnt != 0);
    end
  end

  a_list_room: assert property (@(posedge clk) disable iff (!rst_n)
    (st == S_XFER) |-> (l_cnt < (L_W+1)'(LIST_DEPTH)));
endmodule
