// cac: Contiguity-Aware Compaction, run when an application deallocates a
// run of base pages.
//
// Phase A, per deallocated page: read its leaf PTE (giving the frame and
// slot the page really lives in), clear the PTE, shoot down its base-page TLB
// entries, clear its slot in the frame table and remember the frame.
// Phase B, per remembered frame: a frame with no page left is released: its
// directory entry loses the frame (and the large bit), a large-page TLB entry
// is shot down if it was coalesced, and the frame goes back to CoCoA on
// free_push. A coalesced frame whose number of unallocated base pages exceeds
// FRAG_THRESHOLD is splintered: the large bit of its directory entry is
// cleared, its large-page TLB entries are shot down and the frame is queued
// for compaction. Phase C compacts the queued frames: the first one is the
// destination; the live pages of each following frame of the same
// application are copied word by word (PAGE_WORDS 64-bit words per 4KB page)
// into free slots of the destination, their leaf PTEs are rewritten and their
// TLB entries shot down. A source emptied this way is released like above;
// when the destination fills up, the current source becomes the destination.
// A frame that received migrated pages is marked "mixed" (never coalesced
// again) and is detached from its region's directory entry, so later
// allocations of that region take a new frame.
// gpu_stall is high during phases B and C, as the paper's worst-case model
// stalls every core while compaction runs. done pulses when all is over.
// The threshold test, splintering, compaction by migration and the return of
// free frames follow the paper; the threshold value, the pairing of source
// and destination frames and the shootdowns are this design's choices.
module cac
  import mosaic_pkg::*;
#(
  parameter int unsigned NUM_FRAMES     = 1536,
  parameter int unsigned PT_FRAMES      = 33,
  parameter int unsigned LOG_P          = 9,
  parameter int unsigned PAGE_WORDS     = 512,
  parameter int unsigned FRAG_THRESHOLD = (1 << LOG_P) / 2,
  parameter int unsigned LIST_DEPTH     = 64,
  parameter paddr_t      PT_BASE        = paddr_t'((NUM_FRAMES - PT_FRAMES) * (1 << LOG_P) * PAGE_WORDS)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  asid_t       cmd_asid,
  input  vpn_t        cmd_vpn,
  input  logic [VPN_W:0] cmd_npages,
  output logic        busy,
  output logic        done,
  output logic        gpu_stall,
  // frames returned to CoCoA
  output logic        free_push_valid,
  output frame_t      free_push_frame,
  // TLB shootdown
  output logic        inv_valid,
  output tlb_inv_t    inv,
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
  // events
  output logic        splintered,
  output logic        migrated,
  output logic        freed
);
  localparam int unsigned P   = 1 << LOG_P;
  localparam int unsigned L_W = $clog2(LIST_DEPTH);
  localparam int unsigned PW_W = $clog2(PAGE_WORDS);

  typedef enum logic [5:0] {
    S_IDLE,
    A_LEAF_RD, A_LEAF_WAIT, A_LEAF_WR, A_INV, A_FT_RD, A_FT_WAIT, A_FT_WR, A_NEXT,
    B_POP, B_FT_RD, B_FT_WAIT, B_DIR_WR, B_INV_L, B_FT_WR, B_POST,
    C_START, C_DST_RD, C_DST_WAIT, C_SRC_POP, C_SRC_RD, C_SRC_WAIT, C_MOVE, C_DETACH,
    C_RD, C_RD_WAIT, C_WR, C_PTE, C_INV, C_SRC_DIR, C_SRC_FT, C_DST_WB, C_DST_SWAP,
    S_DONE
  } state_e;

  state_e st;
  asid_t  asid;
  vpn_t   vpn;
  logic [VPN_W:0] remaining;
  frame_t frame;                 // phase A/B frame
  logic [LOG_P-1:0] slot;
  frame_meta_t meta;
  logic [P-1:0] bm;
  logic releasing;               // phase B: frame is being released (else splintered)

  frame_t dframe, sframe;
  frame_meta_t dmeta, smeta;
  logic [P-1:0] dbm, sbm;
  logic [LOG_P-1:0] mslot, dslot;
  logic [PW_W-1:0]  wcnt;
  word_t            wbuf;

  // two frame FIFOs: frames touched in phase A, frames splintered in phase B
  frame_t cand_mem [LIST_DEPTH];
  frame_t spl_mem  [LIST_DEPTH];
  logic [L_W-1:0] c_rd, c_wr, s_rd, s_wr;
  logic [L_W:0]   c_cnt, s_cnt;

  // ---- helpers ----
  logic             s_any, d_any;
  logic [LOG_P-1:0] s_first, d_first;
  int unsigned      free_slots;
  always_comb begin
    s_any = 1'b0; s_first = '0; d_any = 1'b0; d_first = '0;
    for (int i = P - 1; i >= 0; i--) begin
      if (sbm[i])  begin s_any = 1'b1; s_first = LOG_P'(i); end
      if (!dbm[i]) begin d_any = 1'b1; d_first = LOG_P'(i); end
    end
    free_slots = 0;
    for (int i = 0; i < P; i++) if (!ft_rbitmap[i]) free_slots++;
  end

  function automatic dir_entry_t dir_val(logic has_frame, frame_t f);
    dir_entry_t e;
    e = '0;
    e.valid = 1'b1; e.has_frame = has_frame; e.frame = has_frame ? f : '0;
    return e;
  endfunction

  function automatic paddr_t word_addr(frame_t f, logic [LOG_P-1:0] s, logic [PW_W-1:0] w);
    return paddr_t'(ppn_t'({f, s})) * paddr_t'(PAGE_WORDS) + paddr_t'(w);
  endfunction

  // ---- memory requests ----
  always_comb begin
    leaf_entry_t le;
    le = '0;
    le.valid = 1'b1; le.ppn = ppn_t'({dframe, dslot});
    mem_req = '0;
    mem_req_valid = 1'b0;
    case (st)
      A_LEAF_RD: begin mem_req_valid = 1'b1; mem_req.addr = leaf_addr(PT_BASE, LOG_P, asid, vpn); end
      A_LEAF_WR: begin mem_req_valid = 1'b1; mem_req.we = 1'b1; mem_req.addr = leaf_addr(PT_BASE, LOG_P, asid, vpn); end
      B_DIR_WR: begin
        mem_req_valid = 1'b1; mem_req.we = 1'b1;
        mem_req.addr  = dir_addr(PT_BASE, LOG_P, meta.owner, vpn_t'(meta.vlpn << LOG_P));
        mem_req.wdata = word_t'(dir_val(!releasing, frame));
      end
      C_DETACH: begin
        mem_req_valid = 1'b1; mem_req.we = 1'b1;
        mem_req.addr  = dir_addr(PT_BASE, LOG_P, dmeta.owner, vpn_t'(dmeta.vlpn << LOG_P));
        mem_req.wdata = word_t'(dir_val(1'b0, '0));
      end
      C_SRC_DIR: begin
        mem_req_valid = 1'b1; mem_req.we = 1'b1;
        mem_req.addr  = dir_addr(PT_BASE, LOG_P, smeta.owner, vpn_t'(smeta.vlpn << LOG_P));
        mem_req.wdata = word_t'(dir_val(1'b0, '0));
      end
      C_RD: begin mem_req_valid = 1'b1; mem_req.addr = word_addr(sframe, mslot, wcnt); end
      C_WR: begin mem_req_valid = 1'b1; mem_req.we = 1'b1; mem_req.addr = word_addr(dframe, dslot, wcnt); mem_req.wdata = wbuf; end
      C_PTE: begin
        mem_req_valid = 1'b1; mem_req.we = 1'b1;
        mem_req.addr  = leaf_addr(PT_BASE, LOG_P, smeta.owner, vpn_t'((smeta.vlpn << LOG_P) | vpn_t'(mslot)));
        mem_req.wdata = word_t'(le);
      end
      default: ;
    endcase
  end

  // ---- frame table requests ----
  always_comb begin
    ft_req = 1'b0; ft_we = 1'b0; ft_idx = frame; ft_wmeta = meta; ft_wbitmap = bm;
    case (st)
      A_FT_RD, B_FT_RD: ft_req = 1'b1;
      A_FT_WR: begin ft_req = 1'b1; ft_we = 1'b1; end
      B_FT_WR: begin
        // a released frame is cleared; a splintered one is no longer large
        ft_req = 1'b1; ft_we = 1'b1;
        if (releasing) begin ft_wmeta = '0; ft_wbitmap = '0; end
        else ft_wmeta.coalesced = 1'b0;
      end
      C_DST_RD: begin ft_req = 1'b1; ft_idx = dframe; end
      C_SRC_RD: begin ft_req = 1'b1; ft_idx = sframe; end
      C_DST_WB: begin ft_req = 1'b1; ft_we = 1'b1; ft_idx = dframe; ft_wmeta = dmeta; ft_wbitmap = dbm; end
      C_SRC_FT: begin ft_req = 1'b1; ft_we = 1'b1; ft_idx = sframe; ft_wmeta = '0; ft_wbitmap = '0; end
      default: ;
    endcase
  end

  // ---- shootdowns ----
  always_comb begin
    inv_valid = 1'b0; inv = '0;
    case (st)
      A_INV:   begin inv_valid = 1'b1; inv.asid = asid; inv.vpn = vpn; end
      B_INV_L: begin inv_valid = 1'b1; inv.asid = meta.owner; inv.vpn = vpn_t'(meta.vlpn << LOG_P); inv.is_large = 1'b1; end
      C_INV:   begin inv_valid = 1'b1; inv.asid = smeta.owner; inv.vpn = vpn_t'((smeta.vlpn << LOG_P) | vpn_t'(mslot)); end
      default: ;
    endcase
  end

  assign busy      = (st != S_IDLE);
  assign gpu_stall = (st >= B_POP) && (st != S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      done <= 1'b0; free_push_valid <= 1'b0; free_push_frame <= '0;
      splintered <= 1'b0; migrated <= 1'b0; freed <= 1'b0;
      c_rd <= '0; c_wr <= '0; c_cnt <= '0;
      s_rd <= '0; s_wr <= '0; s_cnt <= '0;
    end else begin
      done <= 1'b0; free_push_valid <= 1'b0;
      splintered <= 1'b0; migrated <= 1'b0; freed <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          asid <= cmd_asid; vpn <= cmd_vpn; remaining <= cmd_npages;
          st <= (cmd_npages == 0) ? B_POP : A_LEAF_RD;
        end
        // ---------------- phase A ----------------
        A_LEAF_RD: if (mem_req_ready) st <= A_LEAF_WAIT;
        A_LEAF_WAIT: if (mem_resp_valid) begin
          automatic leaf_entry_t l = leaf_entry_t'(mem_resp_data);
          frame <= frame_t'(l.ppn >> LOG_P);
          slot  <= l.ppn[LOG_P-1:0];
          st    <= l.valid ? A_LEAF_WR : A_NEXT;
        end
        A_LEAF_WR: if (mem_req_ready) st <= A_INV;
        A_INV:     st <= A_FT_RD;
        A_FT_RD:   if (ft_gnt) st <= A_FT_WAIT;
        A_FT_WAIT: if (ft_rvalid) begin
          automatic logic [P-1:0] b = ft_rbitmap;
          b[slot] = 1'b0;
          meta <= ft_rmeta; bm <= b;
          st <= A_FT_WR;
        end
        A_FT_WR: if (ft_gnt) begin
          if (c_cnt == 0 || cand_mem[L_W'(int'(c_wr) + LIST_DEPTH - 1)] != frame) begin
            cand_mem[c_wr] <= frame;
            c_wr  <= L_W'((int'(c_wr) + 1) % LIST_DEPTH);
            c_cnt <= c_cnt + 1'b1;
          end
          st <= A_NEXT;
        end
        A_NEXT: begin
          vpn <= vpn + 1'b1;
          remaining <= remaining - 1'b1;
          st <= (remaining == 1) ? B_POP : A_LEAF_RD;
        end
        // ---------------- phase B ----------------
        B_POP: if (c_cnt == 0) st <= C_START;
               else begin
                 frame <= cand_mem[c_rd];
                 c_rd  <= L_W'((int'(c_rd) + 1) % LIST_DEPTH);
                 c_cnt <= c_cnt - 1'b1;
                 st    <= B_FT_RD;
               end
        B_FT_RD: if (ft_gnt) st <= B_FT_WAIT;
        B_FT_WAIT: if (ft_rvalid) begin
          meta <= ft_rmeta; bm <= ft_rbitmap;
          if (ft_rmeta.used && ft_rbitmap == '0) begin
            releasing <= 1'b1;
            st <= ft_rmeta.mixed ? (ft_rmeta.coalesced ? B_INV_L : B_FT_WR) : B_DIR_WR;
          end else if (ft_rmeta.used && ft_rmeta.coalesced && free_slots > FRAG_THRESHOLD) begin
            releasing <= 1'b0;
            st <= B_DIR_WR;
          end else st <= B_POP;
        end
        B_DIR_WR: if (mem_req_ready) st <= meta.coalesced ? B_INV_L : B_FT_WR;
        B_INV_L: st <= B_FT_WR;
        B_FT_WR: if (ft_gnt) st <= B_POST;
        B_POST: begin
          if (releasing) begin
            free_push_valid <= 1'b1; free_push_frame <= frame; freed <= 1'b1;
          end else begin
            spl_mem[s_wr] <= frame;
            s_wr  <= L_W'((int'(s_wr) + 1) % LIST_DEPTH);
            s_cnt <= s_cnt + 1'b1;
            splintered <= 1'b1;
          end
          st <= B_POP;
        end
        // ---------------- phase C ----------------
        C_START: if (s_cnt < 2) begin
                   s_rd <= s_wr; s_cnt <= '0; st <= S_DONE;
                 end else begin
                   dframe <= spl_mem[s_rd];
                   s_rd  <= L_W'((int'(s_rd) + 1) % LIST_DEPTH);
                   s_cnt <= s_cnt - 1'b1;
                   st <= C_DST_RD;
                 end
        C_DST_RD: if (ft_gnt) st <= C_DST_WAIT;
        C_DST_WAIT: if (ft_rvalid) begin dmeta <= ft_rmeta; dbm <= ft_rbitmap; sbm <= '0; st <= C_SRC_POP; end
        C_SRC_POP: if (s_cnt == 0) st <= C_DST_WB;
                   else begin
                     sframe <= spl_mem[s_rd];
                     s_rd  <= L_W'((int'(s_rd) + 1) % LIST_DEPTH);
                     s_cnt <= s_cnt - 1'b1;
                     st <= C_SRC_RD;
                   end
        C_SRC_RD: if (ft_gnt) st <= C_SRC_WAIT;
        C_SRC_WAIT: if (ft_rvalid) begin
          if (ft_rmeta.used && !ft_rmeta.mixed && ft_rmeta.owner == dmeta.owner) begin
            smeta <= ft_rmeta; sbm <= ft_rbitmap; st <= C_MOVE;
          end else st <= C_SRC_POP;                    // other application: left alone
        end
        C_MOVE: begin
          if (!s_any) st <= C_SRC_DIR;                  // source emptied
          else if (!d_any) st <= C_DST_SWAP;            // destination full
          else begin
            mslot <= s_first; dslot <= d_first; wcnt <= '0;
            st <= dmeta.mixed ? C_RD : C_DETACH;
          end
        end
        C_DETACH: if (mem_req_ready) begin dmeta.mixed <= 1'b1; st <= C_RD; end
        C_RD: if (mem_req_ready) st <= C_RD_WAIT;
        C_RD_WAIT: if (mem_resp_valid) begin wbuf <= mem_resp_data; st <= C_WR; end
        C_WR: if (mem_req_ready) begin
          wcnt <= wcnt + 1'b1;
          st <= (wcnt == PW_W'(PAGE_WORDS - 1)) ? C_PTE : C_RD;
        end
        C_PTE: if (mem_req_ready) st <= C_INV;
        C_INV: begin
          sbm[mslot] <= 1'b0; dbm[dslot] <= 1'b1; migrated <= 1'b1;
          st <= C_MOVE;
        end
        C_SRC_DIR: if (mem_req_ready) st <= C_SRC_FT;
        C_SRC_FT: if (ft_gnt) begin
          free_push_valid <= 1'b1; free_push_frame <= sframe; freed <= 1'b1;
          st <= C_SRC_POP;
        end
        C_DST_SWAP: st <= C_DST_WB;
        C_DST_WB: if (ft_gnt) begin
          if (s_cnt == 0 && !s_any) st <= S_DONE;
          else if (!s_any) st <= C_SRC_POP;
          else begin
            // the partly emptied source becomes the new destination
            dframe <= sframe; dmeta <= smeta; dbm <= sbm; sbm <= '0;
            st <= C_SRC_POP;
          end
        end
        S_DONE: begin done <= 1'b1; st <= S_IDLE; end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
