// inplace_coalescer: the In-Place Coalescer. For each large page frame named
// by CoCoA after an allocation, it checks that (1) every base page of the
// frame is allocated and (2) the pages are contiguous in virtual and physical
// memory; if both hold it coalesces them into one large page by setting the
// large bit of the region's directory entry. No data moves: CoCoA already put
// virtual page v in slot v mod 2^LOG_P of a frame owned by one application.
//
// Per list entry: read the frame-table entry; the frame qualifies when it is
// reserved, not yet coalesced, its allocation bitmap is all ones and it holds
// no page migrated in by compaction ("mixed"), which is how contiguity is
// known here. It then writes the directory entry {valid, large, frame} of the
// frame's (owner, region) and marks the frame coalesced. list_ready is high
// only while idle. coalesced pulses once per coalesced frame. Base-page TLB
// entries of the region stay valid because they still translate correctly.
// The two checks and the page-table update follow the paper; the paper does
// the checks in the runtime, here they are hardware like the update.
module inplace_coalescer
  import mosaic_pkg::*;
#(
  parameter int unsigned NUM_FRAMES = 1536,
  parameter int unsigned PT_FRAMES  = 33,
  parameter int unsigned LOG_P      = 9,
  parameter paddr_t      PT_BASE    = paddr_t'((NUM_FRAMES - PT_FRAMES) * 512 * 512)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        list_valid,
  output logic        list_ready,
  input  frame_t      list_frame,
  output logic        busy,
  output logic        coalesced,
  // memory (writes only)
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output mem_req_t    mem_req,
  // frame table
  output logic        ft_req,
  output logic        ft_we,
  output frame_t      ft_idx,
  output frame_meta_t ft_wmeta,
  output logic [(1<<LOG_P)-1:0] ft_wbitmap,
  input  logic        ft_gnt,
  input  logic        ft_rvalid,
  input  frame_meta_t ft_rmeta,
  input  logic [(1<<LOG_P)-1:0] ft_rbitmap
);
  typedef enum logic [2:0] { S_IDLE, S_FT_RD, S_FT_WAIT, S_DIR_WR, S_FT_WR } state_e;
  state_e st;
  frame_t frame;
  frame_meta_t meta;
  logic [(1<<LOG_P)-1:0] bm;

  dir_entry_t d;
  always_comb begin
    d = '0;
    d.valid = 1'b1; d.is_large = 1'b1; d.has_frame = 1'b1; d.frame = frame;
  end

  assign list_ready    = (st == S_IDLE);
  assign busy          = (st != S_IDLE);
  assign mem_req_valid = (st == S_DIR_WR);
  always_comb begin
    mem_req       = '0;
    mem_req.we    = 1'b1;
    mem_req.addr  = dir_addr(PT_BASE, LOG_P, meta.owner, vpn_t'(meta.vlpn << LOG_P));
    mem_req.wdata = word_t'(d);
  end
  assign ft_req     = (st == S_FT_RD) || (st == S_FT_WR);
  assign ft_we      = (st == S_FT_WR);
  assign ft_idx     = frame;
  always_comb begin
    ft_wmeta = meta;
    ft_wmeta.coalesced = 1'b1;
  end
  assign ft_wbitmap = bm;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      coalesced <= 1'b0;
    end else begin
      coalesced <= 1'b0;
      case (st)
        S_IDLE:    if (list_valid) begin frame <= list_frame; st <= S_FT_RD; end
        S_FT_RD:   if (ft_gnt) st <= S_FT_WAIT;
        S_FT_WAIT: if (ft_rvalid) begin
          meta <= ft_rmeta; bm <= ft_rbitmap;
          st <= (ft_rmeta.used && !ft_rmeta.coalesced && !ft_rmeta.mixed && (&ft_rbitmap))
                ? S_DIR_WR : S_IDLE;
        end
        S_DIR_WR:  if (mem_req_ready) st <= S_FT_WR;
        S_FT_WR:   if (ft_gnt) begin st <= S_IDLE; coalesced <= 1'b1; end
        default:   st <= S_IDLE;
      endcase
    end
  end
endmodule
