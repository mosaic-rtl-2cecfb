// mosaic_top: the Mosaic GPU memory manager. It joins the address
// translation hardware (one L1 TLB per core, the shared L2 TLB and the shared
// page table walker) with the three memory-management components: CoCoA
// allocates base pages so that large page frames stay contiguous and
// single-application, the In-Place Coalescer turns full frames into large
// pages by flipping one page-table bit, and CAC splinters fragmented large
// pages, compacts them and returns free frames.
//
// Interfaces:
//  * cores: per core a translation request (asid, vpn) with ready, a 1-cycle
//    hit answer and a miss-fill answer (see l1_tlb);
//  * runtime commands: cmd_op ALLOC or DEALLOC of cmd_npages base pages from
//    cmd_vpn for application cmd_asid; one command at a time (cmd_ready),
//    cmd_done pulses at its end, cmd_fail if an allocation ran out of frames;
//  * GPU main memory: one request port (64-bit words, tagged reads, untagged
//    writes) shared by walker, CoCoA, coalescer and CAC; answers may return
//    in any order;
//  * system I/O bus: one transfer request per newly allocated base page
//    (xfer_*), xfer_done once per finished transfer;
//  * gpu_stall: high while CAC splinters and compacts (cores must hold);
//  * event pulses counting coalescing, splintering, migration and frees.
// PT_BASE places the page tables in the top PT_FRAMES large page frames of
// the 3GB memory, which CoCoA never hands out.
module mosaic_top
  import mosaic_pkg::*;
#(
  parameter int unsigned NUM_CORES      = 30,
  parameter int unsigned L1_BASE        = 128,
  parameter int unsigned L1_LARGE       = 16,
  parameter int unsigned L1_MSHRS       = 8,
  parameter int unsigned L2_BASE        = 512,
  parameter int unsigned L2_BASE_WAYS   = 16,
  parameter int unsigned L2_LARGE       = 256,
  parameter int unsigned L2_PORTS       = 2,
  parameter int unsigned L2_LATENCY     = 10,
  parameter int unsigned L2_MSHRS       = 64,
  parameter int unsigned PTW_WALKS      = 64,
  parameter int unsigned NUM_FRAMES     = 1536,
  parameter int unsigned PT_FRAMES      = 33,
  parameter int unsigned LOG_P          = 9,
  parameter int unsigned PAGE_WORDS     = 512,
  parameter int unsigned FRAG_THRESHOLD = (1 << LOG_P) / 2,
  parameter int unsigned LIST_DEPTH     = 64
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // cores
  input  logic [NUM_CORES-1:0]  core_req_valid,
  output logic [NUM_CORES-1:0]  core_req_ready,
  input  xlate_req_t            core_req       [NUM_CORES],
  output logic [NUM_CORES-1:0]  core_hit_valid,
  output xlate_resp_t           core_hit       [NUM_CORES],
  output logic [NUM_CORES-1:0]  core_fill_valid,
  output xlate_resp_t           core_fill      [NUM_CORES],
  // runtime commands
  input  logic                  cmd_valid,
  output logic                  cmd_ready,
  input  cmd_op_e               cmd_op,
  input  asid_t                 cmd_asid,
  input  vpn_t                  cmd_vpn,
  input  logic [VPN_W:0]        cmd_npages,
  output logic                  cmd_done,
  output logic                  cmd_fail,
  // GPU main memory
  output logic                  mem_req_valid,
  input  logic                  mem_req_ready,
  output mem_bus_req_t          mem_req,
  input  logic                  mem_resp_valid,
  input  logic [MEM_TAG_W-1:0]  mem_resp_tag,
  input  word_t                 mem_resp_data,
  // system I/O bus
  output logic                  xfer_valid,
  input  logic                  xfer_ready,
  output asid_t                 xfer_asid,
  output vpn_t                  xfer_vpn,
  output ppn_t                  xfer_ppn,
  input  logic                  xfer_done,
  // status
  output logic                  gpu_stall,
  output logic                  ev_coalesce,
  output logic                  ev_splinter,
  output logic                  ev_migrate,
  output logic                  ev_free,
  output logic [$clog2(PTW_WALKS+1)-1:0] ptw_busy_walks
);
  localparam paddr_t PT_BASE = paddr_t'((NUM_FRAMES - PT_FRAMES) * (1 << LOG_P) * PAGE_WORDS);
  localparam int unsigned P  = 1 << LOG_P;

  // ---------------- TLB shootdown ----------------
  logic     inv_valid;
  tlb_inv_t inv;

  // ---------------- L1 TLBs ----------------
  logic [NUM_CORES-1:0] l1_req_valid, l1_req_ready;
  xlate_req_t           l1_req [NUM_CORES];
  logic                 l2_resp_valid;
  logic [NUM_CORES-1:0] l2_resp_mask;
  xlate_resp_t          l2_resp;

  for (genvar c = 0; c < NUM_CORES; c++) begin : g_core
    l1_tlb #(.BASE_ENTRIES(L1_BASE), .LARGE_ENTRIES(L1_LARGE), .MSHRS(L1_MSHRS), .LOG_P(LOG_P)) u_l1 (
      .clk, .rst_n,
      .req_valid(core_req_valid[c]), .req_ready(core_req_ready[c]), .req(core_req[c]),
      .hit_resp_valid(core_hit_valid[c]), .hit_resp(core_hit[c]),
      .fill_resp_valid(core_fill_valid[c]), .fill_resp(core_fill[c]),
      .l2_req_valid(l1_req_valid[c]), .l2_req_ready(l1_req_ready[c]), .l2_req(l1_req[c]),
      .l2_fill_valid(l2_resp_valid && l2_resp_mask[c]), .l2_fill(l2_resp),
      .inv_valid, .inv);
  end

  // ---------------- L2 TLB and walker ----------------
  logic        ptw_req_valid, ptw_req_ready, ptw_resp_valid, ptw_resp_ready;
  xlate_req_t  ptw_req;
  xlate_resp_t ptw_resp;
  logic [CLIENT_TAG_W-1:0] ptw_req_id, ptw_resp_id;

  l2_tlb #(.NUM_CORES(NUM_CORES), .BASE_ENTRIES(L2_BASE), .BASE_WAYS(L2_BASE_WAYS),
           .LARGE_ENTRIES(L2_LARGE), .PORTS(L2_PORTS), .LATENCY(L2_LATENCY),
           .MSHRS(L2_MSHRS), .LOG_P(LOG_P)) u_l2 (
    .clk, .rst_n,
    .req_valid(l1_req_valid), .req_ready(l1_req_ready), .req(l1_req),
    .resp_valid(l2_resp_valid), .resp_mask(l2_resp_mask), .resp(l2_resp),
    .ptw_req_valid, .ptw_req_ready, .ptw_req, .ptw_req_id,
    .ptw_resp_valid, .ptw_resp_ready, .ptw_resp_id, .ptw_resp,
    .inv_valid, .inv);

  // memory clients: 0 walker, 1 CoCoA, 2 coalescer, 3 CAC
  logic [MEM_CLIENTS-1:0]  mc_valid, mc_ready, mc_resp_valid;
  mem_req_t                mc_req [MEM_CLIENTS];
  logic [CLIENT_TAG_W-1:0] mc_resp_tag;
  word_t                   mc_resp_data;

  page_table_walker #(.WALKS(PTW_WALKS), .LOG_P(LOG_P), .PT_BASE(PT_BASE)) u_ptw (
    .clk, .rst_n,
    .req_valid(ptw_req_valid), .req_ready(ptw_req_ready), .req(ptw_req), .req_id(ptw_req_id),
    .resp_valid(ptw_resp_valid), .resp_ready(ptw_resp_ready), .resp(ptw_resp), .resp_id(ptw_resp_id),
    .mem_req_valid(mc_valid[0]), .mem_req_ready(mc_ready[0]), .mem_req(mc_req[0]),
    .mem_resp_valid(mc_resp_valid[0]), .mem_resp_tag(mc_resp_tag), .mem_resp_data(mc_resp_data),
    .busy_walks(ptw_busy_walks));

  mem_arbiter #(.N(MEM_CLIENTS)) u_marb (
    .clk, .rst_n,
    .req_valid(mc_valid), .req_ready(mc_ready), .req(mc_req),
    .resp_valid(mc_resp_valid), .resp_tag(mc_resp_tag), .resp_data(mc_resp_data),
    .bus_req_valid(mem_req_valid), .bus_req_ready(mem_req_ready), .bus_req(mem_req),
    .bus_resp_valid(mem_resp_valid), .bus_resp_tag(mem_resp_tag), .bus_resp_data(mem_resp_data));

  // ---------------- frame table: 0 CAC, 1 CoCoA, 2 coalescer ----------------
  logic [2:0]        ft_req, ft_we, ft_gnt, ft_rvalid;
  frame_t            ft_idx [3];
  frame_meta_t       ft_wmeta [3];
  logic [P-1:0]      ft_wbitmap [3];
  frame_meta_t       ft_rmeta;
  logic [P-1:0]      ft_rbitmap;

  frame_table #(.NUM_FRAMES(NUM_FRAMES), .LOG_P(LOG_P), .N(3)) u_ft (
    .clk, .rst_n, .req(ft_req), .we(ft_we), .idx(ft_idx), .wmeta(ft_wmeta), .wbitmap(ft_wbitmap),
    .gnt(ft_gnt), .rvalid(ft_rvalid), .rmeta(ft_rmeta), .rbitmap(ft_rbitmap));

  // ---------------- command dispatch ----------------
  logic cocoa_busy, cocoa_done, coal_busy, cac_busy, cac_done;
  logic start_alloc, start_dealloc;
  logic list_valid, list_ready;
  frame_t list_frame;
  logic free_push_valid;
  frame_t free_push_frame;

  assign cmd_ready     = !cocoa_busy && !coal_busy && !cac_busy;
  assign start_alloc   = cmd_valid && cmd_ready && cmd_op == CMD_ALLOC;
  assign start_dealloc = cmd_valid && cmd_ready && cmd_op == CMD_DEALLOC;
  assign cmd_done      = cocoa_done || cac_done;

  cocoa #(.NUM_FRAMES(NUM_FRAMES), .PT_FRAMES(PT_FRAMES), .LOG_P(LOG_P),
          .LIST_DEPTH(LIST_DEPTH), .PT_BASE(PT_BASE)) u_cocoa (
    .clk, .rst_n,
    .start(start_alloc), .cmd_asid, .cmd_vpn, .cmd_npages,
    .busy(cocoa_busy), .done(cocoa_done), .fail(cmd_fail),
    .free_push_valid, .free_push_frame,
    .mem_req_valid(mc_valid[1]), .mem_req_ready(mc_ready[1]), .mem_req(mc_req[1]),
    .mem_resp_valid(mc_resp_valid[1]), .mem_resp_data(mc_resp_data),
    .ft_req(ft_req[1]), .ft_we(ft_we[1]), .ft_idx(ft_idx[1]), .ft_wmeta(ft_wmeta[1]),
    .ft_wbitmap(ft_wbitmap[1]), .ft_gnt(ft_gnt[1]), .ft_rvalid(ft_rvalid[1]),
    .ft_rmeta, .ft_rbitmap,
    .xfer_valid, .xfer_ready, .xfer_asid, .xfer_vpn, .xfer_ppn, .xfer_done,
    .list_valid, .list_ready, .list_frame);

  inplace_coalescer #(.NUM_FRAMES(NUM_FRAMES), .PT_FRAMES(PT_FRAMES), .LOG_P(LOG_P),
                      .PT_BASE(PT_BASE)) u_coal (
    .clk, .rst_n,
    .list_valid, .list_ready, .list_frame, .busy(coal_busy), .coalesced(ev_coalesce),
    .mem_req_valid(mc_valid[2]), .mem_req_ready(mc_ready[2]), .mem_req(mc_req[2]),
    .ft_req(ft_req[2]), .ft_we(ft_we[2]), .ft_idx(ft_idx[2]), .ft_wmeta(ft_wmeta[2]),
    .ft_wbitmap(ft_wbitmap[2]), .ft_gnt(ft_gnt[2]), .ft_rvalid(ft_rvalid[2]),
    .ft_rmeta, .ft_rbitmap);

  cac #(.NUM_FRAMES(NUM_FRAMES), .PT_FRAMES(PT_FRAMES), .LOG_P(LOG_P), .PAGE_WORDS(PAGE_WORDS),
        .FRAG_THRESHOLD(FRAG_THRESHOLD), .LIST_DEPTH(LIST_DEPTH), .PT_BASE(PT_BASE)) u_cac (
    .clk, .rst_n,
    .start(start_dealloc), .cmd_asid, .cmd_vpn, .cmd_npages,
    .busy(cac_busy), .done(cac_done), .gpu_stall,
    .free_push_valid, .free_push_frame,
    .inv_valid, .inv,
    .mem_req_valid(mc_valid[3]), .mem_req_ready(mc_ready[3]), .mem_req(mc_req[3]),
    .mem_resp_valid(mc_resp_valid[3]), .mem_resp_data(mc_resp_data),
    .ft_req(ft_req[0]), .ft_we(ft_we[0]), .ft_idx(ft_idx[0]), .ft_wmeta(ft_wmeta[0]),
    .ft_wbitmap(ft_wbitmap[0]), .ft_gnt(ft_gnt[0]), .ft_rvalid(ft_rvalid[0]),
    .ft_rmeta, .ft_rbitmap,
    .splintered(ev_splinter), .migrated(ev_migrate), .freed(ev_free));

  a_one_engine: assert property (@(posedge clk) disable iff (!rst_n) !(cocoa_busy && cac_busy));
endmodule
