// mosaic_pkg: types, widths and page-table formats shared by the Mosaic
// memory manager blocks.
//
// Addresses: base pages are 4KB and large pages 2MB, so one large page frame
// holds 2^LOG_P = 512 base pages (LOG_P is a module parameter so that tests can
// shrink frames). Physical memory is addressed in 64-bit words.
//
// Page table (this design's own layout; the per-level format is not given in
// the source text): every application (ASID) owns a linear two-level table at
// PT_BASE. The directory has one entry per 2MB virtual region; the leaf table
// one entry per 4KB virtual page.
//   directory word : PT_BASE + (asid << (VPN_W-LOG_P)) + (vpn >> LOG_P)
//   leaf word      : PT_BASE + (NUM_ASIDS << (VPN_W-LOG_P)) + (asid << VPN_W) + vpn
// A directory entry with its large bit set maps the whole region to one large
// page frame (a coalesced large page) and ends the walk one level early; with
// the bit clear, the leaf entry gives the base page's physical page number.
package mosaic_pkg;

  localparam int ASID_W    = 3;
  localparam int NUM_ASIDS = 1 << ASID_W;
  localparam int VPN_W     = 20;   // 32-bit virtual address space per application
  localparam int PPN_W     = 20;   // 3GB / 4KB base pages
  localparam int FRAME_W   = 11;   // 3GB / 2MB = 1536 large page frames
  localparam int PADDR_W   = 29;   // 3GB in 64-bit words
  localparam int WORD_W    = 64;
  localparam int CLIENT_TAG_W = 8; // tag a memory client attaches to a read
  localparam int MEM_CLIENTS  = 4; // walker, CoCoA, coalescer, CAC
  localparam int MEM_TAG_W    = CLIENT_TAG_W + 2;

  typedef logic [ASID_W-1:0]  asid_t;
  typedef logic [VPN_W-1:0]   vpn_t;
  typedef logic [PPN_W-1:0]   ppn_t;
  typedef logic [FRAME_W-1:0] frame_t;
  typedef logic [PADDR_W-1:0] paddr_t;
  typedef logic [WORD_W-1:0]  word_t;

  // Directory entry (one per 2MB virtual region).
  typedef struct packed {
    logic [WORD_W-4-FRAME_W:0] rsvd;
    frame_t frame;      // large page frame reserved for this region
    logic   has_frame;  // frame field is meaningful
    logic   is_large;      // region coalesced: translate with the frame directly
    logic   valid;      // region has a leaf table in use
  } dir_entry_t;

  // Leaf entry (one per 4KB virtual page).
  typedef struct packed {
    logic [WORD_W-2-PPN_W:0] rsvd;
    ppn_t ppn;
    logic valid;
  } leaf_entry_t;

  // Address translation request and its answer.
  typedef struct packed {
    asid_t asid;
    vpn_t  vpn;
  } xlate_req_t;

  typedef struct packed {
    asid_t asid;
    vpn_t  vpn;
    ppn_t  ppn;    // base-page frame number, also for a large-page hit
    logic  is_large;  // translation came from a coalesced large page
    logic  fault;  // no valid mapping (page fault)
  } xlate_resp_t;

  // TLB shootdown: drop a base entry (asid, vpn) or a large entry (asid, vpn's region).
  typedef struct packed {
    asid_t asid;
    vpn_t  vpn;
    logic  is_large;
  } tlb_inv_t;

  // Memory request; writes return no response.
  typedef struct packed {
    logic   we;
    paddr_t addr;
    word_t  wdata;
    logic [CLIENT_TAG_W-1:0] tag;
  } mem_req_t;

  typedef struct packed {
    paddr_t addr;
    word_t  wdata;
    logic   we;
    logic [MEM_TAG_W-1:0] tag;
  } mem_bus_req_t;

  // Per-frame bookkeeping kept by the allocator (the allocation bitmap is
  // kept beside it because its width depends on LOG_P).
  typedef struct packed {
    logic  used;       // frame is reserved for an application
    asid_t owner;
    vpn_t  vlpn;       // virtual 2MB region number the frame was reserved for
    logic  coalesced;  // mapped as one large page
    logic  mixed;      // holds pages migrated by compaction: not contiguous
  } frame_meta_t;

  typedef enum logic [0:0] { CMD_ALLOC = 1'b0, CMD_DEALLOC = 1'b1 } cmd_op_e;

  function automatic paddr_t dir_addr(paddr_t pt_base, int log_p, asid_t asid, vpn_t vpn);
    return pt_base + ((paddr_t'(asid) << (VPN_W - log_p)) | (paddr_t'(vpn) >> log_p));
  endfunction

  function automatic paddr_t leaf_addr(paddr_t pt_base, int log_p, asid_t asid, vpn_t vpn);
    return pt_base + (paddr_t'(NUM_ASIDS) << (VPN_W - log_p))
                   + ((paddr_t'(asid) << VPN_W) | paddr_t'(vpn));
  endfunction

endpackage
