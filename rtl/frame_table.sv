// frame_table: the allocator's record of every large page frame: whether it
// is reserved, by which application (ASID) and for which 2MB virtual region,
// which of its base-page slots are allocated (a bitmap of 2^LOG_P bits), and
// whether it is coalesced or holds migrated pages ("mixed").
//
// It is a single-ported memory shared by CoCoA, the In-Place Coalescer and
// CAC through fixed-priority request/grant (client 0 highest). A granted write
// takes effect at the clock edge; a granted read returns rmeta/rbitmap on the
// following cycle with rvalid set for that client. Entries are cleared by a
// write; reset only clears the read-valid flags (the "used" bit of a frame is
// written by CoCoA before it is read). This bookkeeping is this design's own.
module frame_table
  import mosaic_pkg::*;
#(
  parameter int unsigned NUM_FRAMES = 1536,
  parameter int unsigned LOG_P      = 9,
  parameter int unsigned N          = 3
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [N-1:0]           req,
  input  logic [N-1:0]           we,
  input  frame_t                 idx    [N],
  input  frame_meta_t            wmeta  [N],
  input  logic [(1<<LOG_P)-1:0]  wbitmap[N],
  output logic [N-1:0]           gnt,
  output logic [N-1:0]           rvalid,
  output frame_meta_t            rmeta,
  output logic [(1<<LOG_P)-1:0]  rbitmap
);
  frame_meta_t               meta_q   [NUM_FRAMES];
  logic [(1<<LOG_P)-1:0]     bitmap_q [NUM_FRAMES];

  always_comb begin
    gnt = '0;
    for (int i = N - 1; i >= 0; i--)
      if (req[i]) begin gnt = '0; gnt[i] = 1'b1; end
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++)
      if (gnt[i]) begin
        if (we[i]) begin
          meta_q[idx[i]]   <= wmeta[i];
          bitmap_q[idx[i]] <= wbitmap[i];
        end else begin
          rmeta   <= meta_q[idx[i]];
          rbitmap <= bitmap_q[idx[i]];
        end
      end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) rvalid <= '0;
    else        rvalid <= gnt & ~we;
endmodule
