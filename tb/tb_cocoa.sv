// tb_cocoa: self-checking test of cocoa with 4 large page frames of 8 base
// pages, the page table at word 1000 of a behavioural memory, a frame table
// and a model of the system I/O bus (transfers finish 12 cycles after they
// start). Checked against the placement rule ppn = {frame, vpn mod 8}:
// leaf and directory entries, the frame table (owner, bitmap), one transfer
// per new page and none for a page already allocated, that the frame list
// reaches the coalescer only after the last transfer finished, that two
// applications never share a frame, that an allocation fails when frames
// run out and that a frame returned by CAC is reused.
module tb_cocoa;
  import mosaic_pkg::*;
  localparam paddr_t PTB = 29'd1000;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, busy, done, fail, free_push_valid;
  asid_t cmd_asid; vpn_t cmd_vpn; logic [VPN_W:0] cmd_npages; frame_t free_push_frame;
  logic mem_req_valid, mem_req_ready, mem_resp_valid;
  mem_req_t mem_req; mem_bus_req_t bus_req; logic [MEM_TAG_W-1:0] mem_resp_tag; word_t mem_resp_data;
  logic ft_req, ft_we, ft_gnt, ft_rvalid; frame_t ft_idx; frame_meta_t ft_wmeta, ft_rmeta;
  logic [7:0] ft_wbitmap, ft_rbitmap;
  logic xfer_valid, xfer_ready, xfer_done; asid_t xfer_asid; vpn_t xfer_vpn; ppn_t xfer_ppn;
  logic list_valid, list_ready; frame_t list_frame;

  cocoa #(.NUM_FRAMES(4), .PT_FRAMES(0), .LOG_P(3), .LIST_DEPTH(8), .PT_BASE(PTB)) dut (
    .clk, .rst_n, .start, .cmd_asid, .cmd_vpn, .cmd_npages, .busy, .done, .fail,
    .free_push_valid, .free_push_frame, .mem_req_valid, .mem_req_ready, .mem_req,
    .mem_resp_valid, .mem_resp_data, .ft_req, .ft_we, .ft_idx, .ft_wmeta, .ft_wbitmap,
    .ft_gnt, .ft_rvalid, .ft_rmeta, .ft_rbitmap, .xfer_valid, .xfer_ready, .xfer_asid, .xfer_vpn,
    .xfer_ppn, .xfer_done, .list_valid, .list_ready, .list_frame);

  logic [0:0] g, rv;
  frame_t idx_a [1]; frame_meta_t wm_a [1]; logic [7:0] wb_a [1];
  assign idx_a[0] = ft_idx; assign wm_a[0] = ft_wmeta; assign wb_a[0] = ft_wbitmap;
  frame_table #(.NUM_FRAMES(4), .LOG_P(3), .N(1)) u_ft (.clk, .rst_n, .req(ft_req), .we(ft_we),
    .idx(idx_a), .wmeta(wm_a), .wbitmap(wb_a), .gnt(g), .rvalid(rv), .rmeta(ft_rmeta), .rbitmap(ft_rbitmap));
  assign ft_gnt = g[0]; assign ft_rvalid = rv[0];

  always_comb begin
    bus_req.we = mem_req.we; bus_req.addr = mem_req.addr; bus_req.wdata = mem_req.wdata; bus_req.tag = '0;
  end
  gpu_mem_model #(.LAT(3)) u_mem (.clk, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(bus_req),
    .resp_valid(mem_resp_valid), .resp_tag(mem_resp_tag), .resp_data(mem_resp_data));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // I/O bus model
  longint cyc = 0, last_done = 0, first_list = -1;
  longint xq[$];
  int n_xfer = 0;
  assign xfer_ready = 1'b1;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    xfer_done <= 1'b0;
    if (xq.size() > 0 && xq[0] <= cyc) begin xfer_done <= 1'b1; last_done = cyc; void'(xq.pop_front()); end
    if (rst_n && xfer_valid) begin
      xq.push_back(cyc + 12); n_xfer++;
      check(xfer_ppn == ppn_t'({frame_t'(exp_frame(xfer_asid, xfer_vpn)), xfer_vpn[2:0]}), "transfer target follows placement");
    end
  end
  // frame list sink
  frame_t lst[$];
  assign list_ready = 1'b1;
  always @(posedge clk) if (rst_n && list_valid) begin
    lst.push_back(list_frame);
    if (first_list < 0) first_list = cyc;
  end

  // expected frame of (asid, region), filled in as the test goes
  int fmap [int];
  function automatic int exp_frame(asid_t a, vpn_t v);
    int k = int'(a) * 4096 + int'(v >> 3);
    return fmap.exists(k) ? fmap[k] : -1;
  endfunction

  task automatic alloc(asid_t a, vpn_t v, int n);
    @(negedge clk); start = 1; cmd_asid = a; cmd_vpn = v; cmd_npages = (VPN_W+1)'(n);
    @(negedge clk); start = 0;
    while (!done) @(posedge clk);
    @(negedge clk);
  endtask

  task automatic check_page(asid_t a, vpn_t v, int f);
    leaf_entry_t l; dir_entry_t d;
    l = leaf_entry_t'(u_mem.mem[leaf_addr(PTB, 3, a, v)]);
    d = dir_entry_t'(u_mem.mem[dir_addr(PTB, 3, a, v)]);
    check(l.valid && l.ppn == ppn_t'(f * 8 + int'(v % 8)), $sformatf("leaf PTE asid %0d vpn %0d", a, v));
    check(d.valid && d.has_frame && !d.is_large && int'(d.frame) == f, $sformatf("dir entry asid %0d vpn %0d", a, v));
    check(u_ft.meta_q[f].used && u_ft.meta_q[f].owner == a && u_ft.bitmap_q[f][v % 8], $sformatf("frame table frame %0d", f));
  endtask

  initial begin
    start = 0; cmd_asid = '0; cmd_vpn = '0; cmd_npages = '0; free_push_valid = 0; free_push_frame = '0;
    repeat (2) @(posedge clk); rst_n = 1;

    // application 1: vpn 4..11 spans regions 0 and 1 -> frames 0 and 1
    fmap[1 * 4096 + 0] = 0; fmap[1 * 4096 + 1] = 1;
    alloc(3'd1, 20'd4, 8);
    check(!fail && n_xfer == 8, $sformatf("8 transfers (%0d)", n_xfer));
    for (int v = 4; v < 12; v++) check_page(3'd1, vpn_t'(v), v < 8 ? 0 : 1);
    check(lst.size() == 2 && lst[0] == 0 && lst[1] == 1, "frame list 0,1");
    check(first_list > last_done, "list sent after the last transfer completed");

    // application 2 gets its own frame although frame 0 has free slots
    fmap[2 * 4096 + 0] = 2;
    alloc(3'd2, 20'd0, 8);
    for (int v = 0; v < 8; v++) check_page(3'd2, vpn_t'(v), 2);
    check(u_ft.bitmap_q[0] == 8'hF0, "frame 0 keeps only application 1's pages");

    // pages already allocated are not transferred again
    n_xfer = 0;
    alloc(3'd1, 20'd4, 2);
    check(n_xfer == 0, "no transfer for allocated pages");
    // the rest of region 0 fills frame 0 contiguously
    alloc(3'd1, 20'd0, 4);
    check(n_xfer == 4 && u_ft.bitmap_q[0] == 8'hFF, "frame 0 filled in place");
    for (int v = 0; v < 4; v++) check_page(3'd1, vpn_t'(v), 0);

    // last fresh frame, then out of frames
    fmap[3 * 4096 + 0] = 3;
    alloc(3'd3, 20'd0, 1);
    check(!fail, "frame 3 allocated");
    alloc(3'd4, 20'd0, 1);
    check(fail, "allocation fails with no free frame");

    // a frame returned by compaction is reused
    @(negedge clk); free_push_valid = 1; free_push_frame = 11'd2;
    @(negedge clk); free_push_valid = 0;
    fmap[5 * 4096 + 0] = 2;
    alloc(3'd5, 20'd3, 1);
    check(!fail, "allocation succeeds after a frame is returned");
    check_page(3'd5, 20'd3, 2);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
