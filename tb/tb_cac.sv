// tb_cac: self-checking test of cac with 8-page frames of 4-word pages, a
// splinter threshold of 4 unallocated pages, the page table at word 1000 of
// a behavioural memory and a preloaded frame table, in the state CoCoA and
// the coalescer leave behind: application 1 has coalesced frames 0 and 1
// (regions 0, 1) and an uncoalesced half-full frame 3 (region 2);
// application 2 has coalesced frame 2. Every page holds a known pattern.
//  1. app 1 frees vpn 2..13: frames 0 and 1 are left with 2 pages each, so
//     both are splintered; the 2 pages of frame 1 (vpn 14, 15) migrate into
//     free slots 2, 3 of frame 0 with their data, their PTEs are rewritten,
//     frame 1 is returned, TLB shootdowns are issued and the GPU is stalled;
//  2. app 2 frees 2 pages of frame 2: below the threshold, it stays large;
//  3. app 1 frees frame 3 entirely (and an unallocated page): it is returned.
module tb_cac;
  import mosaic_pkg::*;
  localparam paddr_t PTB = 29'd1000;
  localparam int PW = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, busy, done, gpu_stall, free_push_valid, inv_valid, splintered, migrated, freed;
  asid_t cmd_asid; vpn_t cmd_vpn; logic [VPN_W:0] cmd_npages; frame_t free_push_frame; tlb_inv_t inv;
  logic mem_req_valid, mem_req_ready, mem_resp_valid;
  mem_req_t mem_req; mem_bus_req_t bus_req; logic [MEM_TAG_W-1:0] mem_resp_tag; word_t mem_resp_data;
  logic ft_req, ft_we, ft_gnt, ft_rvalid; frame_t ft_idx; frame_meta_t ft_wmeta, ft_rmeta;
  logic [7:0] ft_wbitmap, ft_rbitmap;

  cac #(.NUM_FRAMES(6), .PT_FRAMES(0), .LOG_P(3), .PAGE_WORDS(PW), .FRAG_THRESHOLD(4),
        .LIST_DEPTH(8), .PT_BASE(PTB)) dut (
    .clk, .rst_n, .start, .cmd_asid, .cmd_vpn, .cmd_npages, .busy, .done, .gpu_stall,
    .free_push_valid, .free_push_frame, .inv_valid, .inv, .mem_req_valid, .mem_req_ready, .mem_req,
    .mem_resp_valid, .mem_resp_data, .ft_req, .ft_we, .ft_idx, .ft_wmeta, .ft_wbitmap,
    .ft_gnt, .ft_rvalid, .ft_rmeta, .ft_rbitmap, .splintered, .migrated, .freed);

  logic [0:0] g, rv;
  frame_t idx_a [1]; frame_meta_t wm_a [1]; logic [7:0] wb_a [1];
  assign idx_a[0] = ft_idx; assign wm_a[0] = ft_wmeta; assign wb_a[0] = ft_wbitmap;
  frame_table #(.NUM_FRAMES(6), .LOG_P(3), .N(1)) u_ft (.clk, .rst_n, .req(ft_req), .we(ft_we),
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

  function automatic word_t pattern(asid_t a, vpn_t v, int w);
    return (word_t'(a) << 56) | (word_t'(v) << 24) | word_t'(w) | 64'h0000_00A5_0000_0000;
  endfunction

  int n_spl = 0, n_mig = 0, n_free = 0, n_stall = 0, n_inv_base = 0, n_inv_large = 0;
  frame_t freed_frames[$];
  always @(posedge clk) if (rst_n) begin
    n_spl += int'(splintered); n_mig += int'(migrated); n_free += int'(freed); n_stall += int'(gpu_stall);
    if (free_push_valid) freed_frames.push_back(free_push_frame);
    if (inv_valid) begin if (inv.is_large) n_inv_large++; else n_inv_base++; end
  end

  // preload one frame: owner a, region r, slots in mask, coalesced c
  task automatic preload(int f, asid_t a, int r, logic [7:0] mask, bit c);
    frame_meta_t m; dir_entry_t d; leaf_entry_t l;
    m = '0; m.used = 1; m.owner = a; m.vlpn = vpn_t'(r); m.coalesced = c;
    u_ft.meta_q[f] = m; u_ft.bitmap_q[f] = mask;
    d = '0; d.valid = 1; d.is_large = c; d.has_frame = 1; d.frame = frame_t'(f);
    u_mem.mem[dir_addr(PTB, 3, a, vpn_t'(r * 8))] = word_t'(d);
    for (int s = 0; s < 8; s++) if (mask[s]) begin
      vpn_t v = vpn_t'(r * 8 + s);
      l = '0; l.valid = 1; l.ppn = ppn_t'(f * 8 + s);
      u_mem.mem[leaf_addr(PTB, 3, a, v)] = word_t'(l);
      for (int w = 0; w < PW; w++) u_mem.mem[paddr_t'((f * 8 + s) * PW + w)] = pattern(a, v, w);
    end
  endtask

  task automatic dealloc(asid_t a, vpn_t v, int n);
    @(negedge clk); start = 1; cmd_asid = a; cmd_vpn = v; cmd_npages = (VPN_W+1)'(n);
    @(negedge clk); start = 0;
    while (!done) @(posedge clk);
    @(negedge clk); @(negedge clk);
  endtask

  function automatic leaf_entry_t leaf(asid_t a, vpn_t v);
    return leaf_entry_t'(u_mem.mem[leaf_addr(PTB, 3, a, v)]);
  endfunction
  function automatic dir_entry_t dir(asid_t a, vpn_t v);
    return dir_entry_t'(u_mem.mem[dir_addr(PTB, 3, a, v)]);
  endfunction

  initial begin
    leaf_entry_t l; dir_entry_t d; bit data_ok;
    start = 0; cmd_asid = '0; cmd_vpn = '0; cmd_npages = '0;
    for (int f = 0; f < 6; f++) begin u_ft.meta_q[f] = '0; u_ft.bitmap_q[f] = '0; end
    preload(0, 3'd1, 0, 8'hFF, 1);
    preload(1, 3'd1, 1, 8'hFF, 1);
    preload(2, 3'd2, 0, 8'hFF, 1);
    preload(3, 3'd1, 2, 8'h0F, 0);
    repeat (2) @(posedge clk); rst_n = 1;

    // 1. splinter two large pages and compact them
    dealloc(3'd1, 20'd2, 12);
    check(n_spl == 2, $sformatf("splintered %0d (exp 2)", n_spl));
    check(n_mig == 2, $sformatf("migrated %0d (exp 2)", n_mig));
    check(n_free == 1 && freed_frames.size() == 1 && freed_frames[0] == 11'd1, "frame 1 returned");
    check(n_stall > 0, "GPU stalled");
    check(n_inv_large == 2 && n_inv_base == 12 + 2, $sformatf("shootdowns large %0d base %0d", n_inv_large, n_inv_base));
    for (int v = 2; v < 14; v++) check(!leaf(3'd1, vpn_t'(v)).valid, $sformatf("vpn %0d unmapped", v));
    l = leaf(3'd1, 20'd14); check(l.valid && l.ppn == 20'd2, $sformatf("vpn 14 moved to ppn %0d (exp 2)", l.ppn));
    l = leaf(3'd1, 20'd15); check(l.valid && l.ppn == 20'd3, $sformatf("vpn 15 moved to ppn %0d (exp 3)", l.ppn));
    l = leaf(3'd1, 20'd1);  check(l.valid && l.ppn == 20'd1, "vpn 1 stays");
    data_ok = 1;
    for (int w = 0; w < PW; w++) begin
      data_ok &= u_mem.mem[paddr_t'(2 * PW + w)] == pattern(3'd1, 20'd14, w);
      data_ok &= u_mem.mem[paddr_t'(3 * PW + w)] == pattern(3'd1, 20'd15, w);
    end
    check(data_ok, "migrated data copied");
    d = dir(3'd1, 20'd0); check(d.valid && !d.is_large && !d.has_frame, "region 0 splintered and detached");
    d = dir(3'd1, 20'd8); check(d.valid && !d.is_large && !d.has_frame, "region 1 released");
    check(u_ft.bitmap_q[0] == 8'h0F && u_ft.meta_q[0].mixed && !u_ft.meta_q[0].coalesced, "frame 0 holds 4 pages, mixed");
    check(!u_ft.meta_q[1].used, "frame 1 cleared");

    // 2. below the threshold: stays a large page
    dealloc(3'd2, 20'd0, 2);
    check(n_spl == 2, "no splinter below threshold");
    d = dir(3'd2, 20'd0); check(d.is_large, "app 2 region still large");
    check(u_ft.bitmap_q[2] == 8'hFC, "frame 2 bitmap updated");

    // 3. a whole uncoalesced frame freed, plus a page never allocated
    dealloc(3'd1, 20'd16, 5);
    check(n_free == 2 && freed_frames[1] == 11'd3, "frame 3 returned");
    d = dir(3'd1, 20'd16); check(d.valid && !d.has_frame, "region 2 released");
    check(!u_ft.meta_q[3].used, "frame 3 cleared");
    check(n_mig == 2, "no migration for a freed frame");

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
