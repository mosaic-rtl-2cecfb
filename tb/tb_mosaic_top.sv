// tb_mosaic_top: end-to-end test of mosaic_top at reduced sizes (4 cores, 8-page
// frames of 4-word pages, 16 frames, small TLBs).
//
// It plays the GPU runtime, the system I/O bus and the cores around the
// memory manager and walks it through the life of two applications' data:
//  1. application 1 allocates two whole large page frames en masse: CoCoA
//     places every page at slot vpn mod P of a frame of its own, the I/O bus
//     model copies a known pattern into each page and the In-Place Coalescer
//     coalesces both frames;
//  2. application 2 allocates part of a frame, which must stay uncoalesced;
//  3. cores translate: a walk ending at a large page, an L1 large-page hit,
//     an L2 hit for another core, base-page walks from several cores at once,
//     L1 base-page hits and a page fault;
//  4. application 1 frees pages so both of its large pages pass the
//     fragmentation threshold: CAC splinters both, migrates the live pages of
//     the second into the first and frees the second frame; translations and
//     data must follow the moved pages;
//  5. the rest is freed, the frame is returned and reused by application 3,
//     whose full frame is coalesced again;
//  6. an allocation larger than the free memory stops with a failure.
// Expected values come from the placement rule, not from the design.
module tb_mosaic_top;
  import mosaic_pkg::*;

  localparam int NC   = 4;
  localparam int LOGP = 3;
  localparam int P    = 1 << LOGP;
  localparam int PW   = 4;
  localparam int L2LAT = 10;
  localparam int WATCHDOG = 200000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NC-1:0] core_req_valid, core_req_ready, core_hit_valid, core_fill_valid;
  xlate_req_t    core_req [NC];
  xlate_resp_t   core_hit [NC], core_fill [NC];
  logic cmd_valid, cmd_ready, cmd_done, cmd_fail;
  cmd_op_e cmd_op; asid_t cmd_asid; vpn_t cmd_vpn; logic [VPN_W:0] cmd_npages;
  logic mem_req_valid, mem_req_ready, mem_resp_valid;
  mem_bus_req_t mem_req; logic [MEM_TAG_W-1:0] mem_resp_tag; word_t mem_resp_data;
  logic xfer_valid, xfer_ready, xfer_done;
  asid_t xfer_asid; vpn_t xfer_vpn; ppn_t xfer_ppn;
  logic gpu_stall, ev_coalesce, ev_splinter, ev_migrate, ev_free;
  logic [$clog2(8+1)-1:0] ptw_busy_walks;

  mosaic_top #(.NUM_CORES(4), .L1_BASE(8), .L1_LARGE(2), .L1_MSHRS(2), .L2_BASE(16), .L2_BASE_WAYS(4),
    .L2_LARGE(4), .L2_MSHRS(8), .PTW_WALKS(8), .NUM_FRAMES(16), .PT_FRAMES(0), .LOG_P(3), .PAGE_WORDS(4),
    .FRAG_THRESHOLD(4), .LIST_DEPTH(32)) u_dut (
    .clk, .rst_n, .core_req_valid, .core_req_ready, .core_req, .core_hit_valid, .core_hit,
    .core_fill_valid, .core_fill, .cmd_valid, .cmd_ready, .cmd_op, .cmd_asid, .cmd_vpn, .cmd_npages,
    .cmd_done, .cmd_fail, .mem_req_valid, .mem_req_ready, .mem_req, .mem_resp_valid, .mem_resp_tag,
    .mem_resp_data, .xfer_valid, .xfer_ready, .xfer_asid, .xfer_vpn, .xfer_ppn, .xfer_done,
    .gpu_stall, .ev_coalesce, .ev_splinter, .ev_migrate, .ev_free, .ptw_busy_walks);

  gpu_mem_model #(.LAT(3)) u_mem (.clk, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .resp_valid(mem_resp_valid), .resp_tag(mem_resp_tag), .resp_data(mem_resp_data));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic word_t pattern(asid_t a, vpn_t v, int w);
    return (word_t'(a) << 56) | (word_t'(v) << 24) | word_t'(w) | 64'h0000_00A5_0000_0000;
  endfunction

  // ---- system I/O bus model: DMA of a page after XLAT cycles ----
  localparam int XLAT = 20;
  typedef struct { longint due; asid_t a; vpn_t v; ppn_t p; } xf_t;
  xf_t xq[$];
  longint cyc = 0;
  int n_xfer = 0;
  assign xfer_ready = 1'b1;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    xfer_done <= 1'b0;
    if (xq.size() > 0 && xq[0].due <= cyc) begin
      for (int w = 0; w < PW; w++)
        u_mem.mem[paddr_t'(xq[0].p) * PW + paddr_t'(w)] = pattern(xq[0].a, xq[0].v, w);
      xfer_done <= 1'b1;
      void'(xq.pop_front());
    end
    if (xfer_valid && rst_n) begin
      xf_t x; x.due = cyc + XLAT; x.a = xfer_asid; x.v = xfer_vpn; x.p = xfer_ppn;
      xq.push_back(x);
      n_xfer++;
    end
  end

  // ---- event counters ----
  int n_coal = 0, n_spl = 0, n_mig = 0, n_free = 0, n_stall = 0, max_walks = 0;
  always @(posedge clk) if (rst_n) begin
    n_coal  += int'(ev_coalesce);
    n_spl   += int'(ev_splinter);
    n_mig   += int'(ev_migrate);
    n_free  += int'(ev_free);
    n_stall += int'(gpu_stall);
    if (int'(ptw_busy_walks) > max_walks) max_walks = int'(ptw_busy_walks);
  end

  // ---- runtime command ----
  task automatic command(cmd_op_e op, asid_t a, vpn_t v, int n, output bit failed);
    @(negedge clk);
    cmd_valid = 1'b1; cmd_op = op; cmd_asid = a; cmd_vpn = v; cmd_npages = (VPN_W+1)'(n);
    do @(posedge clk); while (!cmd_ready);
    @(negedge clk); cmd_valid = 1'b0;
    while (!cmd_done) @(posedge clk);
    failed = cmd_fail;
    // let the coalescer finish the frame list
    while (!cmd_ready) @(posedge clk);
    repeat (2) @(posedge clk);
  endtask

  // ---- one translation from a core; returns the answer and its latency ----
  task automatic translate(int c, asid_t a, vpn_t v, output xlate_resp_t r, output int lat, output bit was_hit);
    int t0;
    @(negedge clk);
    core_req_valid[c] = 1'b1; core_req[c].asid = a; core_req[c].vpn = v;
    do @(posedge clk); while (!core_req_ready[c]);
    t0 = int'(cyc);
    @(negedge clk); core_req_valid[c] = 1'b0;
    forever begin
      if (core_hit_valid[c] && core_hit[c].asid == a && core_hit[c].vpn == v) begin r = core_hit[c]; was_hit = 1; break; end
      if (core_fill_valid[c] && core_fill[c].asid == a && core_fill[c].vpn == v) begin r = core_fill[c]; was_hit = 0; break; end
      @(negedge clk);
    end
    lat = int'(cyc) - t0;
  endtask

  int n_l1_base_hit = 0, n_l1_large_hit = 0, n_l2_hit = 0, n_walk_large = 0, n_walk_base = 0, n_fault = 0;

  // translate and check against the expected ppn (-1 = fault)
  task automatic xcheck(int c, asid_t a, vpn_t v, int exp_ppn, bit exp_large, string what);
    xlate_resp_t r; int lat; bit h;
    translate(c, a, v, r, lat, h);
    if (exp_ppn < 0) begin
      check(r.fault, $sformatf("%s: fault expected", what));
      n_fault++;
    end else begin
      check(!r.fault && int'(r.ppn) == exp_ppn && r.is_large == exp_large,
            $sformatf("%s: ppn %0d large %0d fault %0d, expected %0d/%0d", what, r.ppn, r.is_large, r.fault, exp_ppn, exp_large));
      // data reached through the translation
      check(u_mem.mem[paddr_t'(r.ppn) * PW + 1] == pattern(a, v, 1), $sformatf("%s: data", what));
    end
    $display("  %s: lat=%0d l1hit=%0d", what, lat, h);
    if (h) begin
      check(lat == 1, $sformatf("%s: L1 hit latency %0d", what, lat));
      if (r.is_large) n_l1_large_hit++; else n_l1_base_hit++;
    end else if (lat <= L2LAT + 3) begin
      check(lat >= L2LAT, $sformatf("%s: L2 latency %0d below %0d", what, lat, L2LAT));
      n_l2_hit++;
    end else if (!r.fault) begin
      if (r.is_large) n_walk_large++; else n_walk_base++;
    end
  endtask

  int fA, fB, fC;
  bit failed;

  initial begin
    core_req_valid = '0; cmd_valid = 1'b0; cmd_op = CMD_ALLOC; cmd_asid = '0; cmd_vpn = '0; cmd_npages = '0;
    for (int c = 0; c < NC; c++) core_req[c] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    // 1. application 1 allocates two frames
    command(CMD_ALLOC, 3'd1, '0, 2 * P, failed);
    check(!failed, "alloc 1 succeeds");
    check(n_xfer == 2 * P, $sformatf("transfers %0d", n_xfer));
    check(n_coal == 2, $sformatf("coalesced frames after alloc 1: %0d", n_coal));
    fA = 0; fB = 1;   // first never-used frames, in order

    // 2. application 2 allocates 3/4 of a frame of region 1
    command(CMD_ALLOC, 3'd2, vpn_t'(P), 3 * P / 4, failed);
    check(n_coal == 2, "partial frame not coalesced");
    fC = 2;

    // 3. translations
    xcheck(0, 3'd1, vpn_t'(3), fA * P + 3, 1, "walk to large page");
    xcheck(0, 3'd1, vpn_t'(5), fA * P + 5, 1, "L1 large hit");
    xcheck(1, 3'd1, vpn_t'(1), fA * P + 1, 1, "L2 large hit from core 1");
    fork
      xcheck(0, 3'd2, vpn_t'(P + 0), fC * P + 0, 0, "parallel base walk 0");
      xcheck(1, 3'd2, vpn_t'(P + 1), fC * P + 1, 0, "parallel base walk 1");
      xcheck(2, 3'd2, vpn_t'(P + 2), fC * P + 2, 0, "parallel base walk 2");
      xcheck(3, 3'd2, vpn_t'(P + 3), fC * P + 3, 0, "parallel base walk 3");
    join
    xcheck(2, 3'd2, vpn_t'(P + 2), fC * P + 2, 0, "L1 base hit");
    xcheck(3, 3'd2, vpn_t'(P - 1), -1, 0, "unallocated page faults");
    xcheck(2, 3'd1, vpn_t'(P + 7 * P / 8), fB * P + 7 * P / 8, 1, "large page B");

    // 4. free the middle: both large pages exceed the threshold
    command(CMD_DEALLOC, 3'd1, vpn_t'(P / 4), P + P / 2, failed);
    check(n_spl == 2, $sformatf("splintered %0d", n_spl));
    check(n_mig == P / 4, $sformatf("migrated %0d", n_mig));
    check(n_free == 1, $sformatf("freed %0d", n_free));
    check(n_stall > 0, "GPU stalled during compaction");
    xcheck(2, 3'd1, vpn_t'(P + 7 * P / 8), fA * P + P / 4 + P / 8, 0, "migrated page moved");
    xcheck(0, 3'd1, vpn_t'(0), fA * P + 0, 0, "splintered page now base");
    xcheck(1, 3'd1, vpn_t'(P / 2), -1, 0, "freed page faults");

    // 5. free the rest and reuse the frames
    command(CMD_DEALLOC, 3'd1, '0, 2 * P, failed);
    check(n_free == 2, $sformatf("freed %0d after second dealloc", n_free));
    command(CMD_ALLOC, 3'd3, '0, P, failed);
    check(!failed && n_coal == 3, "application 3 coalesced");
    xcheck(3, 3'd3, vpn_t'(2), fB * P + 2, 1, "recycled frame (first returned) reused");
    // 6. run out of frames: the allocation must stop with fail
    command(CMD_ALLOC, 3'd4, '0, 20 * P, failed);
    check(failed, "allocation beyond memory fails");

    $display("events: coalesce=%0d splinter=%0d migrate=%0d free=%0d stall_cycles=%0d max_walks=%0d",
             n_coal, n_spl, n_mig, n_free, n_stall, max_walks);
    $display("translations: l1_base_hit=%0d l1_large_hit=%0d l2_hit=%0d walk_large=%0d walk_base=%0d fault=%0d",
             n_l1_base_hit, n_l1_large_hit, n_l2_hit, n_walk_large, n_walk_base, n_fault);
    check(n_l1_base_hit > 0, "mechanism: L1 base hit");
    check(n_l1_large_hit > 0, "mechanism: L1 large hit");
    check(n_l2_hit > 0, "mechanism: L2 hit");
    check(n_walk_large > 0, "mechanism: walk ending at a large page");
    check(n_walk_base > 0, "mechanism: base-page walk");
    check(n_fault > 0, "mechanism: fault");
    check(max_walks > 1, $sformatf("mechanism: concurrent walks (%0d)", max_walks));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
