// tb_mosaic_workloads: multi-application workloads on mosaic_top. The
// evaluated workload mixes run one to five applications at once, either
// copies of one application (homogeneous) or different ones (heterogeneous);
// they differ in application count and footprint, so one testbench runs all
// nine categories: homogeneous with 1..5 copies of a 40-page application and
// heterogeneous with 2..5 applications of 70, 20, 33, 48 and 9 pages. The
// design keeps its default 30 cores and full-size TLBs, walker and MSHRs;
// only memory is scaled down (16-page frames of 4 words, 48 frames) so the
// footprints span several large pages and the run stays short.
// Per workload:
//  1. every application allocates its footprint en masse from vpn 0; the
//     I/O bus model writes a pattern naming (asid, vpn, word) into each page;
//     exactly the full 16-page regions must be coalesced;
//  2. all 30 cores translate random pages of random applications at once
//     (including pages past the footprint, which must fault); each answer
//     must point at the data of that very page, sit at slot vpn mod 16, be
//     large exactly for full regions, and no frame may serve two applications;
//  3. every application frees half its footprint from vpn 6 on: sparse large
//     pages are splintered and compacted while the GPU is stalled; the random
//     traffic is repeated and must still find every live page's data;
//  4. everything is freed: every frame ever reserved must have come back.
// TLB hit counts are printed per workload.
module tb_mosaic_workloads;
  import mosaic_pkg::*;

  localparam int NC   = 30;
  localparam int LOGP = 4;
  localparam int P    = 1 << LOGP;
  localparam int PW   = 4;
  localparam int L2LAT = 10;
  localparam int WATCHDOG = 3000000;

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
  logic [$clog2(64+1)-1:0] ptw_busy_walks;

  mosaic_top #(.NUM_FRAMES(48), .PT_FRAMES(0), .LOG_P(LOGP), .PAGE_WORDS(PW), .FRAG_THRESHOLD(P / 2)) u_dut (
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
  // Signals are sampled at the falling edge. An L2 answer for the same page
  // that arrives in the cycle the request is accepted also answers it.
  task automatic translate(int c, asid_t a, vpn_t v, output xlate_resp_t r, output int lat, output bit was_hit);
    int t0;
    bit got = 0;
    @(negedge clk);
    core_req_valid[c] = 1'b1; core_req[c].asid = a; core_req[c].vpn = v;
    while (!core_req_ready[c]) @(negedge clk);
    if (core_fill_valid[c] && core_fill[c].asid == a && core_fill[c].vpn == v) begin
      r = core_fill[c]; was_hit = 0; got = 1;
    end
    @(posedge clk);
    t0 = int'(cyc);
    @(negedge clk); core_req_valid[c] = 1'b0;
    while (!got) begin
      if (core_hit_valid[c] && core_hit[c].asid == a && core_hit[c].vpn == v) begin r = core_hit[c]; was_hit = 1; got = 1; end
      else if (core_fill_valid[c] && core_fill[c].asid == a && core_fill[c].vpn == v) begin r = core_fill[c]; was_hit = 0; got = 1; end
      else @(negedge clk);
    end
    lat = int'(cyc) - t0;
  endtask

  int n_l1_hit = 0, n_miss = 0, n_large_ans = 0;
  int frame_owner [int];
  logic [ASID_W+VPN_W-1:0] pend [NC];
  bit after_compaction = 0;

  // translate and check against the data the I/O bus wrote for (a, v)
  task automatic probe(int c, asid_t a, vpn_t v, int fp);
    xlate_resp_t r; int lat; bit h, live;
    int lo = 3 * P / 8, hi = 3 * P / 8 + fp / 2;
    int rg = int'(v) / P, left = 0;
    bit still_large;
    live = (int'(v) < fp) && !(after_compaction && int'(v) >= lo && int'(v) < hi);
    // a full region that kept at least half its pages stays one large page,
    // which still maps its freed pages (they are not handed to anyone else)
    for (int u = rg * P; u < rg * P + P; u++) left += int'(u < fp && !(u >= lo && u < hi));
    still_large = after_compaction && (rg + 1) * P <= fp && (P - left) <= P / 2;
    if (still_large) live = 1;
    pend[c] = {a, v};
    translate(c, a, v, r, lat, h);
    pend[c] = '0;
    if (h) begin
      n_l1_hit++;
      check(lat == 1, $sformatf("core %0d: L1 hit latency %0d", c, lat));
    end else n_miss++;
    if (!live) check(r.fault, $sformatf("app %0d vpn %0d must fault", a, v));
    else begin
      int f = int'(r.ppn) >> LOGP;
      check(!r.fault && u_mem.mem[paddr_t'(r.ppn) * PW + 2] == pattern(a, v, 2),
            $sformatf("app %0d vpn %0d -> ppn %0d: wrong data", a, v, r.ppn));
      if (frame_owner.exists(f)) check(frame_owner[f] == int'(a), $sformatf("frame %0d shared by apps %0d and %0d", f, frame_owner[f], a));
      else frame_owner[f] = int'(a);
      if (!after_compaction) begin
        check(int'(r.ppn[LOGP-1:0]) == int'(v) % P, $sformatf("app %0d vpn %0d at slot %0d", a, v, r.ppn[LOGP-1:0]));
        check(r.is_large == (int'(v) < (fp / P) * P), $sformatf("app %0d vpn %0d large=%0d", a, v, r.is_large));
      end
      if (still_large) check(r.is_large, $sformatf("app %0d vpn %0d: region must stay large", a, v));
      n_large_ans += int'(r.is_large);
    end
  endtask

  task automatic traffic(int napps, int fp [5], int per_core);
    for (int c = 0; c < NC; c++) begin
      automatic int cc = c;
      fork begin
        for (int k = 0; k < per_core; k++) begin
          int a = 1 + int'($urandom % napps);
          probe(cc, asid_t'(a), vpn_t'($urandom % (fp[a-1] + P / 2)), fp[a-1]);
        end
      end join_none
    end
    wait fork;
  endtask

  task automatic run_workload(string name, int napps, int fp [5]);
    int c0, f0, m0, s0, frames, full, l1h0, miss0;
    bit failed;
    c0 = n_coal; f0 = n_free; m0 = n_mig; s0 = n_spl; l1h0 = n_l1_hit; miss0 = n_miss;
    frames = 0; full = 0;
    frame_owner.delete(); after_compaction = 0;
    for (int a = 1; a <= napps; a++) begin
      command(CMD_ALLOC, asid_t'(a), '0, fp[a-1], failed);
      check(!failed, $sformatf("%s: app %0d allocation", name, a));
      frames += (fp[a-1] + P - 1) / P; full += fp[a-1] / P;
    end
    $display("[%0t] %s allocated", $time, name);
    check(n_coal - c0 == full, $sformatf("%s: coalesced %0d, expected %0d", name, n_coal - c0, full));
    traffic(napps, fp, 12);
    for (int a = 1; a <= napps; a++) command(CMD_DEALLOC, asid_t'(a), vpn_t'(3 * P / 8), fp[a-1] / 2, failed);
    after_compaction = 1;
    $display("[%0t] %s compacted", $time, name);
    frame_owner.delete();
    traffic(napps, fp, 12);
    $display("[%0t] %s traffic done", $time, name);
    for (int a = 1; a <= napps; a++) command(CMD_DEALLOC, asid_t'(a), '0, fp[a-1], failed);
    check(n_free - f0 == frames, $sformatf("%s: frames returned %0d of %0d", name, n_free - f0, frames));
    $display("%s: frames=%0d coalesced=%0d splintered=%0d migrated=%0d L1 hits %0d of %0d",
             name, frames, n_coal - c0, n_spl - s0, n_mig - m0, n_l1_hit - l1h0, n_l1_hit - l1h0 + n_miss - miss0);
  endtask

  int homo [5] = '{40, 40, 40, 40, 40};
  int hetero [5] = '{70, 20, 33, 48, 9};

  initial begin
    core_req_valid = '0; cmd_valid = 1'b0; cmd_op = CMD_ALLOC; cmd_asid = '0; cmd_vpn = '0; cmd_npages = '0;
    for (int c = 0; c < NC; c++) core_req[c] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    for (int n = 1; n <= 5; n++) run_workload($sformatf("homogeneous x%0d", n), n, homo);
    for (int n = 2; n <= 5; n++) run_workload($sformatf("heterogeneous %0d apps", n), n, hetero);
    $display("events: coalesce=%0d splinter=%0d migrate=%0d free=%0d stall_cycles=%0d max_walks=%0d large_answers=%0d",
             n_coal, n_spl, n_mig, n_free, n_stall, max_walks, n_large_ans);
    check(n_spl > 0 && n_mig > 0 && n_stall > 0, "splintering and compaction happened");
    check(n_large_ans > 0 && n_l1_hit > 0 && max_walks > 1, "large translations, L1 hits and concurrent walks happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    for (int c = 0; c < NC; c++) if (pend[c] != '0) $display("  core %0d waits for asid %0d vpn %0d", c, pend[c][ASID_W+VPN_W-1:VPN_W], pend[c][VPN_W-1:0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
