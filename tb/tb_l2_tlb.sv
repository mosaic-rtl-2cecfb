// tb_l2_tlb: self-checking test of l2_tlb at reduced sizes (3 cores, 8 base
// entries in 4 sets of 2 ways, 2 large entries, 4 MSHRs, 8-page large pages)
// with the paper's 2 ports and 10-cycle latency. The testbench plays the
// page table walker: vpn < 64 maps to base page ppn = vpn + 1000, vpn 64..127
// lies in large pages with frame = vpn/8 + 100, vpn >= 128 faults.
// Checked: a hit answers exactly 10 cycles after it was granted; two
// ports grant two of three simultaneous requests in one cycle; misses from
// two cores to one page make one walk answered to both; large-page results
// serve the whole region; faults are answered and not cached; a shootdown
// forces a new walk.
module tb_l2_tlb;
  import mosaic_pkg::*;
  localparam int NC = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NC-1:0] req_valid, req_ready, resp_mask;
  xlate_req_t req [NC];
  logic resp_valid, ptw_req_valid, ptw_req_ready, ptw_resp_valid, ptw_resp_ready, inv_valid;
  xlate_resp_t resp, ptw_resp;
  xlate_req_t ptw_req;
  logic [CLIENT_TAG_W-1:0] ptw_req_id, ptw_resp_id;
  tlb_inv_t inv;

  l2_tlb #(.NUM_CORES(NC), .BASE_ENTRIES(8), .BASE_WAYS(2), .LARGE_ENTRIES(2), .PORTS(2),
           .LATENCY(10), .MSHRS(4), .RESP_DEPTH(8), .LOG_P(3)) dut (
    .clk, .rst_n, .req_valid, .req_ready, .req, .resp_valid, .resp_mask, .resp,
    .ptw_req_valid, .ptw_req_ready, .ptw_req, .ptw_req_id, .ptw_resp_valid, .ptw_resp_ready,
    .ptw_resp_id, .ptw_resp, .inv_valid, .inv);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic xlate_resp_t walk(xlate_req_t r);
    xlate_resp_t x;
    x.asid = r.asid; x.vpn = r.vpn; x.fault = 0; x.is_large = 0;
    if (r.vpn < 64) x.ppn = ppn_t'(r.vpn + 1000);
    else if (r.vpn < 128) begin x.is_large = 1; x.ppn = ppn_t'({ 17'(r.vpn / 8 + 100), r.vpn[2:0] }); end
    else begin x.fault = 1; x.ppn = '0; end
    return x;
  endfunction

  // walker model: answers 5 cycles after the request
  typedef struct { longint due; xlate_resp_t r; logic [CLIENT_TAG_W-1:0] id; } w_t;
  w_t wq[$];
  longint cyc = 0;
  int n_walks = 0;
  assign ptw_req_ready = 1'b1;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && ptw_req_valid) begin
      w_t w; w.due = cyc + 5; w.r = walk(ptw_req); w.id = ptw_req_id; wq.push_back(w); n_walks++;
    end
    if (ptw_resp_valid && ptw_resp_ready) void'(wq.pop_front());
  end
  always_comb begin
    ptw_resp_valid = wq.size() > 0 && wq[0].due <= cyc;
    ptw_resp = wq.size() > 0 ? wq[0].r : '0;
    ptw_resp_id = wq.size() > 0 ? wq[0].id : '0;
  end

  // response log
  typedef struct { longint t; logic [NC-1:0] mask; xlate_resp_t r; } rl_t;
  rl_t rlog[$];
  always @(posedge clk) if (rst_n && resp_valid) begin
    rl_t e; e.t = cyc; e.mask = resp_mask; e.r = resp; rlog.push_back(e);
  end
  longint acc_t [NC];
  always @(posedge clk) for (int c = 0; c < NC; c++) if (rst_n && req_valid[c] && req_ready[c]) acc_t[c] = cyc;

  // request from core c, wait for its answer; returns the answer and cycles from grant
  task automatic ask(int c, asid_t a, vpn_t v, output xlate_resp_t r, output int lat);
    int start_n;
    start_n = rlog.size();
    @(negedge clk);
    req_valid[c] = 1; req[c].asid = a; req[c].vpn = v;
    do @(posedge clk); while (!req_ready[c]);
    #1 req_valid[c] = 0;
    forever begin
      @(posedge clk); #1;
      if (rlog.size() > start_n && rlog[$].mask[c] && rlog[$].r.vpn == v && rlog[$].r.asid == a) break;
    end
    r = rlog[$].r; lat = int'(rlog[$].t - acc_t[c]);
  endtask

  xlate_resp_t r, r2; int lat, lat2, w0; logic [NC-1:0] g;
  initial begin
    req_valid = '0; for (int c = 0; c < NC; c++) req[c] = '0; inv_valid = 0; inv = '0;
    repeat (2) @(posedge clk); rst_n = 1;

    // miss -> walk -> fill; then hit with exact latency
    ask(0, 3'd1, 20'd5, r, lat);
    check(!r.fault && r.ppn == 20'd1005 && !r.is_large, "walked base translation");
    check(lat > 10, $sformatf("miss slower than a hit (%0d)", lat));
    ask(1, 3'd1, 20'd5, r, lat);
    check(r.ppn == 20'd1005, "hit ppn");
    check(lat == 10, $sformatf("hit latency %0d (exp 10)", lat));

    // two cores miss on one page together: one walk, one answer to both
    w0 = n_walks;
    fork
      ask(0, 3'd2, 20'd7, r, lat);
      ask(2, 3'd2, 20'd7, r2, lat2);
    join
    check(n_walks == w0 + 1, $sformatf("merged misses make %0d walks", n_walks - w0));
    check(rlog[$].mask == 3'b101 && r.ppn == 20'd1007 && r2.ppn == 20'd1007, "answer to both cores");

    // large page serves the region
    ask(0, 3'd1, 20'd70, r, lat);
    check(r.is_large && r.ppn == {17'd108, 3'd6}, "large walk");
    w0 = n_walks;
    ask(1, 3'd1, 20'd66, r, lat);
    check(r.is_large && r.ppn == {17'd108, 3'd2} && n_walks == w0 && lat == 10, $sformatf("large hit lat %0d walks %0d ppn %0d", lat, n_walks - w0, r.ppn));

    // two ports: three cached pages asked in the same cycle
    @(negedge clk);
    req_valid = 3'b111;
    req[0].asid = 3'd1; req[0].vpn = 20'd5;
    req[1].asid = 3'd2; req[1].vpn = 20'd7;
    req[2].asid = 3'd1; req[2].vpn = 20'd71;
    #1 check($countones(req_ready) == 2, $sformatf("two grants per cycle (%0d)", $countones(req_ready)));
    g = req_ready;
    @(posedge clk); #1 req_valid = req_valid & ~g;
    @(negedge clk); g = req_ready;
    @(posedge clk); #1 req_valid = req_valid & ~g;
    check(req_valid == 0, "third request granted next cycle");
    repeat (14) @(posedge clk);

    // faults are not cached
    w0 = n_walks;
    ask(2, 3'd1, 20'd200, r, lat);
    check(r.fault, "fault answered");
    ask(2, 3'd1, 20'd200, r, lat);
    check(r.fault && n_walks == w0 + 2, "fault not cached");

    // shootdown
    @(negedge clk); inv_valid = 1; inv.asid = 3'd1; inv.vpn = 20'd5; inv.is_large = 0;
    @(posedge clk); #1 inv_valid = 0;
    w0 = n_walks;
    ask(0, 3'd1, 20'd5, r, lat);
    check(n_walks == w0 + 1 && r.ppn == 20'd1005, $sformatf("invalidated entry walked again (%0d walks, ppn %0d)", n_walks - w0, r.ppn));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
