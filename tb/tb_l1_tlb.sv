// tb_l1_tlb: self-checking test of l1_tlb at reduced sizes (4 base entries,
// 2 large entries, 2 MSHRs, 8-page large pages). The testbench plays the L2
// TLB. Checked: miss goes to L2 and the fill is passed on; a hit answers one
// cycle after the request with the right ppn (base and large sections);
// LRU replacement evicts the least recently used entry; two misses to one
// page share an MSHR (one L2 request); req_ready drops when the MSHRs are
// full; a shootdown removes an entry.
module tb_l1_tlb;
  import mosaic_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, hit_v, fill_v, l2_req_valid, l2_req_ready, l2_fill_valid, inv_valid;
  xlate_req_t req, l2_req;
  xlate_resp_t hit, fill, l2_fill;
  tlb_inv_t inv;

  l1_tlb #(.BASE_ENTRIES(4), .LARGE_ENTRIES(2), .MSHRS(2), .LOG_P(3)) dut (
    .clk, .rst_n, .req_valid, .req_ready, .req, .hit_resp_valid(hit_v), .hit_resp(hit),
    .fill_resp_valid(fill_v), .fill_resp(fill), .l2_req_valid, .l2_req_ready, .l2_req,
    .l2_fill_valid, .l2_fill, .inv_valid, .inv);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int n_l2req = 0;
  xlate_req_t l2q[$];
  always @(posedge clk) if (rst_n && l2_req_valid && l2_req_ready) begin n_l2req++; l2q.push_back(l2_req); end

  // issue a request; report hit (with ppn) or miss
  task automatic lookup(asid_t a, vpn_t v, output bit h, output ppn_t p, output bit lg);
    @(negedge clk);
    req_valid = 1; req.asid = a; req.vpn = v;
    @(posedge clk); #1;
    req_valid = 0;
    @(negedge clk);
    h = hit_v; p = hit.ppn; lg = hit.is_large;
    if (hit_v) check(hit.asid == a && hit.vpn == v, "hit tagged with its request");
  endtask

  task automatic fill_from_l2(asid_t a, vpn_t v, ppn_t p, bit lg);
    @(negedge clk);
    l2_fill_valid = 1; l2_fill.asid = a; l2_fill.vpn = v; l2_fill.ppn = p; l2_fill.is_large = lg; l2_fill.fault = 0;
    #1 check(fill_v && fill.ppn == p && fill.vpn == v, "fill passed to core");
    @(posedge clk); #1 l2_fill_valid = 0;
  endtask

  bit h, lg; ppn_t p;
  initial begin
    req_valid = 0; req = '0; l2_req_ready = 1; l2_fill_valid = 0; l2_fill = '0; inv_valid = 0; inv = '0;
    repeat (2) @(posedge clk); rst_n = 1;

    // miss, fill, hit
    lookup(3'd1, 20'd10, h, p, lg);
    check(!h, "cold miss");
    repeat (2) @(posedge clk);
    check(n_l2req == 1 && l2q[0].vpn == 20'd10, "miss forwarded to L2");
    fill_from_l2(3'd1, 20'd10, 20'd77, 0);
    lookup(3'd1, 20'd10, h, p, lg);
    check(h && p == 20'd77 && !lg, "base hit after fill, 1-cycle");
    lookup(3'd2, 20'd10, h, p, lg);
    check(!h, "other ASID misses");
    fill_from_l2(3'd2, 20'd10, 20'd5, 0);

    // large page: fill for vpn 17 (region 2), then vpn 22 hits
    lookup(3'd1, 20'd17, h, p, lg);
    fill_from_l2(3'd1, 20'd17, 20'd73, 1);  // frame 9, slot 1
    lookup(3'd1, 20'd22, h, p, lg);
    check(h && lg && p == 20'd78, $sformatf("large hit ppn %0d (exp 78)", p));

    // LRU: base holds (1,10) (2,10); add (1,30), (1,31), touch (1,10), add (1,32) -> (2,10) evicted
    fill_from_l2(3'd1, 20'd30, 20'd30, 0);
    fill_from_l2(3'd1, 20'd31, 20'd31, 0);
    lookup(3'd1, 20'd10, h, p, lg);
    check(h, "touch before eviction");
    fill_from_l2(3'd1, 20'd32, 20'd32, 0);
    lookup(3'd1, 20'd10, h, p, lg);
    check(h, "recently used entry kept");
    lookup(3'd2, 20'd10, h, p, lg);
    check(!h, "least recently used entry evicted");
    fill_from_l2(3'd2, 20'd10, 20'd5, 0);

    // MSHR merge and full
    n_l2req = 0;
    l2_req_ready = 0;
    lookup(3'd3, 20'd100, h, p, lg);
    lookup(3'd3, 20'd100, h, p, lg);
    check(req_ready, "one MSHR left after merged misses");
    lookup(3'd3, 20'd101, h, p, lg);
    #1 check(!req_ready, "req_ready low with MSHRs full");
    l2_req_ready = 1;
    repeat (4) @(posedge clk);
    check(n_l2req == 2, $sformatf("merged misses send one request each page (%0d)", n_l2req));
    fill_from_l2(3'd3, 20'd100, 20'd1, 0);
    fill_from_l2(3'd3, 20'd101, 20'd2, 0);
    #1 check(req_ready, "MSHRs released by fills");

    // shootdown
    @(negedge clk); inv_valid = 1; inv.asid = 3'd1; inv.vpn = 20'd10; inv.is_large = 0;
    @(posedge clk); #1 inv_valid = 0;
    lookup(3'd1, 20'd10, h, p, lg);
    check(!h, "invalidated base entry misses");
    @(negedge clk); inv_valid = 1; inv.asid = 3'd1; inv.vpn = 20'd20; inv.is_large = 1;
    @(posedge clk); #1 inv_valid = 0;
    lookup(3'd1, 20'd22, h, p, lg);
    check(!h, "invalidated large entry misses");

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
