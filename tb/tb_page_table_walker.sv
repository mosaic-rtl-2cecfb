// tb_page_table_walker: self-checking test of page_table_walker with 4 walk
// slots, 8-page large pages and the page table at word 1000 of a
// behavioural memory (3-cycle read latency). The table is preloaded:
// region 0 of ASID 1 is base-mapped (vpn 2 -> ppn 55, vpn 3 unmapped),
// region 1 is a coalesced large page in frame 7, region 2 is unmapped.
// Checked: each result (ppn, large bit, fault), that a large-page walk makes
// one memory read and a base walk two, that all 4 slots work at once and
// that req_ready drops when they are all busy.
module tb_page_table_walker;
  import mosaic_pkg::*;
  localparam paddr_t PTB = 29'd1000;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, resp_valid, resp_ready, mem_req_valid, mem_req_ready, mem_resp_valid;
  xlate_req_t req; xlate_resp_t resp;
  logic [CLIENT_TAG_W-1:0] req_id, resp_id;
  mem_req_t mem_req; mem_bus_req_t bus_req;
  logic [MEM_TAG_W-1:0] mem_resp_tag; word_t mem_resp_data;
  logic [2:0] busy_walks;

  page_table_walker #(.WALKS(4), .LOG_P(3), .PT_BASE(PTB)) dut (
    .clk, .rst_n, .req_valid, .req_ready, .req, .req_id, .resp_valid, .resp_ready, .resp, .resp_id,
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_resp_valid,
    .mem_resp_tag(mem_resp_tag[CLIENT_TAG_W-1:0]), .mem_resp_data, .busy_walks);

  always_comb begin
    bus_req.we = mem_req.we; bus_req.addr = mem_req.addr; bus_req.wdata = mem_req.wdata;
    bus_req.tag = {2'b00, mem_req.tag};
  end
  gpu_mem_model #(.LAT(3)) u_mem (.clk, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(bus_req),
    .resp_valid(mem_resp_valid), .resp_tag(mem_resp_tag), .resp_data(mem_resp_data));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  xlate_resp_t got [int];
  int max_busy = 0;
  always @(posedge clk) if (rst_n) begin
    if (resp_valid && resp_ready) got[int'(resp_id)] = resp;
    if (int'(busy_walks) > max_busy) max_busy = int'(busy_walks);
  end

  initial begin
    dir_entry_t d; leaf_entry_t l;
    int reads0;
    req_valid = 0; req = '0; req_id = '0; resp_ready = 1;
    // preload: directory words PTB + (asid << 17) + region
    d = '0; d.valid = 1;                               u_mem.mem[dir_addr(PTB, 3, 3'd1, 20'd0)]  = word_t'(d);
    d = '0; d.valid = 1; d.is_large = 1; d.has_frame = 1; d.frame = 11'd7;
                                                      u_mem.mem[dir_addr(PTB, 3, 3'd1, 20'd8)]  = word_t'(d);
    l = '0; l.valid = 1; l.ppn = 20'd55;              u_mem.mem[leaf_addr(PTB, 3, 3'd1, 20'd2)] = word_t'(l);
    repeat (2) @(posedge clk); rst_n = 1;

    // one large walk: a single read
    reads0 = u_mem.reads;
    @(negedge clk); req_valid = 1; req.asid = 3'd1; req.vpn = 20'd13; req_id = 8'd9;
    @(posedge clk); #1 req_valid = 0;
    repeat (15) @(posedge clk);
    check(got.exists(9) && got[9].is_large && !got[9].fault && got[9].ppn == {17'd7, 3'd5}, "large page walk result");
    check(u_mem.reads - reads0 == 1, $sformatf("large walk reads %0d (exp 1)", u_mem.reads - reads0));

    // one base walk: two reads
    reads0 = u_mem.reads;
    @(negedge clk); req_valid = 1; req.asid = 3'd1; req.vpn = 20'd2; req_id = 8'd1;
    @(posedge clk); #1 req_valid = 0;
    repeat (15) @(posedge clk);
    check(got.exists(1) && !got[1].is_large && !got[1].fault && got[1].ppn == 20'd55, "base walk result");
    check(u_mem.reads - reads0 == 2, $sformatf("base walk reads %0d (exp 2)", u_mem.reads - reads0));

    // four walks at once, then a fifth must wait
    got.delete();
    resp_ready = 0;
    for (int i = 0; i < 4; i++) begin
      @(negedge clk); req_valid = 1; req.asid = 3'd1; req_id = 8'(20 + i);
      req.vpn = (i == 0) ? 20'd2 : (i == 1) ? 20'd3 : (i == 2) ? 20'd9 : 20'd17;
      @(posedge clk); #1 req_valid = 0;
    end
    #1 check(!req_ready, "all slots busy: req_ready low");
    repeat (20) @(posedge clk);
    check(max_busy == 4, $sformatf("concurrent walks %0d", max_busy));
    resp_ready = 1;
    repeat (10) @(posedge clk);
    check(got.exists(20) && got[20].ppn == 20'd55 && !got[20].fault, "parallel base walk");
    check(got.exists(21) && got[21].fault, "unmapped leaf faults");
    check(got.exists(22) && got[22].is_large && got[22].ppn == {17'd7, 3'd1}, "parallel large walk");
    check(got.exists(23) && got[23].fault, "unmapped region faults");
    check(got.exists(23) && got[23].asid == 3'd1 && got[23].vpn == 20'd17, "result tagged with request");
    #1 check(req_ready, "slots free again");

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
