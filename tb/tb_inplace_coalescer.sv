// tb_inplace_coalescer: self-checking test of inplace_coalescer with 8-page
// frames, a frame table preloaded with four cases and the page table at
// word 1000 of a behavioural memory. Frame 0 is full and contiguous (must
// be coalesced: directory entry gets the large bit and the frame, frame
// table marks it coalesced); frame 1 misses one page, frame 2 is full but
// holds migrated pages, frame 3 is already coalesced (none of these may
// change). Also checked: list_ready is low while a frame is being handled.
module tb_inplace_coalescer;
  import mosaic_pkg::*;
  localparam paddr_t PTB = 29'd1000;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic list_valid, list_ready, busy, coalesced, mem_req_valid, mem_req_ready;
  frame_t list_frame; mem_req_t mem_req; mem_bus_req_t bus_req;
  logic ft_req, ft_we, ft_gnt, ft_rvalid; frame_t ft_idx; frame_meta_t ft_wmeta, ft_rmeta;
  logic [7:0] ft_wbitmap, ft_rbitmap;
  logic mem_resp_valid; logic [MEM_TAG_W-1:0] mem_resp_tag; word_t mem_resp_data;

  inplace_coalescer #(.NUM_FRAMES(4), .PT_FRAMES(0), .LOG_P(3), .PT_BASE(PTB)) dut (
    .clk, .rst_n, .list_valid, .list_ready, .list_frame, .busy, .coalesced,
    .mem_req_valid, .mem_req_ready, .mem_req, .ft_req, .ft_we, .ft_idx, .ft_wmeta, .ft_wbitmap,
    .ft_gnt, .ft_rvalid, .ft_rmeta, .ft_rbitmap);

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

  int n_coal = 0;
  always @(posedge clk) if (rst_n && coalesced) n_coal++;

  task automatic send(frame_t f);
    @(negedge clk);
    while (!list_ready) @(negedge clk);
    list_valid = 1; list_frame = f;
    @(negedge clk); list_valid = 0;
    check(!list_ready, "busy with a frame: list_ready low");
    while (busy) @(negedge clk);
    @(negedge clk);
  endtask

  function automatic frame_meta_t m(asid_t a, int region, bit c, bit mx);
    frame_meta_t x; x = '0; x.used = 1; x.owner = a; x.vlpn = vpn_t'(region); x.coalesced = c; x.mixed = mx;
    return x;
  endfunction

  dir_entry_t d, d0;
  initial begin
    list_valid = 0; list_frame = '0;
    u_ft.meta_q[0] = m(3'd1, 5, 0, 0); u_ft.bitmap_q[0] = 8'hFF;
    u_ft.meta_q[1] = m(3'd1, 6, 0, 0); u_ft.bitmap_q[1] = 8'hEF;
    u_ft.meta_q[2] = m(3'd2, 0, 0, 1); u_ft.bitmap_q[2] = 8'hFF;
    u_ft.meta_q[3] = m(3'd2, 1, 1, 0); u_ft.bitmap_q[3] = 8'hFF;
    d0 = '0; d0.valid = 1; d0.has_frame = 1;
    for (int f = 0; f < 4; f++) begin
      d0.frame = frame_t'(f);
      u_mem.mem[dir_addr(PTB, 3, u_ft.meta_q[f].owner, vpn_t'(u_ft.meta_q[f].vlpn << 3))] = word_t'(d0);
    end
    repeat (2) @(posedge clk); rst_n = 1;

    send(11'd0);
    d = dir_entry_t'(u_mem.mem[dir_addr(PTB, 3, 3'd1, vpn_t'(5 << 3))]);
    check(d.valid && d.is_large && d.has_frame && d.frame == 11'd0, "full frame coalesced in the page table");
    check(u_ft.meta_q[0].coalesced, "frame table marks frame 0 coalesced");
    check(n_coal == 1, "one coalesce event");

    send(11'd1);
    d = dir_entry_t'(u_mem.mem[dir_addr(PTB, 3, 3'd1, vpn_t'(6 << 3))]);
    check(!d.is_large && !u_ft.meta_q[1].coalesced, "frame with a hole not coalesced");
    send(11'd2);
    d = dir_entry_t'(u_mem.mem[dir_addr(PTB, 3, 3'd2, 20'd0)]);
    check(!d.is_large && !u_ft.meta_q[2].coalesced, "frame with migrated pages not coalesced");
    send(11'd3);
    check(n_coal == 1, "already coalesced frame left alone");
    check(u_mem.writes == 1, $sformatf("one page-table write in all (%0d)", u_mem.writes));

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
