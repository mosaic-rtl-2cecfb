// mem_arbiter: shares the one GPU-memory port among the memory clients of
// the memory manager (page table walker, CoCoA, In-Place Coalescer, CAC).
//
// Round-robin among the clients whose req_valid is high; the granted request
// goes to the bus when bus_req_ready is high, with the client number placed in
// the top two bits of the bus tag. A read answer (bus_resp_valid) is routed
// back to the client named by those bits with the client's own tag. Writes
// return nothing. The arbitration policy is this design's choice; the paper
// only shows all three components and the walker using GPU main memory.
module mem_arbiter
  import mosaic_pkg::*;
#(
  parameter int unsigned N = MEM_CLIENTS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [N-1:0]            req_valid,
  output logic [N-1:0]            req_ready,
  input  mem_req_t                req [N],
  output logic [N-1:0]            resp_valid,
  output logic [CLIENT_TAG_W-1:0] resp_tag,
  output word_t                   resp_data,
  output logic                    bus_req_valid,
  input  logic                    bus_req_ready,
  output mem_bus_req_t            bus_req,
  input  logic                    bus_resp_valid,
  input  logic [MEM_TAG_W-1:0]    bus_resp_tag,
  input  word_t                   bus_resp_data
);
  localparam int unsigned N_W = MEM_TAG_W - CLIENT_TAG_W;
  logic [N_W-1:0] rr_q, sel;
  logic           found;

  always_comb begin
    int unsigned idx;
    found = 1'b0;
    sel   = '0;
    for (int i = 0; i < N; i++) begin
      idx = (int'(rr_q) + i) % N;
      if (!found && req_valid[idx]) begin found = 1'b1; sel = N_W'(idx); end
    end
    req_ready = '0;
    req_ready[sel] = found && bus_req_ready;
  end

  assign bus_req_valid = found;
  always_comb begin
    bus_req.we    = req[sel].we;
    bus_req.addr  = req[sel].addr;
    bus_req.wdata = req[sel].wdata;
    bus_req.tag   = {sel, req[sel].tag};
  end

  always_comb begin
    resp_valid = '0;
    resp_valid[bus_resp_tag[MEM_TAG_W-1:CLIENT_TAG_W]] = bus_resp_valid;
  end
  assign resp_tag  = bus_resp_tag[CLIENT_TAG_W-1:0];
  assign resp_data = bus_resp_data;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) rr_q <= '0;
    else if (found && bus_req_ready) rr_q <= N_W'((int'(sel) + 1) % N);
endmodule
