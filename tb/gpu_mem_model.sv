// gpu_mem_model: behavioural model of the GPU main memory (GDDR5 in the
// evaluated system) as seen through the memory manager's one request port.
// Not synthesizable: a sparse associative array of 64-bit words. Every
// request is accepted; a read answers with its tag LAT cycles later, in
// order; words never written read as zero. Testbenches read and write
// `mem` directly to preload or inspect memory (e.g. DMA of the I/O bus).
module gpu_mem_model
  import mosaic_pkg::*;
#(
  parameter int unsigned LAT = 3
) (
  input  logic                 clk,
  input  logic                 req_valid,
  output logic                 req_ready,
  input  mem_bus_req_t         req,
  output logic                 resp_valid,
  output logic [MEM_TAG_W-1:0] resp_tag,
  output word_t                resp_data
);
  word_t mem [paddr_t];
  typedef struct { longint due; logic [MEM_TAG_W-1:0] tag; word_t data; } pend_t;
  pend_t q[$];
  longint cyc = 0;
  int unsigned reads = 0, writes = 0;

  assign req_ready = 1'b1;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    resp_valid <= 1'b0;
    if (q.size() > 0 && q[0].due <= cyc) begin
      resp_valid <= 1'b1;
      resp_tag   <= q[0].tag;
      resp_data  <= q[0].data;
      void'(q.pop_front());
    end
    if (req_valid) begin
      if (req.we) begin
        mem[req.addr] = req.wdata;
        writes++;
      end else begin
        pend_t p;
        p.due = cyc + LAT;
        p.tag = req.tag;
        p.data = mem.exists(req.addr) ? mem[req.addr] : '0;
        q.push_back(p);
        reads++;
      end
    end
  end

  initial begin resp_valid = 1'b0; resp_tag = '0; resp_data = '0; end
endmodule
