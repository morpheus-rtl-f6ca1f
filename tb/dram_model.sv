// dram_model: behavioural DRAM channel for the testbenches (the GDDR6X
// devices and memory controller are existing parts, not part of this
// design). Accepts one request per cycle while fewer than 16 reads are in
// flight; a write updates the memory at once, a read samples it at
// acceptance and returns after LAT cycles, in order, with its meta field.
// Memory that was never written reads as a pattern derived from the address.
module dram_model
  import morpheus_pkg::*;
#(
  parameter int unsigned LAT = 20
) (
  input  logic       clk,
  input  logic       req_valid,
  output logic       req_ready,
  input  dram_req_t  req,
  output logic       resp_valid,
  input  logic       resp_ready,
  output dram_resp_t resp
);
  block_t mem [addr_t];
  typedef struct { dram_resp_t r; longint due; } pend_t;
  pend_t q [$];
  longint cyc = 0;
  int n_reads = 0, n_writes = 0;

  function automatic block_t init_pattern(addr_t a);
    block_t b;
    for (int i = 0; i < BLOCK_W / 32; i++) b[i*32 +: 32] = 32'(a >> 7) ^ (32'(i) * 32'h9E3779B9);
    return b;
  endfunction

  function automatic block_t peek(addr_t a);
    addr_t k = {a[ADDR_W-1:OFFSET_W], OFFSET_W'(0)};
    return mem.exists(k) ? mem[k] : init_pattern(k);
  endfunction

  initial begin req_ready = 1; resp_valid = 0; resp = '0; end

  always @(posedge clk) begin
    cyc = cyc + 1;
    if (resp_valid && resp_ready) void'(q.pop_front());
    if (req_valid && req_ready) begin
      addr_t k;
      k = {req.addr[ADDR_W-1:OFFSET_W], OFFSET_W'(0)};
      if (req.write) begin mem[k] = req.data; n_writes++; end
      else begin
        pend_t p;
        p.r.addr = k; p.r.data = peek(k); p.r.meta = req.meta; p.due = cyc + LAT;
        q.push_back(p);
        n_reads++;
      end
    end
    req_ready  <= (q.size() < 16);
    resp_valid <= (q.size() > 0) && (q[0].due <= cyc + 1);
    resp       <= (q.size() > 0) ? q[0].r : '0;
  end
endmodule
