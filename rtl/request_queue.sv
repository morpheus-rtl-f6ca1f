// request_queue: buffer of extended LLC requests waiting for their warp.
//
// Each extended LLC kernel warp serves one request at a time, so a request
// can leave the queue only when the warp of its set is free. The queue is a
// collapsing array kept in arrival order (entry 0 is the oldest). It shows
// all entries to the query unit, which picks one to remove with
// (deq_valid, deq_idx); the entries behind it move up by one. That lets a
// request for a free set overtake an older one whose set is busy, while
// requests of the same set keep their order (the older one of a busy set is
// never eligible before the younger one). The paper asks only that a request
// be dequeued as soon as its warp is ready; the collapsing organisation and
// the depth (4) are this design's choices.
//
// Timing: enq_ready = not full, or an entry leaves in the same cycle.
// Enqueue and dequeue take effect at the clock edge; a new entry becomes
// visible one cycle after it is accepted.
module request_queue
  import morpheus_pkg::*;
#(
  parameter int unsigned DEPTH = RQ_DEPTH
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     enq_valid,
  output logic                     enq_ready,
  input  xreq_t                    enq_data,
  output logic  [DEPTH-1:0]        q_valid,
  output xreq_t                    q_data [DEPTH],
  input  logic                     deq_valid,
  input  logic [$clog2(DEPTH)-1:0] deq_idx,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  xreq_t              mem [DEPTH];
  logic [DEPTH-1:0]   vld;

  // after removal, the number of valid entries and where a new one goes
  logic [$clog2(DEPTH+1)-1:0] cnt, cnt_after;

  always_comb begin
    cnt = '0;
    for (int i = 0; i < DEPTH; i++) cnt = cnt + vld[i];
    cnt_after = cnt - (($clog2(DEPTH+1))'(deq_valid && vld[deq_idx]));
    enq_ready = (int'(cnt_after) < DEPTH);
    q_valid   = vld;
    count     = cnt;
    for (int i = 0; i < DEPTH; i++) q_data[i] = mem[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0;
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else begin
      logic [DEPTH-1:0] v;
      xreq_t            d [DEPTH];
      for (int i = 0; i < DEPTH; i++) begin v[i] = vld[i]; d[i] = mem[i]; end
      if (deq_valid && vld[deq_idx]) begin
        for (int i = 0; i < DEPTH; i++) begin
          if (i >= int'(deq_idx)) begin
            if (i + 1 < DEPTH) begin v[i] = v[i+1]; d[i] = d[i+1]; end
            else               begin v[i] = 1'b0; end
          end
        end
      end
      if (enq_valid && enq_ready) begin
        v[$clog2(DEPTH)'(cnt_after)] = 1'b1;
        d[$clog2(DEPTH)'(cnt_after)] = enq_data;
      end
      vld <= v;
      for (int i = 0; i < DEPTH; i++) mem[i] <= d[i];
    end
  end

  // Entries are always packed towards index 0.
  property p_packed;
    @(posedge clk) disable iff (!rst_n) ((vld + 1'b1) & vld) == '0;
  endproperty
  a_packed: assert property (p_packed);
endmodule
