// morpheus_controller: the hardware unit Morpheus adds to each LLC
// partition.
//
// Every LLC request that reaches the partition passes through it:
//   1. The address separator sends requests of cache-mode SMs straight to
//      DRAM, requests whose set number is outside the extended range to the
//      conventional LLC (port conv_*), and the rest to the extended LLC path.
//   2. On the extended path the hit/miss predictor checks BF1 of the set and
//      inserts the block into both Bloom filters of the set.
//      - read, predicted hit : queued in the extended LLC query unit, which
//        hands it to the kernel warp that owns the set;
//      - read, predicted miss: sent to DRAM at once (no interconnect round
//        trip, no software tag lookup);
//      - write               : queued for the kernel (write-allocate).
//   3. When the kernel warp reports the outcome:
//      - read hit  : the block goes back to the requesting SM;
//      - read miss : the block is read from DRAM (a Bloom false positive).
//   4. A DRAM block read on behalf of the extended LLC is returned to the
//      requesting SM and queued as a FILL so that the kernel inserts it.
// Steps 1-3 follow the paper. Who inserts a missing block is not spelled
// out there: its text has the kernel warp fetch the block from main memory,
// its flowchart has the controller access DRAM. This design follows the
// flowchart and adds the FILL request to carry the block to the kernel.
// Writes need no response. The DRAM port returns the request's meta field
// with the data, which stands in for the partition's existing miss tracking.
//
// Timing: a request is accepted (core_req_ready) in the cycle its route can
// take it; conv_*, dram_req_* and core_resp_* are combinational
// valid/ready handshakes. Arbitration: completed kernel requests before new
// SM requests on the DRAM port, fills before new SM requests into the
// request queue, read hits before DRAM data on the response port.
// Lint note: rst_n is the asynchronous reset of the flops and also the
// disable condition of the assertions, which lint reports as a reset used
// both asynchronously and synchronously; the assertions are not logic.
module morpheus_controller
  import morpheus_pkg::*;
#(
  parameter int unsigned PART_ID = 0,
  parameter int unsigned SETS    = EXT_SETS,
  parameter int unsigned DEPTH   = RQ_DEPTH,
  parameter int unsigned ENTRIES = DBUF_ENTRIES,
  parameter int unsigned ASSOC   = EXT_ASSOC
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // static configuration
  input  logic [NUM_SMS-1:0]     cache_mode,
  input  logic [SET_FIELD_W-1:0] ext_set_base,
  input  logic [SET_FIELD_W:0]   ext_set_count,
  input  sm_id_t                 cache_sm_base,
  input  logic                   bf_clear,
  // requests from SMs (through the interconnect)
  input  logic                   core_req_valid,
  output logic                   core_req_ready,
  input  llc_req_t               core_req,
  // responses to SMs
  output logic                   core_resp_valid,
  input  logic                   core_resp_ready,
  output llc_resp_t              core_resp,
  // conventional LLC of this partition
  output logic                   conv_req_valid,
  input  logic                   conv_req_ready,
  output llc_req_t               conv_req,
  // DRAM channel
  output logic                   dram_req_valid,
  input  logic                   dram_req_ready,
  output dram_req_t              dram_req,
  input  logic                   dram_resp_valid,
  output logic                   dram_resp_ready,
  input  dram_resp_t             dram_resp,
  // extended LLC kernel side (through the interconnect)
  output logic                   notify_valid,
  input  logic                   notify_ready,
  output knotify_t               notify,
  input  logic                   mm_valid,
  output logic                   mm_ready,
  input  mm_req_t                mm,
  output logic                   mm_rvalid,
  output block_t                 mm_rdata,
  // event pulses
  output ctrl_events_t           events
);
  // ---- address separation -------------------------------------------------
  logic     bypass, to_ext, to_conv;
  ext_set_t ext_set;
  tag_t     tag;

  address_separator u_sep (
    .addr(core_req.addr), .src_sm(core_req.src_sm), .cache_mode,
    .ext_set_base, .ext_set_count, .bypass, .to_ext, .to_conv, .ext_set, .tag
  );

  // ---- hit/miss prediction --------------------------------------------------
  logic pred_hit, bf_swapped, ext_accept;

  hit_miss_predictor #(.SETS(SETS), .ASSOC(ASSOC)) u_pred (
    .clk, .rst_n, .clear(bf_clear),
    .valid(core_req_valid && to_ext), .set(ext_set), .tag,
    .insert(ext_accept), .predict_hit(pred_hit), .swapped(bf_swapped)
  );

  // ---- extended LLC query unit -------------------------------------------------
  logic   rq_valid, rq_ready;
  xreq_t  rq;
  logic   done_valid, done_ready;
  xdone_t done;

  ext_llc_query_unit #(.PART_ID(PART_ID), .SETS(SETS), .DEPTH(DEPTH), .ENTRIES(ENTRIES)) u_qu (
    .clk, .rst_n, .cache_sm_base,
    .enq_valid(rq_valid), .enq_ready(rq_ready), .enq(rq),
    .notify_valid, .notify_ready, .notify,
    .mm_valid, .mm_ready, .mm, .mm_rvalid, .mm_rdata,
    .done_valid, .done_ready, .done, .queue_count()
  );

  // ---- routing -------------------------------------------------------------------
  logic   in_dram, in_rq, done_dram, done_resp, fill_enq;
  logic   dram_for_in, rq_for_in;
  addr_t  done_addr;

  always_comb begin
    // completed kernel requests
    done_addr = {done.tag, ext_set_base + SET_FIELD_W'(done.set), OFFSET_W'(0)};
    done_resp = done_valid && done.op == OP_READ &&  done.hit;
    done_dram = done_valid && done.op == OP_READ && !done.hit;

    // DRAM data for the extended LLC is also queued as a fill
    fill_enq  = dram_resp_valid && dram_resp.meta.fill && !done_resp && core_resp_ready && rq_ready;

    dram_for_in = dram_req_ready && !done_dram;
    rq_for_in   = rq_ready && !fill_enq;

    // where the incoming request wants to go
    in_dram = core_req_valid && (bypass || (to_ext && !core_req.write && !pred_hit));
    in_rq   = core_req_valid && to_ext && (core_req.write || pred_hit);

    core_req_ready = to_conv ? conv_req_ready :
                     (bypass || (to_ext && !core_req.write && !pred_hit)) ? dram_for_in :
                     rq_for_in;
    ext_accept = core_req_valid && to_ext && core_req_ready;

    // conventional LLC
    conv_req_valid = core_req_valid && to_conv;
    conv_req       = core_req;

    // DRAM requests
    dram_req_valid = done_dram || in_dram;
    if (done_dram) begin
      dram_req.addr        = done_addr;
      dram_req.write       = 1'b0;
      dram_req.data        = '0;
      dram_req.meta.src_sm = done.src_sm;
      dram_req.meta.fill   = 1'b1;
      dram_req.meta.set    = done.set;
    end else begin
      dram_req.addr        = core_req.addr;
      dram_req.write       = core_req.write;
      dram_req.data        = core_req.data;
      dram_req.meta.src_sm = core_req.src_sm;
      dram_req.meta.fill   = !bypass;
      dram_req.meta.set    = ext_set;
    end

    // request queue: fills first, then new extended requests
    rq_valid = fill_enq || (in_rq && rq_for_in);
    if (fill_enq) begin
      rq.set    = dram_resp.meta.set;
      rq.tag    = dram_resp.addr[ADDR_W-1 -: TAG_W];
      rq.src_sm = dram_resp.meta.src_sm;
      rq.op     = OP_FILL;
      rq.data   = dram_resp.data;
    end else begin
      rq.set    = ext_set;
      rq.tag    = tag;
      rq.src_sm = core_req.src_sm;
      rq.op     = core_req.write ? OP_WRITE : OP_READ;
      rq.data   = core_req.data;
    end

    // responses to SMs: read hits first, then DRAM data
    // DRAM data meant for the extended LLC is offered to the SM only when
    // its fill can enter the request queue in the same cycle
    core_resp_valid = done_resp || (dram_resp_valid && (!dram_resp.meta.fill || rq_ready));
    if (done_resp) begin
      core_resp.addr   = done_addr;
      core_resp.dst_sm = done.src_sm;
      core_resp.data   = done.data;
    end else begin
      core_resp.addr   = dram_resp.addr;
      core_resp.dst_sm = dram_resp.meta.src_sm;
      core_resp.data   = dram_resp.data;
    end
    dram_resp_ready = !done_resp && core_resp_ready && (!dram_resp.meta.fill || rq_ready);

    done_ready = !done_valid ? 1'b0 :
                 done_resp   ? core_resp_ready :
                 done_dram   ? dram_req_ready  : 1'b1;

    // events
    events           = '0;
    events.conv      = core_req_valid && to_conv && conv_req_ready;
    events.bypass    = core_req_valid && bypass && dram_for_in;
    events.pred_hit  = ext_accept && !core_req.write && pred_hit;
    events.pred_miss = ext_accept && !core_req.write && !pred_hit;
    events.ext_write = ext_accept && core_req.write;
    events.ext_hit   = done_resp && core_resp_ready;
    events.ext_miss  = done_dram && dram_req_ready;
    events.fill      = fill_enq && rq_ready;
    events.bf_swap   = ext_accept && bf_swapped;
    events.rq_stall  = in_rq && !rq_for_in;
  end

  // A request leaves only through the route its address selects.
  a_one_route: assert property (@(posedge clk) disable iff (!rst_n)
    core_req_valid |-> $onehot({bypass, to_ext, to_conv}));
  a_fill_no_drop: assert property (@(posedge clk) disable iff (!rst_n)
    dram_resp_valid && dram_resp_ready && dram_resp.meta.fill |-> fill_enq);
endmodule
