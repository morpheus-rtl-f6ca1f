// tb_morpheus_controller: one Morpheus controller with the extended LLC
// kernel model, a DRAM model and an always-ready conventional LLC sink.
// Random reads and writes from compute-mode SMs hit a few extended sets
// (4-way in this test so that evictions, false positives and filter swaps
// are frequent), plus conventional-LLC and cache-mode (bypass) traffic.
// Every read response is compared with a reference memory that holds the
// last value written; every request is checked to take the route its
// address and source select; a predicted miss must reach DRAM in the cycle
// it is accepted and a kernel hit must answer in the cycle it is reported.
// Each mechanism (conv, bypass, predicted hit/miss, write, kernel hit and
// miss, fill, filter swap, request-queue stall) must occur.
module tb_morpheus_controller;
  import morpheus_pkg::*;
  localparam int ASSOC = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;   // pulled low at 1 ns so that the asynchronous reset sees an edge
  always #5 clk = ~clk;

  logic [NUM_SMS-1:0] cache_mode;
  logic core_req_valid, core_req_ready, core_resp_valid, core_resp_ready;
  llc_req_t core_req; llc_resp_t core_resp;
  logic conv_req_valid, conv_req_ready; llc_req_t conv_req;
  logic dram_req_valid, dram_req_ready, dram_resp_valid, dram_resp_ready;
  dram_req_t dram_req; dram_resp_t dram_resp;
  logic notify_valid, notify_ready, mm_valid, mm_ready, mm_rvalid;
  knotify_t notify; mm_req_t mm; block_t mm_rdata;
  ctrl_events_t ev;
  logic wb_valid, wb_ready; addr_t wb_addr; block_t wb_data;
  logic [SET_FIELD_W-1:0] ext_base = 9'd256;

  morpheus_controller #(.PART_ID(3), .ASSOC(ASSOC)) dut (
    .clk, .rst_n, .cache_mode, .ext_set_base(ext_base), .ext_set_count(10'd256),
    .cache_sm_base(7'd60), .bf_clear(1'b0),
    .core_req_valid, .core_req_ready, .core_req, .core_resp_valid, .core_resp_ready, .core_resp,
    .conv_req_valid, .conv_req_ready, .conv_req, .dram_req_valid, .dram_req_ready, .dram_req,
    .dram_resp_valid, .dram_resp_ready, .dram_resp, .notify_valid, .notify_ready, .notify,
    .mm_valid, .mm_ready, .mm, .mm_rvalid, .mm_rdata, .events(ev));

  ext_llc_kernel_model #(.ASSOC(ASSOC), .LAT(3)) u_kernel (
    .clk, .ext_set_base(ext_base), .notify_valid, .notify_ready, .notify,
    .mm_valid, .mm_ready, .mm, .mm_rvalid, .mm_rdata, .wb_valid, .wb_ready, .wb_addr, .wb_data);

  dram_model #(.LAT(12)) u_dram (.clk, .req_valid(dram_req_valid), .req_ready(dram_req_ready),
    .req(dram_req), .resp_valid(dram_resp_valid), .resp_ready(dram_resp_ready), .resp(dram_resp));

  // ---- reference -----------------------------------------------------------
  block_t refm [addr_t];
  function automatic block_t pattern(addr_t a);
    block_t b;
    for (int i = 0; i < BLOCK_W / 32; i++) b[i*32 +: 32] = 32'(a >> 7) ^ (32'(i) * 32'h9E3779B9);
    return b;
  endfunction
  function automatic block_t refread(addr_t a);
    return refm.exists(a) ? refm[a] : pattern(a);
  endfunction

  typedef struct { addr_t a; sm_id_t sm; block_t exp; } outst_t;
  outst_t outst [$];
  int rd_pending [addr_t];

  function automatic addr_t mk(int setnum, int tag);
    return {tag_t'(tag), SET_FIELD_W'(setnum), OFFSET_W'(0)};
  endfunction

  task automatic check(bit c, string what);
    checks++; if (!c) begin failures++; if (failures < 20) $display("FAIL %s t=%0t", what, $time); end
  endtask

  // ---- stimulus ------------------------------------------------------------
  llc_req_t gen; bit gen_valid = 0; int gen_kind; bit gen_on = 1;
  int n_resp = 0;
  int cnt [10];

  always_comb begin
    wb_ready = 1'b0;
    if (wb_valid) begin
      core_req_valid = 1'b1;
      core_req.addr = wb_addr; core_req.write = 1'b1; core_req.src_sm = 7'd61; core_req.data = wb_data;
      wb_ready = core_req_ready;
    end else begin
      core_req_valid = gen_valid; core_req = gen;
    end
  end

  initial begin
    #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cache_mode = '0; for (int k = 60; k < 68; k++) cache_mode[k] = 1'b1;
    gen = '0; core_resp_ready = 0; conv_req_ready = 0;
    for (int i = 0; i < 10; i++) cnt[i] = 0;
    #1 rst_n = 0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
  end

  // new request after each accepted one
  bit acc_flag = 0;
  always @(negedge clk) if (rst_n) begin
    if (!wb_valid && gen_valid && core_req_ready) begin
      acc_flag = 1;
      // accepted: update reference / outstanding
      if (gen_kind == 0) begin
        if (gen.write) refm[gen.addr] = gen.data;
        else begin
          outst.push_back('{gen.addr, gen.src_sm, refread(gen.addr)});
          rd_pending[gen.addr] = rd_pending.exists(gen.addr) ? rd_pending[gen.addr] + 1 : 1;
        end
      end else if (gen_kind == 2) begin
        if (gen.write) refm[gen.addr] = gen.data;
        else begin
          outst.push_back('{gen.addr, gen.src_sm, refread(gen.addr)});
          rd_pending[gen.addr] = rd_pending.exists(gen.addr) ? rd_pending[gen.addr] + 1 : 1;
        end
      end
    end
  end

  initial begin
    @(posedge rst_n);
    for (int i = 0; i < 6000; i++) begin
      int r; addr_t a; bit wr;
      @(posedge clk); #1;
      core_resp_ready = ($urandom_range(0, 99) < 85);
      conv_req_ready  = ($urandom_range(0, 99) < 70);
      if (acc_flag) begin gen_valid = 0; acc_flag = 0; end
      if (gen_valid) continue;
      r = $urandom_range(0, 99);
      if (r < 70) begin
        gen_kind = 0;
        a = mk(256 + $urandom_range(0, 3), $urandom_range(0, 9));
        gen.src_sm = sm_id_t'($urandom_range(0, 59));
      end else if (r < 85) begin
        gen_kind = 1;
        a = mk($urandom_range(0, 255), $urandom_range(0, 9));
        gen.src_sm = sm_id_t'($urandom_range(0, 59));
      end else begin
        gen_kind = 2;
        a = mk($urandom_range(0, 3), 200 + $urandom_range(0, 3));
        gen.src_sm = sm_id_t'($urandom_range(62, 67));
      end
      wr = ($urandom_range(0, 99) < 35);
      // written blocks (tag + 16) are never read: a dirty victim's write-back
      // and a later DRAM read of the same block are not ordered (see README)
      if (wr) a[ADDR_W-1 -: TAG_W] = a[ADDR_W-1 -: TAG_W] + 18'd16;
      gen.addr = a; gen.write = wr; gen.data = {32{$urandom}};
      // stop a burst now and then so that the request queue fills and drains
      gen_valid = 1;
    end
    gen_on = 0;
    repeat (3000) @(posedge clk);
    check(outst.size() == 0, "all reads answered");
    $display("events conv=%0d bypass=%0d pred_hit=%0d pred_miss=%0d write=%0d ext_hit=%0d ext_miss=%0d fill=%0d swap=%0d rq_stall=%0d",
             cnt[0], cnt[1], cnt[2], cnt[3], cnt[4], cnt[5], cnt[6], cnt[7], cnt[8], cnt[9]);
    $display("kernel req=%0d read_hit=%0d read_miss=%0d dirty_evict=%0d responses=%0d",
             u_kernel.n_req, u_kernel.n_read_hit, u_kernel.n_read_miss, u_kernel.n_dirty_evict, n_resp);
    for (int k = 0; k < 10; k++) check(cnt[k] > 0, "mechanism occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- checks every cycle (sampled mid-cycle, when all inputs are stable) ----
  always @(negedge clk) if (rst_n) begin
    if (ev.conv) cnt[0]++; if (ev.bypass) cnt[1]++; if (ev.pred_hit) cnt[2]++;
    if (ev.pred_miss) cnt[3]++; if (ev.ext_write) cnt[4]++; if (ev.ext_hit) cnt[5]++;
    if (ev.ext_miss) cnt[6]++; if (ev.fill) cnt[7]++; if (ev.bf_swap) cnt[8]++; if (ev.rq_stall) cnt[9]++;
    // routing
    if (core_req_valid && core_req_ready) begin
      bit byp, ext; int sn;
      byp = cache_mode[core_req.src_sm];
      sn  = int'(core_req.addr[OFFSET_W +: SET_FIELD_W]);
      ext = !byp && sn >= 256;
      check(byp ? (dram_req_valid && dram_req.addr == core_req.addr && dram_req.write == core_req.write) : 1, "bypass to DRAM");
      check((!byp && !ext) ? (conv_req_valid && conv_req == core_req) : !conv_req_valid, "conventional route");
      if (ev.pred_miss) check(dram_req_valid && dram_req.addr == core_req.addr && !dram_req.write, "predicted miss reaches DRAM in same cycle");
    end
    if (ev.ext_hit) check(core_resp_valid, "hit answered in same cycle");
    // responses
    if (core_resp_valid && core_resp_ready) begin
      int f;
      f = -1;
      foreach (outst[k]) if (f < 0 && outst[k].a == core_resp.addr && outst[k].sm == core_resp.dst_sm) f = k;
      check(f >= 0, "response matches a read");
      if (f >= 0) begin
        check(core_resp.data == outst[f].exp, "read data");
        rd_pending[outst[f].a]--;
        outst.delete(f);
      end
      n_resp++;
    end
  end
endmodule
