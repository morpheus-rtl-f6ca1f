// tb_morpheus_gpu: end-to-end test of the whole design at its default size
// (10 partitions, 68 SMs, 32-way extended sets, 256 KB register files).
//
// SMs 47..67 are in cache mode (21 cache-mode SMs, 47 compute SMs).
// Partition 0 gets random traffic and is served by the extended LLC kernel
// model and a DRAM model; the other partitions are idle with ready sinks.
//  - extended reads from compute SMs to two sets with 48 tags each, so that
//    blocks are evicted, filters swap and false positives happen;
//  - extended writes to a third set (never read back), whose dirty
//    victims the kernel writes back to DRAM through the partition;
//  - conventional reads and writes to sets below the extended range;
//  - bypass reads and writes from cache-mode SMs.
// Nothing that is read is ever written, so every read must return the DRAM
// contents; each response is matched to an outstanding read by address and
// SM. SMs 0 and 67 run MOV and Indirect-MOV sequences whose results are
// read back from the register file arrays.
// Counted mechanisms (each must happen): conventional route, bypass,
// predicted hit, predicted miss, extended write, kernel hit, kernel miss,
// fill, filter swap, request-queue stall, dirty write-back, MOV, IMOV,
// IMOV range error.
module tb_morpheus_gpu;
  import morpheus_pkg::*;
  localparam int P = NUM_PARTITIONS, S = NUM_SMS;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;   // pulled low at 1 ns so that the asynchronous reset sees an edge
  always #5 clk = ~clk;

  logic [NUM_SMS-1:0] cache_mode;
  logic [SET_FIELD_W-1:0] ext_base = 9'd256;
  logic core_req_valid [P], core_req_ready [P], core_resp_valid [P], core_resp_ready [P];
  llc_req_t core_req [P]; llc_resp_t core_resp [P];
  logic conv_req_valid [P], conv_req_ready [P]; llc_req_t conv_req [P];
  logic dram_req_valid [P], dram_req_ready [P], dram_resp_valid [P], dram_resp_ready [P];
  dram_req_t dram_req [P]; dram_resp_t dram_resp [P];
  logic notify_valid [P], notify_ready [P], mm_valid [P], mm_ready [P], mm_rvalid [P];
  knotify_t notify [P]; mm_req_t mm [P]; block_t mm_rdata [P];
  ctrl_events_t events [P];
  logic ins_valid [S], ins_ready [S], ins_indirect [S], ins_done [S], ins_err [S];
  warp_id_t ins_warp [S], rfw_warp [S];
  logic [REG_ID_W-1:0] ins_dst [S], ins_src [S], rfw_reg [S];
  logic rfw_valid [S], rfw_ready [S]; block_t rfw_data [S];

  morpheus_gpu dut (.clk, .rst_n, .cache_mode, .ext_set_base(ext_base), .ext_set_count(10'd256),
    .cache_sm_base(7'd47), .bf_clear(1'b0),
    .core_req_valid, .core_req_ready, .core_req, .core_resp_valid, .core_resp_ready, .core_resp,
    .conv_req_valid, .conv_req_ready, .conv_req, .dram_req_valid, .dram_req_ready, .dram_req,
    .dram_resp_valid, .dram_resp_ready, .dram_resp, .notify_valid, .notify_ready, .notify,
    .mm_valid, .mm_ready, .mm, .mm_rvalid, .mm_rdata, .events,
    .ins_valid, .ins_ready, .ins_warp, .ins_indirect, .ins_dst, .ins_src, .ins_done, .ins_err,
    .rfw_valid, .rfw_ready, .rfw_warp, .rfw_reg, .rfw_data);

  // partition 0: kernel and DRAM models
  logic wb_valid, wb_ready; addr_t wb_addr; block_t wb_data;
  ext_llc_kernel_model #(.LAT(6)) u_kernel (
    .clk, .ext_set_base(ext_base), .notify_valid(notify_valid[0]), .notify_ready(notify_ready[0]),
    .notify(notify[0]), .mm_valid(mm_valid[0]), .mm_ready(mm_ready[0]), .mm(mm[0]),
    .mm_rvalid(mm_rvalid[0]), .mm_rdata(mm_rdata[0]), .wb_valid, .wb_ready, .wb_addr, .wb_data);
  dram_model #(.LAT(12)) u_dram (.clk, .req_valid(dram_req_valid[0]), .req_ready(dram_req_ready[0]),
    .req(dram_req[0]), .resp_valid(dram_resp_valid[0]), .resp_ready(dram_resp_ready[0]), .resp(dram_resp[0]));

  logic resp_rdy0 = 1'b1, conv_rdy0 = 1'b1;

  task automatic check(bit c, string what);
    checks++; if (!c) begin failures++; if (failures < 20) $display("FAIL %s t=%0t", what, $time); end
  endtask

  function automatic block_t pattern(addr_t a);
    block_t b;
    for (int i = 0; i < BLOCK_W / 32; i++) b[i*32 +: 32] = 32'(a >> 7) ^ (32'(i) * 32'h9E3779B9);
    return b;
  endfunction
  function automatic addr_t mk(int setnum, int tag);
    return {tag_t'(tag), SET_FIELD_W'(setnum), OFFSET_W'(0)};
  endfunction

  // ---- partition 0 stimulus ------------------------------------------------
  llc_req_t gen; bit gen_valid = 0; bit acc_flag = 0;
  typedef struct { addr_t a; sm_id_t sm; } outst_t;
  outst_t outst [$];
  int cnt [14];
  string names [14] = '{"conv", "bypass", "pred_hit", "pred_miss", "ext_write", "ext_hit", "ext_miss",
                        "fill", "bf_swap", "rq_stall", "dirty_writeback", "mov", "imov", "imov_error"};

  // partition 0 inputs come from the generator and the models, the idle
  // partitions get ready sinks
  always_comb begin
    for (int p = 1; p < P; p++) begin
      core_req_valid[p] = 1'b0;  core_req[p] = '0;
      core_resp_ready[p] = 1'b1; conv_req_ready[p] = 1'b1;
      dram_req_ready[p] = 1'b1;  dram_resp_valid[p] = 1'b0; dram_resp[p] = '0;
      notify_ready[p] = 1'b0;    mm_valid[p] = 1'b0;        mm[p] = '0;
    end
    core_resp_ready[0] = resp_rdy0; conv_req_ready[0] = conv_rdy0;
    wb_ready = 1'b0;
    if (wb_valid) begin
      core_req_valid[0] = 1'b1;
      core_req[0].addr = wb_addr; core_req[0].write = 1'b1; core_req[0].src_sm = 7'd47;
      core_req[0].data = wb_data;
      wb_ready = core_req_ready[0];
    end else begin
      core_req_valid[0] = gen_valid; core_req[0] = gen;
    end
  end

  initial begin
    #20000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // everything is sampled mid-cycle, when all inputs are stable
  always @(negedge clk) if (rst_n) begin
    if (!wb_valid && gen_valid && core_req_ready[0]) begin
      acc_flag = 1;
      if (!gen.write && (cache_mode[gen.src_sm] || gen.addr[OFFSET_W +: SET_FIELD_W] >= 256))
        outst.push_back('{gen.addr, gen.src_sm});
    end
    if (wb_valid && wb_ready) cnt[10]++;
    if (events[0].conv) cnt[0]++;      if (events[0].bypass) cnt[1]++;
    if (events[0].pred_hit) cnt[2]++;  if (events[0].pred_miss) cnt[3]++;
    if (events[0].ext_write) cnt[4]++; if (events[0].ext_hit) cnt[5]++;
    if (events[0].ext_miss) cnt[6]++;  if (events[0].fill) cnt[7]++;
    if (events[0].bf_swap) cnt[8]++;   if (events[0].rq_stall) cnt[9]++;
    if (conv_req_valid[0] && conv_req_ready[0]) check(conv_req[0] == core_req[0], "conventional route");
    if (core_resp_valid[0] && core_resp_ready[0]) begin
      int f;
      f = -1;
      foreach (outst[k]) if (f < 0 && outst[k].a == core_resp[0].addr && outst[k].sm == core_resp[0].dst_sm) f = k;
      check(f >= 0, "response matches a read");
      if (f >= 0) begin
        check(core_resp[0].data == pattern(core_resp[0].addr), "read data");
        outst.delete(f);
      end
    end
    for (int p = 1; p < P; p++) check(!events[p].conv && !events[p].bypass && !notify_valid[p], "idle partition");
  end

  initial begin
    cache_mode = '0; for (int k = 47; k < 68; k++) cache_mode[k] = 1'b1;
    gen = '0;
    for (int i = 0; i < 14; i++) cnt[i] = 0;
    #1 rst_n = 0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      int r;
      @(posedge clk); #1;
      resp_rdy0 = ($urandom_range(0, 99) < 90);
      conv_rdy0 = ($urandom_range(0, 99) < 70);
      if (acc_flag) begin gen_valid = 0; acc_flag = 0; end
      if (gen_valid) continue;
      r = $urandom_range(0, 99);
      gen.data = {32{$urandom}}; gen.write = 1'b0;
      if (r < 55) begin
        gen.addr = mk(256 + $urandom_range(0, 1), $urandom_range(0, 47));
        gen.src_sm = sm_id_t'($urandom_range(0, 46));
      end else if (r < 70) begin
        gen.addr = mk(258, $urandom_range(0, 39)); gen.write = 1'b1;
        gen.src_sm = sm_id_t'($urandom_range(0, 46));
      end else if (r < 85) begin
        gen.addr = mk($urandom_range(0, 255), $urandom_range(0, 999)); gen.write = $urandom_range(0, 1);
        gen.src_sm = sm_id_t'($urandom_range(0, 46));
      end else begin
        gen.write = $urandom_range(0, 1);
        gen.addr = gen.write ? mk($urandom_range(0, 3), 900 + $urandom_range(0, 9))
                             : mk($urandom_range(0, 3), 500 + $urandom_range(0, 9));
        gen.src_sm = sm_id_t'($urandom_range(47, 67));
      end
      gen_valid = 1;
    end
    while (gen_valid && !acc_flag) @(negedge clk);
    @(posedge clk); #1 gen_valid = 0;
    repeat (3000) @(posedge clk);
    check(outst.size() == 0, "all reads answered");
  end

  // ---- SM side: MOV / Indirect-MOV on SMs 0 and 67 --------------------------
  function automatic block_t rf_peek(int sm, int warp, int regno);
    int p;
    p = warp * REGS_PER_WARP + regno;
    if (sm == 0) return dut.g_sm[0].u_rf.bank_mem[p % RF_BANKS][p / RF_BANKS];
    return dut.g_sm[67].u_rf.bank_mem[p % RF_BANKS][p / RF_BANKS];
  endfunction


  task automatic sm_write(int sm, int warp, int regno, block_t v);
    @(negedge clk);
    rfw_valid[sm] = 1; rfw_warp[sm] = warp_id_t'(warp); rfw_reg[sm] = 8'(regno); rfw_data[sm] = v;
    @(negedge clk); rfw_valid[sm] = 0;
  endtask

  task automatic sm_exec(int sm, int warp, bit ind, int d, int s, output bit e);
    @(negedge clk);
    ins_valid[sm] = 1; ins_warp[sm] = warp_id_t'(warp); ins_indirect[sm] = ind;
    ins_dst[sm] = 8'(d); ins_src[sm] = 8'(s);
    @(negedge clk); ins_valid[sm] = 0;
    while (!ins_done[sm]) @(negedge clk);
    e = ins_err[sm];
    @(negedge clk);
  endtask

  initial begin
    foreach (ins_valid[g]) begin
      ins_valid[g] = 0; ins_warp[g] = '0; ins_indirect[g] = 0; ins_dst[g] = '0; ins_src[g] = '0;
      rfw_valid[g] = 0; rfw_warp[g] = '0; rfw_reg[g] = '0; rfw_data[g] = '0;
    end
    @(posedge rst_n);
    for (int n = 0; n < 40; n++) begin
      int sm, w, idx, d; bit e; block_t v, ptr;
      sm = (n % 2) ? 67 : 0;
      w = $urandom_range(0, WARPS_PER_SM - 1);
      idx = $urandom_range(1, REGS_PER_WARP - 1);
      do d = $urandom_range(1, REGS_PER_WARP - 1); while (d == idx);
      v = {32{$urandom}};
      ptr = {32{$urandom}}; ptr[7:0] = (n % 5 == 4) ? 8'($urandom_range(REGS_PER_WARP, 255)) : 8'(idx);
      sm_write(sm, w, 0, ptr);
      sm_write(sm, w, idx, v);
      // MOV d <- idx
      sm_exec(sm, w, 0, d, idx, e);
      check(!e && rf_peek(sm, w, d) == v, "MOV result");
      cnt[11]++;
      // IMOV d <- R[R0]
      sm_write(sm, w, d, '0);
      sm_exec(sm, w, 1, d, 0, e);
      if (n % 5 == 4) begin
        check(e && rf_peek(sm, w, d) == '0, "IMOV range error, no write");
        cnt[13]++;
      end else begin
        check(!e && rf_peek(sm, w, d) == v, "IMOV result");
        cnt[12]++;
      end
    end
  end

  initial begin
    @(posedge rst_n);
    repeat (12000) @(posedge clk);
    $display("kernel req=%0d read_hit=%0d read_miss=%0d write=%0d fill=%0d dirty_evict=%0d",
             u_kernel.n_req, u_kernel.n_read_hit, u_kernel.n_read_miss, u_kernel.n_write,
             u_kernel.n_fill, u_kernel.n_dirty_evict);
    for (int k = 0; k < 14; k++) begin
      $display("mechanism %-16s %0d", names[k], cnt[k]);
      check(cnt[k] > 0, "mechanism occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
