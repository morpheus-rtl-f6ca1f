// morpheus_gpu: the Morpheus additions of a whole GPU, wired together.
//
// One morpheus_controller sits in every LLC partition, between the
// interconnect and the partition's conventional LLC and DRAM channel. Every
// SM has a register file whose operand collector supports Indirect-MOV,
// the instruction the extended LLC kernel uses on cache-mode SMs to read a
// data-array register by a computed index.
//
// The parts the paper takes from the existing GPU are outside this module
// and meet it at its ports: the interconnect (core_req/core_resp, notify and
// mm ports of each partition), the conventional LLC banks (conv_*), the DRAM
// channels (dram_*), and the SM pipeline that issues MOV/IMOV instructions
// (ins_*) and writes other results into the register file (rfw_*). The
// extended LLC kernel itself is software running on cache-mode SMs: it
// receives the notify messages and answers through the mm ports.
//
// Configuration (static while requests are in flight): which SMs are in
// cache mode, the extended set range of every partition and the first
// cache-mode SM; the cache-mode SMs are expected to be the contiguous range
// starting at cache_sm_base, which is this design's choice.
// Lint note: rst_n is used as an asynchronous reset and as the disable
// condition of the sub-blocks' assertions (reported as SYNCASYNCNET); the
// assertions are not logic.
module morpheus_gpu
  import morpheus_pkg::*;
#(
  parameter int unsigned PARTS = NUM_PARTITIONS,
  parameter int unsigned SMS   = NUM_SMS
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [NUM_SMS-1:0]     cache_mode,
  input  logic [SET_FIELD_W-1:0] ext_set_base,
  input  logic [SET_FIELD_W:0]   ext_set_count,
  input  sm_id_t                 cache_sm_base,
  input  logic                   bf_clear,
  // per LLC partition
  input  logic         core_req_valid  [PARTS],
  output logic         core_req_ready  [PARTS],
  input  llc_req_t     core_req        [PARTS],
  output logic         core_resp_valid [PARTS],
  input  logic         core_resp_ready [PARTS],
  output llc_resp_t    core_resp       [PARTS],
  output logic         conv_req_valid  [PARTS],
  input  logic         conv_req_ready  [PARTS],
  output llc_req_t     conv_req        [PARTS],
  output logic         dram_req_valid  [PARTS],
  input  logic         dram_req_ready  [PARTS],
  output dram_req_t    dram_req        [PARTS],
  input  logic         dram_resp_valid [PARTS],
  output logic         dram_resp_ready [PARTS],
  input  dram_resp_t   dram_resp       [PARTS],
  output logic         notify_valid    [PARTS],
  input  logic         notify_ready    [PARTS],
  output knotify_t     notify          [PARTS],
  input  logic         mm_valid        [PARTS],
  output logic         mm_ready        [PARTS],
  input  mm_req_t      mm              [PARTS],
  output logic         mm_rvalid       [PARTS],
  output block_t       mm_rdata        [PARTS],
  output ctrl_events_t events          [PARTS],
  // per SM: MOV / Indirect-MOV issue and other register writes
  input  logic                ins_valid    [SMS],
  output logic                ins_ready    [SMS],
  input  warp_id_t            ins_warp     [SMS],
  input  logic                ins_indirect [SMS],
  input  logic [REG_ID_W-1:0] ins_dst      [SMS],
  input  logic [REG_ID_W-1:0] ins_src      [SMS],
  output logic                ins_done     [SMS],
  output logic                ins_err      [SMS],
  input  logic                rfw_valid    [SMS],
  output logic                rfw_ready    [SMS],
  input  warp_id_t            rfw_warp     [SMS],
  input  logic [REG_ID_W-1:0] rfw_reg      [SMS],
  input  block_t              rfw_data     [SMS]
);
  for (genvar p = 0; p < PARTS; p++) begin : g_part
    morpheus_controller #(.PART_ID(p)) u_ctrl (
      .clk, .rst_n,
      .cache_mode, .ext_set_base, .ext_set_count, .cache_sm_base, .bf_clear,
      .core_req_valid(core_req_valid[p]), .core_req_ready(core_req_ready[p]), .core_req(core_req[p]),
      .core_resp_valid(core_resp_valid[p]), .core_resp_ready(core_resp_ready[p]), .core_resp(core_resp[p]),
      .conv_req_valid(conv_req_valid[p]), .conv_req_ready(conv_req_ready[p]), .conv_req(conv_req[p]),
      .dram_req_valid(dram_req_valid[p]), .dram_req_ready(dram_req_ready[p]), .dram_req(dram_req[p]),
      .dram_resp_valid(dram_resp_valid[p]), .dram_resp_ready(dram_resp_ready[p]), .dram_resp(dram_resp[p]),
      .notify_valid(notify_valid[p]), .notify_ready(notify_ready[p]), .notify(notify[p]),
      .mm_valid(mm_valid[p]), .mm_ready(mm_ready[p]), .mm(mm[p]),
      .mm_rvalid(mm_rvalid[p]), .mm_rdata(mm_rdata[p]),
      .events(events[p])
    );
  end

  for (genvar s = 0; s < SMS; s++) begin : g_sm
    logic                rd_valid, rd_data_valid, rd_err, wb_valid;
    warp_id_t            rd_warp, wb_warp;
    logic [REG_ID_W-1:0] rd_reg, wb_reg;
    block_t              rd_data, wb_data;

    operand_collector u_oc (
      .clk, .rst_n,
      .in_valid(ins_valid[s]), .in_ready(ins_ready[s]), .in_warp(ins_warp[s]),
      .in_indirect(ins_indirect[s]), .in_dst(ins_dst[s]), .in_src(ins_src[s]),
      .rf_rd_valid(rd_valid), .rf_rd_warp(rd_warp), .rf_rd_reg(rd_reg),
      .rf_rd_data_valid(rd_data_valid), .rf_rd_data(rd_data), .rf_rd_err(rd_err),
      .wb_valid, .wb_warp, .wb_reg, .wb_data,
      .done(ins_done[s]), .err(ins_err[s])
    );

    register_file u_rf (
      .clk, .rst_n,
      .rd_valid, .rd_warp, .rd_reg, .rd_data_valid, .rd_data, .rd_err,
      .wr0_valid(wb_valid), .wr0_warp(wb_warp), .wr0_reg(wb_reg), .wr0_data(wb_data),
      .wr1_valid(rfw_valid[s]), .wr1_ready(rfw_ready[s]), .wr1_warp(rfw_warp[s]),
      .wr1_reg(rfw_reg[s]), .wr1_data(rfw_data[s])
    );
  end
endmodule
