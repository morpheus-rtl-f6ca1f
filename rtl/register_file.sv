// register_file: banked SM register file of 1024-bit warp registers.
//
// This is the baseline structure that the Indirect-MOV instruction
// modifies: RF_BANKS banks behind a crossbar that delivers a bank's output
// to the operand collector. Register `reg` of warp `warp` lives at physical
// warp register p = warp * REGS_PER_WARP + reg, in bank p mod BANKS, row
// p div BANKS, so consecutive registers of a warp fall into different banks.
// The size (256 KB per SM = 2048 warp registers), four banks and 42
// registers per warp come from the paper; the mapping and the port
// organisation are this design's choices.
//
// Read port: a request in cycle t returns rd_data (and rd_err when reg is
// outside the warp's allocation, with zero data) in cycle t+1.
// Write ports: port 0 (collector writeback) always wins; port 1 (the rest
// of the SM pipeline) is accepted when port 0 is idle (wr1_ready).
// A read and a write of the same register in one cycle return the old value.
// The storage is not reset.
module register_file
  import morpheus_pkg::*;
#(
  parameter int unsigned WARP_REGS = RF_WARP_REGS,
  parameter int unsigned BANKS     = RF_BANKS,
  parameter int unsigned REGS      = REGS_PER_WARP,
  parameter int unsigned WARPS     = WARPS_PER_SM
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                rd_valid,
  input  warp_id_t            rd_warp,
  input  logic [REG_ID_W-1:0] rd_reg,
  output logic                rd_data_valid,
  output block_t              rd_data,
  output logic                rd_err,
  input  logic                wr0_valid,
  input  warp_id_t            wr0_warp,
  input  logic [REG_ID_W-1:0] wr0_reg,
  input  block_t              wr0_data,
  input  logic                wr1_valid,
  output logic                wr1_ready,
  input  warp_id_t            wr1_warp,
  input  logic [REG_ID_W-1:0] wr1_reg,
  input  block_t              wr1_data
);
  localparam int unsigned ROWS  = WARP_REGS / BANKS;
  localparam int unsigned BNK_W = (BANKS > 1) ? $clog2(BANKS) : 1;
  localparam int unsigned ROW_W = $clog2(ROWS);
  localparam int unsigned P_W   = $clog2(WARP_REGS) + 1;

  block_t bank_mem [BANKS][ROWS];

  function automatic logic [P_W-1:0] phys(warp_id_t w, logic [REG_ID_W-1:0] r);
    return P_W'(int'(w) * REGS + int'(r));
  endfunction

  logic [P_W-1:0]   rp, wp;
  logic             r_ok, w_ok, w_en;
  logic             rok_q;

  always_comb begin
    rp   = phys(rd_warp, rd_reg);
    r_ok = (int'(rd_reg) < REGS) && (int'(rd_warp) < WARPS);
    wr1_ready = !wr0_valid;
    wp   = wr0_valid ? phys(wr0_warp, wr0_reg) : phys(wr1_warp, wr1_reg);
    w_ok = wr0_valid ? (int'(wr0_reg) < REGS && int'(wr0_warp) < WARPS)
                     : (int'(wr1_reg) < REGS && int'(wr1_warp) < WARPS);
    w_en = (wr0_valid || wr1_valid) && w_ok;
  end

  // banks: one write per cycle
  always_ff @(posedge clk) begin
    if (w_en)
      bank_mem[BNK_W'(wp % BANKS)][ROW_W'(wp / BANKS)] <= wr0_valid ? wr0_data : wr1_data;
  end

  // read: remember whether the register exists
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_data_valid <= 1'b0;
      rok_q <= 1'b0;
    end else begin
      rd_data_valid <= rd_valid;
      if (rd_valid) rok_q <= r_ok;
    end
  end

  // the crossbar delivers the addressed bank's word to the collector
  block_t rd_word_q;
  always_ff @(posedge clk) begin
    if (rd_valid) rd_word_q <= bank_mem[BNK_W'(rp % BANKS)][ROW_W'(rp / BANKS)];
  end

  always_comb begin
    rd_data = rok_q ? rd_word_q : '0;
    rd_err  = rd_data_valid && !rok_q;
  end
endmodule
