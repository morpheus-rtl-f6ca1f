// tb_operand_collector: the collector wired to a register file as in an SM
// (collector writeback on write port 0). The register file is loaded with
// values whose low byte is a register number (mostly valid, sometimes 42..255),
// then random MOV and Indirect-MOV instructions run back to back.
// Each writeback is compared with a reference register array: MOV copies
// R[src], IMOV copies R[R[src][7:0]]; an IMOV whose indirect number is
// outside the warp must raise err and write nothing. The writeback must come
// 2 clock edges after the accepting edge for MOV and 4 for IMOV.
module tb_operand_collector;
  import morpheus_pkg::*;
  localparam int WARPS = 4;
  localparam int REGS  = REGS_PER_WARP;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_ready, in_indirect = 0;
  warp_id_t in_warp = '0;
  logic [REG_ID_W-1:0] in_dst = '0, in_src = '0;
  logic rf_rd_valid, rf_rd_data_valid, rf_rd_err;
  warp_id_t rf_rd_warp; logic [REG_ID_W-1:0] rf_rd_reg; block_t rf_rd_data;
  logic wb_valid, done, err; warp_id_t wb_warp; logic [REG_ID_W-1:0] wb_reg; block_t wb_data;
  logic ld_valid = 0, ld_ready; warp_id_t ld_warp = '0; logic [REG_ID_W-1:0] ld_reg = '0; block_t ld_data = '0;

  operand_collector dut (.clk, .rst_n, .in_valid, .in_ready, .in_warp, .in_indirect, .in_dst, .in_src,
    .rf_rd_valid, .rf_rd_warp, .rf_rd_reg, .rf_rd_data_valid, .rf_rd_data, .rf_rd_err,
    .wb_valid, .wb_warp, .wb_reg, .wb_data, .done, .err);
  register_file #(.WARP_REGS(WARPS * REGS), .WARPS(WARPS)) u_rf (.clk, .rst_n,
    .rd_valid(rf_rd_valid), .rd_warp(rf_rd_warp), .rd_reg(rf_rd_reg),
    .rd_data_valid(rf_rd_data_valid), .rd_data(rf_rd_data), .rd_err(rf_rd_err),
    .wr0_valid(wb_valid), .wr0_warp(wb_warp), .wr0_reg(wb_reg), .wr0_data(wb_data),
    .wr1_valid(ld_valid), .wr1_ready(ld_ready), .wr1_warp(ld_warp), .wr1_reg(ld_reg), .wr1_data(ld_data));

  block_t model [WARPS][REGS];
  int n_mov = 0, n_imov = 0, n_err = 0;

  task automatic check(bit c, string what);
    checks++; if (!c) begin failures++; if (failures < 20) $display("FAIL %s t=%0t", what, $time); end
  endtask

  function automatic block_t rnd_value();
    block_t b = {32{$urandom}};
    b[7:0] = ($urandom_range(0, 99) < 90) ? 8'($urandom_range(0, REGS - 1)) : 8'($urandom_range(REGS, 255));
    return b;
  endfunction

  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk); #1 rst_n = 1;
    for (int w = 0; w < WARPS; w++) for (int r = 0; r < REGS; r++) begin
      @(negedge clk);
      ld_valid = 1; ld_warp = warp_id_t'(w); ld_reg = 8'(r); ld_data = rnd_value();
      model[w][r] = ld_data;
    end
    @(negedge clk); ld_valid = 0;
    for (int i = 0; i < 3000; i++) begin
      int w, d, s, ind, lat; bit ind_bit, exp_err; block_t exp;
      w = $urandom_range(0, WARPS - 1); d = $urandom_range(0, REGS - 1); s = $urandom_range(0, REGS - 1);
      ind_bit = $urandom_range(0, 1);
      @(negedge clk);
      check(in_ready, "idle collector accepts");
      in_valid = 1; in_warp = warp_id_t'(w); in_dst = 8'(d); in_src = 8'(s); in_indirect = ind_bit;
      ind = int'(model[w][s][7:0]);
      exp_err = ind_bit && ind >= REGS;
      exp = ind_bit ? (exp_err ? '0 : model[w][ind]) : model[w][s];
      @(negedge clk); in_valid = 0;
      lat = 1;
      while (!wb_valid && !err && lat < 20) begin
        check(!in_ready, "busy while working");
        @(negedge clk); lat++;
      end
      if (exp_err) begin
        check(err && done && !wb_valid, "indirect number out of range flagged");
        n_err++;
      end else begin
        check(wb_valid && done && !err, "writeback");
        check(wb_warp == warp_id_t'(w) && wb_reg == 8'(d), "writeback register");
        check(wb_data == exp, "moved value");
        // lat counts the cycles from the accepting edge: 2 (MOV) or 4 (IMOV)
        // edges later the registered writeback is seen, i.e. lat = 3 or 5
        check(lat == (ind_bit ? 5 : 3), "latency");
        model[w][d] = exp;
        if (ind_bit) n_imov++; else n_mov++;
      end
    end
    $display("mov=%0d imov=%0d err=%0d", n_mov, n_imov, n_err);
    check(n_mov > 0 && n_imov > 0 && n_err > 0, "all cases occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
