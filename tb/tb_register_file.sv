// tb_register_file: random reads and two-port writes against a reference
// array. Checks the one-cycle read latency, port-0 write priority
// (wr1_ready low while port 0 writes), the register-to-bank mapping (every
// register of several warps is written and read back through all banks)
// and the error flag with zero data for register numbers 42..255.
// Reduced to 8 warps (336 warp registers) to keep the run short.
module tb_register_file;
  import morpheus_pkg::*;
  localparam int WARPS = 8;
  localparam int REGS  = REGS_PER_WARP;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic rd_valid = 0, rd_data_valid, rd_err, wr0_valid = 0, wr1_valid = 0, wr1_ready;
  warp_id_t rd_warp = '0, wr0_warp = '0, wr1_warp = '0;
  logic [REG_ID_W-1:0] rd_reg = '0, wr0_reg = '0, wr1_reg = '0;
  block_t rd_data, wr0_data = '0, wr1_data = '0;

  register_file #(.WARP_REGS(WARPS * REGS), .BANKS(RF_BANKS), .REGS(REGS), .WARPS(WARPS)) dut (.*);

  block_t model [WARPS][REGS];
  bit     known [WARPS][REGS];
  int n_err = 0, n_pri = 0, n_rd = 0;

  task automatic check(bit c, string what);
    checks++; if (!c) begin failures++; if (failures < 20) $display("FAIL %s t=%0t", what, $time); end
  endtask

  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    bit exp_valid, exp_err, exp_known; block_t exp_data;
    for (int w = 0; w < WARPS; w++) for (int r = 0; r < REGS; r++) known[w][r] = 0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    // fill every register through alternating ports
    for (int w = 0; w < WARPS; w++) for (int r = 0; r < REGS; r++) begin
      @(negedge clk);
      wr0_valid = r[0]; wr1_valid = !r[0];
      wr0_warp = warp_id_t'(w); wr1_warp = warp_id_t'(w);
      wr0_reg = 8'(r); wr1_reg = 8'(r);
      wr0_data = {32{$urandom}}; wr1_data = {32{$urandom}};
      model[w][r] = r[0] ? wr0_data : wr1_data; known[w][r] = 1;
    end
    @(negedge clk); wr0_valid = 0; wr1_valid = 0;
    exp_valid = 0;
    for (int i = 0; i < 20000; i++) begin
      int w0, r0, w1, r1, wr, rr;
      @(negedge clk);
      // check the read issued in the previous cycle
      check(rd_data_valid == exp_valid, "read latency one cycle");
      if (exp_valid) begin
        check(rd_err == exp_err, "error flag");
        check(rd_data == (exp_err ? '0 : exp_data), "read data");
        if (exp_err) n_err++; else n_rd++;
      end
      // new stimulus
      w0 = $urandom_range(0, WARPS - 1); r0 = $urandom_range(0, REGS - 1);
      w1 = $urandom_range(0, WARPS - 1); r1 = $urandom_range(0, REGS - 1);
      wr0_valid = ($urandom_range(0, 99) < 30); wr1_valid = ($urandom_range(0, 99) < 40);
      wr0_warp = warp_id_t'(w0); wr0_reg = 8'(r0); wr0_data = {32{$urandom}};
      wr1_warp = warp_id_t'(w1); wr1_reg = 8'(r1); wr1_data = {32{$urandom}};
      rd_valid = ($urandom_range(0, 99) < 70);
      wr = $urandom_range(0, WARPS - 1);
      rr = ($urandom_range(0, 99) < 10) ? $urandom_range(REGS, 255) : $urandom_range(0, REGS - 1);
      rd_warp = warp_id_t'(wr); rd_reg = 8'(rr);
      #1;
      check(wr1_ready == !wr0_valid, "port 0 has priority");
      if (wr0_valid && wr1_valid) n_pri++;
      // expected read: old value (read before this cycle's write)
      exp_valid = rd_valid; exp_err = (rr >= REGS);
      if (!exp_err) exp_data = model[wr][rr];
      if (wr0_valid) model[w0][r0] = wr0_data;
      else if (wr1_valid) model[w1][r1] = wr1_data;
    end
    @(negedge clk); rd_valid = 0; wr0_valid = 0; wr1_valid = 0;
    $display("reads=%0d errors=%0d port-conflicts=%0d", n_rd, n_err, n_pri);
    check(n_err > 0 && n_pri > 0 && n_rd > 0, "all cases occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
