// tb_data_buffer: allocation of the lowest free entry, writes at
// allocation and through the write port, reads and frees, against a model;
// also fills the buffer to check alloc_ok drops when full.
module tb_data_buffer;
  import morpheus_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic alloc_ok, alloc_valid = 0, alloc_wr = 0, wr_valid = 0, free_valid = 0;
  dptr_t alloc_ptr, wr_ptr = 0, rd_ptr = 0, free_ptr = 0;
  block_t alloc_data = '0, wr_data = '0, rd_data;
  logic [15:0] in_use;
  block_t mdata [16]; bit mused [16];
  int n_full = 0;

  data_buffer dut (.clk, .rst_n, .alloc_ok, .alloc_ptr, .alloc_valid, .alloc_wr, .alloc_data,
    .wr_valid, .wr_ptr, .wr_data, .rd_ptr, .rd_data, .free_valid, .free_ptr, .in_use);

  task automatic check(bit c, string what);
    checks++; if (!c) begin failures++; $display("FAIL %s t=%0t", what, $time); end
  endtask

  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 16; i++) begin mdata[i] = '0; mused[i] = 0; end
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      int lo, f, w; bit any;
      lo = -1; for (int k = 15; k >= 0; k--) if (!mused[k]) lo = k;
      #0;
      check(alloc_ok == (lo >= 0), "alloc_ok");
      if (lo >= 0) check(int'(alloc_ptr) == lo, "lowest free");
      else n_full++;
      rd_ptr = dptr_t'($urandom); #1;
      check(rd_data == mdata[rd_ptr], "read");
      for (int k = 0; k < 16; k++) check(in_use[k] == mused[k], "in_use");
      alloc_valid = (lo >= 0) && ($urandom_range(0, 99) < ((i / 500) % 2 ? 70 : 40));
      alloc_wr = $urandom_range(0, 1); alloc_data = {32{$urandom}};
      f = $urandom_range(0, 15); free_valid = mused[f] && ($urandom_range(0, 1) == 1); free_ptr = dptr_t'(f);
      w = $urandom_range(0, 15); wr_valid = (w != lo || !alloc_valid) && ($urandom_range(0, 2) == 0);
      wr_ptr = dptr_t'(w); wr_data = {32{$urandom}};
      @(posedge clk); #1;
      if (free_valid) mused[f] = 0;
      if (alloc_valid) begin mused[lo] = 1; if (alloc_wr) mdata[lo] = alloc_data; end
      if (wr_valid) mdata[w] = wr_data;
      alloc_valid = 0; free_valid = 0; wr_valid = 0;
    end
    check(n_full > 0, "buffer became full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
