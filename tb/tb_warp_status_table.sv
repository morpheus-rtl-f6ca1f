// tb_warp_status_table: allocates and finishes rows of random sets against
// a reference table; checks both read ports, the busy vector and that a
// finished row keeps its fields and records the result.
module tb_warp_status_table;
  import morpheus_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic alloc_valid = 0, finish_valid = 0, finish_hit = 0;
  ext_set_t alloc_set = 0, finish_set = 0, ia = 0, ib = 0;
  wst_row_t alloc_row = '0, ra, rb, ref_t [EXT_SETS];
  logic [EXT_SETS-1:0] busy;
  int n_alloc = 0, n_fin = 0;

  warp_status_table dut (.clk, .rst_n, .alloc_valid, .alloc_set, .alloc_row, .finish_valid,
    .finish_set, .finish_hit, .rd_idx_a(ia), .rd_row_a(ra), .rd_idx_b(ib), .rd_row_b(rb), .busy);

  task automatic check(bit c, string what);
    checks++; if (!c) begin failures++; $display("FAIL %s t=%0t", what, $time); end
  endtask

  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < EXT_SETS; i++) ref_t[i] = '0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      int a, f;
      a = $urandom_range(0, 255); f = $urandom_range(0, 255);
      alloc_valid = !ref_t[a].busy && ($urandom_range(0, 1) == 1);
      finish_valid = ref_t[f].busy && (f != a || !alloc_valid);
      alloc_set = ext_set_t'(a); finish_set = ext_set_t'(f);
      alloc_row.tag = tag_t'($urandom); alloc_row.src_sm = sm_id_t'($urandom_range(0, 67));
      alloc_row.op = op_e'($urandom_range(0, 2)); alloc_row.ptr = dptr_t'($urandom);
      alloc_row.busy = 0; alloc_row.hit = 1;
      finish_hit = $urandom_range(0, 1);
      ia = ext_set_t'($urandom); ib = ext_set_t'($urandom);
      #1;
      check(ra == ref_t[ia], "port a"); check(rb == ref_t[ib], "port b");
      for (int k = 0; k < EXT_SETS; k++) if (busy[k] != ref_t[k].busy) begin check(0, "busy vector"); break; end
      @(posedge clk); #1;
      if (alloc_valid) begin ref_t[a] = alloc_row; ref_t[a].busy = 1; ref_t[a].hit = 0; n_alloc++; end
      if (finish_valid) begin ref_t[f].busy = 0; ref_t[f].hit = finish_hit; n_fin++; end
      alloc_valid = 0; finish_valid = 0;
    end
    check(n_alloc > 500 && n_fin > 500, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
