// tb_address_separator: random requests against a reference computed from
// the address fields; checks the three routes, the extended set ID and the tag.
module tb_address_separator;
  import morpheus_pkg::*;
  int checks = 0, failures = 0;
  addr_t addr; sm_id_t src; logic [NUM_SMS-1:0] cm;
  logic [SET_FIELD_W-1:0] base; logic [SET_FIELD_W:0] cnt;
  logic bypass, to_ext, to_conv; ext_set_t set; tag_t tag;
  int n_ext = 0, n_conv = 0, n_byp = 0;

  address_separator dut (.addr, .src_sm(src), .cache_mode(cm), .ext_set_base(base),
    .ext_set_count(cnt), .bypass, .to_ext, .to_conv, .ext_set(set), .tag);

  task automatic check(bit c, string what);
    checks++; if (!c) begin failures++; $display("FAIL %s addr=%h src=%0d", what, addr, src); end
  endtask

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 4000; i++) begin
      int s; bit e_byp, e_ext;
      addr = {$urandom, $urandom}; src = sm_id_t'($urandom_range(0, NUM_SMS-1));
      cm = '0; for (int k = 40; k < 68; k++) cm[k] = 1'b1;   // SMs 40..67 in cache mode
      base = SET_FIELD_W'((i % 3 == 0) ? 256 : $urandom_range(0, 300));
      cnt  = (SET_FIELD_W+1)'($urandom_range(0, 256));
      #1;
      s = (addr >> 7) & 511;
      e_byp = (src >= 40);
      e_ext = !e_byp && s >= base && s < base + cnt;
      check(bypass == e_byp, "bypass");
      check(to_ext == e_ext, "to_ext");
      check(to_conv == (!e_byp && !e_ext), "to_conv");
      if (e_ext) check(set == ext_set_t'(s - base), "set");
      check(tag == tag_t'(addr >> 16), "tag");
      n_ext += e_ext; n_byp += e_byp; n_conv += (!e_byp && !e_ext);
    end
    check(n_ext > 100 && n_conv > 100 && n_byp > 100, "coverage of routes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
