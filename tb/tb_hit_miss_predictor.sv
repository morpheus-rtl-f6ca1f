// tb_hit_miss_predictor: drives random accesses to a few sets while a
// reference model keeps each set's true LRU contents (ASSOC blocks) and an
// exact model of both Bloom filters. Checks: no false negative ever; the
// prediction equals the reference BF1 lookup; swaps happen when the
// reference count of distinct BF2 insertions reaches ASSOC; clear empties.
module tb_hit_miss_predictor;
  import morpheus_pkg::*;
  localparam int SETS = 8, ASSOC = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, valid = 0, insert = 0;
  ext_set_t set; tag_t tag; logic predict_hit, swapped;
  always #5 clk = ~clk;

  hit_miss_predictor #(.SETS(SETS), .ASSOC(ASSOC)) dut (.clk, .rst_n, .clear, .valid, .set,
    .tag, .insert, .predict_hit, .swapped);

  // reference state
  logic [BF_BITS-1:0] rbf1 [SETS], rbf2 [SETS];
  int rn [SETS];
  tag_t lru [SETS][$];          // front = most recent
  int n_swaps = 0, n_fp = 0, n_hits = 0;

  task automatic check(bit c, string what);
    checks++; if (!c) begin failures++; $display("FAIL %s set=%0d tag=%h t=%0t", what, set, tag, $time); end
  endtask

  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int s = 0; s < SETS; s++) begin rbf1[s] = '0; rbf2[s] = '0; rn[s] = 0; end
    set = '0; tag = '0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    for (int i = 0; i < 6000; i++) begin
      int s; logic [BF_BITS-1:0] m; bit in_set, e_pred, e_swap;
      s = $urandom_range(0, SETS-1);
      set = ext_set_t'(s);
      tag = tag_t'($urandom_range(0, 23));   // 24 tags per set, 8 ways
      m = bf_mask(tag);
      valid = 1; insert = 1;
      #1;
      in_set = 0; foreach (lru[s][k]) if (lru[s][k] == tag) in_set = 1;
      e_pred = ((rbf1[s] & m) == m);
    check(predict_hit == e_pred, "prediction");
      if (in_set) check(predict_hit, "no false negative");
      n_hits += in_set; n_fp += (predict_hit && !in_set);
      // reference update
      e_swap = 0;
      if ((rbf2[s] & m) != m) rn[s]++;
      rbf1[s] |= m; rbf2[s] |= m;
      if (rn[s] >= ASSOC) begin rbf1[s] = rbf2[s]; rbf2[s] = '0; rn[s] = 0; e_swap = 1; end
      check(swapped == e_swap, "swap");
      n_swaps += e_swap;
      foreach (lru[s][k]) if (lru[s][k] == tag) begin lru[s].delete(k); break; end
      lru[s].push_front(tag);
      if (lru[s].size() > ASSOC) void'(lru[s].pop_back());
      @(posedge clk); #1;
    end
    // clear empties everything
    valid = 0; clear = 1; @(posedge clk); #1; clear = 0;
    valid = 1; insert = 0;
    for (int s = 0; s < SETS; s++) begin set = ext_set_t'(s); tag = '0; #1; check(!predict_hit, "cleared"); end
    valid = 0;
    $display("swaps=%0d hits=%0d false_positives=%0d", n_swaps, n_hits, n_fp);
    check(n_swaps > 50, "swaps happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
