// tb_request_queue: random enqueues and removals at random positions,
// checked against a queue model: order kept, full/empty respected,
// simultaneous enqueue and dequeue when full.
module tb_request_queue;
  import morpheus_pkg::*;
  localparam int DEPTH = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic enq_valid = 0, enq_ready, deq_valid = 0;
  xreq_t enq_data, q_data [DEPTH];
  logic [DEPTH-1:0] q_valid;
  logic [1:0] deq_idx = 0;
  logic [2:0] count;
  xreq_t model [$];
  int n_full = 0, n_mid = 0;

  request_queue #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .enq_valid, .enq_ready, .enq_data,
    .q_valid, .q_data, .deq_valid, .deq_idx, .count);

  task automatic check(bit c, string what);
    checks++; if (!c) begin failures++; $display("FAIL %s t=%0t", what, $time); end
  endtask

  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    enq_data = '0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      bit e, d, rdy; int idx;
      // compare visible state
      check(int'(count) == model.size(), "count");
      for (int k = 0; k < DEPTH; k++) begin
        check(q_valid[k] == (k < model.size()), "valid");
        if (k < model.size()) check(q_data[k] == model[k], "data");
      end
      e = ($urandom_range(0, 99) < 55);
      d = ($urandom_range(0, 99) < 45) && model.size() > 0;
      idx = model.size() > 0 ? $urandom_range(0, model.size() - 1) : 0;
      enq_valid = e;
      enq_data.set = ext_set_t'($urandom); enq_data.tag = tag_t'($urandom);
      enq_data.src_sm = sm_id_t'($urandom); enq_data.op = op_e'($urandom_range(0, 2));
      enq_data.data = {32{$urandom}};
      deq_valid = d; deq_idx = 2'(idx);
      #1;
      check(enq_ready == (model.size() - int'(d) < DEPTH), "enq_ready");
      rdy = enq_ready;
      if (model.size() == DEPTH && d && e) n_full++;
      if (d && idx > 0 && idx < model.size() - 1) n_mid++;
      @(posedge clk); #1;
      if (d) model.delete(idx);
      if (e && rdy) model.push_back(enq_data);
      enq_valid = 0; deq_valid = 0;
    end
    check(n_full > 5 && n_mid > 20, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
