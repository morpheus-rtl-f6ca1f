// ext_llc_kernel_model: behavioural model of the extended LLC kernel that
// runs on cache-mode SMs (software in the real system, not hardware).
//
// It serves the requests of one LLC partition, one at a time, the way a
// kernel warp would: on a notification it loads the set's warp status table
// row (and, for a write or fill, the write data buffer entry), performs the
// register-file tag lookup of the paper (valid and tag compare on all 32
// metadata words, first matching way, LRU counter of the hit way set to
// 0xfff and all others decremented), and answers with memory-mapped stores:
// the block into the read data buffer on a read hit, then the result into
// the row. A write updates or allocates the block (dirty); a fill inserts a
// clean block unless the tag is already present. The victim is the way with
// the lowest LRU counter (an invalid way first); a dirty victim is written
// back to main memory through the wb_* port, which the surrounding test
// sends through the controller as a cache-mode SM request (so it bypasses
// the LLC). Metadata layout per way: 12-bit LRU counter, dirty, valid,
// 18-bit tag, as in the paper's register layout. LAT idle cycles stand for
// the software time per request.
module ext_llc_kernel_model
  import morpheus_pkg::*;
#(
  parameter int unsigned SETS  = EXT_SETS,
  parameter int unsigned ASSOC = EXT_ASSOC,
  parameter int unsigned LAT   = 2
) (
  input  logic       clk,
  input  logic [SET_FIELD_W-1:0] ext_set_base,
  input  logic       notify_valid,
  output logic       notify_ready,
  input  knotify_t   notify,
  output logic       mm_valid,
  input  logic       mm_ready,
  output mm_req_t    mm,
  input  logic       mm_rvalid,
  input  block_t     mm_rdata,
  output logic       wb_valid,
  input  logic       wb_ready,
  output addr_t      wb_addr,
  output block_t     wb_data
);
  typedef struct packed {
    logic [11:0] lru;
    logic        dirty;
    logic        valid;
    tag_t        tag;
  } meta_t;

  meta_t  md  [SETS][ASSOC];
  block_t dat [SETS][ASSOC];

  int n_req = 0, n_read_hit = 0, n_read_miss = 0, n_write = 0, n_fill = 0, n_dirty_evict = 0;

  initial begin
    for (int s = 0; s < SETS; s++) for (int w = 0; w < ASSOC; w++) begin
      md[s][w] = '0; dat[s][w] = '0;
    end
    notify_ready = 0; mm_valid = 0; mm = '0; wb_valid = 0; wb_addr = '0; wb_data = '0;
  end

  task automatic mm_access(input bit wr, input mm_region_e reg_, input int idx,
                           input block_t wd, output block_t rd);
    mm.write = wr; mm.region = reg_; mm.index = 8'(idx); mm.wdata = wd;
    mm_valid = 1;
    do @(negedge clk); while (!mm_ready);
    @(posedge clk); #1 mm_valid = 0;
    rd = '0;
    if (!wr) begin
      while (!mm_rvalid) begin @(posedge clk); #1; end
      rd = mm_rdata;
    end
  endtask

  // Algorithm 1 plus the LRU update; returns the hit way or -1
  function automatic int lookup(int s, tag_t t);
    logic [ASSOC-1:0] ballot;
    int idx;
    for (int w = 0; w < ASSOC; w++) ballot[w] = md[s][w].valid && md[s][w].tag == t;
    if (ballot == '0) return -1;
    idx = 0;
    for (int w = ASSOC - 1; w >= 0; w--) if (ballot[w]) idx = w;   // ffs - 1
    return idx;
  endfunction

  function automatic void touch(int s, int way);
    for (int w = 0; w < ASSOC; w++)
      if (w == way) md[s][w].lru = 12'hfff;
      else if (md[s][w].lru != 0) md[s][w].lru = md[s][w].lru - 1'b1;
  endfunction

  function automatic int victim(int s);
    int v = 0;
    for (int w = 0; w < ASSOC; w++) if (!md[s][w].valid) return w;
    for (int w = 1; w < ASSOC; w++) if (md[s][w].lru < md[s][v].lru) v = w;
    return v;
  endfunction

  task automatic insert(int s, tag_t t, block_t d, bit dirty);
    int v = victim(s);
    if (md[s][v].valid && md[s][v].dirty) begin
      wb_addr  = {md[s][v].tag, ext_set_base + SET_FIELD_W'(s), OFFSET_W'(0)};
      wb_data  = dat[s][v];
      wb_valid = 1;
      do @(negedge clk); while (!wb_ready);
      @(posedge clk); #1 wb_valid = 0;
      n_dirty_evict++;
    end
    md[s][v].valid = 1; md[s][v].dirty = dirty; md[s][v].tag = t;
    dat[s][v] = d;
    touch(s, v);
  endtask

  initial begin : serve
    repeat (4) @(posedge clk);   // let the controller come out of reset
    forever begin
      knotify_t nt; wst_row_t row; block_t rd, wd; int s, w;
      notify_ready = 1;
      do @(negedge clk); while (!notify_valid);
      nt = notify;
      @(posedge clk); #1 notify_ready = 0;
      repeat (LAT) @(posedge clk);
      #1;
      s = int'(nt.set);
      mm_access(0, MM_WST, s, '0, rd);
      row = wst_row_t'(rd[$bits(wst_row_t)-1:0]);
      wd = '0;
      if (row.op != OP_READ) mm_access(0, MM_WDB, int'(row.ptr), '0, wd);
      n_req++;
      w = lookup(s, row.tag);
      unique case (row.op)
        OP_READ: begin
          if (w >= 0) begin
            touch(s, w);
            mm_access(1, MM_RDB, int'(row.ptr), dat[s][w], rd);
            mm_access(1, MM_WST, s, block_t'(1), rd);
            n_read_hit++;
          end else begin
            mm_access(1, MM_WST, s, block_t'(0), rd);
            n_read_miss++;
          end
        end
        OP_WRITE: begin
          if (w >= 0) begin dat[s][w] = wd; md[s][w].dirty = 1; touch(s, w); end
          else insert(s, row.tag, wd, 1);
          mm_access(1, MM_WST, s, block_t'(w >= 0), rd);
          n_write++;
        end
        default: begin  // OP_FILL
          if (w < 0) insert(s, row.tag, wd, 0);
          mm_access(1, MM_WST, s, block_t'(0), rd);
          n_fill++;
        end
      endcase
    end
  end
endmodule
