// morpheus_pkg: sizes, message types and helper functions shared by the
// Morpheus controller (one per LLC partition) and the SM-side Indirect-MOV
// register path.
//
// The numbers follow an RTX 3080-class baseline: 68 SMs, 10 LLC partitions,
// 48 warps per SM, 128-byte blocks, 256 extended LLC sets per partition,
// 32-byte Bloom filters, a 256 KB register file per SM, 42 registers
// per kernel warp, 18-bit block tag and 12-bit LRU counter in the kernel's
// metadata word. Address width, set-field width, op encodings and the hash
// functions are this design's own choices.
package morpheus_pkg;

  // ---- global organisation ----------------------------------------------
  localparam int unsigned NUM_SMS        = 68;   // SMs in the GPU
  localparam int unsigned NUM_PARTITIONS = 10;   // LLC partitions
  localparam int unsigned WARPS_PER_SM   = 48;   // warps (= extended sets) per cache-mode SM
  localparam int unsigned SM_ID_W        = 7;
  localparam int unsigned WARP_ID_W      = 6;

  // ---- addresses ----------------------------------------------------------
  localparam int unsigned ADDR_W      = 34;   // 10 GiB GPU memory needs 34 bits
  localparam int unsigned BLOCK_BYTES = 128;
  localparam int unsigned OFFSET_W    = 7;    // log2(128)
  localparam int unsigned BLOCK_W     = BLOCK_BYTES * 8; // 1024-bit block / warp register
  localparam int unsigned SET_FIELD_W = 9;    // partition-local set number
  localparam int unsigned TAG_W       = ADDR_W - OFFSET_W - SET_FIELD_W; // 18 bits

  // ---- extended LLC -------------------------------------------------------
  localparam int unsigned EXT_SETS    = 256;  // warp status table rows per partition
  localparam int unsigned EXT_SET_W   = 8;
  localparam int unsigned EXT_ASSOC   = 32;   // blocks per register-file set
  localparam int unsigned BF_BITS     = 256;  // 32-byte Bloom filter
  localparam int unsigned BF_IDX_W    = 8;
  localparam int unsigned BF_HASHES   = 4;    // hash functions per filter
  localparam int unsigned DBUF_ENTRIES= 16;   // entries in each data buffer
  localparam int unsigned DPTR_W      = 4;
  localparam int unsigned RQ_DEPTH    = 4;    // request queue entries

  // ---- SM register file ---------------------------------------------------
  localparam int unsigned RF_WARP_REGS  = 2048; // 256 KB / 128 B
  localparam int unsigned RF_BANKS      = 4;
  localparam int unsigned REGS_PER_WARP = 42;
  localparam int unsigned REG_ID_W      = 8;    // an indirect register number is 8 bits

  typedef logic [ADDR_W-1:0]    addr_t;
  typedef logic [BLOCK_W-1:0]   block_t;
  typedef logic [TAG_W-1:0]     tag_t;
  typedef logic [SM_ID_W-1:0]   sm_id_t;
  typedef logic [WARP_ID_W-1:0] warp_id_t;
  typedef logic [EXT_SET_W-1:0] ext_set_t;
  typedef logic [DPTR_W-1:0]    dptr_t;

  // Operation of a request in the extended LLC. FILL inserts a block that
  // was fetched from DRAM after an extended LLC miss.
  typedef enum logic [1:0] {OP_READ = 2'd0, OP_WRITE = 2'd1, OP_FILL = 2'd2} op_e;

  // Request from an SM to an LLC partition (reads carry no data).
  typedef struct packed {
    addr_t  addr;
    logic   write;
    sm_id_t src_sm;
    block_t data;
  } llc_req_t;

  // Read response from the partition to an SM.
  typedef struct packed {
    addr_t  addr;
    sm_id_t dst_sm;
    block_t data;
  } llc_resp_t;

  // What the controller needs back with a DRAM read response.
  typedef struct packed {
    sm_id_t   src_sm;
    logic     fill;      // insert the returned block into the extended LLC
    ext_set_t set;
  } dram_meta_t;

  typedef struct packed {
    addr_t      addr;
    logic       write;
    block_t     data;
    dram_meta_t meta;
  } dram_req_t;

  typedef struct packed {
    addr_t      addr;
    block_t     data;
    dram_meta_t meta;
  } dram_resp_t;

  // One extended LLC request as held in the request queue.
  typedef struct packed {
    ext_set_t set;
    tag_t     tag;
    sm_id_t   src_sm;
    op_e      op;
    block_t   data;
  } xreq_t;

  // One warp status table row (Fig. 7 fields; the set ID is the row number).
  typedef struct packed {
    tag_t   tag;
    sm_id_t src_sm;
    logic   busy;
    op_e    op;
    logic   hit;     // result field: 1 = hit, 0 = miss
    dptr_t  ptr;
  } wst_row_t;

  // Notification to the kernel warp that owns a set.
  typedef struct packed {
    sm_id_t   sm;
    warp_id_t warp;
    ext_set_t set;
  } knotify_t;

  // Memory-mapped access by a kernel warp to the query unit.
  typedef enum logic [1:0] {MM_WST = 2'd0, MM_WDB = 2'd1, MM_RDB = 2'd2} mm_region_e;

  typedef struct packed {
    logic       write;
    mm_region_e region;
    logic [7:0] index;   // WST row or buffer entry
    block_t     wdata;   // WST write: wdata[0] is the result (hit) bit
  } mm_req_t;

  // Completed extended LLC request handed back to the controller.
  typedef struct packed {
    ext_set_t set;
    tag_t     tag;
    sm_id_t   src_sm;
    op_e      op;
    logic     hit;
    block_t   data;
  } xdone_t;

  // One-cycle event pulses of a Morpheus controller, for counters.
  typedef struct packed {
    logic conv;        // request sent to the conventional LLC
    logic bypass;      // cache-mode SM request sent straight to DRAM
    logic pred_hit;    // extended read predicted to hit, sent to the kernel
    logic pred_miss;   // extended read predicted to miss, sent to DRAM
    logic ext_write;   // write accepted into the extended LLC
    logic ext_hit;     // kernel reported a read hit
    logic ext_miss;    // kernel reported a read miss (false positive)
    logic fill;        // block from DRAM queued for insertion
    logic bf_swap;     // Bloom filters of a set were swapped
    logic rq_stall;    // an extended request waited for request-queue space
  } ctrl_events_t;

  // ---- helpers ------------------------------------------------------------

  // The SM and warp that serve extended set `set` of partition `part`:
  // sets are interleaved over partitions and packed 48 to a cache-mode SM,
  // starting at SM `base`.
  function automatic knotify_t ext_set_owner(ext_set_t set, int unsigned part, sm_id_t base);
    int unsigned g;
    knotify_t    o;
    g      = int'(set) * NUM_PARTITIONS + part;
    o.sm   = sm_id_t'(int'(base) + g / WARPS_PER_SM);
    o.warp = warp_id_t'(g % WARPS_PER_SM);
    o.set  = set;
    return o;
  endfunction

  // H3-class hash number `k` of a block tag into a Bloom filter index: every
  // index bit is the parity of the tag bits selected by a constant mask.
  // The masks come from a xorshift sequence, fixed at elaboration.
  function automatic logic [BF_IDX_W-1:0] bf_hash(tag_t tag, int unsigned k);
    logic [31:0]         s;
    logic [BF_IDX_W-1:0] h;
    s = 32'h9E3779B9 ^ (32'(k) * 32'h85EBCA6B);
    for (int b = 0; b < BF_IDX_W; b++) begin
      s = s ^ (s << 13);
      s = s ^ (s >> 17);
      s = s ^ (s << 5);
      h[b] = ^(tag & s[TAG_W-1:0]);
    end
    return h;
  endfunction

  // All filter bits that tag `tag` sets.
  function automatic logic [BF_BITS-1:0] bf_mask(tag_t tag);
    logic [BF_BITS-1:0] m;
    m = '0;
    for (int k = 0; k < BF_HASHES; k++) m[bf_hash(tag, k)] = 1'b1;
    return m;
  endfunction

endpackage
