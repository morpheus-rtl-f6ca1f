// ext_llc_query_unit: tracks the outstanding extended LLC requests of one
// LLC partition and is the kernel warps' window onto them.
//
// It holds the request queue, the warp status table (WST) and the read and
// write data buffers. A request leaves the queue as soon as the warp of its
// set is free and a buffer entry is available: its WST row is written
// (busy = 1), a write or fill block goes into the write data buffer, a read
// reserves a read data buffer entry, and a notification naming the owner SM
// and warp is sent towards the extended LLC kernel.
//
// The kernel warp then works through memory-mapped accesses (mm_*):
//   read  WST[set]      -> the row (tag, op, data pointer, ...) in rdata
//   read  WDB[ptr]      -> the block to write or insert
//   write RDB[ptr]      <- the block found on a read hit
//   write WST[set]      <- result bit in wdata[0]; this ends the request
// Ending a request frees its buffer entry, clears busy and hands the
// outcome (with the read-hit data) to the controller on done_*.
//
// The components and the memory mapping follow the paper; the notification
// message, the region encoding and the one-message-per-access protocol are
// this design's choices, since the paper does not say how a kernel warp
// learns that a request is waiting.
//
// Timing: one dequeue and one memory-mapped access per cycle; mm read data
// returns one cycle after the access is accepted; done_valid rises the cycle
// after the WST result store and stays until done_ready.
// Lint note: only some fields of the finishing WST row are read (op and
// ptr); the others are unused bits by design.
module ext_llc_query_unit
  import morpheus_pkg::*;
#(
  parameter int unsigned PART_ID = 0,
  parameter int unsigned SETS    = EXT_SETS,
  parameter int unsigned DEPTH   = RQ_DEPTH,
  parameter int unsigned ENTRIES = DBUF_ENTRIES
) (
  input  logic     clk,
  input  logic     rst_n,
  input  sm_id_t   cache_sm_base,   // first SM in cache mode
  // requests from the controller
  input  logic     enq_valid,
  output logic     enq_ready,
  input  xreq_t    enq,
  // notification to the kernel warp of a set
  output logic     notify_valid,
  input  logic     notify_ready,
  output knotify_t notify,
  // memory-mapped accesses from kernel warps
  input  logic     mm_valid,
  output logic     mm_ready,
  input  mm_req_t  mm,
  output logic     mm_rvalid,
  output block_t   mm_rdata,
  // finished requests to the controller
  output logic     done_valid,
  input  logic     done_ready,
  output xdone_t   done,
  output logic [$clog2(DEPTH+1)-1:0] queue_count
);
  localparam int unsigned IDX_W = $clog2(DEPTH);

  // ---- request queue ------------------------------------------------------
  logic [DEPTH-1:0] q_valid;
  xreq_t            q_data [DEPTH];
  logic             deq_valid;
  logic [IDX_W-1:0] deq_idx;

  request_queue #(.DEPTH(DEPTH)) u_rq (
    .clk, .rst_n,
    .enq_valid, .enq_ready, .enq_data(enq),
    .q_valid, .q_data, .deq_valid, .deq_idx, .count(queue_count)
  );

  // ---- warp status table --------------------------------------------------
  logic [SETS-1:0] busy;
  logic            alloc_valid;
  wst_row_t        alloc_row;
  logic            finish_valid;
  wst_row_t        row_mm, row_fin;

  warp_status_table #(.SETS(SETS)) u_wst (
    .clk, .rst_n,
    .alloc_valid, .alloc_set(q_data[deq_idx].set), .alloc_row,
    .finish_valid, .finish_set(mm.index), .finish_hit(mm.wdata[0]),
    .rd_idx_a(mm.index), .rd_row_a(row_mm),
    .rd_idx_b(mm.index), .rd_row_b(row_fin),
    .busy
  );

  // ---- data buffers -------------------------------------------------------
  logic   wdb_ok, rdb_ok;
  dptr_t  wdb_ptr, rdb_ptr;
  block_t wdb_rd, rdb_rd;
  logic   deq_is_read;

  data_buffer #(.ENTRIES(ENTRIES)) u_wdb (
    .clk, .rst_n,
    .alloc_ok(wdb_ok), .alloc_ptr(wdb_ptr),
    .alloc_valid(deq_valid && !deq_is_read), .alloc_wr(1'b1),
    .alloc_data(q_data[deq_idx].data),
    .wr_valid(1'b0), .wr_ptr('0), .wr_data('0),
    .rd_ptr(dptr_t'(mm.index)), .rd_data(wdb_rd),
    .free_valid(finish_valid && row_fin.op != OP_READ), .free_ptr(row_fin.ptr),
    .in_use()
  );

  data_buffer #(.ENTRIES(ENTRIES)) u_rdb (
    .clk, .rst_n,
    .alloc_ok(rdb_ok), .alloc_ptr(rdb_ptr),
    .alloc_valid(deq_valid && deq_is_read), .alloc_wr(1'b0), .alloc_data('0),
    .wr_valid(mm_valid && mm_ready && mm.write && mm.region == MM_RDB),
    .wr_ptr(dptr_t'(mm.index)), .wr_data(mm.wdata),
    .rd_ptr(row_fin.ptr), .rd_data(rdb_rd),
    .free_valid(finish_valid && row_fin.op == OP_READ), .free_ptr(row_fin.ptr),
    .in_use()
  );

  // ---- dequeue: oldest request whose set is free ---------------------------
  logic notify_free;
  always_comb begin
    notify_free = !notify_valid || notify_ready;
    deq_valid   = 1'b0;
    deq_idx     = '0;
    for (int i = DEPTH - 1; i >= 0; i--) begin
      if (q_valid[i] && !busy[q_data[i].set] && notify_free &&
          ((q_data[i].op == OP_READ) ? rdb_ok : wdb_ok)) begin
        deq_valid = 1'b1;
        deq_idx   = IDX_W'(i);
      end
    end
    deq_is_read      = (q_data[deq_idx].op == OP_READ);
    alloc_valid      = deq_valid;
    alloc_row        = '0;
    alloc_row.tag    = q_data[deq_idx].tag;
    alloc_row.src_sm = q_data[deq_idx].src_sm;
    alloc_row.op     = q_data[deq_idx].op;
    alloc_row.ptr    = deq_is_read ? rdb_ptr : wdb_ptr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      notify_valid <= 1'b0;
      notify       <= '0;
    end else begin
      if (notify_valid && notify_ready) notify_valid <= 1'b0;
      if (deq_valid) begin
        notify_valid <= 1'b1;
        notify       <= ext_set_owner(q_data[deq_idx].set, PART_ID, cache_sm_base);
      end
    end
  end

  // ---- memory-mapped accesses ----------------------------------------------
  always_comb begin
    mm_ready     = !done_valid || done_ready;
    finish_valid = mm_valid && mm_ready && mm.write && mm.region == MM_WST;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mm_rvalid  <= 1'b0;
      mm_rdata   <= '0;
      done_valid <= 1'b0;
      done       <= '0;
    end else begin
      mm_rvalid <= mm_valid && mm_ready && !mm.write;
      if (mm_valid && mm_ready && !mm.write) begin
        unique case (mm.region)
          MM_WST:  mm_rdata <= block_t'(row_mm);
          MM_WDB:  mm_rdata <= wdb_rd;
          default: mm_rdata <= '0;
        endcase
      end
      if (done_valid && done_ready) done_valid <= 1'b0;
      if (finish_valid) begin
        done_valid  <= 1'b1;
        done.set    <= mm.index;
        done.tag    <= row_fin.tag;
        done.src_sm <= row_fin.src_sm;
        done.op     <= row_fin.op;
        done.hit    <= mm.wdata[0];
        done.data   <= rdb_rd;
      end
    end
  end

  a_done_hold: assert property (@(posedge clk) disable iff (!rst_n)
    done_valid && !done_ready |=> done_valid && $stable(done));
endmodule
