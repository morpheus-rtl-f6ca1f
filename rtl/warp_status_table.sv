// warp_status_table: one row per extended LLC set of this partition,
// describing the request that the set's kernel warp is serving.
//
// Row fields (from the paper's table): tag, requesting SM, busy, op,
// result (hit/miss) and a pointer into the read or write data buffer; the
// set ID is the row number. The table is memory-mapped for the kernel warps;
// the query unit does the address decoding and uses the two read ports here.
//
//   alloc  : when a request leaves the request queue its row is written
//            with busy = 1 and the result cleared.
//   finish : when the kernel warp stores its result, the row gets busy = 0
//            and the result bit; the other fields stay for inspection.
//   busy   : all busy bits, so the queue can tell which sets are free.
//
// Reads are combinational; writes take effect at the clock edge. alloc and
// finish in the same cycle must name different rows (the query unit never
// allocates a busy row). The 256-row size follows the paper; the bit widths
// come from the package.
module warp_status_table
  import morpheus_pkg::*;
#(
  parameter int unsigned SETS = EXT_SETS
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           alloc_valid,
  input  ext_set_t       alloc_set,
  input  wst_row_t       alloc_row,
  input  logic           finish_valid,
  input  ext_set_t       finish_set,
  input  logic           finish_hit,
  input  ext_set_t       rd_idx_a,
  output wst_row_t       rd_row_a,
  input  ext_set_t       rd_idx_b,
  output wst_row_t       rd_row_b,
  output logic [SETS-1:0] busy
);
  localparam int unsigned SET_W = (SETS > 1) ? $clog2(SETS) : 1;
  wst_row_t rows [SETS];

  always_comb begin
    rd_row_a = rows[rd_idx_a[SET_W-1:0]];
    rd_row_b = rows[rd_idx_b[SET_W-1:0]];
    for (int i = 0; i < SETS; i++) busy[i] = rows[i].busy;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < SETS; i++) rows[i] <= '0;
    end else begin
      if (alloc_valid) begin
        rows[alloc_set[SET_W-1:0]]      <= alloc_row;
        rows[alloc_set[SET_W-1:0]].busy <= 1'b1;
        rows[alloc_set[SET_W-1:0]].hit  <= 1'b0;
      end
      if (finish_valid) begin
        rows[finish_set[SET_W-1:0]].busy <= 1'b0;
        rows[finish_set[SET_W-1:0]].hit  <= finish_hit;
      end
    end
  end

  a_no_double_alloc: assert property (@(posedge clk) disable iff (!rst_n)
    alloc_valid |-> !rows[alloc_set[SET_W-1:0]].busy);
  a_finish_busy: assert property (@(posedge clk) disable iff (!rst_n)
    finish_valid |-> rows[finish_set[SET_W-1:0]].busy);
endmodule
