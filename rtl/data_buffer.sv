// data_buffer: a pool of 128-byte entries holding extended LLC payloads.
//
// The query unit has two of these. The write data buffer receives the
// block of a write (or of a fill after a miss) when the request leaves the
// request queue, and the kernel warp loads it. The read data buffer entry is
// reserved when a read leaves the queue, the kernel warp stores the hit
// block into it, and the query unit reads it out to answer the requesting
// SM. Entries are named by the data pointer kept in the warp status table.
//
//   alloc : reserves the lowest free entry (alloc_ptr, valid while
//           alloc_ok) and, if alloc_wr, writes alloc_data into it.
//   wr    : writes an entry (the kernel's store into the read buffer).
//   rd    : combinational read of any entry.
//   free  : releases an entry.
// The paper gives the 128-byte entry and the memory mapping; 16 entries per
// buffer (the figure shows a data pointer of 15) and the lowest-free
// allocation are this design's choices. Updates happen at the clock edge.
module data_buffer
  import morpheus_pkg::*;
#(
  parameter int unsigned ENTRIES = DBUF_ENTRIES
) (
  input  logic      clk,
  input  logic      rst_n,
  output logic      alloc_ok,
  output dptr_t     alloc_ptr,
  input  logic      alloc_valid,
  input  logic      alloc_wr,
  input  block_t    alloc_data,
  input  logic      wr_valid,
  input  dptr_t     wr_ptr,
  input  block_t    wr_data,
  input  dptr_t     rd_ptr,
  output block_t    rd_data,
  input  logic      free_valid,
  input  dptr_t     free_ptr,
  output logic [ENTRIES-1:0] in_use
);
  block_t             mem [ENTRIES];
  logic [ENTRIES-1:0] used;

  always_comb begin
    alloc_ok  = 1'b0;
    alloc_ptr = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (!used[i]) begin alloc_ok = 1'b1; alloc_ptr = dptr_t'(i); end
    end
    rd_data = mem[rd_ptr];
    in_use  = used;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      used <= '0;
      for (int i = 0; i < ENTRIES; i++) mem[i] <= '0;
    end else begin
      if (free_valid) used[free_ptr] <= 1'b0;
      if (alloc_valid && alloc_ok) begin
        used[alloc_ptr] <= 1'b1;
        if (alloc_wr) mem[alloc_ptr] <= alloc_data;
      end
      if (wr_valid) mem[wr_ptr] <= wr_data;
    end
  end

  a_alloc_ok: assert property (@(posedge clk) disable iff (!rst_n) alloc_valid |-> alloc_ok);
  a_free_used: assert property (@(posedge clk) disable iff (!rst_n) free_valid |-> used[free_ptr]);
endmodule
