// address_separator: decides where an LLC request arriving at a partition
// is served.
//
// The partition-local set number is the SET_FIELD_W address bits above the
// block offset. The paper divides the address space statically, in
// proportion to the conventional and extended LLC capacities, and sends a
// request to the extended LLC when its set number lies in the extended
// range. Here that range is [ext_set_base, ext_set_base + ext_set_count),
// set by two configuration inputs; its position inside the set-number space
// is this design's choice. The extended set ID is the offset into that range
// and the tag is the address bits above the set field.
//
// Requests issued by an SM in cache mode (its bit set in cache_mode) are the
// extended LLC kernel's own main-memory traffic or L1 misses; they bypass
// both LLCs and go straight to DRAM, as the paper requires.
//
// Purely combinational: all outputs follow the inputs in the same cycle.
// Lint note: the seven block-offset bits of addr are deliberately unused.
module address_separator
  import morpheus_pkg::*;
(
  input  addr_t                    addr,
  input  sm_id_t                   src_sm,
  input  logic [NUM_SMS-1:0]       cache_mode,     // 1 = SM is in cache mode
  input  logic [SET_FIELD_W-1:0]   ext_set_base,   // first set number of the extended LLC
  input  logic [SET_FIELD_W:0]     ext_set_count,  // number of extended sets (<= EXT_SETS)
  output logic                     bypass,         // to DRAM, no LLC lookup
  output logic                     to_ext,         // extended LLC
  output logic                     to_conv,        // conventional LLC
  output ext_set_t                 ext_set,
  output tag_t                     tag
);
  logic [SET_FIELD_W-1:0] set_num;
  logic [SET_FIELD_W:0]   rel;

  always_comb begin
    set_num = addr[OFFSET_W +: SET_FIELD_W];
    tag     = addr[ADDR_W-1 -: TAG_W];
    rel     = {1'b0, set_num} - {1'b0, ext_set_base};
    bypass  = (int'(src_sm) < NUM_SMS) ? cache_mode[src_sm] : 1'b0;
    // in range: set_num >= base and set_num - base < count
    to_ext  = !bypass && (set_num >= ext_set_base) && (rel < ext_set_count);
    to_conv = !bypass && !to_ext;
    ext_set = rel[EXT_SET_W-1:0];
  end
endmodule
