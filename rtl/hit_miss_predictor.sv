// hit_miss_predictor: Bloom-filter prediction of extended LLC hits.
//
// Each extended LLC set has two Bloom filters, BF1 and BF2, a selector that
// says which physical filter is BF1, and a counter n of the blocks in BF2.
// For an access (set, tag):
//   * the prediction is "hit" when every filter bit of the tag is set in BF1
//     (BF1 holds at least every block currently in the set, so there are no
//     false negatives);
//   * when `insert` is set, the tag is added to both filters; if it was not
//     yet in BF2, n is incremented;
//   * when n reaches the set's associativity, BF2 holds the ASSOC most
//     recently used blocks, which under LRU are all blocks of the set, so BF1
//     is cleared and the two filters swap roles, and n restarts at 0.
// The flow, the two-filter scheme and the 32-byte filter size follow the
// paper. The number of hash functions (4), the hash functions themselves
// (H3 parity hashes of the block tag) and counting n by "was the tag already
// in BF2" are this design's choices; a false positive in BF2 can only make n
// count low, which delays the swap but never breaks the no-false-negative rule.
//
// Timing: the prediction is combinational from (valid, set, tag) and uses the
// state before this access; the insertion and any swap are written at the
// clock edge. One access per cycle. `clear` empties all filters (used when
// the extended LLC is reconfigured).
module hit_miss_predictor
  import morpheus_pkg::*;
#(
  parameter int unsigned SETS  = EXT_SETS,
  parameter int unsigned BITS  = BF_BITS,
  parameter int unsigned ASSOC = EXT_ASSOC
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     clear,
  input  logic     valid,
  input  ext_set_t set,
  input  tag_t     tag,
  input  logic     insert,
  output logic     predict_hit,
  output logic     swapped          // pulses when this access caused a swap
);
  localparam int unsigned SET_W = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned NW    = $clog2(ASSOC + 1);

  logic [BITS-1:0] bf_a [SETS];
  logic [BITS-1:0] bf_b [SETS];
  logic            sel  [SETS];   // 0: bf_a is BF1, 1: bf_b is BF1
  logic [NW-1:0]   n    [SETS];

  logic [SET_W-1:0] s;
  logic [BITS-1:0]  m, bf1, bf2;
  logic             in_bf2;
  logic [NW-1:0]    n_next;

  always_comb begin
    s      = set[SET_W-1:0];
    m      = BITS'(bf_mask(tag));
    bf1    = sel[s] ? bf_b[s] : bf_a[s];
    bf2    = sel[s] ? bf_a[s] : bf_b[s];
    predict_hit = valid && ((bf1 & m) == m);
    in_bf2 = ((bf2 & m) == m);
    n_next = in_bf2 ? n[s] : n[s] + 1'b1;
  end

  // kept apart from the prediction: `insert` depends on the prediction
  assign swapped = valid && insert && (int'(n_next) >= ASSOC);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < SETS; i++) begin
        bf_a[i] <= '0; bf_b[i] <= '0; sel[i] <= 1'b0; n[i] <= '0;
      end
    end else if (clear) begin
      for (int i = 0; i < SETS; i++) begin
        bf_a[i] <= '0; bf_b[i] <= '0; sel[i] <= 1'b0; n[i] <= '0;
      end
    end else if (valid && insert) begin
      if (swapped) begin
        // clear BF1, then swap: the old BF2 (with this tag) becomes BF1
        if (sel[s]) bf_b[s] <= '0; else bf_a[s] <= '0;
        if (sel[s]) bf_a[s] <= bf_a[s] | m; else bf_b[s] <= bf_b[s] | m;
        sel[s] <= !sel[s];
        n[s]   <= '0;
      end else begin
        bf_a[s] <= bf_a[s] | m;
        bf_b[s] <= bf_b[s] | m;
        n[s]    <= n_next;
      end
    end
  end
endmodule
