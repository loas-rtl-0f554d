// fast_prefix_sum: single-cycle match finder of the inner-join unit.
//
// The two bitmasks are ANDed (the "AND result"), restricted to the matches not
// yet consumed, and a priority encoder picks the lowest matched position.  A
// prefix sum over bitmask B (the number of ones below that position) gives the
// offset of the matched weight inside the compressed fiber-B.  Everything is
// combinational, so one match is produced per clock cycle.
//
// Following the paper: AND, priority encoder, one fast prefix-sum on the
// bitmask of B only.  The lowest-position-first order and the popcount form of
// the prefix sum are this design's choices.
module fast_prefix_sum #(
  parameter int BM_LEN = loas_pkg::BM_LEN,
  localparam int POS_W = $clog2(BM_LEN)
) (
  input  logic [BM_LEN-1:0] bm_a,        // bitmask of fiber-A (non-silent neurons)
  input  logic [BM_LEN-1:0] bm_b,        // bitmask of fiber-B (non-zero weights)
  input  logic [BM_LEN-1:0] remaining,   // matches not consumed yet
  output logic              match_valid,
  output logic [POS_W-1:0]  match_pos,
  output logic [POS_W-1:0]  off_b        // offset of the weight in fiber-B
);

  logic [BM_LEN-1:0] and_result;
  logic [BM_LEN-1:0] below;

  assign and_result  = bm_a & bm_b & remaining;
  assign match_valid = |and_result;

  // priority encoder, lowest set bit wins
  always_comb begin
    match_pos = '0;
    for (int i = BM_LEN - 1; i >= 0; i--)
      if (and_result[i]) match_pos = POS_W'(i);
  end

  // prefix sum of bm_b at match_pos
  always_comb begin
    below = bm_b & ((BM_LEN'(1) << match_pos) - BM_LEN'(1));
    off_b = '0;
    for (int i = 0; i < BM_LEN; i++)
      off_b = off_b + POS_W'(below[i]);
  end

endmodule
