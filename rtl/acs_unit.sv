// acs_unit -- add-compare-select for one trellis branch.
//
// The branch leaves state src with input bit u and ends in state dst =
// {u, src} without its last bit. Add: the candidate weight is the source
// path weight plus the Hamming distance between the received pair and the
// branch's code pair (0, 1 or 2). Compare: the candidate is held against the
// entry the destination already has in this stage. Select: the candidate
// replaces that entry if the destination is still empty, if the candidate is
// lighter, or if the weights are equal and the candidate comes from a
// lower-numbered state -- the rule that on a tie the path from the lowest
// state survives. Comparing predecessor states makes the result independent
// of the order in which source nodes are expanded.
//
// Purely combinational. The weight width (viterbi_pkg::WEIGHT_W, 8 bits) is
// this design's choice; 60 received bits need at most 60, so no saturation
// logic is present.
module acs_unit
  import viterbi_pkg::*;
#(
  parameter int unsigned      K  = DEF_K,
  parameter logic [MAX_K-1:0] G1 = DEF_G1,
  parameter logic [MAX_K-1:0] G2 = DEF_G2,
  localparam int unsigned     SB = K - 1
) (
  input  sym_t          rx,           // received pair {first, second}
  input  logic [SB-1:0] src,          // source state being expanded
  input  logic          u,            // input bit labelling the branch
  input  weight_t       src_weight,   // path weight of the source node
  input  logic          src_valid,    // source node is reachable
  input  logic          dst_valid_i,  // destination entry before this branch
  input  weight_t       dst_weight_i,
  input  logic [SB-1:0] dst_pred_i,
  output logic [SB-1:0] dst,          // destination state of the branch
  output logic          dst_valid_o,  // destination entry after select
  output weight_t       dst_weight_o,
  output logic [SB-1:0] dst_pred_o,
  output logic          taken,        // this branch is now the survivor
  output logic          tie           // candidate and stored weight were equal
);

  logic [K-1:0] r;
  weight_t      cand;

  always_comb begin
    r    = {u, src};
    dst  = r[K-1:1];
    // add
    cand = src_weight + weight_t'(hamming2(rx, code_pair(G1, G2, MAX_K'(r))));
    // compare
    tie  = src_valid && dst_valid_i && (cand == dst_weight_i);
    if (!src_valid)
      taken = 1'b0;
    else if (!dst_valid_i)
      taken = 1'b1;
    else if (cand < dst_weight_i)
      taken = 1'b1;
    else
      taken = tie && (src < dst_pred_i);
    // select
    dst_valid_o  = taken ? 1'b1 : dst_valid_i;
    dst_weight_o = taken ? cand : dst_weight_i;
    dst_pred_o   = taken ? src  : dst_pred_i;
  end

endmodule
