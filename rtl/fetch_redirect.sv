// fetch_redirect: next fetch PC selection of the front end (Fig. 5).
//
// The fetch PC reads the branch predictor, the BTB and the merge predictor in
// parallel. The branch path picks the BTB target when the branch is predicted
// taken and the incremented PC otherwise. The merge predictor's merge point
// replaces that choice only when the merge predictor hits and the
// confidence-cost predictor marks the branch as one to merge-predict; in that
// case the branch direction is not predicted and fetch continues at the merge
// point, with the predicted distance passed on to the control independence
// machinery. The three multiplexers are the figure's; the BTB-hit qualifier on
// the taken target is this design's choice.
//
// Purely combinational.
module fetch_redirect
  import mpp_pkg::*;
(
  input  pc_t   pc,
  input  logic [3:0] inst_size,   // instruction length in bytes (x86: 1..15)
  input  logic  bp_taken,         // branch predictor direction
  input  logic  btb_hit,
  input  pc_t   btb_target,
  input  logic  mp_hit,           // merge predictor hit
  input  pc_t   mp_merge_pc,
  input  dist_t mp_dist,
  input  logic  cc_use_mp,        // confidence-cost: use merge prediction
  output pc_t   next_pc,
  output logic  merge_predicted,  // next_pc is a predicted merge point
  output dist_t merge_dist
);
  pc_t bp_next_pc;

  always_comb begin
    bp_next_pc      = (bp_taken && btb_hit) ? btb_target : pc + pc_t'(inst_size);
    merge_predicted = mp_hit && cc_use_mp;
    next_pc         = merge_predicted ? mp_merge_pc : bp_next_pc;
    merge_dist      = merge_predicted ? mp_dist : '0;
  end
endmodule
