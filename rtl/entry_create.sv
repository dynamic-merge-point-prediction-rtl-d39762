// entry_create: forms a new merge point entry when a retiring correct-path
// PC hits in the wrong path buffer ("Create new predictor entry" box).
//
// The merge point is the PC that hit. The predicted distance is the larger of
// the wrong-path distance read from the buffer and the correct-path distance
// counted by the buffer. The register set is the OR of the wrong-path and the
// correct-path destination-register sets. These three rules are the paper's.
// The counter of a new entry starts at mpp_pkg::CTR_INIT, a value this design
// chooses (the paper does not give one).
//
// Purely combinational: the entry is valid in the cycle of the hit.
module entry_create
  import mpp_pkg::*;
(
  input  logic      hit,        // WPB hit this cycle
  input  pc_t       br_pc,      // WPB tag: PC of the mispredicted branch
  input  pc_t       hit_pc,     // correct-path PC that hit
  input  dist_t     wp_dist,    // wrong-path distance read from the WPB
  input  regset_t   wp_regs,    // wrong-path register set read from the WPB
  input  dist_t     cp_dist,    // correct-path distance of the hitting PC
  input  regset_t   cp_regs,    // correct-path register set before the hit
  output logic      install,
  output mp_entry_t entry
);
  always_comb begin
    install        = hit;
    entry.br_pc    = br_pc;
    entry.merge_pc = hit_pc;
    entry.mdist    = (wp_dist > cp_dist) ? wp_dist : cp_dist;
    entry.regs     = wp_regs | cp_regs;
    entry.ctr      = CTR_INIT;
  end
endmodule
