// merge_point_predictor: dynamic merge point predictor with confidence-cost
// selection, as seen by a core's front end, misprediction recovery and retire
// stage.
//
// Structures and their connections:
//   - merge_predictor_table: looked up with the fetch PC of a conditional
//     branch, in parallel with the core's branch predictor and BTB;
//   - confidence_cost: decides, from the TAGE counter, the JRS confidence and
//     the branch latency table, whether the merge prediction replaces the
//     branch prediction;
//   - fetch_redirect: picks the next fetch PC (BTB target, fall-through or
//     merge point);
//   - wrong_path_buffer + entry_create: learn new merge points from a ROB walk
//     after a misprediction and the correct-path instructions that retire
//     after it, and install them into the table;
//   - update_list: follows every used prediction through retirement, reports
//     whether it was right (a wrong one asks for a flush) and writes the
//     trained entries back into the table.
// The core itself (ROB, TAGE, JRS, BTB, latency measurement) is outside; its
// signals are ports here.
//
// Timing: lookup, confidence-cost decision and next PC are combinational in
// the fetch cycle, and the update list is allocated at the clock edge that
// ends it. A WPB hit is reported one cycle after the hitting instruction
// retires and installed into the table at the following edge. Write-backs
// happen one per cycle. One instruction per cycle is accepted on the ROB-walk
// port and on the retire port (this design's choice; the paper does not give
// these bandwidths).
module merge_point_predictor
  import mpp_pkg::*;
#(
  parameter int unsigned MPT_ENTRIES = 128,  // Merge Point Predictor Table (paper)
  parameter int unsigned MPT_WAYS    = 4,    // (paper)
  parameter int unsigned WPB_ENTRIES = 128,  // Wrong Path Buffer (paper)
  parameter int unsigned WPB_WAYS    = 4,    // (paper)
  parameter int unsigned UL_ENTRIES  = 8,    // Update List (paper)
  parameter int unsigned LAT_ENTRIES = 256,  // branch latency table (this design)
  parameter int unsigned LAT_THRESH  = 50    // Lat-High threshold, cycles (paper)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        update_max,       // 1: UPDATE_MAX policy (MPPmax), 0: MPP
  // fetch
  input  logic        fetch_valid,
  input  logic        fetch_is_cond_br, // fetch_pc is a conditional branch
  input  pc_t         fetch_pc,
  input  logic [3:0]  fetch_inst_size,
  input  logic        bp_taken,
  input  logic        btb_hit,
  input  pc_t         btb_target,
  input  logic [2:0]  tage_ctr,
  input  logic        jrs_high,
  output pc_t         next_pc,
  output logic        merge_predicted,  // fetch continues at a predicted merge point
  output dist_t       merge_dist,
  output regset_t     merge_regs,       // registers the gap may write
  output conf_e       conf,
  output logic        lat_high,
  // branch resolution latency
  input  logic        lat_upd_valid,
  input  pc_t         lat_upd_pc,
  input  logic [15:0] lat_upd_cycles,
  // misprediction recovery: ROB walk
  input  logic        walk_start,
  input  pc_t         walk_br_pc,
  input  logic        walk_valid,
  input  inst_t       walk_inst,
  input  logic        walk_end,
  // retirement
  input  logic        ret_valid,
  input  inst_t       ret_inst,
  input  logic        ret_mispred,
  input  logic        squash_waiting,   // merge-predicted branches flushed before retiring
  // outcomes and events
  output logic        mp_flush,         // a used merge prediction was wrong
  output logic        mp_correct,       // a used merge prediction was right
  output logic        new_merge_point,  // a new entry is installed this cycle
  output logic        wpb_inval_dist,
  output logic        wpb_inval_loop,
  output logic        wpb_evicted,
  output logic        ul_alloc_drop,
  output logic        table_writeback,
  output logic        wpb_busy,         // WPB filling, waiting or comparing
  output logic [$clog2(UL_ENTRIES+1)-1:0] ul_occupancy,
  output logic [9:0]  lat_avg           // latency table average for fetch_pc
);
  // ---------------- lookup ----------------
  logic                lk_hit;
  mp_entry_t           lk_sel;
  logic [MPT_WAYS-1:0] lk_match, lk_sel_oh;
  mp_entry_t           lk_entries [MPT_WAYS];
  logic                use_mp;

  logic      ins_valid, wb_valid;
  mp_entry_t ins_entry, wb_entry;

  merge_predictor_table #(.ENTRIES(MPT_ENTRIES), .WAYS(MPT_WAYS)) u_mpt (
    .clk, .rst_n,
    .lk_pc     (fetch_pc),
    .lk_hit    (lk_hit),
    .lk_sel    (lk_sel),
    .lk_match  (lk_match),
    .lk_sel_oh (lk_sel_oh),
    .lk_entries(lk_entries),
    .ins_valid (ins_valid),
    .ins_entry (ins_entry),
    .wb_valid  (wb_valid),
    .wb_entry  (wb_entry)
  );

  confidence_cost #(.LAT_ENTRIES(LAT_ENTRIES), .LAT_W(10), .LAT_THRESH(LAT_THRESH)) u_cc (
    .clk, .rst_n,
    .pc            (fetch_pc),
    .tage_ctr      (tage_ctr),
    .jrs_high      (jrs_high),
    .conf          (conf),
    .lat_high      (lat_high),
    .lat_avg       (lat_avg),
    .use_mp        (use_mp),
    .lat_upd_valid (lat_upd_valid),
    .lat_upd_pc    (lat_upd_pc),
    .lat_upd_cycles(lat_upd_cycles)
  );

  logic  br_hit;
  assign br_hit = fetch_valid && fetch_is_cond_br && lk_hit;

  fetch_redirect u_fr (
    .pc             (fetch_pc),
    .inst_size      (fetch_inst_size),
    .bp_taken       (bp_taken),
    .btb_hit        (btb_hit),
    .btb_target     (btb_target),
    .mp_hit         (br_hit),
    .mp_merge_pc    (lk_sel.merge_pc),
    .mp_dist        (lk_sel.mdist),
    .cc_use_mp      (use_mp),
    .next_pc        (next_pc),
    .merge_predicted(merge_predicted),
    .merge_dist     (merge_dist)
  );
  assign merge_regs = merge_predicted ? lk_sel.regs : '0;

  // ---------------- detection of new merge points ----------------
  logic    wpb_hit;
  pc_t     wpb_br_pc, wpb_hit_pc;
  dist_t   wpb_wp_dist, wpb_cp_dist;
  regset_t wpb_wp_regs, wpb_cp_regs;

  wrong_path_buffer #(.ENTRIES(WPB_ENTRIES), .WAYS(WPB_WAYS), .MAXD(MAX_DIST)) u_wpb (
    .clk, .rst_n,
    .walk_start, .walk_br_pc, .walk_valid, .walk_inst, .walk_end,
    .ret_valid, .ret_inst, .ret_mispred,
    .hit        (wpb_hit),
    .hit_br_pc  (wpb_br_pc),
    .hit_pc     (wpb_hit_pc),
    .hit_wp_dist(wpb_wp_dist),
    .hit_wp_regs(wpb_wp_regs),
    .hit_cp_dist(wpb_cp_dist),
    .hit_cp_regs(wpb_cp_regs),
    .busy       (wpb_busy),
    .inval_dist (wpb_inval_dist),
    .inval_loop (wpb_inval_loop),
    .evicted    (wpb_evicted)
  );

  entry_create u_create (
    .hit    (wpb_hit),
    .br_pc  (wpb_br_pc),
    .hit_pc (wpb_hit_pc),
    .wp_dist(wpb_wp_dist),
    .wp_regs(wpb_wp_regs),
    .cp_dist(wpb_cp_dist),
    .cp_regs(wpb_cp_regs),
    .install(ins_valid),
    .entry  (ins_entry)
  );
  assign new_merge_point = ins_valid;

  // ---------------- verification and training ----------------
  update_list #(.ENTRIES(UL_ENTRIES), .WAYS(MPT_WAYS), .MAXD(MAX_DIST)) u_ul (
    .clk, .rst_n,
    .update_max    (update_max),
    .alloc_valid   (merge_predicted),
    .alloc_match   (lk_match),
    .alloc_entries (lk_entries),
    .alloc_sel     (lk_sel_oh),
    .squash_waiting(squash_waiting),
    .ret_valid     (ret_valid),
    .ret_inst      (ret_inst),
    .wb_valid      (wb_valid),
    .wb_entry      (wb_entry),
    .pred_correct  (mp_correct),
    .pred_wrong    (mp_flush),
    .alloc_drop    (ul_alloc_drop),
    .occupancy     (ul_occupancy)
  );
  assign table_writeback = wb_valid;
endmodule
