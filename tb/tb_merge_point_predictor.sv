// tb_merge_point_predictor: end-to-end run of the complete predictor at its
// default sizes. A small driver plays the core: it fetches branches, walks
// wrong paths after mispredictions, retires instruction streams and reports
// branch latencies. The scripted program is a hammock (branch x80500 with a
// wrong side x80510..x80520 and a correct side x80600..) plus a few other
// branches. Every mechanism is made to happen and counted:
//   merge point learned (WPB hit -> install), merge prediction used, used
//   prediction correct, flush for gap write / distance / loop back, WPB
//   invalidated by distance and by loop back, WPB eviction, update-list
//   overflow, table write-back, branch prediction kept for a confident branch,
//   Lat-High making a medium-confidence branch merge-predicted, two merge
//   points of one branch (highest counter selected), UPDATE_MAX distance
//   growth, and table eviction.
// Expected values (next PC, distance, register set, counters) are written
// out by hand from the instruction streams.
module tb_merge_point_predictor;
  import mpp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic update_max, fetch_valid, fetch_is_cond_br, bp_taken, btb_hit, jrs_high;
  pc_t fetch_pc, btb_target, next_pc, lat_upd_pc, walk_br_pc;
  logic [3:0] fetch_inst_size;
  logic [2:0] tage_ctr;
  logic merge_predicted, lat_high, lat_upd_valid;
  dist_t merge_dist;
  regset_t merge_regs;
  conf_e conf;
  logic [15:0] lat_upd_cycles;
  logic walk_start, walk_valid, walk_end, ret_valid, ret_mispred, squash_waiting;
  inst_t walk_inst, ret_inst;
  logic mp_flush, mp_correct, new_merge_point, wpb_inval_dist, wpb_inval_loop, wpb_evicted;
  logic ul_alloc_drop, table_writeback, wpb_busy;
  logic [3:0] ul_occupancy;
  logic [9:0] lat_avg;

  merge_point_predictor dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  // mechanism counters
  int c_install = 0, c_used = 0, c_correct = 0, c_flush = 0, c_inval_dist = 0, c_inval_loop = 0;
  int c_evict = 0, c_drop = 0, c_wb = 0;
  int c_flush_write = 0, c_flush_dist = 0, c_flush_loop = 0;
  int c_bp_kept = 0, c_lat_mp = 0, c_multi = 0, c_grow = 0, c_mpt_evict = 0;

  always @(posedge clk) if (rst_n) begin
    if (new_merge_point) c_install++;
    if (fetch_valid && merge_predicted) c_used++;
    if (mp_correct) c_correct++;
    if (mp_flush) c_flush++;
    if (wpb_inval_dist) c_inval_dist++;
    if (wpb_inval_loop) c_inval_loop++;
    if (wpb_evicted) c_evict++;
    if (ul_alloc_drop) c_drop++;
    if (table_writeback) c_wb++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  function automatic inst_t I(input pc_t pc, input int dst);
    inst_t x;
    x.pc = pc; x.dst_valid = (dst >= 0); x.dst = reg_t'((dst >= 0) ? dst : 0);
    return x;
  endfunction

  task automatic idle_inputs();
    fetch_valid = 0; fetch_is_cond_br = 0; walk_start = 0; walk_valid = 0; walk_end = 0;
    ret_valid = 0; ret_mispred = 0; squash_waiting = 0; lat_upd_valid = 0;
  endtask

  // fetch a conditional branch; outputs are sampled before the clock edge
  task automatic fetch(input pc_t pc, input logic [2:0] tc, input logic jrs,
                       output bit mp, output pc_t npc, output int d, output regset_t rs);
    @(negedge clk); idle_inputs();
    fetch_valid = 1; fetch_is_cond_br = 1; fetch_pc = pc; fetch_inst_size = 4'd2;
    tage_ctr = tc; jrs_high = jrs; bp_taken = 1; btb_hit = 1; btb_target = pc + 32'h40;
    #1;
    mp = merge_predicted; npc = next_pc; d = int'(merge_dist); rs = merge_regs;
    @(negedge clk); idle_inputs();
  endtask

  task automatic retire(input inst_t x, input bit mis);
    @(negedge clk); idle_inputs();
    ret_valid = 1; ret_inst = x; ret_mispred = mis;
    @(negedge clk); idle_inputs();
  endtask

  task automatic walk(input pc_t br, input inst_t w [$]);
    @(negedge clk); idle_inputs();
    walk_start = 1; walk_br_pc = br;
    foreach (w[i]) begin
      @(negedge clk); idle_inputs();
      walk_valid = 1; walk_inst = w[i];
    end
    @(negedge clk); idle_inputs();
    walk_end = 1;
    @(negedge clk); idle_inputs();
  endtask

  task automatic retire_all(input inst_t r [$]);
    foreach (r[i]) retire(r[i], 0);
  endtask

  task automatic settle();
    repeat (6) @(negedge clk);
  endtask

  localparam pc_t B = 32'h80500, M = 32'h8051C, M2 = 32'h80520;
  inst_t wrong [$];
  inst_t right [$];

  initial begin
    bit mp; pc_t npc; int d; regset_t rs; int f0;
    idle_inputs(); update_max = 0;
    fetch_pc = 0; fetch_inst_size = 0; bp_taken = 0; btb_hit = 0; btb_target = 0;
    tage_ctr = 0; jrs_high = 0; lat_upd_pc = 0; lat_upd_cycles = 0; walk_br_pc = 0;
    walk_inst = '0; ret_inst = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- A: learn the merge point of B from one misprediction ----
    fetch(B, 3'd3, 0, mp, npc, d, rs);
    check(!mp && npc == B + 32'h40, "cold table: branch prediction used");
    wrong = '{I(32'h80510, 0), I(32'h80514, 5), I(32'h80518, 4), I(M, 4), I(M2, 2)};
    right = '{I(32'h80600, 0), I(32'h80604, 1), I(32'h80608, -1), I(M, 4), I(M2, 2)};
    walk(B, wrong);
    retire(I(B, -1), 1);
    retire_all(right);
    settle();
    check(c_install == 1, "merge point installed");

    // ---- B: use it, and it is right ----
    fetch(B, 3'd3, 0, mp, npc, d, rs);
    check(mp && npc == M && d == 3 && rs == 16'h0033, $sformatf("prediction M d=%0d rs=%h", d, rs));
    retire(I(B, -1), 0);
    retire_all(right);
    settle();
    check(c_correct == 1, "prediction confirmed");

    // ---- C: a confident branch keeps the branch prediction ----
    fetch(B, 3'd7, 1, mp, npc, d, rs);
    check(!mp && npc == B + 32'h40, "Conf-High: branch predictor");
    if (!mp) c_bp_kept++;
    // ---- D: medium confidence; merge prediction only once the branch is slow ----
    fetch(B, 3'd7, 0, mp, npc, d, rs);
    check(!mp, "Conf-Med, Lat-Low: branch predictor");
    @(negedge clk); lat_upd_valid = 1; lat_upd_pc = B; lat_upd_cycles = 16'd200;
    @(negedge clk); idle_inputs();
    fetch(B, 3'd7, 0, mp, npc, d, rs);
    check(mp && npc == M, "Conf-Med, Lat-High: merge prediction");
    if (mp) c_lat_mp++;
    retire(I(B, -1), 0); retire_all(right); settle();

    // ---- E: gap writes a register outside the set -> flush ----
    f0 = c_flush;
    fetch(B, 3'd4, 0, mp, npc, d, rs);
    retire(I(B, -1), 0); retire(I(32'h80600, 9), 0); settle();
    c_flush_write = c_flush - f0;
    // ---- F: merge point not within 3 instructions -> flush ----
    f0 = c_flush;
    fetch(B, 3'd4, 0, mp, npc, d, rs);
    retire(I(B, -1), 0);
    retire_all('{I(32'h80600, 0), I(32'h80604, 1), I(32'h80608, -1), I(32'h8060C, 0), I(M, 4)});
    settle();
    c_flush_dist = c_flush - f0;
    // ---- G: loop back to the branch -> flush ----
    f0 = c_flush;
    fetch(B, 3'd4, 0, mp, npc, d, rs);
    retire(I(B, -1), 0); retire(I(32'h80600, 0), 0); retire(I(B, -1), 0); settle();
    c_flush_loop = c_flush - f0;
    check(c_flush_write == 1 && c_flush_dist == 1 && c_flush_loop == 1, "three kinds of flush");
    // counter of (B,M): 4 +1 (B) +1 (D) -1 -1 -1 = 3

    // ---- H: a second merge point of B, found further away ----
    right = '{I(32'h80700, 0), I(32'h80704, 1), I(32'h80708, 5), I(32'h8070C, 4), I(32'h80710, 2),
              I(32'h80714, 2), I(M2, 2)};
    walk(B, wrong);
    retire(I(B, -1), 1);
    retire_all(right);
    settle();
    check(c_install == 2, "second merge point installed");
    // (B,M2): counter 4, distance max(4, 6) = 6 -> highest counter wins over (B,M) with 3
    fetch(B, 3'd3, 0, mp, npc, d, rs);
    check(mp && npc == M2 && d == 6 && rs == 16'h0037, $sformatf("highest counter selected: %h d=%0d rs=%h", npc, d, rs));
    if (mp && npc == M2) c_multi++;
    check(ul_occupancy == 2, "both entries of B in the update list");
    retire(I(B, -1), 0); retire_all(right); settle();
    // now (B,M2) = 5, (B,M) = 2

    // ---- I: WPB invalidated by a loop back on the correct path ----
    walk(32'h90000, '{I(32'h90010, 1), I(32'h90014, 2)});
    retire(I(32'h90000, -1), 1); retire(I(32'h90100, 3), 0); retire(I(32'h90000, -1), 0);
    settle();
    // ---- J: WPB invalidated at the maximum distance ----
    walk(32'h91000, '{I(32'h91010, 1), I(32'h91014, 2)});
    retire(I(32'h91000, -1), 1);
    for (int i = 0; i < MAX_DIST; i++) retire(I(32'h92000 + 32'(4 * i), 3), 0);
    settle();
    check(c_inval_loop == 1 && c_inval_dist == 1, "WPB invalidations");
    // ---- K: WPB eviction: five wrong-path PCs in one set ----
    walk(32'h93000, '{I(32'h93100, 1), I(32'h93120, 1), I(32'h93140, 1), I(32'h93160, 1), I(32'h93180, 1)});
    check(c_evict == 1, "WPB eviction");
    retire(I(32'h93000, -1), 1); retire(I(32'h93100, 1), 0); retire(I(32'h93120, 2), 0);
    settle();
    check(c_install == 3, "merge point found after an eviction");

    // ---- L: update list overflow, then squash ----
    for (int k = 0; k < 5; k++) fetch(B, 3'd3, 0, mp, npc, d, rs);
    check(c_drop == 1 && ul_occupancy == 8, "update list full");
    @(negedge clk); squash_waiting = 1; @(negedge clk); idle_inputs();
    check(ul_occupancy == 0, "squashed");

    // ---- M: UPDATE_MAX grows the distance of (B,M2) from 6 to 8 ----
    update_max = 1;
    fetch(B, 3'd3, 0, mp, npc, d, rs);
    check(mp && npc == M2 && d == 6, "before UPDATE_MAX");
    retire(I(B, -1), 0);
    for (int i = 0; i < 8; i++) retire(I(32'h80800 + 32'(4 * i), 0), 0);
    retire(I(M2, 2), 0);
    for (int i = 9; i < MAX_DIST + 2; i++) retire(I(32'h80900 + 32'(4 * i), 7), 0);
    settle();
    fetch(B, 3'd3, 0, mp, npc, d, rs);
    check(mp && npc == M2 && d == 8, $sformatf("UPDATE_MAX raised the distance: %0d", d));
    if (d == 8) c_grow++;
    @(negedge clk); squash_waiting = 1; @(negedge clk); idle_inputs();
    update_max = 0;

    // ---- N: table eviction: five branches of one set ----
    for (int k = 0; k < 5; k++) begin
      pc_t br;
      br = 32'hA0000 + 32'(k * 32);
      walk(br, '{I(br + 32'h100, 1), I(br + 32'h104, 2)});
      retire(I(br, -1), 1);
      for (int j = 0; j < k; j++) retire(I(br + 32'h200 + 32'(4 * j), 3), 0);
      retire(I(br + 32'h104, 2), 0);
      settle();
    end
    check(c_install == 8, "five more merge points installed");
    // distances are max(1, k) = 1,1,2,3,4: the fifth install evicts the
    // equal-counter entry of largest distance, branch k=3 (distance 3)
    fetch(32'hA0000 + 32'(3 * 32), 3'd3, 0, mp, npc, d, rs);
    check(!mp, "largest-distance entry evicted");
    if (!mp) c_mpt_evict++;
    fetch(32'hA0000 + 32'(4 * 32), 3'd3, 0, mp, npc, d, rs);
    check(mp && d == 4, "new entry predicted");
    fetch(32'hA0000, 3'd3, 0, mp, npc, d, rs);
    check(mp && d == 1 && npc == 32'hA0104, "older short entry kept");

    // ---- every mechanism happened ----
    check(c_install > 0, "mechanism: merge point installed");
    check(c_used > 0, "mechanism: merge prediction used");
    check(c_correct > 0, "mechanism: prediction confirmed");
    check(c_flush_write > 0, "mechanism: flush on gap write");
    check(c_flush_dist > 0, "mechanism: flush on distance");
    check(c_flush_loop > 0, "mechanism: flush on loop back");
    check(c_inval_dist > 0, "mechanism: WPB distance invalidation");
    check(c_inval_loop > 0, "mechanism: WPB loop invalidation");
    check(c_evict > 0, "mechanism: WPB eviction");
    check(c_drop > 0, "mechanism: update list overflow");
    check(c_wb > 0, "mechanism: table write-back");
    check(c_bp_kept > 0, "mechanism: confident branch keeps branch prediction");
    check(c_lat_mp > 0, "mechanism: Lat-High selects merge prediction");
    check(c_multi > 0, "mechanism: highest counter among several merge points");
    check(c_grow > 0, "mechanism: UPDATE_MAX distance growth");
    check(c_mpt_evict > 0, "mechanism: table eviction");
    $display("mechanisms: install=%0d used=%0d correct=%0d flush=%0d(write %0d dist %0d loop %0d) wpb_inval_dist=%0d wpb_inval_loop=%0d wpb_evict=%0d ul_drop=%0d writeback=%0d bp_kept=%0d lat_mp=%0d multi=%0d grow=%0d mpt_evict=%0d",
             c_install, c_used, c_correct, c_flush, c_flush_write, c_flush_dist, c_flush_loop,
             c_inval_dist, c_inval_loop, c_evict, c_drop, c_wb, c_bp_kept, c_lat_mp, c_multi, c_grow, c_mpt_evict);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
