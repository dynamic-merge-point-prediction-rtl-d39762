// tb_workload_hammocks: a synthetic workload run through the complete
// predictor, once with the MPP policy and once with UPDATE_MAX (MPPmax).
//
// The program is a chain of NB regions. Region k holds a conditional branch,
// two sides T and N of random lengths (1..8 instructions, random destination
// registers), a join block D, a rarely used block E that the taken side
// sometimes goes through instead of D, and a block F where every path meets
// (the shape of the paper's example control flow graph: D is the dynamic merge
// point, F the true one). Some branches are hard (50/50), some biased; the
// driver gives hard branches a weak TAGE counter, biased ones a strong one,
// and a few medium-confidence branches long resolve latencies.
//
// The driver plays the core: it fetches each branch, predicts the majority
// direction when no merge prediction is used, and on a misprediction walks up
// to 40 wrong-path instructions into the buffer before retiring the correct
// path. A reference monitor written independently of the RTL follows every
// used merge prediction through the retire stream and computes, cycle by
// cycle, whether it is confirmed or must be flushed; the predictor's
// mp_correct / mp_flush pulses must match it exactly. Every predicted merge PC
// must lie in D or F of its branch (usually their first PC; a later one when
// the wrong-path copy of the first was evicted from the buffer). To keep every allocation, the
// driver presents a branch as confident while the update list has fewer than
// four free entries.
//
// Reported: merge predictions used, accuracy (confirmed / used) and coverage
// (confirmed / all dynamic branches of hard or slow classes) for both
// policies. Checked: MPPmax is at least as accurate as MPP, as in the paper.
module tb_workload_hammocks;
  import mpp_pkg::*;
  localparam int NB = 12;             // regions (branches)
  localparam int INSTANCES = 2500;    // dynamic branches per policy

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
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s @%0t", what, $time);
    end
  endtask

  // ---------------- program ----------------
  int lenT [NB], lenN [NB];
  int bias [NB];          // percent taken
  int cls  [NB];          // 0 hard, 1 biased, 2 medium and slow
  reg_t dstT [NB][8], dstN [NB][8], dstD [NB][4], dstE [NB][3], dstF [NB][3];

  // x86-like 3-byte instructions; block offsets chosen to spread the buffer sets
  function automatic pc_t base(input int k); return 32'h0010_0000 + 32'(k) * 32'h1034; endfunction
  function automatic pc_t pcT(input int k, input int i); return base(k) + 32'h103 + 32'(3 * i); endfunction
  function automatic pc_t pcN(input int k, input int i); return base(k) + 32'h209 + 32'(3 * i); endfunction
  function automatic pc_t pcE(input int k, input int i); return base(k) + 32'h311 + 32'(3 * i); endfunction
  function automatic pc_t pcD(input int k, input int i); return base(k) + 32'h41A + 32'(3 * i); endfunction
  function automatic pc_t pcF(input int k, input int i); return base(k) + 32'h505 + 32'(3 * i); endfunction
  function automatic pc_t pcX(input int k, input int i); return base(k) + 32'h60E + 32'(3 * i); endfunction

  function automatic inst_t I(input pc_t pc, input reg_t d, input bit v);
    inst_t x; x.pc = pc; x.dst = d; x.dst_valid = v; return x;
  endfunction

  // path after branch k: side (the taken side sometimes with an extra block X
  // that writes only registers the side writes anyway), then D, or E instead
  // of D on the rare edge, then F
  function automatic void path(input int k, input bit taken, input bit rare, input bit extra, ref inst_t q [$]);
    if (taken) for (int i = 0; i < lenT[k]; i++) q.push_back(I(pcT(k, i), dstT[k][i], 1));
    else       for (int i = 0; i < lenN[k]; i++) q.push_back(I(pcN(k, i), dstN[k][i], 1));
    if (taken && extra) for (int i = 0; i < 3; i++) q.push_back(I(pcX(k, i), dstT[k][0], 1));
    if (taken && rare) for (int i = 0; i < 3; i++) q.push_back(I(pcE(k, i), dstE[k][i], 1));
    else               for (int i = 0; i < 4; i++) q.push_back(I(pcD(k, i), dstD[k][i], 1));
    for (int i = 0; i < 3; i++) q.push_back(I(pcF(k, i), dstF[k][i], 1));
  endfunction

  // ---------------- reference monitor ----------------
  typedef struct {
    pc_t br, mp; int d; regset_t rs; bit active; int age;
  } ref_t;
  ref_t refs [$];
  int n_used, n_ok, n_bad, n_cand, n_late;

  // apply one retired instruction to the reference; returns the pulses expected
  task automatic ref_retire(input inst_t x, output bit ok, output bit bad);
    ref_t keep [$];
    ok = 0; bad = 0;
    foreach (refs[i]) begin
      ref_t r;
      bit done;
      r = refs[i]; done = 0;
      if (!r.active) begin
        if (x.pc == r.br) begin r.active = 1; r.age = 0; end
      end else begin
        if (x.pc == r.mp && r.age <= r.d) begin ok = 1; done = 1; end
        else if (x.pc == r.br || (x.dst_valid && !r.rs[x.dst]) || r.age >= r.d) begin bad = 1; done = 1; end
        else r.age++;
      end
      if (!done) keep.push_back(r);
    end
    refs = keep;
  endtask

  task automatic idle_inputs();
    fetch_valid = 0; fetch_is_cond_br = 0; walk_start = 0; walk_valid = 0; walk_end = 0;
    ret_valid = 0; ret_mispred = 0; squash_waiting = 0; lat_upd_valid = 0;
  endtask

  task automatic retire(input inst_t x, input bit mis);
    bit ok, bad;
    @(negedge clk); idle_inputs();
    ret_valid = 1; ret_inst = x; ret_mispred = mis;
    ref_retire(x, ok, bad);
    #1;
    check(mp_correct == ok && mp_flush == bad,
          $sformatf("outcome at pc %h: dut correct=%0d flush=%0d, reference %0d %0d", x.pc, mp_correct, mp_flush, ok, bad));
    n_ok += int'(ok); n_bad += int'(bad);
  endtask

  task automatic run(input bit umax, output int used, output int ok, output int bad, output int cand);
    int k;
    rst_n = 0; update_max = umax; refs.delete();
    n_used = 0; n_late = 0; n_ok = 0; n_bad = 0; n_cand = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    k = 0;
    for (int n = 0; n < INSTANCES; n++) begin
      bit taken, rare, extra, pred_taken, mp, confident;
      inst_t q [$];
      inst_t w [$];
      taken = ($urandom_range(0, 99) < bias[k]);
      rare  = taken && ($urandom_range(0, 99) < 5);
      extra = $urandom_range(0, 99) < 40;
      pred_taken = bias[k] >= 50;
      confident = ul_occupancy > 4'd4;
      if (cls[k] != 1) n_cand++;
      // fetch
      @(negedge clk); idle_inputs();
      fetch_valid = 1; fetch_is_cond_br = 1; fetch_pc = base(k); fetch_inst_size = 4'd2;
      bp_taken = pred_taken; btb_hit = 1; btb_target = pcT(k, 0);
      tage_ctr = confident ? 3'd7 : (cls[k] == 0) ? 3'(3 + $urandom_range(0, 1)) : 3'd7;
      jrs_high = confident || cls[k] == 1;
      #1;
      mp = merge_predicted;
      check(!ul_alloc_drop, "no allocation dropped");
      if (mp) begin
        ref_t r;
        n_used++;
        check((next_pc >= pcD(k, 0) && next_pc <= pcD(k, 3) && (next_pc - pcD(k, 0)) % 3 == 0)
              || (next_pc >= pcF(k, 0) && next_pc <= pcF(k, 2) && (next_pc - pcF(k, 0)) % 3 == 0),
              $sformatf("merge PC %h is in D or F of branch %0d", next_pc, k));
        if (next_pc != pcD(k, 0) && next_pc != pcF(k, 0)) n_late++;
        r.br = base(k); r.mp = next_pc; r.d = int'(merge_dist); r.rs = merge_regs; r.active = 0; r.age = 0;
        refs.push_back(r);
      end else if (taken != pred_taken) begin
        // misprediction: walk the wrong path out of the ROB
        path(k, !taken, 1'b0, extra, w);
        path((k + 1) % NB, bias[(k + 1) % NB] >= 50, 1'b0, 1'b0, w);
        @(negedge clk); idle_inputs();
        walk_start = 1; walk_br_pc = base(k);
        foreach (w[i]) begin
          if (i >= 40) break;
          @(negedge clk); idle_inputs();
          walk_valid = 1; walk_inst = w[i];
        end
        @(negedge clk); idle_inputs();
        walk_end = 1;
      end
      // resolve latency
      @(negedge clk); idle_inputs();
      lat_upd_valid = 1; lat_upd_pc = base(k);
      lat_upd_cycles = (cls[k] == 2) ? 16'd180 : 16'd12;
      // retire the branch and its correct path
      retire(I(base(k), '0, 0), !mp && taken != pred_taken);
      path(k, taken, rare, extra, q);
      foreach (q[i]) retire(q[i], 0);
      k = (k + 1) % NB;
    end
    // drain: retire filler instructions so that pending entries finish
    for (int i = 0; i < MAX_DIST + 4; i++) retire(I(32'h00F0_0000 + 32'(4 * i), '0, 0), 0);
    @(negedge clk); idle_inputs();
    $display("predictions whose merge PC is past the first join instruction (WPB eviction): %0d", n_late);
    used = n_used; ok = n_ok; bad = n_bad; cand = n_cand;
  endtask

  initial begin
    int u0, o0, b0, c0, u1, o1, b1, c1;
    idle_inputs(); update_max = 0;
    fetch_pc = 0; fetch_inst_size = 0; bp_taken = 0; btb_hit = 0; btb_target = 0;
    tage_ctr = 0; jrs_high = 0; lat_upd_pc = 0; lat_upd_cycles = 0; walk_br_pc = 0;
    walk_inst = '0; ret_inst = '0;
    for (int k = 0; k < NB; k++) begin
      lenT[k] = $urandom_range(1, 8); lenN[k] = $urandom_range(1, 8);
      cls[k]  = k % 3;
      bias[k] = (cls[k] == 0) ? 50 : (cls[k] == 1) ? 95 : 80;
      for (int i = 0; i < 8; i++) begin dstT[k][i] = reg_t'($urandom_range(0, 7)); dstN[k][i] = reg_t'($urandom_range(0, 7)); end
      for (int i = 0; i < 4; i++) dstD[k][i] = reg_t'($urandom_range(8, 15));
      for (int i = 0; i < 3; i++) begin dstE[k][i] = reg_t'($urandom_range(0, 15)); dstF[k][i] = reg_t'($urandom_range(8, 15)); end
    end
    run(1'b0, u0, o0, b0, c0);
    run(1'b1, u1, o1, b1, c1);
    $display("MPP    : used %0d, confirmed %0d, flushed %0d, accuracy %0d%%, coverage %0d%% of %0d hard/slow branches",
             u0, o0, b0, (u0 > 0) ? 100 * o0 / u0 : 0, (c0 > 0) ? 100 * o0 / c0 : 0, c0);
    $display("MPPmax : used %0d, confirmed %0d, flushed %0d, accuracy %0d%%, coverage %0d%% of %0d hard/slow branches",
             u1, o1, b1, (u1 > 0) ? 100 * o1 / u1 : 0, (c1 > 0) ? 100 * o1 / c1 : 0, c1);
    check(u0 > 100 && u1 > 100, "merge predictions were used under both policies");
    check(o0 + b0 == u0 && o1 + b1 == u1, "every used prediction was resolved");
    check(o1 * u0 >= o0 * u1, "MPPmax at least as accurate as MPP");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
