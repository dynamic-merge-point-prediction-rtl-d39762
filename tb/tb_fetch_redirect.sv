// tb_fetch_redirect: checks next-PC selection: fall-through, BTB target on a
// predicted-taken branch, and the merge point when the merge predictor hits
// and the confidence-cost predictor asks for it (and only then).
module tb_fetch_redirect;
  import mpp_pkg::*;
  pc_t pc, btb_target, mp_merge_pc, next_pc;
  logic [3:0] inst_size;
  logic bp_taken, btb_hit, mp_hit, cc_use_mp, merge_predicted;
  dist_t mp_dist, merge_dist;
  int checks = 0, failures = 0;

  fetch_redirect dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s pc=%h next=%h", what, pc, next_pc); end
  endtask

  initial begin
    for (int i = 0; i < 400; i++) begin
      pc = $urandom; btb_target = $urandom; mp_merge_pc = $urandom;
      inst_size = 4'($urandom_range(1, 15));
      bp_taken = 1'($urandom); btb_hit = 1'($urandom); mp_hit = 1'($urandom); cc_use_mp = 1'($urandom);
      mp_dist = dist_t'($urandom_range(0, 99));
      #1;
      if (mp_hit && cc_use_mp) begin
        check(next_pc == mp_merge_pc, "merge point");
        check(merge_predicted && merge_dist == mp_dist, "merge flag/dist");
      end else begin
        check(!merge_predicted, "no merge flag");
        if (bp_taken && btb_hit) check(next_pc == btb_target, "taken target");
        else check(next_pc == pc + 32'(inst_size), "fall through");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
