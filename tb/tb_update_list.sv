// tb_update_list: directed prediction lifetimes through the update list.
//  - correct merge within the distance (including exactly at it) -> counter+1;
//  - distance passed, branch retiring again, and a gap write outside the
//    register set -> counter-1 and a flush request for the used prediction;
//  - two entries of one branch: the used one wrong, the other right, both
//    written back with their own counters;
//  - UPDATE_MAX: the entry stays until the age passes the maximum distance
//    (checked by counting retired instructions), the distance grows to the
//    age of the merge point and never shrinks; no merge point -> counter-1;
//  - counter saturation at 0 and 7; list full (allocation dropped);
//    squash of entries whose branch never retires.
module tb_update_list;
  import mpp_pkg::*;
  localparam int W = 4;
  logic clk = 0, rst_n = 0;
  logic update_max, alloc_valid, squash_waiting, ret_valid;
  logic [W-1:0] alloc_match, alloc_sel;
  mp_entry_t alloc_entries [W];
  inst_t ret_inst;
  logic wb_valid, pred_correct, pred_wrong, alloc_drop;
  mp_entry_t wb_entry;
  logic [3:0] occupancy;
  int checks = 0, failures = 0;
  mp_entry_t wbq [$];
  int n_ok = 0, n_bad = 0;

  update_list dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    if (wb_valid) wbq.push_back(wb_entry);
    if (pred_correct) n_ok++;
    if (pred_wrong) n_bad++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  function automatic mp_entry_t E(input pc_t br, input pc_t mp, input int d, input regset_t r, input int c);
    mp_entry_t e;
    e.br_pc = br; e.merge_pc = mp; e.mdist = dist_t'(d); e.regs = r; e.ctr = ctr_t'(c);
    return e;
  endfunction

  task automatic idle_inputs();
    alloc_valid = 0; squash_waiting = 0; ret_valid = 0; alloc_match = '0; alloc_sel = '0;
  endtask

  task automatic alloc1(input mp_entry_t e);
    @(negedge clk); idle_inputs();
    alloc_valid = 1; alloc_match = 4'b0001; alloc_sel = 4'b0001; alloc_entries[0] = e;
    @(negedge clk); idle_inputs();
  endtask

  task automatic ret(input pc_t pc, input int dst);
    ret_valid = 1; ret_inst.pc = pc; ret_inst.dst_valid = (dst >= 0); ret_inst.dst = reg_t'((dst >= 0) ? dst : 0);
    @(negedge clk); idle_inputs();
  endtask

  task automatic settle();
    repeat (4) @(negedge clk);
  endtask

  localparam pc_t B = 32'h80500, M = 32'h8051C, F = 32'h80700;
  localparam regset_t RS = 16'b0000_0000_0011_0011; // R0 R1 R4 R5

  initial begin
    int ok0, bad0, cnt;
    idle_inputs(); update_max = 0; ret_inst = '0;
    foreach (alloc_entries[i]) alloc_entries[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // 1: merge at age 2 within distance 3
    alloc1(E(B, M, 3, RS, 4));
    check(occupancy == 1, "allocated");
    ret(32'h100, 7);                   // not yet active: foreign write is ignored
    ret(B, -1); ret(32'h80600, 0); ret(32'h80604, 1);
    ok0 = n_ok; ret(M, 4); settle();
    check(n_ok == ok0 + 1 && n_bad == 0, "correct outcome");
    check(wbq.size() == 1 && wbq[0].ctr == 5 && wbq[0].mdist == 3 && wbq[0].merge_pc == M, "counter incremented");
    check(occupancy == 0, "entry freed");
    wbq.delete();

    // 2: merge exactly at the distance
    alloc1(E(B, M, 3, RS, 4));
    ret(B, -1); ret(32'h1, 0); ret(32'h2, 1); ret(32'h3, 4); ret(M, -1); settle();
    check(wbq.size() == 1 && wbq[0].ctr == 5, "merge at age == distance is correct");
    wbq.delete();

    // 3: distance passed
    bad0 = n_bad;
    alloc1(E(B, M, 3, RS, 4));
    ret(B, -1); ret(32'h1, 0); ret(32'h2, 1); ret(32'h3, 4);
    check(n_bad == bad0, "no verdict before the distance is used up");
    ret(32'h4, 5); settle();
    check(n_bad == bad0 + 1 && wbq.size() == 1 && wbq[0].ctr == 3, "distance exceeded");
    wbq.delete();

    // 4: unexpected register write in the gap
    bad0 = n_bad;
    alloc1(E(B, M, 3, RS, 4));
    ret(B, -1); ret(32'h1, 0); ret(32'h2, 9); settle();
    check(n_bad == bad0 + 1 && wbq.size() == 1 && wbq[0].ctr == 3, "unexpected write");
    wbq.delete();

    // 5: loop back to the branch
    bad0 = n_bad;
    alloc1(E(B, M, 3, RS, 4));
    ret(B, -1); ret(32'h1, 0); ret(B, -1); settle();
    check(n_bad == bad0 + 1 && wbq.size() == 1 && wbq[0].ctr == 3, "branch seen twice");
    wbq.delete();

    // 6: two merge points of one branch; the used one (D) is wrong, F is right
    bad0 = n_bad; ok0 = n_ok;
    @(negedge clk);
    alloc_valid = 1; alloc_match = 4'b0101; alloc_sel = 4'b0001;
    alloc_entries[0] = E(B, M, 3, RS, 5);
    alloc_entries[2] = E(B, F, 9, 16'h00FF, 4);
    @(negedge clk); idle_inputs();
    check(occupancy == 2, "all matching entries allocated");
    ret(B, -1); for (int i = 0; i < 6; i++) ret(32'h10 + 32'(i), 0);
    ret(F, -1); settle();
    check(n_bad == bad0 + 1 && n_ok == ok0, "used prediction wrong");
    check(wbq.size() == 2, "both written back");
    if (wbq.size() == 2) begin
      check(wbq[0].merge_pc == M && wbq[0].ctr == 4, "D decremented");
      check(wbq[1].merge_pc == F && wbq[1].ctr == 5, "F incremented");
    end
    wbq.delete();

    // 7: saturation
    alloc1(E(B, M, 3, RS, 7)); ret(B, -1); ret(M, -1); settle();
    alloc1(E(B, M, 3, RS, 0)); ret(B, -1); ret(B, -1); settle();
    check(wbq.size() == 2 && wbq[0].ctr == 7 && wbq[1].ctr == 0, "counter saturates");
    wbq.delete();

    // 8: UPDATE_MAX, merge point beyond the predicted distance
    update_max = 1; bad0 = n_bad;
    alloc1(E(B, M, 3, RS, 4));
    ret(B, -1);
    for (int i = 0; i < 5; i++) ret(32'h20 + 32'(i), 0);
    check(n_bad == bad0 + 1, "used prediction reported wrong at its own distance");
    ret(M, -1);                        // age 5
    // ages 6..98: the entry must stay; age 99 (the 100th instruction) ends it
    for (cnt = 6; cnt < MAX_DIST - 1; cnt++) ret(32'h40 + 32'(cnt), 9); // writes after the merge point do not matter
    repeat (2) @(negedge clk);
    check(wbq.size() == 0, "entry kept through age 98");
    ret(32'h40, 9);
    @(negedge clk);
    check(wbq.size() == 1 && wbq[0].mdist == 5 && wbq[0].ctr == 5, "distance raised to the merge age");
    wbq.delete();

    // 9: UPDATE_MAX, merge point closer than the distance: distance kept
    alloc1(E(B, M, 7, RS, 4));
    ret(B, -1); ret(32'h1, 0); ret(M, -1);
    for (int i = 0; i < 120 && wbq.size() == 0; i++) ret(32'h300 + 32'(i), -1);
    check(wbq.size() == 1 && wbq[0].mdist == 7 && wbq[0].ctr == 5, "distance does not shrink");
    wbq.delete();

    // 10: UPDATE_MAX, no merge point
    alloc1(E(B, M, 7, RS, 4));
    ret(B, -1);
    for (int i = 0; i < 120 && wbq.size() == 0; i++) ret(32'h300 + 32'(i), -1);
    check(wbq.size() == 1 && wbq[0].mdist == 7 && wbq[0].ctr == 3, "no merge point: decrement");
    wbq.delete();
    update_max = 0;

    // 11: list full, then squash of waiting entries
    for (int k = 0; k < 3; k++) begin
      @(negedge clk);
      alloc_valid = 1; alloc_match = 4'b1111; alloc_sel = 4'b0010;
      for (int i = 0; i < W; i++) alloc_entries[i] = E(32'h9000 + 32'(k), 32'h9100 + 32'(i), 5, RS, 4);
      #1;
      if (k == 2) check(alloc_drop, "third allocation dropped");
      else        check(!alloc_drop, "allocation fits");
      @(negedge clk); idle_inputs();
    end
    check(occupancy == 8, "list full");
    squash_waiting = 1;
    @(negedge clk); idle_inputs();
    check(occupancy == 0, "waiting entries squashed");
    check(wbq.size() == 0, "squashed entries are not written back");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
