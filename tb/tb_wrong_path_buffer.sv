// tb_wrong_path_buffer: directed episodes of misprediction, ROB walk and
// correct-path retirement.
//  - the example of a wrong path copied from the ROB: branch x80500, then
//    ADD R0, SUB R5, MUL R4, AND R4, NOT R2; each wrong-path PC is hit in turn
//    and must return its distance (0..4) and accumulated register set
//    ({R0}, {R0,R5}, {R0,R4,R5}, {R0,R4,R5}, {R0,R2,R4,R5});
//  - a two-sided hammock merging at distance 3 on both paths;
//  - fill stopping at a loop back to the branch; compare stopping at the
//    branch PC (inval_loop) and after the maximum distance (inval_dist, on
//    exactly the 100th correct-path instruction);
//  - a fill of more than 100 instructions (only distances 0..99 kept);
//  - a fifth PC in one set evicting the least recently used one;
//  - instructions retiring before the mispredicted branch are ignored.
// The hit is checked to come exactly one cycle after the retiring instruction.
module tb_wrong_path_buffer;
  import mpp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic walk_start, walk_valid, walk_end, ret_valid, ret_mispred;
  pc_t walk_br_pc;
  inst_t walk_inst, ret_inst;
  logic hit, busy, inval_dist, inval_loop, evicted;
  pc_t hit_br_pc, hit_pc;
  dist_t hit_wp_dist, hit_cp_dist;
  regset_t hit_wp_regs, hit_cp_regs;
  int checks = 0, failures = 0;
  int n_evict = 0;

  wrong_path_buffer dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && evicted) n_evict++;

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
    walk_start = 0; walk_valid = 0; walk_end = 0; ret_valid = 0; ret_mispred = 0;
  endtask

  task automatic start(input pc_t br);
    @(negedge clk); idle_inputs();
    walk_start = 1; walk_br_pc = br;
    @(negedge clk); idle_inputs();
  endtask
  task automatic walk(input inst_t x);
    walk_valid = 1; walk_inst = x;
    @(negedge clk); idle_inputs();
  endtask
  task automatic wend();
    walk_end = 1;
    @(negedge clk); idle_inputs();
  endtask
  // retire one instruction; report whether hit pulses in the next cycle
  task automatic retire(input inst_t x, input bit mis, output bit h, output bit il, output bit id);
    ret_valid = 1; ret_inst = x; ret_mispred = mis;
    @(posedge clk); #1;
    h = hit; il = inval_loop; id = inval_dist;
    @(negedge clk); idle_inputs();
  endtask

  pc_t   fig_pc  [5] = '{32'h80510, 32'h80514, 32'h80518, 32'h8051C, 32'h80520};
  int    fig_dst [5] = '{0, 5, 4, 4, 2};
  regset_t fig_set [5] = '{16'b000001, 16'b100001, 16'b110001, 16'b110001, 16'b110101};

  task automatic fig_walk();
    start(32'h80500);
    for (int i = 0; i < 5; i++) walk(I(fig_pc[i], fig_dst[i]));
    wend();
  endtask

  initial begin
    bit h, il, id;
    idle_inputs(); walk_br_pc = 0; walk_inst = '0; ret_inst = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!busy, "idle after reset");

    // --- the five wrong-path entries of the example, one episode each ---
    for (int k = 0; k < 5; k++) begin
      fig_walk();
      check(busy, "valid after the walk");
      retire(I(32'h80400, 1), 0, h, il, id);          // older instruction: ignored
      check(!h, "older instruction ignored");
      retire(I(32'h80500, -1), 1, h, il, id);         // the mispredicted branch
      check(!h, "branch itself not compared");
      retire(I(fig_pc[k], fig_dst[k]), 1'b0, h, il, id);
      check(h, $sformatf("hit on wrong-path PC %h", fig_pc[k]));
      check(hit_pc == fig_pc[k] && hit_br_pc == 32'h80500, "hit PCs");
      check(int'(hit_wp_dist) == k, $sformatf("wrong-path distance %0d got %0d", k, hit_wp_dist));
      check(hit_wp_regs == fig_set[k], $sformatf("wrong-path register set %0d got %b", k, hit_wp_regs));
      check(hit_cp_dist == 0 && hit_cp_regs == 0, "empty correct path");
      check(!busy, "invalidated after the hit");
    end

    // --- two-sided hammock, both sides 3 long ---
    fig_walk();
    retire(I(32'h80500, -1), 1, h, il, id);
    retire(I(32'h80600, 0), 0, h, il, id); check(!h, "cp0");
    retire(I(32'h80604, 1), 0, h, il, id); check(!h, "cp1");
    retire(I(32'h80608, -1), 0, h, il, id); check(!h, "cp2");
    retire(I(32'h8051C, 4), 0, h, il, id);
    check(h && hit_wp_dist == 3 && hit_cp_dist == 3, "hammock distances");
    check(hit_cp_regs == 16'b11, "correct-path set {R0,R1}");

    // --- fill stops at a loop back to the branch ---
    start(32'h90000);
    walk(I(32'h90010, 1)); walk(I(32'h90014, 2)); walk(I(32'h90000, -1)); walk(I(32'h90018, 3));
    wend();
    retire(I(32'h90000, -1), 1, h, il, id);
    retire(I(32'h90018, 3), 0, h, il, id);
    check(!h, "instruction after the loop back was not copied");
    retire(I(32'h90014, 2), 0, h, il, id);
    check(h && hit_wp_dist == 1 && hit_cp_dist == 1 && hit_cp_regs == 16'b1000, "hit after the loop-back stop");

    // --- compare stops when the branch PC retires again ---
    fig_walk();
    retire(I(32'h80500, -1), 1, h, il, id);
    retire(I(32'h80600, 0), 0, h, il, id);
    retire(I(32'h80500, -1), 0, h, il, id);
    check(il && !h && !busy, "loop back on the correct path invalidates");

    // --- maximum distance on the wrong path: 120 walked, 100 kept ---
    start(32'hA0000);
    for (int i = 0; i < 120; i++) walk(I(32'hA1000 + 32'(i), i % 16));
    check(busy, "fill ended by distance");
    retire(I(32'hA0000, -1), 1, h, il, id);
    retire(I(32'hA1000 + 100, 0), 0, h, il, id);
    check(!h, "distance 100 not kept");
    retire(I(32'hA1000 + 99, 0), 0, h, il, id);
    check(h && hit_wp_dist == 99 && hit_wp_regs == 16'hFFFF && hit_cp_dist == 1, "distance 99 kept");
    check(n_evict == 0, "100 consecutive PCs fit without eviction");

    // --- maximum distance on the correct path ---
    fig_walk();
    retire(I(32'h80500, -1), 1, h, il, id);
    for (int i = 0; i < 100; i++) begin
      retire(I(32'hB0000 + 32'(4 * i), 1), 0, h, il, id);
      if (i < 99) begin
        if (id || h) begin check(0, $sformatf("early stop at %0d", i)); break; end
      end else check(id && !h && !busy, "invalidated on the 100th correct-path instruction");
    end

    // --- LRU eviction inside one set ---
    start(32'hC0000);
    for (int i = 0; i < 5; i++) walk(I(32'hC1000 + 32'(32 * i), i));
    wend();
    check(n_evict == 1, "fifth PC of a set evicts");
    retire(I(32'hC0000, -1), 1, h, il, id);
    retire(I(32'hC1000, 0), 0, h, il, id);
    check(!h, "least recently used entry was evicted");
    retire(I(32'hC1020, 1), 0, h, il, id);
    check(h && hit_wp_dist == 1 && hit_wp_regs == 16'b11, "second entry still present");

    // --- empty walk ---
    start(32'hD0000);
    wend();
    check(!busy, "empty walk leaves the buffer invalid");

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
