// tb_entry_create: checks the new-entry rules on random inputs:
// distance = larger of the two distances, register set = OR of the two sets,
// merge address = hitting PC, branch PC passed through, counter = initial value.
module tb_entry_create;
  import mpp_pkg::*;
  logic hit, install;
  pc_t br_pc, hit_pc;
  dist_t wp_dist, cp_dist;
  regset_t wp_regs, cp_regs;
  mp_entry_t entry;
  int checks = 0, failures = 0;

  entry_create dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    // the example of a two-sided hammock: wrong path 3, correct path 3
    hit = 1; br_pc = 32'h80500; hit_pc = 32'h8051C;
    wp_dist = 3; cp_dist = 3; wp_regs = 16'b0000_0000_0011_0001; cp_regs = 16'b0000_0000_0000_0011;
    #1;
    check(install == 1'b1, "install");
    check(entry.mdist == 3, "dist 3");
    check(entry.regs == 16'b0000_0000_0011_0011, "regs OR");
    check(entry.merge_pc == 32'h8051C && entry.br_pc == 32'h80500, "pcs");
    check(entry.ctr == 3'd4, "initial counter");
    for (int i = 0; i < 200; i++) begin
      hit = 1'($urandom); br_pc = $urandom; hit_pc = $urandom;
      wp_dist = dist_t'($urandom_range(0, 99)); cp_dist = dist_t'($urandom_range(0, 99));
      wp_regs = 16'($urandom); cp_regs = 16'($urandom);
      #1;
      check(install == hit, "install follows hit");
      check(int'(entry.mdist) == ((wp_dist >= cp_dist) ? int'(wp_dist) : int'(cp_dist)), "max distance");
      check(entry.regs == (wp_regs | cp_regs), "OR of sets");
      check(entry.merge_pc == hit_pc && entry.br_pc == br_pc, "pcs");
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
