// tb_confidence_cost: walks every TAGE counter value, JRS output and latency
// class through the decision table
//               Conf-Low  Conf-Med  Conf-High
//     Lat-Low     MP        BP        BP
//     Lat-High    MP        MP        BP
// with Conf-Low = weak TAGE counter (3 or 4), Conf-High = not low and JRS high.
// Lat-High is produced by training the latency table of one branch with long
// resolve latencies and checked to clear again after short ones.
module tb_confidence_cost;
  import mpp_pkg::*;
  logic clk = 0, rst_n = 0;
  pc_t pc, lat_upd_pc;
  logic [2:0] tage_ctr;
  logic jrs_high, lat_high, use_mp, lat_upd_valid;
  logic [9:0] lat_avg;
  logic [15:0] lat_upd_cycles;
  conf_e conf;
  int checks = 0, failures = 0;

  confidence_cost dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic train(input pc_t p, input int cyc);
    @(negedge clk);
    lat_upd_valid = 1; lat_upd_pc = p; lat_upd_cycles = 16'(cyc);
    @(posedge clk); #1;
    lat_upd_valid = 0;
  endtask

  task automatic sweep(input bit exp_lat_high);
    for (int t = 0; t < 8; t++)
      for (int j = 0; j < 2; j++) begin
        bit low, high, exp;
        tage_ctr = 3'(t); jrs_high = 1'(j); #1;
        low  = (t == 3 || t == 4);
        high = !low && j == 1;
        exp  = low || (!high && exp_lat_high);
        check(lat_high == exp_lat_high, "latency class");
        check(conf == (low ? CONF_LOW : high ? CONF_HIGH : CONF_MED), $sformatf("conf t=%0d j=%0d", t, j));
        check(use_mp == exp, $sformatf("decision t=%0d j=%0d lat=%0d", t, j, exp_lat_high));
      end
  endtask

  initial begin
    lat_upd_valid = 0; lat_upd_pc = 0; lat_upd_cycles = 0; tage_ctr = 0; jrs_high = 0;
    pc = 32'h0040_1234;
    repeat (2) @(posedge clk);
    rst_n = 1;
    sweep(1'b0);                       // all branches start Lat-Low
    train(pc, 300);                    // 270 cycles on average
    check(lat_avg == 10'd270, "running average after one update");
    sweep(1'b1);
    pc = 32'h0040_1235; #1;            // a different branch is not affected
    check(lat_high == 1'b0, "other branch stays Lat-Low");
    pc = 32'h0040_1234;
    train(pc, 10); train(pc, 10);      // 36, then 13 cycles
    check(lat_avg == 10'd13, "running average after short latencies");
    sweep(1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
