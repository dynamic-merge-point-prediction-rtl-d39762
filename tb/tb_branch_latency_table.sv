// tb_branch_latency_table: random latency updates against a reference model
// using real arithmetic, avg = 0.9*new + 0.1*old rounded to the nearest cycle,
// and the Lat-High threshold (above 50 cycles) checked at its boundary.
module tb_branch_latency_table;
  import mpp_pkg::*;
  logic clk = 0, rst_n = 0;
  pc_t lookup_pc, upd_pc;
  logic lat_high, upd_valid;
  logic [9:0] lookup_avg;
  logic [15:0] upd_latency;
  int checks = 0, failures = 0;
  int ref_avg [256];

  branch_latency_table dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic update(input pc_t pc, input int lat);
    int n;
    real r;
    @(negedge clk);
    upd_valid = 1; upd_pc = pc; upd_latency = 16'(lat);
    @(posedge clk); #1;
    upd_valid = 0;
    n = (lat > 1023) ? 1023 : lat;
    r = 0.9 * n + 0.1 * ref_avg[pc[7:0]] + 0.5 + 1e-6;
    ref_avg[pc[7:0]] = $rtoi(r);
  endtask

  task automatic look(input pc_t pc);
    lookup_pc = pc; #1;
    check(int'(lookup_avg) == ref_avg[pc[7:0]], $sformatf("avg pc=%h got %0d exp %0d", pc, lookup_avg, ref_avg[pc[7:0]]));
    check(lat_high == (ref_avg[pc[7:0]] > 50), "lat_high");
  endtask

  initial begin
    foreach (ref_avg[i]) ref_avg[i] = 0;
    upd_valid = 0; upd_pc = 0; upd_latency = 0; lookup_pc = 0;
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    look(32'h100);
    // boundary: one update of 56 gives round(50.4) = 50 -> Lat-Low
    update(32'h1000_0010, 56); look(32'h1000_0010);
    check(lat_high == 1'b0, "50 cycles is not above the threshold");
    // 57 from 50: 0.9*57+5 = 56.3 -> 56 -> Lat-High
    update(32'h1000_0010, 57); look(32'h1000_0010);
    check(lat_high == 1'b1, "56 cycles is above the threshold");
    // saturation of a huge latency
    update(32'h20, 5000); look(32'h20);
    check(lookup_avg == 10'd921, "saturating update");
    for (int i = 0; i < 600; i++) begin
      pc_t p;
      p = {$urandom} & 32'h0000_0F3C;  // a few entries, with aliasing of upper bits
      if ($urandom_range(0, 1)) update(p, $urandom_range(0, 300));
      look(p);
    end
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
