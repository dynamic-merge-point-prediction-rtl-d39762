// branch_latency_table: per-branch running average of branch resolve latency.
//
// Each entry holds the average number of cycles a branch took from prediction
// to the end of its execution. When a branch resolves, its entry becomes
//     avg' = 0.9 * new_latency + 0.1 * avg
// (the weighting printed in the paper), computed here in integer cycles as
// (9*new + old + 5) / 10, i.e. rounded to the nearest cycle. A lookup reports
// Lat-High when the stored average is above THRESH cycles (50 in the paper).
//
// Organisation (this design's choice, the paper gives no size): ENTRIES
// untagged direct-mapped entries indexed by the low PC bits, LAT_W-bit
// averages, latencies above the LAT_W range saturate. All entries reset to 0
// (Lat-Low).
//
// Timing: lookup is combinational from lookup_pc; an update is written at the
// clock edge and is visible to lookups from the next cycle.
module branch_latency_table
  import mpp_pkg::*;
#(
  parameter int unsigned ENTRIES = 256,
  parameter int unsigned LAT_W   = 10,
  parameter int unsigned THRESH  = 50
) (
  input  logic             clk,
  input  logic             rst_n,
  input  pc_t              lookup_pc,
  output logic             lat_high,
  output logic [LAT_W-1:0] lookup_avg,
  input  logic             upd_valid,
  input  pc_t              upd_pc,
  input  logic [15:0]      upd_latency  // measured resolve latency, cycles
);
  localparam int unsigned IDX_W = $clog2(ENTRIES);
  localparam int unsigned LMAX  = (1 << LAT_W) - 1;

  logic [LAT_W-1:0] avg_q [ENTRIES];

  logic [IDX_W-1:0] lk_idx, up_idx;
  logic [LAT_W-1:0] new_lat, new_avg;
  logic [LAT_W+4:0] sum;

  always_comb begin
    lk_idx     = lookup_pc[IDX_W-1:0];
    up_idx     = upd_pc[IDX_W-1:0];
    lookup_avg = avg_q[lk_idx];
    lat_high   = lookup_avg > LAT_W'(THRESH);
    new_lat    = (upd_latency > 16'(LMAX)) ? LAT_W'(LMAX) : upd_latency[LAT_W-1:0];
    sum        = (LAT_W+5)'(9) * (LAT_W+5)'(new_lat) + (LAT_W+5)'(avg_q[up_idx]) + (LAT_W+5)'(5);
    new_avg    = LAT_W'(sum / (LAT_W+5)'(10));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) avg_q[i] <= '0;
    end else if (upd_valid) begin
      avg_q[up_idx] <= new_avg;
    end
  end
endmodule
