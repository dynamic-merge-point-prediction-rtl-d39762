// confidence_cost: decides per branch whether the merge point prediction is
// used instead of the branch prediction.
//
// Confidence (Section 4.1 of the paper): Conf-Low when the 3-bit counter of
// the longest matching TAGE table is in a weak state; Conf-High when it is not
// Conf-Low and the JRS confidence estimator reports high confidence;
// Conf-Med otherwise. Cost: Lat-High when the branch latency table's running
// average exceeds 50 cycles. Decision (Table 1 of the paper):
//               Conf-Low  Conf-Med  Conf-High
//     Lat-Low     MP        BP        BP
//     Lat-High    MP        MP        BP
// TAGE and JRS are outside this block; their outputs are inputs here. The TAGE
// counter is taken as unsigned 0..7 with "taken" for 4..7, so the weak states
// are 3 (weakly not-taken) and 4 (weakly taken): this encoding is this
// design's choice.
//
// Timing: the decision is combinational from the lookup inputs; latency
// updates take effect from the next cycle.
module confidence_cost
  import mpp_pkg::*;
#(
  parameter int unsigned LAT_ENTRIES = 256,
  parameter int unsigned LAT_W       = 10,
  parameter int unsigned LAT_THRESH  = 50
) (
  input  logic        clk,
  input  logic        rst_n,
  input  pc_t         pc,
  input  logic [2:0]  tage_ctr,    // counter of the highest matching TAGE table
  input  logic        jrs_high,    // JRS estimator: high confidence
  output conf_e       conf,
  output logic        lat_high,
  output logic [LAT_W-1:0] lat_avg,  // running average latency, cycles
  output logic        use_mp,
  input  logic        lat_upd_valid,
  input  pc_t         lat_upd_pc,
  input  logic [15:0] lat_upd_cycles
);
  branch_latency_table #(
    .ENTRIES(LAT_ENTRIES), .LAT_W(LAT_W), .THRESH(LAT_THRESH)
  ) u_blt (
    .clk, .rst_n,
    .lookup_pc  (pc),
    .lat_high   (lat_high),
    .lookup_avg (lat_avg),
    .upd_valid  (lat_upd_valid),
    .upd_pc     (lat_upd_pc),
    .upd_latency(lat_upd_cycles)
  );

  always_comb begin
    if (tage_ctr == 3'd3 || tage_ctr == 3'd4) conf = CONF_LOW;
    else if (jrs_high)                        conf = CONF_HIGH;
    else                                      conf = CONF_MED;
    unique case (conf)
      CONF_LOW:  use_mp = 1'b1;
      CONF_MED:  use_mp = lat_high;
      default:   use_mp = 1'b0;
    endcase
  end
endmodule
