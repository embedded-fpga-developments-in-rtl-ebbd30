// bdt_pileup: single-tree boosted decision tree that scores a pixel-sensor
// track for pileup classification.
//
// A track arrives as 14 features in ap_fixed<28,19> (28-bit two's complement,
// 9 fraction bits): x[0..12] are the y-profile charge sums of the 13 pixel rows
// and x[13] is y0, the pixel's distance from the interaction point.  The tree
// has depth 5, 9 decision nodes ("x[f] <= t") and 10 leaves:
//
//   n0 x[3]<=-0.2 ? n1 : n3
//   n1 x[13]<=6.811 ? 0.851 : n2         n2 x[8]<=2.3 ? -0.156 : 0.452
//   n3 x[2]<=-399.25 ? 0.454 : n4        n4 x[13]<=5.88 ? n5 : n7
//   n5 x[4]<=3.7 ? 0.806 : n6            n6 x[10]<=-0.05 ? 0.319 : -0.006
//   n7 x[8]<=-545.65 ? 0.266 : n8        n8 x[6]<=-515.55 ? 0.191 : -0.169
//
// Thresholds and leaf values are held as ap_fixed<28,19> numbers, i.e. the
// decimal value times 512 rounded toward minus infinity (the default
// truncation of ap_fixed).  score is the leaf value; above is set when score >
// THRESH (default 0.4922*512 -> 252, one of the two operating points of the
// quantised model).
//
// Timing: stage 1 registers the nine comparisons, stage 2 walks the tree and
// registers the score, so out_valid follows in_valid by exactly 2 cycles and a
// new track can enter every cycle (10 ns at the 200 MHz timing target, inside
// the quoted < 25 ns).
//
// From the paper: the tree (features, thresholds, leaf values), the 14 inputs
// and 9 thresholds, ap_fixed<28,19>, the classification thresholds.  The
// left-branch-when-true reading of the tree, the rounding of the printed
// numbers, the two-stage pipeline and the raw leaf value as output are this
// design's own choices.
module bdt_pileup
  import efpga_pkg::*;
#(
  parameter logic signed [FX_W-1:0] THRESH = 28'sd252
) (
  input  logic clk,
  input  logic rst,
  input  logic in_valid,
  input  fx_t  feat [N_FEAT],
  output logic out_valid,
  output fx_t  score,
  output logic above
);
  localparam int unsigned N_NODE = 9;
  typedef int unsigned feat_idx_t;

  // node feature index and threshold (value * 2^9, floor)
  localparam feat_idx_t NODE_F [N_NODE] = '{3, 13, 8, 2, 13, 4, 10, 8, 6};
  localparam fx_t NODE_T [N_NODE] = '{
    -28'sd103,     //  -0.2
     28'sd3487,    //   6.811
     28'sd1177,    //   2.3
    -28'sd204416,  // -399.25
     28'sd3010,    //   5.88
     28'sd1894,    //   3.7
    -28'sd26,      //  -0.05
    -28'sd279373,  // -545.65
    -28'sd263962   // -515.55
  };
  // leaves, left to right as drawn
  localparam fx_t L_0851 =  28'sd435, L_M0156 = -28'sd80,  L_0452 = 28'sd231,
                  L_0454 =  28'sd232, L_0806  =  28'sd412, L_0319 = 28'sd163,
                  L_M0006 = -28'sd4,  L_0266  =  28'sd136, L_0191 = 28'sd97,
                  L_M0169 = -28'sd87;

  logic [N_NODE-1:0] le;    // stage 1: x[f] <= t per node
  logic              v1;

  always_ff @(posedge clk) begin
    if (rst) begin
      le <= '0; v1 <= 1'b0;
    end else begin
      v1 <= in_valid;
      for (int n = 0; n < N_NODE; n++) le[n] <= (feat[NODE_F[n]] <= NODE_T[n]);
    end
  end

  fx_t leaf;
  always_comb begin
    if (le[0]) begin
      if (le[1])      leaf = L_0851;
      else if (le[2]) leaf = L_M0156;
      else            leaf = L_0452;
    end else if (le[3]) leaf = L_0454;
    else if (le[4]) begin
      if (le[5])      leaf = L_0806;
      else if (le[6]) leaf = L_0319;
      else            leaf = L_M0006;
    end else begin
      if (le[7])      leaf = L_0266;
      else if (le[8]) leaf = L_0191;
      else            leaf = L_M0169;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0; score <= '0; above <= 1'b0;
    end else begin
      out_valid <= v1;
      score     <= leaf;
      above     <= leaf > THRESH;
    end
  end
endmodule
