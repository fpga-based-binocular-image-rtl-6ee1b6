// Threshold stage: a candidate from the non-maximal suppression of any of the
// middle scales whose determinant exceeds THRESH makes the one-bit key point
// flag true. Registered on each enabled step.
//
// The paper gives the rule ("greater than the threshold") but no value; the
// default, 6658, is 0.0004 (a common SURF threshold for images scaled to
// 0..1) times 255^2 times 2^8 for the 8 fraction bits of the determinant.
module keypoint_threshold
  import feat_pkg::*;
#(
  parameter int unsigned      NS     = 6,     // number of suppression units
  parameter logic signed [DET_BITS-1:0] THRESH = 6658
) (
  input  logic                       clk,
  input  logic                       en,
  input  logic [NS-1:0]              cand,
  input  logic signed [DET_BITS-1:0] det [NS],
  output logic                       flag
);
  logic hit;
  always_comb begin
    hit = 1'b0;
    for (int s = 0; s < NS; s++) if (cand[s] && det[s] > THRESH) hit = 1'b1;
  end
  always_ff @(posedge clk) if (en) flag <= hit;
endmodule
