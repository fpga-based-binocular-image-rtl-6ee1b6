// Match core: finds, among a sequence of candidate features B, the one whose
// descriptor has the smallest Hamming distance to the reference feature A.
//
// The Hamming distance calculator counts the differing bits of the two
// 128-bit descriptors. The comparator tests (stored distance > new
// distance); when that holds, the distance register and the coordinate
// register take the new distance and the coordinate of B. Ties keep the
// earlier candidate. The coordinate of A passes straight through to the
// coordinate pair. `clear` (the FSM's CLEAR state) puts the distance
// register back to 255, larger than any real distance, so that `hd` = 255
// means no candidate was seen. One candidate per clock when b_valid is high.
//
// The structure (calculator, comparator, two registers with feedback
// multiplexers) follows the paper; the tie rule and the empty value are this
// design's choices.
module match_core
  import feat_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic               b_valid,
  input  feature_t           a,
  input  feature_t           b,
  output logic [HD_BITS-1:0] hd,
  output xy_t                coord_a,
  output xy_t                coord_b
);
  logic [HD_BITS-1:0] hd_new;
  logic               gt;

  always_comb begin
    hd_new = '0;
    for (int i = 0; i < DESC_BITS; i++) hd_new += HD_BITS'(a.desc[i] ^ b.desc[i]);
    gt = hd > hd_new;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hd      <= '1;
      coord_b <= '0;
    end else if (clear) begin
      hd      <= '1;
      coord_b <= '0;
    end else if (b_valid && gt) begin
      hd      <= hd_new;
      coord_b <= b.xy;
    end
  end

  assign coord_a = a.xy;
endmodule
