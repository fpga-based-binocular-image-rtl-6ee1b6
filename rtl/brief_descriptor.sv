// BRIEF descriptor: 128 comparers on the 49x49 window of smoothed values,
// combined into one 128-bit descriptor (Eq. 4).
//
// Bit i is 1 when the smoothed value at the first point of sampling pair i
// is greater than the value at the second point. The window centre is
// win[24][24]; a point at offset (dx,dy) from the centre is read at
// win[24-dy][24-dx]. The sampling pattern is feat_pkg::brief_pattern() (the
// paper does not publish its pattern). Registered on each enabled step.
module brief_descriptor
  import feat_pkg::*;
#(
  parameter int unsigned SW = 15,
  parameter int unsigned WN = 49
) (
  input  logic                 clk,
  input  logic                 en,
  input  logic [SW-1:0]        win [WN][WN],
  output logic [DESC_BITS-1:0] desc
);
  localparam int C = (WN - 1) / 2;
  localparam pattern_t PAT = brief_pattern();

  logic [DESC_BITS-1:0] bits;
  always_comb begin
    for (int i = 0; i < DESC_BITS; i++)
      bits[i] = win[C - int'(PAT[4*i+1])][C - int'(PAT[4*i])]
              > win[C - int'(PAT[4*i+3])][C - int'(PAT[4*i+2])];
  end
  always_ff @(posedge clk) if (en) desc <= bits;
endmodule
