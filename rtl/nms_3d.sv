// Non-maximal suppression over one scale and its two neighbours.
//
// A point is a candidate when its determinant is strictly greater than all
// 26 neighbours: the 8 around it at its own scale and the 9 + 9 at the scale
// below and above, read from three 3x3 windows. Combinational; the
// threshold stage after it registers the result. Determinants arrive as
// raw 32-bit words (the window stores bits) and are compared as signed.
module nms_3d
  import feat_pkg::*;
(
  input  logic [DET_BITS-1:0]        below [3][3],
  input  logic [DET_BITS-1:0]        mid   [3][3],
  input  logic [DET_BITS-1:0]        above [3][3],
  output logic                       is_max
);
  always_comb begin
    is_max = 1'b1;
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++) begin
        if ($signed(below[i][j]) >= $signed(mid[1][1])) is_max = 1'b0;
        if ($signed(above[i][j]) >= $signed(mid[1][1])) is_max = 1'b0;
        if (!(i == 1 && j == 1) && $signed(mid[i][j]) >= $signed(mid[1][1])) is_max = 1'b0;
      end
  end
endmodule
