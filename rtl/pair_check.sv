// Result checks and combine for one group of the match executor (one trace
// core and one stereo core sharing the same current-left feature).
//
// Threshold check: a match passes when its Hamming distance is not above
// hd_thresh. The trace match must pass the threshold check only (and exists
// only when trace_en, i.e. from the second frame on). The stereo match must
// also pass the parallel check: since rectified images have horizontal
// epipolar lines, the rows of the pair may differ by at most y_tol, and the
// disparity x_left - x_right must lie in 0..max_disp (the parallax search
// range). Combine packs the pairs and the disparity into one result; `keep`
// is high when at least one of the two matches passed. Combinational.
//
// The two checks and their order follow the paper; the tolerance form, the
// disparity range test and the result layout are this design's choices.
module pair_check
  import feat_pkg::*;
(
  input  logic               trace_en,
  input  logic [HD_BITS-1:0] hd_thresh,
  input  logic [COORD_BITS-1:0] y_tol,
  input  logic [COORD_BITS-1:0] max_disp,
  input  logic [HD_BITS-1:0] hd_t,
  input  logic [HD_BITS-1:0] hd_s,
  input  xy_t                cur,
  input  xy_t                prev,
  input  xy_t                right,
  output match_result_t      result,
  output logic               keep
);
  logic signed [COORD_BITS:0] dx, dy;
  always_comb begin
    dx = $signed({1'b0, cur.x}) - $signed({1'b0, right.x});
    dy = $signed({1'b0, cur.y}) - $signed({1'b0, right.y});
    result.t_ok      = trace_en && (hd_t <= hd_thresh);
    result.s_ok      = (hd_s <= hd_thresh)
                    && (dy <= $signed({1'b0, y_tol})) && (-dy <= $signed({1'b0, y_tol}))
                    && (dx >= 0) && (dx <= $signed({1'b0, max_disp}));
    result.cur       = cur;
    result.prev      = prev;
    result.right     = right;
    result.disparity = dx;
    keep             = result.t_ok || result.s_ok;
  end
endmodule
