// Hessian core: determinant of the box-filter Hessian (Eq. 2, 3) of one
// SURF scale at the centre of the 52x52 integral-image window.
//
// The window holds integral values; win[i][j] is the value i lines and j
// pixels back from the newest one. The filter centre is win[25][25], so a
// filter of side L <= 51 reaches from 26 pixels before to 25 after the
// centre, which is what a 52-wide integral window allows. With lobe l = L/3:
//   Dyy: rows -(L-1)/2..(L-1)/2, cols -(l-1)..(l-1), weight +1, minus 3x the
//        middle lobe rows -(l-1)/2..(l-1)/2 (a +1,-2,+1 filter);
//   Dxx: the same, transposed;
//   Dxy: four l x l boxes at rows/cols -l..-1 and 1..l, signs + - - +.
// Each box costs four integral reads. The determinant
//   det = Dxx*Dyy - 0.81*Dxy^2     (omega = 0.9, 0.81 ~ 207/256)
// is normalised by the filter area squared (L^4) with a 32-bit fixed-point
// reciprocal and kept with 8 fraction bits, so that the eight scales can be
// compared by the non-maximal suppression. The result is registered on each
// enabled step (one step of latency).
//
// The paper gives Eq. 3, the scales and the eight parallel cores; the box
// layout is the standard SURF one; omega, the normalisation and all widths
// are this design's choices. Box sums are formed modulo 2^IW, which is exact
// because a true box sum is never negative and always fits.
module hessian_core
  import feat_pkg::*;
#(
  parameter int unsigned L  = 9,      // filter side, odd multiple of 3, <= 51
  parameter int unsigned IW = 27,     // integral value width
  parameter int unsigned WN = 52      // integral window size
) (
  input  logic                        clk,
  input  logic                        en,
  input  logic [IW-1:0]               win [WN][WN],
  output logic signed [DET_BITS-1:0]  det
);
  localparam int C     = 25;                 // centre index in the window
  localparam int LOBE  = L / 3;
  localparam int HALF  = (L - 1) / 2;
  localparam int MIDH  = (LOBE - 1) / 2;
  localparam longint RECIP = recip_l4(L);
  localparam int unsigned W2 = 207;          // round(0.81 * 256)

  // integral value at pixel offset (dx,dy) from the centre
  function automatic logic [IW-1:0] at(input int dx, input int dy);
    return win[C - dy][C - dx];
  endfunction

  // sum over rows r0..r1, columns c0..c1 (offsets from the centre)
  function automatic logic signed [23:0] box(input int r0, input int r1,
                                             input int c0, input int c1);
    logic [IW-1:0] s;
    s = at(c1, r1) - at(c0 - 1, r1) - at(c1, r0 - 1) + at(c0 - 1, r0 - 1);
    return 24'(s);
  endfunction

  logic signed [23:0] dxx, dyy, dxy;
  logic signed [47:0] det_raw;
  logic signed [71:0] det_scaled;

  always_comb begin
    dyy = box(-HALF, HALF, -(LOBE - 1), LOBE - 1) - 24'sd3 * box(-MIDH, MIDH, -(LOBE - 1), LOBE - 1);
    dxx = box(-(LOBE - 1), LOBE - 1, -HALF, HALF) - 24'sd3 * box(-(LOBE - 1), LOBE - 1, -MIDH, MIDH);
    dxy = box(-LOBE, -1, -LOBE, -1) + box(1, LOBE, 1, LOBE)
        - box(-LOBE, -1, 1, LOBE)   - box(1, LOBE, -LOBE, -1);
    det_raw    = 48'(dxx) * 48'(dyy) - ((48'(dxy) * 48'(dxy) * 48'(W2)) >>> 8);
    det_scaled = (72'(det_raw) * 72'(RECIP)) >>> (RECIP_SH - DET_FRAC);
  end

  always_ff @(posedge clk) if (en) det <= DET_BITS'(det_scaled);

  initial assert (L % 6 == 3 && L <= 51) else $error("hessian_core: bad L");
endmodule
