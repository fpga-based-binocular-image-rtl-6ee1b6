// Shared types and constants of the binocular SURF/BRIEF feature system.
//
// A feature point is carried as one 148-bit word: a 128-bit BRIEF
// descriptor followed by a 20-bit pixel coordinate (10-bit row, 10-bit
// column). The 128/20/148 split follows the paper; the order of the fields
// inside the word is this design's choice. The package also holds the
// constant functions used at elaboration: SURF box-filter sizes of the eight
// scales, the fixed-point reciprocal used to normalise the Hessian
// determinant, and the BRIEF sampling pattern.
package feat_pkg;

  localparam int unsigned DESC_BITS  = 128;  // M in the paper
  localparam int unsigned COORD_BITS = 10;   // per axis, 20 bits together
  localparam int unsigned NUM_SCALES = 8;
  localparam int unsigned HD_BITS    = 8;    // Hamming distance 0..128, 255 = none yet
  localparam int unsigned DET_BITS   = 32;   // normalised determinant, 8 fraction bits
  localparam int unsigned DET_FRAC   = 8;
  localparam int unsigned RECIP_SH   = 32;   // reciprocal of L^4 has 32 fraction bits

  typedef logic [COORD_BITS-1:0] coord_t;

  typedef struct packed {
    coord_t y;
    coord_t x;
  } xy_t;

  typedef struct packed {
    logic [DESC_BITS-1:0] desc;
    xy_t                  xy;
  } feature_t;                                // 148 bits

  // One match result as it leaves the matcher: the current left point, its
  // partner in the previous left image (trace) and in the right image
  // (stereo), the horizontal disparity and a pass flag for each match.
  typedef struct packed {
    logic                   t_ok;
    logic                   s_ok;
    xy_t                    cur;
    xy_t                    prev;
    xy_t                    right;
    logic signed [COORD_BITS:0] disparity;    // cur.x - right.x
  } match_result_t;

  // Box filter side length L of scale index s. The paper lists the scales
  // s = 1.2 ... 6.4; with L = 9*s/1.2 the first seven give 9,15,...,45 and the
  // 52x52 integral window fits L = 51 exactly, so the last scale uses L = 51.
  function automatic int filter_size(input int s);
    return 9 + 6 * s;
  endfunction

  // round(2^32 / L^4)
  function automatic longint recip_l4(input int l);
    longint l4;
    l4 = longint'(l) * l * l * l;
    return ((64'sd1 <<< RECIP_SH) + l4 / 2) / l4;
  endfunction

  // BRIEF sampling pattern: pair i compares point (dx1,dy1) with (dx2,dy2),
  // all offsets in -24..24 from the centre of the 49x49 window. The paper
  // does not give its pattern; this one is uniformly distributed (BRIEF's
  // "G I" pattern), drawn from a 32-bit xorshift generator (shifts 13, 17, 5)
  // seeded with 1: the four offsets of pair i are the values 4i+1 .. 4i+4 of
  // the sequence, each taken modulo 49, minus 24, in the order dx1,dy1,dx2,dy2.
  typedef logic signed [6:0] ofs_t;
  typedef ofs_t [DESC_BITS*4-1:0] pattern_t;

  function automatic pattern_t brief_pattern();
    pattern_t    p;
    logic [31:0] s;
    s = 32'd1;
    for (int k = 0; k < DESC_BITS * 4; k++) begin
      s = s ^ (s << 13);
      s = s ^ (s >> 17);
      s = s ^ (s << 5);
      p[k] = ofs_t'(int'(s % 32'd49) - 24);
    end
    return p;
  endfunction

endpackage
