// Feature extractor: SURF key point detection and BRIEF description of a
// raster pixel stream, one pixel per clock.
//
// Datapath (all stages advance together on an accepted input pixel):
//   integrator -> 52x52 integral window -> 8 Hessian cores (L = 9..51)
//     -> one 3x3 window per scale -> 6 non-maximal suppression units
//     (scales 2..7 against their neighbours) -> threshold -> flag FIFO
//   52x52 integral window -> averaging filter (9x9 box) -> 49x49 window
//     -> 128 comparers -> descriptor
//   coordinate generator -> coordinate
// The averaging filter reads the same integral window as the Hessian cores,
// at its newest corner (rows/columns 0..9). Counting enabled steps, the
// descriptor of a pixel is ready 28*W+32 steps after the pixel entered and
// its Hessian flag 26*W+30 steps after, so the flag goes through a 2*W+2
// step FIFO. The output beat sent together with input pixel k carries pixel
// k-28*W-33 (PRIME below); results of the last pixels of a stream come out
// only as further pixels (the next image) are pushed in.
//
// Handshake: valid/ready on both sides (AXI-Stream style). Before the
// pipeline is primed every input pixel is accepted and nothing is emitted;
// afterwards an input pixel moves only together with an output beat, so the
// extractor is suspended whenever the input is not valid or the output is
// not ready. m_last marks the last pixel of each W x H image. The flag is
// forced to 0 within MARGIN = 29 pixels of the image border, where the
// windows would reach outside the image.
//
// Structure and window sizes follow the paper; the scale of the eighth
// filter (L = 51), the fixed-point formats, the threshold value and the
// alignment scheme are this design's choices.
module feature_extractor
  import feat_pkg::*;
#(
  parameter int unsigned W      = 640,
  parameter int unsigned H      = 480,
  parameter logic signed [DET_BITS-1:0] THRESH = 6658
) (
  input  logic     clk,
  input  logic     rst_n,
  // pixel stream in
  input  logic       s_valid,
  output logic       s_ready,
  input  logic [7:0] s_pixel,
  // per-pixel result stream out
  output logic     m_valid,
  input  logic     m_ready,
  output logic     m_flag,
  output feature_t m_feature,
  output logic     m_last
);
  localparam int unsigned IW     = $clog2(255 * W * H + 1);
  localparam int unsigned SW     = 15;
  localparam int unsigned D_DESC = 28 * W + 32;
  localparam int unsigned D_FLAG = 26 * W + 30;
  localparam int unsigned PRIME  = D_DESC + 1;
  localparam int unsigned MARGIN = 29;

  logic en, primed;
  logic [9:0] ox, oy;
  logic       olast;

  assign s_ready = m_ready || !primed;
  assign en      = s_valid && s_ready;
  assign m_valid = s_valid && primed;

  // ---------------- integral image and its window ----------------
  logic [IW-1:0] ii;
  logic [IW-1:0] iwin [52][52];

  integrator #(.W(W), .H(H), .IW(IW)) u_int (
    .clk, .rst_n, .en, .pix(s_pixel), .ii);

  image_window #(.N(52), .W(W), .DW(IW)) u_iwin (
    .clk, .rst_n, .en, .din(ii), .win(iwin));

  // ---------------- SURF detector ----------------
  logic signed [DET_BITS-1:0] det  [NUM_SCALES];
  logic [DET_BITS-1:0]        dwin [NUM_SCALES][3][3];
  logic [NUM_SCALES-3:0]      cand;
  logic signed [DET_BITS-1:0] cdet [NUM_SCALES-2];
  logic                       flag_q, flag_al;

  for (genvar s = 0; s < NUM_SCALES; s++) begin : g_scale
    hessian_core #(.L(filter_size(s)), .IW(IW), .WN(52)) u_hess (
      .clk, .en, .win(iwin), .det(det[s]));
    image_window #(.N(3), .W(W), .DW(DET_BITS)) u_dwin (
      .clk, .rst_n, .en, .din(DET_BITS'(det[s])), .win(dwin[s]));
  end

  for (genvar s = 1; s < NUM_SCALES - 1; s++) begin : g_nms
    nms_3d u_nms (
      .below(dwin[s-1]), .mid(dwin[s]), .above(dwin[s+1]), .is_max(cand[s-1]));
    assign cdet[s-1] = $signed(dwin[s][1][1]);
  end

  keypoint_threshold #(.NS(NUM_SCALES - 2), .THRESH(THRESH)) u_thr (
    .clk, .en, .cand, .det(cdet), .flag(flag_q));

  flag_delay_fifo #(.D(D_DESC - D_FLAG)) u_ffifo (
    .clk, .rst_n, .en, .din(flag_q), .dout(flag_al));

  // ---------------- BRIEF descriptor ----------------
  logic [SW-1:0]        avg;
  logic [SW-1:0]        awin [49][49];
  logic [DESC_BITS-1:0] desc;

  averaging_filter #(.IW(IW), .SW(SW)) u_avg (
    .clk, .en,
    .a(iwin[0][0]), .b(iwin[0][9]), .c(iwin[9][0]), .d(iwin[9][9]),
    .sum(avg));

  image_window #(.N(49), .W(W), .DW(SW)) u_awin (
    .clk, .rst_n, .en, .din(avg), .win(awin));

  brief_descriptor #(.SW(SW), .WN(49)) u_brief (
    .clk, .en, .win(awin), .desc);

  // ---------------- coordinates and output ----------------
  coord_generator #(.W(W), .H(H), .PRIME(PRIME)) u_coord (
    .clk, .rst_n, .en, .primed, .x(ox), .y(oy), .last(olast));

  logic in_core;
  always_comb begin
    in_core = (ox >= 10'(MARGIN)) && (ox < 10'(W - MARGIN))
          && (oy >= 10'(MARGIN)) && (oy < 10'(H - MARGIN));
    m_flag            = flag_al && in_core;
    m_feature.desc    = desc;
    m_feature.xy.x    = ox;
    m_feature.xy.y    = oy;
    m_last            = olast;
  end

  initial assert (W <= 1024 && H <= 1024 && W > 2 * MARGIN && H > 2 * MARGIN)
    else $error("feature_extractor: unsupported image size");
endmodule
