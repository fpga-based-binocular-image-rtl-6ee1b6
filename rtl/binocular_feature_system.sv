// Programmable-logic part of the binocular feature extraction and matching
// system: two DVP image captures, one feature extractor shared by the left
// and right images, and the feature matcher.
//
// Data flow: each camera's DVP video becomes an AXI4-Stream (cap_l_*,
// cap_r_*) for the DMA that writes the DDR ping-pong frame buffer. The
// rectified images come back from DDR as one pixel stream (px_*): for every
// frame, first the left image, then the right image, each W x H in raster
// order. The feature extractor computes a key point flag, BRIEF descriptor
// and coordinate for every pixel; the matcher stores the flagged ones and,
// one frame later, matches the left image against the right image (stereo)
// and against the previous left image (trace). Match results leave as a
// stream (res_*) for the result DMA. At one pixel per clock, a frame of two
// 640x480 images takes 614,400 clocks: 162 frames/s at 100 MHz.
//
// DMA, DDR, image rectification and the AXI4-Lite configuration registers
// are outside this module; their connections are ports.
module binocular_feature_system
  import feat_pkg::*;
#(
  parameter int unsigned W        = 640,
  parameter int unsigned H        = 480,
  parameter logic signed [DET_BITS-1:0] THRESH = 6658,
  parameter int unsigned NG       = 8,
  parameter int unsigned DEPTH    = 1024,
  parameter int unsigned FIFO_DEP = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  // left camera and its capture stream
  input  logic       cam_l_vsync,
  input  logic       cam_l_href,
  input  logic       cam_l_pix_en,
  input  logic [7:0] cam_l_data,
  output logic       cap_l_tvalid,
  input  logic       cap_l_tready,
  output logic [7:0] cap_l_tdata,
  output logic       cap_l_tuser,
  output logic       cap_l_tlast,
  output logic       cap_l_overflow,
  // right camera and its capture stream
  input  logic       cam_r_vsync,
  input  logic       cam_r_href,
  input  logic       cam_r_pix_en,
  input  logic [7:0] cam_r_data,
  output logic       cap_r_tvalid,
  input  logic       cap_r_tready,
  output logic [7:0] cap_r_tdata,
  output logic       cap_r_tuser,
  output logic       cap_r_tlast,
  output logic       cap_r_overflow,
  // rectified pixel stream (left image, then right image, per frame)
  input  logic       px_tvalid,
  output logic       px_tready,
  input  logic [7:0] px_tdata,
  // matcher configuration
  input  logic [HD_BITS-1:0]    hd_thresh,
  input  logic [COORD_BITS-1:0] y_tol,
  input  logic [COORD_BITS-1:0] max_disp,
  // match results
  output logic          res_tvalid,
  input  logic          res_tready,
  output match_result_t res_tdata,
  // status
  output logic       feat_overflow,
  output logic       matching,
  output logic       frame_wait
);
  dvp_capture u_cap_l (
    .clk, .rst_n, .vsync(cam_l_vsync), .href(cam_l_href), .pix_en(cam_l_pix_en),
    .data(cam_l_data), .m_tvalid(cap_l_tvalid), .m_tready(cap_l_tready),
    .m_tdata(cap_l_tdata), .m_tuser(cap_l_tuser), .m_tlast(cap_l_tlast),
    .overflow(cap_l_overflow));

  dvp_capture u_cap_r (
    .clk, .rst_n, .vsync(cam_r_vsync), .href(cam_r_href), .pix_en(cam_r_pix_en),
    .data(cam_r_data), .m_tvalid(cap_r_tvalid), .m_tready(cap_r_tready),
    .m_tdata(cap_r_tdata), .m_tuser(cap_r_tuser), .m_tlast(cap_r_tlast),
    .overflow(cap_r_overflow));

  logic     fx_valid, fx_ready, fx_flag, fx_last;
  feature_t fx_feature;

  feature_extractor #(.W(W), .H(H), .THRESH(THRESH)) u_fx (
    .clk, .rst_n,
    .s_valid(px_tvalid), .s_ready(px_tready), .s_pixel(px_tdata),
    .m_valid(fx_valid), .m_ready(fx_ready), .m_flag(fx_flag),
    .m_feature(fx_feature), .m_last(fx_last));

  feature_matcher #(.NG(NG), .DEPTH(DEPTH), .FIFO_DEP(FIFO_DEP)) u_fm (
    .clk, .rst_n,
    .s_valid(fx_valid), .s_ready(fx_ready), .s_flag(fx_flag),
    .s_feature(fx_feature), .s_last(fx_last),
    .hd_thresh, .y_tol, .max_disp,
    .m_valid(res_tvalid), .m_ready(res_tready), .m_data(res_tdata),
    .overflow(feat_overflow), .matching, .frame_wait, .ring_base());
endmodule
