// End-to-end testbench of the binocular feature system at 128x96 images
// (matcher sections of 256 features); system_bench holds the scene and the
// checks.
module tb_binocular_feature_system;
  import feat_pkg::*;
  logic clk, rst_n;
  logic cam_l_vsync, cam_l_href, cam_l_pix_en, cam_r_vsync, cam_r_href, cam_r_pix_en;
  logic [7:0] cam_l_data, cam_r_data, cap_l_tdata, cap_r_tdata, px_tdata, hd_thresh;
  logic cap_l_tvalid, cap_l_tuser, cap_l_tlast, cap_l_overflow, cap_l_tready;
  logic cap_r_tvalid, cap_r_tuser, cap_r_tlast, cap_r_overflow, cap_r_tready;
  logic px_tvalid, px_tready, res_tvalid, res_tready, feat_overflow, matching, frame_wait;
  logic [9:0] y_tol, max_disp;
  match_result_t res_tdata;
  binocular_feature_system #(.W(128), .H(96), .DEPTH(256)) dut (.*);
  system_bench #(.W(128), .H(96), .DISP(5), .FLUSH_ROWS(40), .MIN_MATCH(3), .WATCHDOG(400000)) bench (.*);
endmodule
