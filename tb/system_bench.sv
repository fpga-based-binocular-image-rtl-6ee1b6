// Stimulus and checker for the binocular feature system, shared by the
// reduced and the full-size end-to-end testbench, which connect it to the
// system by its ports.
//
// Scene: a textured background with bright and dark squares. Frame f shows
// the scene moved by (2f, f) pixels in the left camera; the right camera
// sees the left image moved DISP pixels to the left (x_right = x_left -
// DISP). Frames 0 and 1 are sent completely (left image, then right image)
// and the first FLUSH_ROWS rows of frame 2 push the last results out of the
// extractor pipeline. The input stream has random gaps, and the result
// stream random back-pressure. Both DVP cameras also send one small frame
// through the capture blocks at the same time.
//
// Checks: at least 90% of the stereo matches that pass must have disparity
// DISP and equal rows, and 90% of the trace matches of frame 1 must point to
// (x-2, y-1) in frame 0 (identical squares can match each other);
// each kind must occur at least MIN_MATCH times; the numbers of captured
// pixels, lines and frames must be right. Counted mechanisms (each must
// happen): extractor input gaps, extractor suspended by a waiting frame,
// result back-pressure, stereo matches, trace matches (second frame only),
// results whose stereo match was rejected by the checks.
module system_bench
  import feat_pkg::*;
#(
  parameter int W = 128,
  parameter int H = 96,
  parameter int DISP = 5,
  parameter int FLUSH_ROWS = 40,
  parameter int MIN_MATCH = 3,
  parameter int WATCHDOG = 400000,
  parameter int AREA_PER_SQUARE = 250     // scene density: one square per this many pixels
) (
  output logic          clk,
  output logic          rst_n,
  output logic          cam_l_vsync, cam_l_href, cam_l_pix_en,
  output logic [7:0]    cam_l_data,
  output logic          cam_r_vsync, cam_r_href, cam_r_pix_en,
  output logic [7:0]    cam_r_data,
  input  logic          cap_l_tvalid, cap_l_tuser, cap_l_tlast, cap_l_overflow,
  input  logic          cap_r_tvalid, cap_r_tuser, cap_r_tlast, cap_r_overflow,
  output logic          cap_l_tready, cap_r_tready,
  input  logic [7:0]    cap_l_tdata, cap_r_tdata,
  output logic          px_tvalid,
  input  logic          px_tready,
  output logic [7:0]    px_tdata,
  output logic [7:0]    hd_thresh,
  output logic [9:0]    y_tol, max_disp,
  input  logic          res_tvalid,
  output logic          res_tready,
  input  match_result_t res_tdata,
  input  logic          feat_overflow, matching, frame_wait
);
  localparam int CW = 16, CH = 6;          // DVP test frame

  initial begin
    clk = 0; rst_n = 0;
    cam_l_vsync = 0; cam_l_href = 0; cam_l_pix_en = 0; cam_l_data = 0;
    cam_r_vsync = 0; cam_r_href = 0; cam_r_pix_en = 0; cam_r_data = 0;
    cap_l_tready = 1; cap_r_tready = 1; px_tvalid = 0; px_tdata = 0;
    hd_thresh = 20; y_tol = 1; max_disp = 64; res_tready = 1;
  end
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_gap = 0, n_suspend = 0, n_backpressure = 0, n_stereo = 0, n_trace = 0, n_rejected = 0;
  int bad_stereo = 0, bad_trace = 0, n_results = 0, frame_of_result = 0;
  int cap_beats [2] = '{0, 0}, cap_lasts [2] = '{0, 0}, cap_users [2] = '{0, 0};

  // scene
  localparam int PAD = 2 * 3 + DISP + 4;
  byte unsigned scene [H + PAD][W + PAD];
  task automatic make_scene();
    int nb = W * H / AREA_PER_SQUARE;
    for (int y = 0; y < H + PAD; y++) for (int x = 0; x < W + PAD; x++) scene[y][x] = 8'(60 + $urandom_range(0, 16));
    for (int k = 0; k < nb; k++) begin
      automatic int cx = $urandom_range(0, W + PAD - 1), cy = $urandom_range(0, H + PAD - 1), r = $urandom_range(2, 8);
      automatic int v = $urandom_range(0, 1) ? 225 : 5;
      for (int y = cy - r; y <= cy + r; y++) for (int x = cx - r; x <= cx + r; x++)
        if (x >= 0 && x < W + PAD && y >= 0 && y < H + PAD) scene[y][x] = 8'(v);
    end
  endtask
  // left image of frame f at (x,y): scene moved by (2f, f); right image: left at x + DISP
  function automatic byte unsigned pix(int f, bit right, int x, int y);
    int sx = x - 2 * f + 6 + (right ? DISP : 0), sy = y - f + 3;
    return scene[sy][sx];
  endfunction

  // monitors
  always @(posedge clk) if (rst_n) begin
    if (px_tvalid && !px_tready) n_suspend++;
    if (res_tvalid && !res_tready) n_backpressure++;
    if (cap_l_tvalid && cap_l_tready) begin cap_beats[0]++; cap_lasts[0] += cap_l_tlast; cap_users[0] += cap_l_tuser; end
    if (cap_r_tvalid && cap_r_tready) begin cap_beats[1]++; cap_lasts[1] += cap_r_tlast; cap_users[1] += cap_r_tuser; end
    if (res_tvalid && res_tready) begin
      n_results++;
      if (res_tdata.s_ok) begin
        n_stereo++;
        if (int'(res_tdata.disparity) != DISP || res_tdata.right.y != res_tdata.cur.y) bad_stereo++;
      end else n_rejected++;
      if (res_tdata.t_ok) begin
        n_trace++;
        if (int'(res_tdata.prev.x) != int'(res_tdata.cur.x) - 2 || int'(res_tdata.prev.y) != int'(res_tdata.cur.y) - 1) bad_trace++;
      end
    end
  end
  always @(posedge clk) res_tready <= ($urandom_range(0, 2) != 0);

  task automatic dvp_frame(bit right);
    if (right) begin cam_r_vsync = 1; repeat (2) @(posedge clk); #1; cam_r_vsync = 0; end
    else       begin cam_l_vsync = 1; repeat (2) @(posedge clk); #1; cam_l_vsync = 0; end
    for (int y = 0; y < CH; y++) begin
      if (right) cam_r_href = 1; else cam_l_href = 1;
      for (int x = 0; x < CW; x++) begin
        if (right) begin cam_r_pix_en = 0; @(posedge clk); #1; cam_r_pix_en = 1; cam_r_data = 8'(x + y); @(posedge clk); #1; cam_r_pix_en = 0; end
        else       begin cam_l_pix_en = 0; @(posedge clk); #1; cam_l_pix_en = 1; cam_l_data = 8'(x * y); @(posedge clk); #1; cam_l_pix_en = 0; end
      end
      if (right) cam_r_href = 0; else cam_l_href = 0;
      repeat (5) @(posedge clk); #1;
    end
  endtask

  task automatic send_image(int f, bit right, int rows);
    for (int y = 0; y < rows; y++) for (int x = 0; x < W; x++) begin
      if ($urandom_range(0, 15) == 0) begin px_tvalid = 0; n_gap++; @(posedge clk); #1; end
      px_tdata = pix(f, right, x, y);
      px_tvalid = 1;
      @(posedge clk);
      while (!px_tready) @(posedge clk);
      #1;
    end
    px_tvalid = 0;
  endtask

  initial begin
    make_scene();
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    fork
      dvp_frame(0);
      dvp_frame(1);
      begin
        send_image(0, 0, H);
        send_image(0, 1, H);
        send_image(1, 0, H);
        send_image(1, 1, H);
        send_image(2, 0, FLUSH_ROWS);
      end
    join
    // let the matcher finish frame 1
    repeat (20) @(posedge clk);
    while (matching || res_tvalid) @(posedge clk);
    repeat (20) @(posedge clk);
    $display("results %0d: stereo %0d (wrong %0d), trace %0d (wrong %0d), stereo rejected %0d",
             n_results, n_stereo, bad_stereo, n_trace, bad_trace, n_rejected);
    $display("input gaps %0d, suspended clocks %0d, result back-pressure clocks %0d", n_gap, n_suspend, n_backpressure);
    // a scene of repeated squares allows a few false matches; at most 10%
    checks++; if (bad_stereo * 10 > n_stereo) begin failures++; $display("too many wrong stereo matches"); end
    checks++; if (bad_trace * 10 > n_trace) begin failures++; $display("too many wrong trace matches"); end
    checks++; if (n_stereo < MIN_MATCH) begin failures++; $display("too few stereo matches"); end
    checks++; if (n_trace < MIN_MATCH) begin failures++; $display("too few trace matches"); end
    checks++; if (n_gap == 0) begin failures++; $display("no input gap"); end
    checks++; if (n_suspend == 0) begin failures++; $display("extractor never suspended"); end
    checks++; if (n_backpressure == 0) begin failures++; $display("no result back-pressure"); end
    checks++; if (n_rejected == 0) begin failures++; $display("no stereo rejection"); end
    checks++; if (feat_overflow) begin failures++; $display("feature overflow"); end
    for (int c = 0; c < 2; c++) begin
      checks++;
      if (cap_beats[c] != CW * CH || cap_lasts[c] != CH || cap_users[c] != 1) begin
        failures++; $display("camera %0d: %0d pixels %0d lines %0d frames", c, cap_beats[c], cap_lasts[c], cap_users[c]);
      end
    end
    checks++; if (cap_l_overflow || cap_r_overflow) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
