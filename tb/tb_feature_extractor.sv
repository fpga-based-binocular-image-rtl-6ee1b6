// Self-checking testbench of the feature extractor on 96x72 images.
//
// Five images go through the extractor back to back: images 0 and 1 at one
// pixel per clock with the output always ready (the pixel rate is checked:
// 2*W*H accepted pixels in 2*W*H clocks), images 2 and 3 with random gaps on
// the input and random back-pressure on the output, image 4 only to flush.
// A reference model written here computes, from its own integral image, the
// eight box-filter determinants, the 3x3x3 suppression, the threshold, the
// 9x9 box sums and the 128 comparisons; every output pixel of images 0..3
// is checked for its coordinate order and key point flag, and every pixel
// inside the valid core for its descriptor.
module tb_feature_extractor;
  import feat_pkg::*;
  localparam int W = 96, H = 72, NIMG = 5, MARGIN = 29;
  localparam logic signed [31:0] TH = 1500;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic s_valid, s_ready, m_valid, m_ready, m_flag, m_last;
  logic [7:0] s_pixel;
  feature_t m_feature;

  feature_extractor #(.W(W), .H(H), .THRESH(TH)) dut (.*);

  int checks = 0, failures = 0;
  int img [NIMG][H][W];
  longint ii [NIMG][H+1][W+1];         // ii[y+1][x+1] = sum up to (x,y)
  logic signed [31:0] detr [NIMG][8][H][W];
  logic exp_flag [NIMG][H][W];
  logic [127:0] exp_desc [NIMG][H][W];
  pattern_t pat = brief_pattern();

  function automatic longint bx(int n, int cx, int cy, int r0, int r1, int c0, int c1);
    // sum of rows cy+r0..cy+r1, cols cx+c0..cx+c1
    return ii[n][cy+r1+1][cx+c1+1] - ii[n][cy+r1+1][cx+c0] - ii[n][cy+r0][cx+c1+1] + ii[n][cy+r0][cx+c0];
  endfunction

  task automatic build_ref(int n);
    int L, l, h, m;
    longint dxx, dyy, dxy, raw, rc, l4, v;
    logic [127:0] d;
    for (int y = 0; y <= H; y++) for (int x = 0; x <= W; x++) ii[n][y][x] = 0;
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++)
      ii[n][y+1][x+1] = img[n][y][x] + ii[n][y][x+1] + ii[n][y+1][x] - ii[n][y][x];
    for (int s = 0; s < 8; s++) begin
      L = 9 + 6*s; l = L/3; h = (L-1)/2; m = (l-1)/2;
      l4 = longint'(L)*L*L*L; rc = ((64'sd1 <<< 32) + l4/2) / l4;
      for (int y = 26; y < H-26; y++) for (int x = 26; x < W-26; x++) begin
        dyy = bx(n,x,y,-h,h,-(l-1),l-1) - 3*bx(n,x,y,-m,m,-(l-1),l-1);
        dxx = bx(n,x,y,-(l-1),l-1,-h,h) - 3*bx(n,x,y,-(l-1),l-1,-m,m);
        dxy = bx(n,x,y,-l,-1,-l,-1) + bx(n,x,y,1,l,1,l) - bx(n,x,y,-l,-1,1,l) - bx(n,x,y,1,l,-l,-1);
        raw = dxx*dyy - ((dxy*dxy*207) >>> 8);
        detr[n][s][y][x] = 32'(( raw * rc) >>> 24);
      end
    end
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
      exp_flag[n][y][x] = 0;
      exp_desc[n][y][x] = '0;
      if (x < MARGIN || x >= W-MARGIN || y < MARGIN || y >= H-MARGIN) continue;
      for (int s = 1; s < 7; s++) begin
        bit mx = 1;
        for (int ds = -1; ds <= 1; ds++) for (int dy = -1; dy <= 1; dy++) for (int dx = -1; dx <= 1; dx++)
          if (!(ds == 0 && dy == 0 && dx == 0) && detr[n][s+ds][y+dy][x+dx] >= detr[n][s][y][x]) mx = 0;
        if (mx && detr[n][s][y][x] > TH) exp_flag[n][y][x] = 1;
      end
      for (int i = 0; i < 128; i++) begin
        longint a, b;
        a = bx(n, x + pat[4*i], y + pat[4*i+1], -4, 4, -4, 4);
        b = bx(n, x + pat[4*i+2], y + pat[4*i+3], -4, 4, -4, 4);
        d[i] = a > b;
      end
      exp_desc[n][y][x] = d;
    end
  endtask

  // images: background with random bright and dark squares
  task automatic make_img(int n);
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) img[n][y][x] = 60 + $urandom_range(0, 20);
    for (int k = 0; k < 25; k++) begin
      int cx = $urandom_range(0, W-1), cy = $urandom_range(0, H-1), r = $urandom_range(2, 9);
      int v = $urandom_range(0, 1) ? 220 : 5;
      for (int y = cy-r; y <= cy+r; y++) for (int x = cx-r; x <= cx+r; x++)
        if (x >= 0 && x < W && y >= 0 && y < H) img[n][y][x] = v;
    end
  endtask

  // output checker
  int on = 0, ox = 0, oy = 0, nflags = 0, stalled_out = 0;
  bit stall_phase = 0;
  always @(posedge clk) if (rst_n) begin
    if (m_valid && !m_ready) stalled_out++;
    if (m_valid && m_ready && on < NIMG - 1) begin
      checks++;
      if (m_feature.xy.x != 10'(ox) || m_feature.xy.y != 10'(oy) || m_last != (ox == W-1 && oy == H-1)) begin
        failures++;
        if (failures < 10) $display("coord mismatch: got %0d,%0d exp %0d,%0d", m_feature.xy.x, m_feature.xy.y, ox, oy);
      end
      checks++;
      if (m_flag != exp_flag[on][oy][ox]) begin
        failures++;
        if (failures < 10) $display("flag mismatch img %0d at %0d,%0d: got %0b", on, ox, oy, m_flag);
      end
      if (m_flag) nflags++;
      if (ox >= MARGIN && ox < W-MARGIN && oy >= MARGIN && oy < H-MARGIN) begin
        checks++;
        if (m_feature.desc != exp_desc[on][oy][ox]) begin
          failures++;
          if (failures < 10) begin
            $display("desc mismatch img %0d at %0d,%0d", on, ox, oy);
            for (int ddy = -2; ddy <= 2; ddy++) for (int ddx = -3; ddx <= 3; ddx++)
              if (m_feature.desc == exp_desc[on][oy+ddy][ox+ddx]) $display("  matches offset %0d,%0d", ddx, ddy);
          end
        end
      end
      if (ox == W-1) begin ox = 0; if (oy == H-1) begin oy = 0; on++; end else oy++; end
      else ox++;
    end
  end
  always @(posedge clk) m_ready <= stall_phase ? ($urandom_range(0, 3) != 0) : 1'b1;

  initial begin
    int cyc;
    s_valid = 0; s_pixel = 0;
    for (int n = 0; n < NIMG; n++) begin make_img(n); build_ref(n); end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < NIMG; n++) begin
      stall_phase = (n >= 2);
      cyc = 0;
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
        s_pixel = 8'(img[n][y][x]);
        if (stall_phase) while ($urandom_range(0, 4) == 0) begin s_valid = 0; @(posedge clk); #1; cyc++; end
        s_valid = 1;
        @(posedge clk);
        cyc++;
        while (!s_ready) begin @(posedge clk); cyc++; end
        #1;
      end
      if (n < 2) begin
        checks++;
        if (cyc != W*H) begin failures++; $display("image %0d took %0d clocks, expected %0d", n, cyc, W*H); end
      end
    end
    s_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (on != NIMG - 1) begin failures++; $display("only %0d images came out", on); end
    checks++;
    if (nflags < 4) begin failures++; $display("too few key points (%0d) to test", nflags); end
    checks++;
    if (stalled_out == 0) begin failures++; $display("back-pressure never happened"); end
    $display("key points %0d, stalled output clocks %0d", nflags, stalled_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
