// Testbench of the feature matcher (NG = 2, DEPTH = 12): five frames of two
// 8x4 "images" each are sent as a per-pixel stream with random key point
// flags, the way the feature extractor delivers them. Right-image and
// next-frame features are noisy copies of left ones. A model of the whole
// schedule (stereo matching of every frame, trace matching from the second,
// at most DEPTH features kept per image) gives the expected result stream.
// Checks that the input is held while a closed frame waits for the matcher
// (stall), that the overflow flag is raised, and that trace matching
// happened.
module tb_feature_matcher;
  import feat_pkg::*;
  localparam int NG = 2, DEPTH = 12, W = 8, H = 4, NF = 5;
  logic clk = 0, rst_n = 0;
  logic s_valid = 0, s_ready, s_flag = 0, s_last = 0;
  feature_t s_feature;
  logic [7:0] hd_thresh = 24;
  logic [9:0] y_tol = 1, max_disp = 60;
  logic m_valid, m_ready = 1;
  match_result_t m_data;
  logic overflow, matching, frame_wait;
  logic [2:0] ring_base;
  always #5 clk = ~clk;
  feature_matcher #(.NG(NG), .DEPTH(DEPTH), .FIFO_DEP(4)) dut (.*);

  int checks = 0, failures = 0, stall_clocks = 0, n_trace = 0, n_stereo = 0;
  feature_t fl [NF][$], fr [NF][$];
  match_result_t expq [$];

  always @(posedge clk) if (rst_n && s_valid && !s_ready) stall_clocks++;
  always @(posedge clk) if (rst_n && m_valid && m_ready) begin
    checks++;
    if (m_data.t_ok) n_trace++;
    if (m_data.s_ok) n_stereo++;
    if (expq.size() == 0) begin failures++; $display("unexpected result"); end
    else begin
      automatic match_result_t e = expq.pop_front();
      if (m_data != e) begin failures++; $display("result mismatch cur %h/%h", m_data.cur, e.cur); end
    end
  end
  always @(posedge clk) m_ready <= ($urandom_range(0, 3) != 0);

  function automatic int popc(logic [127:0] v);
    int n = 0;
    for (int i = 0; i < 128; i++) n += v[i];
    return n;
  endfunction

  function automatic feature_t noisy(feature_t f, int dx, int dy);
    feature_t g = f;
    for (int k = 0; k < 5; k++) g.desc[$urandom_range(0, 127)] ^= 1'b1;
    g.xy.x = 10'(int'(f.xy.x) - dx);
    g.xy.y = 10'(int'(f.xy.y) + dy);
    return g;
  endfunction

  task automatic expect_frame(int n);
    for (int i = 0; i < fl[n].size(); i++) begin
      automatic int bt = 255, bs = 255, dx, dy;
      automatic xy_t pt = '0, ps = '0;
      automatic match_result_t e;
      if (n >= 1) for (int j = 0; j < fl[n-1].size(); j++)
        if (popc(fl[n][i].desc ^ fl[n-1][j].desc) < bt) begin bt = popc(fl[n][i].desc ^ fl[n-1][j].desc); pt = fl[n-1][j].xy; end
      for (int j = 0; j < fr[n].size(); j++)
        if (popc(fl[n][i].desc ^ fr[n][j].desc) < bs) begin bs = popc(fl[n][i].desc ^ fr[n][j].desc); ps = fr[n][j].xy; end
      dx = int'(fl[n][i].xy.x) - int'(ps.x); dy = int'(fl[n][i].xy.y) - int'(ps.y);
      e.t_ok = (n >= 1) && bt <= int'(hd_thresh);
      e.s_ok = bs <= int'(hd_thresh) && dy <= int'(y_tol) && -dy <= int'(y_tol) && dx >= 0 && dx <= int'(max_disp);
      e.cur = fl[n][i].xy; e.prev = pt; e.right = ps; e.disparity = 11'(dx);
      if (e.t_ok || e.s_ok) expq.push_back(e);
    end
  endtask

  task automatic send_image(int n, bit right);
    automatic int nsrc = (n == 0) ? 0 : fl[n-1].size();
    for (int p = 0; p < W * H; p++) begin
      automatic feature_t f;
      s_flag = ($urandom_range(0, 99) < ((n == 2) ? 60 : 30));
      if (right) f = (fl[n].size() > 0 && $urandom_range(0, 3) != 0) ? noisy(fl[n][$urandom_range(0, fl[n].size() - 1)], $urandom_range(0, 40), $urandom_range(0, 2) - 1)
                                                                    : feature_t'({$urandom, $urandom, $urandom, $urandom, 20'($urandom)});
      else f = (nsrc > 0 && $urandom_range(0, 2) != 0) ? noisy(fl[n-1][$urandom_range(0, nsrc - 1)], $urandom_range(0, 6) - 3, $urandom_range(0, 6) - 3)
                                                        : feature_t'({$urandom, $urandom, $urandom, $urandom, 10'($urandom_range(60, 300)), 10'($urandom_range(60, 600))});
      s_feature = f;
      s_last = (p == W * H - 1);
      s_valid = 1;
      @(posedge clk);
      while (!s_ready) @(posedge clk);
      #1;
      if (s_flag) begin
        if (!right && fl[n].size() < DEPTH) fl[n].push_back(f);
        if (right && fr[n].size() < DEPTH) fr[n].push_back(f);
      end
      s_valid = 0;
      if ($urandom_range(0, 4) == 0) begin @(posedge clk); #1; end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < NF; n++) begin
      send_image(n, 0);
      send_image(n, 1);
      expect_frame(n);
    end
    repeat (3000) @(posedge clk);
    #1;
    checks += 5;
    if (expq.size() != 0) begin failures++; $display("%0d results missing", expq.size()); end
    if (stall_clocks == 0) begin failures++; $display("no stall"); end
    if (!overflow) begin failures++; $display("no overflow"); end
    if (n_trace == 0) begin failures++; $display("no trace match"); end
    if (n_stereo == 0) begin failures++; $display("no stereo match"); end
    $display("stall clocks %0d, trace %0d, stereo %0d", stall_clocks, n_trace, n_stereo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
