// Testbench of the match executor (NG = 3 groups, DEPTH = 16, 4-entry Tx
// FIFO). A model of the multi buffer's three read ports (one clock read
// latency) serves random feature sets: right and previous-left features are
// noisy copies of the left ones with shifted coordinates, mixed with random
// ones. For each start, the expected result stream (minimum Hamming
// distance with first-found ties, threshold and parallel checks, results in
// left-feature order, only those with a passing match) is computed here and
// compared with the output. Runs with the output always ready also check the
// FSM cycle count ceil(nL/NG)*(2*NG + max(nR,nP) + 6); runs with a slow
// output make the Tx FIFO fill and stall TRANSPORT. Covers nL = 0, nL not a
// multiple of NG, trace disabled and enabled.
module tb_match_executor;
  import feat_pkg::*;
  localparam int NG = 3, DEPTH = 16;
  logic clk = 0, rst_n = 0, start = 0, trace_en = 0, busy;
  logic [7:0] hd_thresh = 20;
  logic [9:0] y_tol = 1, max_disp = 40;
  logic [4:0] n_l, n_r, n_p;
  logic [3:0] rl_addr, rr_addr, rp_addr;
  feature_t rl_data, rr_data, rp_data;
  logic m_valid, m_ready = 1;
  match_result_t m_data;
  always #5 clk = ~clk;
  match_executor #(.NG(NG), .DEPTH(DEPTH), .FIFO_DEP(4)) dut (.*);

  feature_t ml [DEPTH], mr [DEPTH], mp [DEPTH];
  always @(posedge clk) begin
    rl_data <= ml[rl_addr];
    rr_data <= mr[rr_addr];
    rp_data <= mp[rp_addr];
  end

  int checks = 0, failures = 0, fifo_full_clocks = 0;
  match_result_t expq [$];
  always @(posedge clk) if (dut.fifo_full) fifo_full_clocks++;
  always @(posedge clk) if (rst_n && m_valid && m_ready) begin
    checks++;
    if (expq.size() == 0) begin failures++; $display("unexpected result"); end
    else begin
      automatic match_result_t e = expq.pop_front();
      if (m_data != e) begin
        failures++;
        $display("result mismatch: got t%0b s%0b cur %h prev %h right %h, exp t%0b s%0b cur %h prev %h right %h",
          m_data.t_ok, m_data.s_ok, m_data.cur, m_data.prev, m_data.right, e.t_ok, e.s_ok, e.cur, e.prev, e.right);
      end
    end
  end

  function automatic int popc(logic [127:0] v);
    int n = 0;
    for (int i = 0; i < 128; i++) n += v[i];
    return n;
  endfunction

  function automatic feature_t noisy(feature_t f, int dx, int dy);
    feature_t g = f;
    for (int k = 0; k < 6; k++) g.desc[$urandom_range(0, 127)] ^= 1'b1;
    g.xy.x = 10'(int'(f.xy.x) - dx);
    g.xy.y = 10'(int'(f.xy.y) + dy);
    return g;
  endfunction

  task automatic run(int nl, int nr, int np, bit tr, bit slow);
    int cyc;
    for (int i = 0; i < DEPTH; i++) begin
      ml[i].desc = {$urandom, $urandom, $urandom, $urandom};
      ml[i].xy.x = 10'($urandom_range(100, 500)); ml[i].xy.y = 10'($urandom_range(10, 400));
    end
    for (int i = 0; i < DEPTH; i++) begin
      automatic int src = $urandom_range(0, DEPTH - 1);
      mr[i] = ($urandom_range(0, 3) != 0) ? noisy(ml[src], $urandom_range(0, 50), $urandom_range(0, 2) - 1)
                                          : feature_t'({$urandom, $urandom, $urandom, $urandom, 20'($urandom)});
      mp[i] = ($urandom_range(0, 3) != 0) ? noisy(ml[$urandom_range(0, DEPTH - 1)], $urandom_range(0, 9) - 4, $urandom_range(0, 9) - 4)
                                          : feature_t'({$urandom, $urandom, $urandom, $urandom, 20'($urandom)});
    end
    // expected results
    for (int i = 0; i < nl; i++) begin
      automatic int bt = 255, bs = 255;
      automatic xy_t pt = '0, ps = '0;
      automatic match_result_t e;
      automatic int dx, dy;
      if (tr) for (int j = 0; j < np; j++) if (popc(ml[i].desc ^ mp[j].desc) < bt) begin bt = popc(ml[i].desc ^ mp[j].desc); pt = mp[j].xy; end
      for (int j = 0; j < nr; j++) if (popc(ml[i].desc ^ mr[j].desc) < bs) begin bs = popc(ml[i].desc ^ mr[j].desc); ps = mr[j].xy; end
      dx = int'(ml[i].xy.x) - int'(ps.x); dy = int'(ml[i].xy.y) - int'(ps.y);
      e.t_ok = tr && bt <= int'(hd_thresh);
      e.s_ok = bs <= int'(hd_thresh) && dy <= int'(y_tol) && -dy <= int'(y_tol) && dx >= 0 && dx <= int'(max_disp);
      e.cur = ml[i].xy; e.prev = pt; e.right = ps; e.disparity = 11'(dx);
      if (e.t_ok || e.s_ok) expq.push_back(e);
    end
    n_l = 5'(nl); n_r = 5'(nr); n_p = 5'(np); trace_en = tr;
    start = 1; @(posedge clk); #1; start = 0;
    cyc = 0;
    while (busy) begin
      if (slow) m_ready = ($urandom_range(0, 5) == 0);
      @(posedge clk); #1; cyc++;
    end
    m_ready = 1;
    repeat (8) @(posedge clk);
    #1;
    if (!slow && nl > 0) begin
      automatic int nrun = (tr && np > nr) ? np : nr;
      automatic int exp_cyc = ((nl + NG - 1) / NG) * (2 * NG + nrun + 6);
      checks++;
      if (cyc != exp_cyc) begin failures++; $display("nl=%0d nr=%0d np=%0d: %0d clocks, expected %0d", nl, nr, np, cyc, exp_cyc); end
    end
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d results missing", expq.size()); expq.delete(); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    run(0, 5, 5, 1, 0);
    run(7, 12, 9, 0, 0);
    run(16, 16, 16, 1, 0);
    run(8, 3, 14, 1, 0);
    run(11, 16, 10, 1, 1);
    run(16, 16, 16, 1, 1);
    checks++;
    if (fifo_full_clocks == 0) begin failures++; $display("Tx FIFO never filled"); end
    $display("Tx FIFO full for %0d clocks", fifo_full_clocks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
