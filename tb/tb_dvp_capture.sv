// Testbench of the DVP image capture: a model camera sends two 9x4 frames
// (vsync pulse, href per line, a pixel strobe that is high one clock in two
// or on random clocks). Every AXI-Stream beat is checked for data, tuser on
// the first pixel of each frame only and tlast on the last pixel of each
// line. A third frame is sent with tready held low to check that the
// overflow flag is raised.
module tb_dvp_capture;
  localparam int W = 9, H = 4;
  logic clk = 0, rst_n = 0, vsync = 0, href = 0, pix_en = 0;
  logic [7:0] data = 0;
  logic m_tvalid, m_tready = 1, m_tuser, m_tlast, overflow;
  logic [7:0] m_tdata;
  always #5 clk = ~clk;
  dvp_capture dut (.*);
  int checks = 0, failures = 0, nbeats = 0;
  logic [7:0] expq [$];
  bit userq [$], lastq [$];

  always @(posedge clk) if (rst_n && m_tvalid && m_tready) begin
    nbeats++;
    checks++;
    if (expq.size() == 0) failures++;
    else begin
      automatic logic [7:0] e = expq.pop_front();
      automatic bit u = userq.pop_front(), l = lastq.pop_front();
      if (m_tdata != e || m_tuser != u || m_tlast != l) begin
        failures++;
        $display("beat %0d: got %h u%0b l%0b exp %h u%0b l%0b", nbeats, m_tdata, m_tuser, m_tlast, e, u, l);
      end
    end
  end

  task automatic frame(bit record, bit random_strobe);
    vsync = 1; repeat (3) @(posedge clk); #1; vsync = 0; repeat (3) @(posedge clk); #1;
    for (int y = 0; y < H; y++) begin
      href = 1;
      for (int x = 0; x < W; x++) begin
        if (random_strobe) while ($urandom_range(0, 2) == 0) begin pix_en = 0; @(posedge clk); #1; end
        else begin pix_en = 0; @(posedge clk); #1; end
        pix_en = 1; data = 8'($urandom);
        if (record) begin expq.push_back(data); userq.push_back(x == 0 && y == 0); lastq.push_back(x == W - 1); end
        @(posedge clk); #1;
      end
      pix_en = 0; href = 0;
      repeat (4) @(posedge clk); #1;
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    frame(1, 0);
    frame(1, 1);
    repeat (5) @(posedge clk);
    checks += 2;
    if (expq.size() != 0) begin failures++; $display("%0d pixels missing", expq.size()); end
    if (overflow) failures++;
    m_tready = 0;
    frame(0, 0);
    checks++;
    if (!overflow) begin failures++; $display("overflow not raised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
