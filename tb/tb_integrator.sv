// Testbench of the integrator: two back-to-back 20x12 random images with
// random input gaps; every output is compared with an integral image
// summed directly from the pixels, and each image must restart from zero.
module tb_integrator;
  localparam int W = 20, H = 12;
  localparam int IW = $clog2(255 * W * H + 1);
  logic clk = 0, rst_n = 0, en = 0;
  logic [7:0] pix = 0;
  logic [IW-1:0] ii;
  always #5 clk = ~clk;
  integrator #(.W(W), .H(H)) dut (.*);
  int checks = 0, failures = 0;
  int img [2][H][W];

  function automatic int ref_ii(int n, int x, int y);
    int s = 0;
    for (int j = 0; j <= y; j++) for (int i = 0; i <= x; i++) s += img[n][j][i];
    return s;
  endfunction

  initial begin
    for (int n = 0; n < 2; n++) for (int y = 0; y < H; y++) for (int x = 0; x < W; x++)
      img[n][y][x] = $urandom_range(0, 255);
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 2; n++) for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
      while ($urandom_range(0, 3) == 0) begin en = 0; @(posedge clk); #1; end
      en = 1; pix = 8'(img[n][y][x]);
      @(posedge clk); #1;
      en = 0;
      checks++;
      if (ii != IW'(ref_ii(n, x, y))) begin
        failures++;
        if (failures < 5) $display("img %0d (%0d,%0d): got %0d exp %0d", n, x, y, ii, ref_ii(n, x, y));
      end
    end
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
