// Testbench of the generic window (N = 5, W = 12): feeds a numbered pixel
// stream with random gaps and checks after every accepted pixel that every
// window register holds the pixel i lines and j pixels back.
module tb_image_window;
  localparam int N = 5, W = 12, DW = 12;
  logic clk = 0, rst_n = 0, en = 0;
  logic [DW-1:0] din = 0;
  logic [DW-1:0] win [N][N];
  always #5 clk = ~clk;
  image_window #(.N(N), .W(W), .DW(DW)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int k = 0; k < 200; k++) begin
      while ($urandom_range(0, 3) == 0) begin en = 0; @(posedge clk); #1; end
      en = 1; din = DW'(k * 7 + 3);
      @(posedge clk); #1;
      en = 0;
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
        automatic int idx = k - i * W - j;
        if (idx < 0) continue;
        checks++;
        if (win[i][j] != DW'(idx * 7 + 3)) begin
          failures++;
          if (failures < 5) $display("k=%0d win[%0d][%0d]=%0d exp %0d", k, i, j, win[i][j], idx*7+3);
        end
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
