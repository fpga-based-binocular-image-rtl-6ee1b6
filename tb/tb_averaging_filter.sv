// Testbench of the averaging filter: random 10x10 pixel patches on top of a
// large random integral offset (so the 27-bit arithmetic wraps); the four
// integral corners are given and the output must equal the directly summed
// 9x9 box.
module tb_averaging_filter;
  logic clk = 0, en = 0;
  logic [26:0] a, b, c, d;
  logic [14:0] sum;
  always #5 clk = ~clk;
  averaging_filter dut (.*);
  int checks = 0, failures = 0;
  initial begin
    int px [10][10];
    longint ii [10][10];
    int s;
    for (int t = 0; t < 300; t++) begin
      // px[0][*] and px[*][0] lie outside the box; the box is px[1..9][1..9]
      for (int r = 0; r < 10; r++) for (int q = 0; q < 10; q++) px[r][q] = (t % 3 == 0) ? 255 : $urandom_range(0, 255);
      for (int r = 0; r < 10; r++) for (int q = 0; q < 10; q++) begin
        ii[r][q] = px[r][q];
        if (r > 0) ii[r][q] += ii[r-1][q];
        if (q > 0) ii[r][q] += ii[r][q-1];
        if (r > 0 && q > 0) ii[r][q] -= ii[r-1][q-1];
      end
      s = 0;
      for (int r = 1; r < 10; r++) for (int q = 1; q < 10; q++) s += px[r][q];
      // add a large offset: the integral window of a real image starts far from zero
      a = 27'(ii[9][9] + 64'd134000000 + t * 1000);
      b = 27'(ii[9][0] + 64'd134000000 + t * 1000);
      c = 27'(ii[0][9] + 64'd134000000 + t * 1000);
      d = 27'(ii[0][0] + 64'd134000000 + t * 1000);
      en = 1;
      @(posedge clk); #1;
      checks++;
      if (sum != 15'(s)) begin failures++; if (failures < 5) $display("t=%0d got %0d exp %0d", t, sum, s); end
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
