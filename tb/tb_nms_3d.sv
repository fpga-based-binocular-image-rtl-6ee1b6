// Testbench of the 3x3x3 non-maximal suppression: random signed values with
// the centre either made the strict maximum, tied with one neighbour, or
// beaten by one neighbour; the expected result comes from a plain loop.
module tb_nms_3d;
  import feat_pkg::*;
  logic [31:0] below [3][3], mid [3][3], above [3][3];
  logic is_max;
  nms_3d dut (.*);
  int checks = 0, failures = 0;
  initial begin
    for (int t = 0; t < 600; t++) begin
      automatic int mode = t % 3;
      automatic logic signed [31:0] mx = -32'sd100000000;
      automatic bit exp;
      automatic int pl = $urandom_range(0, 2), pi = $urandom_range(0, 2), pj = $urandom_range(0, 2);
      for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) begin
        below[i][j] = 32'($signed($urandom_range(0, 2000000)) - 1000000);
        mid[i][j]   = 32'($signed($urandom_range(0, 2000000)) - 1000000);
        above[i][j] = 32'($signed($urandom_range(0, 2000000)) - 1000000);
      end
      for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) begin
        if ($signed(below[i][j]) > mx) mx = below[i][j];
        if ($signed(above[i][j]) > mx) mx = above[i][j];
        if (!(i == 1 && j == 1) && $signed(mid[i][j]) > mx) mx = mid[i][j];
      end
      if (pl == 1 && pi == 1 && pj == 1) pl = 0;
      if (mode == 0) mid[1][1] = mx + 1;
      else if (mode == 1) begin
        mid[1][1] = mx + 1;
        if (pl == 0) below[pi][pj] = mid[1][1]; else if (pl == 1) mid[pi][pj] = mid[1][1]; else above[pi][pj] = mid[1][1];
      end else mid[1][1] = mx - 1;
      exp = (mode == 0);
      #1;
      checks++;
      if (is_max != exp) begin failures++; if (failures < 5) $display("t=%0d mode %0d got %0b", t, mode, is_max); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
