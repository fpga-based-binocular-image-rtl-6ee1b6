// Testbench of the threshold stage: random candidate bits and determinants
// around the threshold; the flag must be set exactly when some candidate's
// determinant is strictly greater than THRESH, one enabled clock later, and
// must hold while en is low.
module tb_keypoint_threshold;
  import feat_pkg::*;
  localparam logic signed [31:0] TH = 1000;
  logic clk = 0, en = 0;
  logic [5:0] cand;
  logic signed [31:0] det [6];
  logic flag;
  always #5 clk = ~clk;
  keypoint_threshold #(.NS(6), .THRESH(TH)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    bit exp, prev;
    prev = 0;
    for (int t = 0; t < 500; t++) begin
      cand = 6'($urandom);
      for (int s = 0; s < 6; s++) det[s] = TH + $signed($urandom_range(0, 6)) - 3;
      exp = 0;
      for (int s = 0; s < 6; s++) if (cand[s] && det[s] > TH) exp = 1;
      en = (t % 5 != 4);
      @(posedge clk); #1;
      checks++;
      if (flag != (en ? exp : prev)) begin failures++; if (failures < 5) $display("t=%0d got %0b", t, flag); end
      if (en) prev = exp;
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
