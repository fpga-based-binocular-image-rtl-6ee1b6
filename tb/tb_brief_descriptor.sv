// Testbench of the BRIEF comparers: random 49x49 windows of box sums; each
// of the 128 descriptor bits must be 1 exactly when the value at the pair's
// first point (offset dx1,dy1 from the centre) is greater than at its second.
// Also checks that the pattern stays inside the window and that ties give 0.
module tb_brief_descriptor;
  import feat_pkg::*;
  logic clk = 0, en = 0;
  logic [14:0] win [49][49];
  logic [127:0] desc;
  always #5 clk = ~clk;
  brief_descriptor dut (.*);
  int checks = 0, failures = 0;
  pattern_t pat;
  initial begin
    logic [127:0] e;
    pat = brief_pattern();
    for (int k = 0; k < 512; k++) begin
      checks++;
      if (pat[k] < -24 || pat[k] > 24) failures++;
    end
    for (int t = 0; t < 60; t++) begin
      for (int i = 0; i < 49; i++) for (int j = 0; j < 49; j++)
        win[i][j] = (t == 0) ? 15'd77 : 15'($urandom_range(0, 20655));
      // pixel (24+dx, 24+dy) is stored at win[24-dy][24-dx]
      for (int b = 0; b < 128; b++)
        e[b] = win[24 - pat[4*b+1]][24 - pat[4*b]] > win[24 - pat[4*b+3]][24 - pat[4*b+2]];
      en = 1;
      @(posedge clk); #1;
      checks++;
      if (desc != e) begin failures++; if (failures < 5) $display("t=%0d got %h exp %h", t, desc, e); end
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
