// Testbench of the flag FIFO with D = 13: a random bit sequence with random
// gaps; before each enabled step the output must equal the bit pushed D
// enabled steps earlier (zero while the FIFO fills).
module tb_flag_delay_fifo;
  localparam int D = 13;
  logic clk = 0, rst_n = 0, en = 0, din = 0, dout;
  always #5 clk = ~clk;
  flag_delay_fifo #(.D(D)) dut (.*);
  int checks = 0, failures = 0;
  bit hist [1000];
  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int k = 0; k < 1000; k++) begin
      while ($urandom_range(0, 3) == 0) begin en = 0; @(posedge clk); #1; end
      hist[k] = 1'($urandom);
      din = hist[k]; en = 1;
      checks++;
      if (dout != ((k >= D) ? hist[k-D] : 1'b0)) begin failures++; if (failures < 5) $display("k=%0d got %0b", k, dout); end
      @(posedge clk); #1;
      en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
