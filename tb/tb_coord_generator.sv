// Testbench of the coordinate generator (W = 7, H = 5, PRIME = 11): with
// random gaps in en, it must stay unprimed for 11 enabled steps, then give
// raster coordinates that wrap per image, with `last` at (6,4).
module tb_coord_generator;
  localparam int W = 7, H = 5, PRIME = 11;
  logic clk = 0, rst_n = 0, en = 0, primed, last;
  logic [9:0] x, y;
  always #5 clk = ~clk;
  coord_generator #(.W(W), .H(H), .PRIME(PRIME)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int k = 0; k < PRIME + 3 * W * H; k++) begin
      automatic int o = k - PRIME;
      while ($urandom_range(0, 2) == 0) begin en = 0; @(posedge clk); #1; end
      en = 1;
      checks++;
      if (primed != (k >= PRIME)) failures++;
      if (o >= 0) begin
        checks++;
        if (x != 10'(o % W) || y != 10'((o / W) % H) || last != (o % (W*H) == W*H-1)) begin
          failures++;
          if (failures < 5) $display("o=%0d got %0d,%0d last %0b", o, x, y, last);
        end
      end
      @(posedge clk); #1;
      en = 0;
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
