// Testbench of the synchronous FIFO (depth 4): random pushes and pops that
// respect full/empty, checked against a queue model for data order and for
// the full and empty flags; fills the FIFO completely at least once.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0, push = 0, pop = 0, full, empty;
  logic [7:0] din = 0, dout;
  always #5 clk = ~clk;
  sync_fifo #(.DW(8), .DEPTH(4)) dut (.*);
  int checks = 0, failures = 0, nfull = 0;
  logic [7:0] q [$];
  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      checks++;
      if (full != (q.size() == 4) || empty != (q.size() == 0)) begin failures++; $display("t=%0d flags", t); end
      if (full) nfull++;
      push = !full && ($urandom_range(0, 9) < ((t / 200) % 2 ? 7 : 3));
      pop  = !empty && ($urandom_range(0, 9) < ((t / 200) % 2 ? 3 : 7));
      din = 8'($urandom);
      if (pop) begin
        checks++;
        if (dout != q[0]) begin failures++; $display("t=%0d data %0d exp %0d", t, dout, q[0]); end
      end
      @(posedge clk); #1;
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
    end
    checks++;
    if (nfull == 0) failures++;
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
