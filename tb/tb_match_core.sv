// Testbench of the match core: for random reference descriptors, streams of
// random candidates (some planted at small distances, some invalid cycles)
// are presented; after each stream the core must hold the minimum Hamming
// distance, the coordinate of the first candidate reaching it, and the
// reference coordinate; `clear` must restore the empty value 255.
module tb_match_core;
  import feat_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, b_valid = 0;
  feature_t a, b;
  logic [7:0] hd;
  xy_t coord_a, coord_b;
  always #5 clk = ~clk;
  match_core dut (.*);
  int checks = 0, failures = 0;

  function automatic int popc(logic [127:0] v);
    int n = 0;
    for (int i = 0; i < 128; i++) n += v[i];
    return n;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 50; t++) begin
      automatic int best = 255;
      automatic xy_t best_xy = '0;
      a.desc = {$urandom, $urandom, $urandom, $urandom};
      a.xy   = 20'($urandom);
      clear = 1; @(posedge clk); #1; clear = 0;
      checks++;
      if (hd != 8'd255) failures++;
      for (int k = 0; k < 40; k++) begin
        automatic int d;
        b.desc = {$urandom, $urandom, $urandom, $urandom};
        if ($urandom_range(0, 4) == 0) b.desc = a.desc ^ (128'(1) << $urandom_range(0, 127)) ^ (128'(1) << $urandom_range(0, 127));
        if ($urandom_range(0, 9) == 0) b.desc = a.desc;
        b.xy = 20'($urandom);
        b_valid = ($urandom_range(0, 5) != 0);
        d = popc(a.desc ^ b.desc);
        if (b_valid && d < best) begin best = d; best_xy = b.xy; end
        @(posedge clk); #1;
      end
      b_valid = 0;
      checks += 3;
      if (hd != 8'(best)) begin failures++; $display("t=%0d hd %0d exp %0d", t, hd, best); end
      if (coord_b != best_xy) begin failures++; $display("t=%0d coord_b mismatch", t); end
      if (coord_a != a.xy) failures++;
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
