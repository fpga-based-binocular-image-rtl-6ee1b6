// Testbench of the multi buffer (DEPTH = 8): eight frame periods. In each,
// a random number of left and right features (sometimes more than fit) is
// written while the three read ports read back the previous frames; the
// test checks RL = last frame's left image, RR = its right image, RP = the
// left image of the frame before, the fill counts, the overflow flag, and
// the ring base sequence 0,2,4,1,3 of the paper's pointer diagram.
module tb_multi_buffer;
  import feat_pkg::*;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0, advance = 0, wr_en = 0, wr_right = 0, overflow;
  feature_t wr_data;
  logic [2:0] rl_addr = 0, rr_addr = 0, rp_addr = 0, base;
  feature_t rl_data, rr_data, rp_data;
  logic [3:0] rl_count, rr_count, rp_count;
  always #5 clk = ~clk;
  multi_buffer #(.DEPTH(DEPTH)) dut (.*);
  int checks = 0, failures = 0;
  feature_t fl [10][$], fr [10][$];
  bit ovf_exp = 0;

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 8; n++) begin
      automatic int nl = $urandom_range(0, 10), nr = $urandom_range(0, 10);
      automatic int wl = 0, wrr = 0;
      checks++;
      if (base != 3'((2 * n) % 5)) begin failures++; $display("period %0d base %0d", n, base); end
      if (n >= 1) begin
        checks += 2;
        if (rl_count != 4'(fl[n-1].size()) || rr_count != 4'(fr[n-1].size())) begin failures++; $display("counts"); end
        if (n >= 2 && rp_count != 4'(fl[n-2].size())) begin failures++; $display("rp count"); end
      end
      // write this frame while reading the previous ones
      for (int k = 0; wl < nl || wrr < nr || k < DEPTH + 1; k++) begin
        wr_en = 0;
        if (wl < nl || wrr < nr) begin
          wr_right = (wl >= nl);
          wr_data  = {$urandom, $urandom, $urandom, $urandom, 20'($urandom)};
          wr_en = 1;
          if (!wr_right) begin if (fl[n].size() < DEPTH) fl[n].push_back(wr_data); else ovf_exp = 1; wl++; end
          else           begin if (fr[n].size() < DEPTH) fr[n].push_back(wr_data); else ovf_exp = 1; wrr++; end
        end
        rl_addr = 3'(k % DEPTH); rr_addr = 3'((k + 3) % DEPTH); rp_addr = 3'((k + 5) % DEPTH);
        @(posedge clk); #1;
        if (n >= 1 && k < DEPTH) begin
          if (k < fl[n-1].size()) begin checks++; if (rl_data != fl[n-1][k]) begin failures++; $display("RL n=%0d k=%0d", n, k); end end
          if ((k+3)%DEPTH < fr[n-1].size()) begin checks++; if (rr_data != fr[n-1][(k+3)%DEPTH]) begin failures++; $display("RR n=%0d k=%0d", n, k); end end
          if (n >= 2 && (k+5)%DEPTH < fl[n-2].size()) begin checks++; if (rp_data != fl[n-2][(k+5)%DEPTH]) begin failures++; $display("RP n=%0d k=%0d", n, k); end end
        end
      end
      wr_en = 0;
      advance = 1; @(posedge clk); #1; advance = 0;
    end
    checks++;
    if (overflow != ovf_exp) failures++;
    $display("overflow %0b", overflow);
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
