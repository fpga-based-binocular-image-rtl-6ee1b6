// Testbench of the threshold check, parallel check and combine: random
// distances around the threshold and random coordinates near the epipolar
// and disparity limits, compared against the rules written out here.
module tb_pair_check;
  import feat_pkg::*;
  logic trace_en;
  logic [7:0] hd_thresh, hd_t, hd_s;
  logic [9:0] y_tol, max_disp;
  xy_t cur, prev, right;
  match_result_t result;
  logic keep;
  pair_check dut (.*);
  int checks = 0, failures = 0;
  initial begin
    for (int t = 0; t < 2000; t++) begin
      automatic bit et, es;
      automatic int dx, dy;
      trace_en = 1'($urandom);
      hd_thresh = 8'($urandom_range(10, 40));
      hd_t = 8'($signed(hd_thresh) + $urandom_range(0, 4) - 2);
      hd_s = 8'($signed(hd_thresh) + $urandom_range(0, 4) - 2);
      y_tol = 10'($urandom_range(0, 3));
      max_disp = 10'($urandom_range(20, 100));
      cur.x = 10'($urandom_range(100, 600)); cur.y = 10'($urandom_range(10, 400));
      prev.x = 10'($urandom); prev.y = 10'($urandom);
      right.x = 10'(int'(cur.x) - $urandom_range(0, 110) + 5);
      right.y = 10'(int'(cur.y) + $urandom_range(0, 8) - 4);
      dx = int'(cur.x) - int'(right.x);
      dy = int'(cur.y) - int'(right.y);
      et = trace_en && hd_t <= hd_thresh;
      es = hd_s <= hd_thresh && dy <= int'(y_tol) && -dy <= int'(y_tol) && dx >= 0 && dx <= int'(max_disp);
      #1;
      checks++;
      if (result.t_ok != et || result.s_ok != es || keep != (et || es) || result.cur != cur ||
          result.prev != prev || result.right != right || int'(result.disparity) != dx) begin
        failures++;
        if (failures < 5) $display("t=%0d got t%0b s%0b exp t%0b s%0b dx %0d dy %0d", t, result.t_ok, result.s_ok, et, es, dx, dy);
      end
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
