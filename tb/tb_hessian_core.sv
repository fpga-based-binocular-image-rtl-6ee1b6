// Testbench of the Hessian core at L = 9 and L = 51: random 52x52 pixel
// patches are turned into an integral window; the expected determinant is
// computed from direct pixel sums of the SURF lobes (no integral image),
// then scaled by 0.81, normalised by L^4 and kept with 8 fraction bits.
module tb_hessian_core;
  import feat_pkg::*;
  logic clk = 0, en = 0;
  always #5 clk = ~clk;
  logic [26:0] win [52][52];
  logic signed [31:0] det9, det51, det21;
  hessian_core #(.L(9))  d9  (.clk, .en, .win, .det(det9));
  hessian_core #(.L(21)) d21 (.clk, .en, .win, .det(det21));
  hessian_core #(.L(51)) d51 (.clk, .en, .win, .det(det51));
  int checks = 0, failures = 0;
  int px [52][52];   // px[r][c], r,c = 0..51 ; pixel offset (c-26, r-26) from centre

  function automatic longint psum(int r0, int r1, int c0, int c1);
    longint s = 0;
    for (int r = r0; r <= r1; r++) for (int c = c0; c <= c1; c++) s += px[r+26][c+26];
    return s;
  endfunction

  function automatic logic signed [31:0] ref_det(int L);
    int l = L/3, h = (L-1)/2;
    longint dxx = 0, dyy = 0, dxy, raw, l4, rc;
    for (int k = -1; k <= 1; k++) begin
      int w = (k == 0) ? -2 : 1;
      int a0 = k*l - (l-1)/2;
      dyy += w * psum(a0, a0 + l - 1, -(l-1), l-1);
      dxx += w * psum(-(l-1), l-1, a0, a0 + l - 1);
    end
    dxy = psum(-l,-1,-l,-1) + psum(1,l,1,l) - psum(-l,-1,1,l) - psum(1,l,-l,-1);
    raw = dxx*dyy - ((dxy*dxy*207) >>> 8);
    l4 = longint'(L)*L*L*L; rc = ((64'sd1 <<< 32) + l4/2) / l4;
    return 32'((raw * rc) >>> 24);
  endfunction

  initial begin
    for (int t = 0; t < 40; t++) begin
      automatic int mode = t % 4;
      for (int r = 0; r < 52; r++) for (int c = 0; c < 52; c++) begin
        // blobs, stripes and noise
        if (mode == 0) px[r][c] = $urandom_range(0, 255);
        else if (mode == 1) px[r][c] = ((r-26)*(r-26) + (c-26)*(c-26) < 16*t/4+4) ? 250 : 10;
        else if (mode == 2) px[r][c] = ((r + c) % 12 < 6) ? 200 : 30;
        else px[r][c] = ((r > 26) ^ (c > 26)) ? 255 : 0;
      end
      // integral at pixel offset (dx,dy) is win[25-dy][25-dx]; window covers dx,dy = -26..25
      for (int i = 0; i < 52; i++) for (int j = 0; j < 52; j++) begin
        automatic longint s = 0;
        automatic int ry = 25 - i, rx = 25 - j;
        for (int r = -26; r <= ry; r++) for (int c = -26; c <= rx; c++) s += px[r+26][c+26];
        win[i][j] = 27'(s + 12345678);   // constant offset: the core must only use differences
      end
      en = 1;
      @(posedge clk); #1;
      en = 0;
      checks += 3;
      if (det9 != ref_det(9))   begin failures++; $display("L9  t=%0d got %0d exp %0d", t, det9, ref_det(9)); end
      if (det21 != ref_det(21)) begin failures++; $display("L21 t=%0d got %0d exp %0d", t, det21, ref_det(21)); end
      if (det51 != ref_det(51)) begin failures++; $display("L51 t=%0d got %0d exp %0d", t, det51, ref_det(51)); end
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
