// Streaming integral image (Eq. 1): ii(x,y) = sum of all pixels I(i,j) with
// i <= x and j <= y of the current image.
//
// The module keeps the running sum of the current row and a line memory with
// the integral values of the previous row, so ii(x,y) = ii(x,y-1) + rowsum.
// Column and row counters locate each pixel; the sums restart at column 0 and
// row 0, so back-to-back W x H images each get their own integral image. The
// output register holds ii of the pixel accepted on the same enabled edge
// (one enabled step of latency as seen by the next stage).
//
// The paper only names this block and refers elsewhere for its insides; this
// row-sum plus line-memory form is the simplest one. IW defaults to the width
// that holds 255*W*H.
module integrator #(
  parameter int unsigned W  = 640,
  parameter int unsigned H  = 480,
  parameter int unsigned IW = $clog2(255 * W * H + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic [7:0]    pix,
  output logic [IW-1:0] ii
);
  localparam int unsigned XW = $clog2(W);
  localparam int unsigned YW = $clog2(H);

  logic [XW-1:0] x;
  logic [YW-1:0] y;
  logic [IW-1:0] rowsum;
  logic [IW-1:0] prev_row [W];
  logic [IW-1:0] rowsum_nx, ii_nx;

  always_comb begin
    rowsum_nx = ((x == '0) ? '0 : rowsum) + IW'(pix);
    ii_nx     = ((y == '0) ? '0 : prev_row[x]) + rowsum_nx;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x      <= '0;
      y      <= '0;
      rowsum <= '0;
      ii     <= '0;
    end else if (en) begin
      rowsum <= rowsum_nx;
      ii     <= ii_nx;
      if (x == XW'(W - 1)) begin
        x <= '0;
        y <= (y == YW'(H - 1)) ? '0 : y + 1'b1;
      end else begin
        x <= x + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) if (en) prev_row[x] <= ii_nx;
endmodule
