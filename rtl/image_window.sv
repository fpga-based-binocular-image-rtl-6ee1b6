// Generic N x N sliding image window (the "Window" of the image filter
// architecture).
//
// A raster-order pixel stream enters register (0,0). Each window row is a
// chain of N registers; the last register of every row but the last feeds a
// line delay of W-N entries whose output enters the first register of the
// next row, so each row plus its line delay holds exactly one image line.
// After the pixel with raster index k has been accepted, win[i][j] holds the
// pixel with index k - i*W - j: row index i counts lines back in time and
// column index j counts pixels back in time. Function blocks read only the
// window registers. Everything advances only when en is high, so the window
// stalls with the stream.
//
// The register/line-delay structure follows the paper. The line delays are
// written here as arrays with one shared circular pointer and asynchronous
// read (the paper builds them from block RAM and FIFOs); there is no reset of
// the data, only of the pointer, since every consumer masks the image border.
module image_window #(
  parameter int unsigned N  = 3,     // window size
  parameter int unsigned W  = 640,   // image width
  parameter int unsigned DW = 8      // pixel width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic [DW-1:0] din,
  output logic [DW-1:0] win [N][N]
);
  localparam int unsigned L  = W - N;          // line delay length
  localparam int unsigned PW = (L > 1) ? $clog2(L) : 1;

  logic [DW-1:0] line_mem [N-1][L];
  logic [PW-1:0] ptr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  ptr <= '0;
    else if (en) ptr <= (ptr == PW'(L - 1)) ? '0 : ptr + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (en) begin
      for (int i = 0; i < N; i++) begin
        for (int j = N - 1; j > 0; j--) win[i][j] <= win[i][j-1];
        if (i == 0) win[i][0] <= din;
        else        win[i][0] <= line_mem[i-1][ptr];
      end
      for (int i = 0; i < N - 1; i++) line_mem[i][ptr] <= win[i][N-1];
    end
  end

  initial assert (W > N) else $error("image_window: W must exceed N");
endmodule
