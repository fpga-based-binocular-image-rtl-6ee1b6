// Coordinate generator: column and row counters that give the image
// coordinate of every pixel leaving the feature extractor.
//
// The extractor emits the result for a pixel PRIME accepted steps after the
// pixel entered, so the generator first counts PRIME enabled steps; from then
// on every enabled step is an output beat, whose coordinate is (x, y), after
// which x counts up to W-1 and wraps, and y counts up to H-1 and wraps.
// `last` marks the last pixel of an image.
module coord_generator #(
  parameter int unsigned W     = 640,
  parameter int unsigned H     = 480,
  parameter int unsigned PRIME = 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  output logic                 primed,
  output logic [9:0]           x,
  output logic [9:0]           y,
  output logic                 last
);
  localparam int unsigned PCW = $clog2(PRIME + 1);
  logic [PCW-1:0] pcnt;

  assign primed = (pcnt == PCW'(PRIME));
  assign last   = primed && (x == 10'(W - 1)) && (y == 10'(H - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pcnt <= '0;
      x    <= '0;
      y    <= '0;
    end else if (en) begin
      if (!primed) pcnt <= pcnt + 1'b1;
      else if (x == 10'(W - 1)) begin
        x <= '0;
        y <= (y == 10'(H - 1)) ? '0 : y + 1'b1;
      end else x <= x + 1'b1;
    end
  end
endmodule
