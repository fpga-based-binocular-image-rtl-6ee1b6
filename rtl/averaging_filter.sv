// Averaging filter function: 9x9 box sum read from the integral-image window.
//
// For a box whose corners in the integral image are a (bottom-right), b
// (bottom, left of the box), c (above the box, right) and d (above-left), the
// sum is a - b - c + d: one adder and two subtractors, as the paper states.
// The sum (0..81*255) is used directly instead of the mean; BRIEF only
// compares two values, so dividing by 81 would change no descriptor bit.
// Registered on each enabled step. Arithmetic is modulo 2^IW, exact because
// the true sum fits in 15 bits.
module averaging_filter #(
  parameter int unsigned IW = 27,
  parameter int unsigned SW = 15
) (
  input  logic          clk,
  input  logic          en,
  input  logic [IW-1:0] a,     // ii(x+4, y+4)
  input  logic [IW-1:0] b,     // ii(x-5, y+4)
  input  logic [IW-1:0] c,     // ii(x+4, y-5)
  input  logic [IW-1:0] d,     // ii(x-5, y-5)
  output logic [SW-1:0] sum
);
  logic [IW-1:0] s;
  always_comb s = (a + d) - b - c;
  always_ff @(posedge clk) if (en) sum <= SW'(s);
endmodule
