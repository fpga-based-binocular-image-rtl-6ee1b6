// Key point flag FIFO: delays the one-bit flag by exactly D enabled steps so
// that it lines up with the descriptor of the same pixel, whose path through
// the 49x49 window is longer.
//
// Written as a circular buffer with a single pointer: each enabled step
// reads the oldest bit and overwrites it with the new one, so the FIFO is
// always exactly D entries full. The output is the bit that will be replaced
// on the next enabled step. Contents reset to zero so that no false flag
// appears before the pipeline fills.
module flag_delay_fifo #(
  parameter int unsigned D = 1282
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  logic din,
  output logic dout
);
  localparam int unsigned PW = (D > 1) ? $clog2(D) : 1;
  logic [D-1:0]  mem;
  logic [PW-1:0] ptr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem <= '0;
      ptr <= '0;
    end else if (en) begin
      mem[ptr] <= din;
      ptr      <= (ptr == PW'(D - 1)) ? '0 : ptr + 1'b1;
    end
  end
  assign dout = mem[ptr];
endmodule
