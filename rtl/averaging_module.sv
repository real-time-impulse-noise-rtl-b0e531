// averaging_module -- the Average restoration: mean of the three middle
// sorted values, (F4 + F5 + F6) / 3, rounded down.  The 10-bit sum is divided
// by the constant 3 (synthesis turns this into a constant divider).
// Combinational.
module averaging_module
  import nr_pkg::*;
(
  input  pixel_t f4,
  input  pixel_t f5,
  input  pixel_t f6,
  output pixel_t avg_o
);
  logic [9:0] sum;
  always_comb begin
    sum   = 10'(f4) + 10'(f5) + 10'(f6);
    avg_o = 8'(sum / 10'd3);
  end
endmodule
