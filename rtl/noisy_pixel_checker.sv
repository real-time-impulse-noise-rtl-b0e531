// noisy_pixel_checker -- flags the centre of a smooth 3x3 block as noisy.
//
// Same structure as the Type1 edge detector with other inputs: two
// subtractors form F9-P5 and P5-F1, two comparators test whether either is
// below T4, and an OR gate combines them.  A pixel at (or within T4 of) the
// extreme of its neighbourhood is a noise candidate.  F1 <= P5 <= F9 always
// holds because P5 is one of the sorted values.  Combinational.
module noisy_pixel_checker
  import nr_pkg::*;
(
  input  pixel_t     p5,
  input  pixel_t     f1,
  input  pixel_t     f9,
  input  logic [7:0] t4,
  output logic       noisy_o
);
  pixel_t d_hi, d_lo;
  always_comb begin
    d_hi    = f9 - p5;
    d_lo    = p5 - f1;
    noisy_o = (d_hi < t4) || (d_lo < t4);
  end
endmodule
