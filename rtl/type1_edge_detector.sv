// type1_edge_detector -- Type1 edge detection on the sorted 3x3 window.
//
// Two subtractors form F5-F4 and F6-F5, two comparators test each against T1
// and an OR gate combines them: the centre pixel lies on an edge when either
// gap around the median exceeds T1.  Sorting guarantees F6 >= F5 >= F4, so the
// subtractions cannot underflow.  Combinational.
module type1_edge_detector
  import nr_pkg::*;
(
  input  pixel_t     f4,
  input  pixel_t     f5,
  input  pixel_t     f6,
  input  logic [7:0] t1,
  output logic       edge_o
);
  pixel_t d_hi, d_lo;
  always_comb begin
    d_hi   = f6 - f5;
    d_lo   = f5 - f4;
    edge_o = (d_hi > t1) || (d_lo > t1);
  end
endmodule
