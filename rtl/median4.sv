// median4 -- median of four pixels, taken as the mean of the second and third
// smallest (rounded down).  Five compare-and-swap cells sort the four values;
// the rounding convention for an even count is a choice of this design.
// Combinational.
module median4
  import nr_pkg::*;
(
  input  pixel_t p [4],
  output pixel_t med_o
);
  pixel_t a0, a1, b0, b1, lo_max, hi_min, m1, m2;
  logic [8:0] s;
  always_comb begin
    // sort the two pairs
    a0 = (p[0] < p[1]) ? p[0] : p[1];
    a1 = (p[0] < p[1]) ? p[1] : p[0];
    b0 = (p[2] < p[3]) ? p[2] : p[3];
    b1 = (p[2] < p[3]) ? p[3] : p[2];
    // larger of the two minima and smaller of the two maxima are the middle two
    lo_max = (a0 > b0) ? a0 : b0;
    hi_min = (a1 < b1) ? a1 : b1;
    m1 = (lo_max < hi_min) ? lo_max : hi_min;
    m2 = (lo_max < hi_min) ? hi_min : lo_max;
    s  = 9'(m1) + 9'(m2);
    med_o = s[8:1];
  end
endmodule
