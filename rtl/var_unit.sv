// var_unit -- the VAR unit of the Type2 edge-preserve filter for one
// direction.
//
// The four pixels of the direction are averaged (sum shifted right by two,
// rounded down: the rounding is a choice of this design), four ABS-DIF units
// take each pixel's distance from that mean and an adder tree sums them.  The
// result, at most 4*255, measures how uniform the line is.  Combinational.
module var_unit
  import nr_pkg::*;
(
  input  pixel_t p [4],
  output dsum_t  var_o
);
  logic [9:0] sum;
  pixel_t avg;
  pixel_t ad [4];

  always_comb begin
    sum = 10'(p[0]) + 10'(p[1]) + 10'(p[2]) + 10'(p[3]);
    avg = sum[9:2];
  end

  for (genvar i = 0; i < 4; i++) begin : g_ad
    abs_dif #(.W(PIX_W)) u_ad (.a(p[i]), .b(avg), .y(ad[i]));
  end

  always_comb var_o = DSUM_W'(ad[0]) + DSUM_W'(ad[1]) + DSUM_W'(ad[2]) + DSUM_W'(ad[3]);
endmodule
