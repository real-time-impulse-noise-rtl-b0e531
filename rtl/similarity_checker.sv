// similarity_checker -- counts how many of the eight 3x3 neighbours are
// similar to the centre pixel.
//
// Eight ABS-DIF units form |Pi - P5|, eight comparators flag a neighbour as
// similar when that difference is below T4, an adder tree counts the flags and
// a final comparator reports the block as similar when the count reaches T5.
// (A count below T5 marks the centre as noisy.)  Using "below T4" for one
// neighbour is a choice of this design; the description only says that T4
// decides similarity.  p[0] is P1, p[4] the centre P5.  Combinational.
module similarity_checker
  import nr_pkg::*;
(
  input  pixel_t     p [9],
  input  logic [7:0] t4,
  input  logic [3:0] t5,
  output logic [3:0] count_o,
  output logic       similar_o
);
  pixel_t ad [9];
  logic [8:0] sim;

  for (genvar i = 0; i < 9; i++) begin : g_ad
    if (i != 4) begin : g_nb
      abs_dif #(.W(PIX_W)) u_ad (.a(p[i]), .b(p[4]), .y(ad[i]));
      assign sim[i] = ad[i] < t4;
    end else begin : g_c
      assign ad[i]  = '0;
      assign sim[i] = 1'b0;
    end
  end

  always_comb begin
    count_o = '0;
    for (int i = 0; i < 9; i++) count_o = count_o + 4'(sim[i]);
    similar_o = count_o >= t5;
  end
endmodule
