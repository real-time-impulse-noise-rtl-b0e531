// type1_epf -- Type1 edge-preserve filtering, the restoration used for
// disordered blocks.
//
// The centre of the 3x3 window is replaced by the mean of the two opposite
// neighbours that differ least from each other: of the four pairs
// horizontal (P4,P6), vertical (P2,P8), diagonal (P1,P9) and anti-diagonal
// (P3,P7), four ABS-DIF units measure each pair, a minimum unit picks the
// closest pair (ties to the lowest index, in that order), and its rounded-down
// mean is output.  The algorithm description takes this filter from earlier
// work and only states that it restores along the edge direction by averaging
// two pixels; this directional-pair scheme is the simplest circuit that does
// so.  p[0] is P1, p[4] the centre.  Combinational.
module type1_epf
  import nr_pkg::*;
(
  input  pixel_t     p [9],
  output logic [1:0] dir_o,
  output pixel_t     pix_o
);
  localparam int IA [4] = '{3, 1, 0, 2};
  localparam int IB [4] = '{5, 7, 8, 6};

  pixel_t ad [4];
  for (genvar i = 0; i < 4; i++) begin : g_pair
    abs_dif #(.W(PIX_W)) u_ad (.a(p[IA[i]]), .b(p[IB[i]]), .y(ad[i]));
  end

  pixel_t     amin;
  logic [8:0] s;
  always_comb begin
    amin  = ad[0];
    dir_o = 2'd0;
    for (int i = 1; i < 4; i++) begin
      if (ad[i] < amin) begin
        amin  = ad[i];
        dir_o = 2'(i);
      end
    end
    s     = 9'(p[IA[dir_o]]) + 9'(p[IB[dir_o]]);
    pix_o = s[8:1];
  end
endmodule
