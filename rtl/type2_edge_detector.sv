// type2_edge_detector -- Type2 edge detection on the 5x5 window.
//
// For each of the four main directions through the centre P13 (horizontal,
// vertical, diagonal, anti-diagonal) four ABS-DIF units form the absolute
// differences between P13 and the four other pixels on that line.  The two
// pixels next to the centre count fully; the two outer ones are halved by a
// one-bit right shift (weight 1/2).  An adder per direction gives D_i, a
// minimum unit gives D_min, and a comparator declares a noisy edge when
// D_min > T2 (an edge pixel whose direction matches none of its neighbours).
//
// The weight is applied to the absolute difference, W*|Ic - Ij|, as the
// hardware figure draws it (ABS-DIF followed by a shifter); the printed
// equation writes |Ic - W*Ij|, which is not followed here.
//
// Window index k = 5*row + col, so w[0] is P1 (top left) and w[12] is P13.
// Direction index: 0 horizontal (P11 P12 P14 P15), 1 vertical (P3 P8 P18 P23),
// 2 diagonal (P1 P7 P19 P25), 3 anti-diagonal (P5 P9 P17 P21).  On equal sums
// the lowest index wins.  Combinational.
module type2_edge_detector
  import nr_pkg::*;
(
  input  pixel_t     w [25],
  input  logic [9:0] t2,
  output dsum_t      d [4],
  output dsum_t      dmin_o,
  output logic [1:0] dir_o,
  output logic       noisy_edge_o
);
  // near and far pixel indices of each direction
  localparam int NEAR_A [4] = '{11, 7, 6, 8};
  localparam int NEAR_B [4] = '{13, 17, 18, 16};
  localparam int FAR_A  [4] = '{10, 2, 0, 4};
  localparam int FAR_B  [4] = '{14, 22, 24, 20};

  pixel_t na [4], nb [4], fa [4], fb [4];

  for (genvar i = 0; i < 4; i++) begin : g_dir
    abs_dif #(.W(PIX_W)) u_na (.a(w[12]), .b(w[NEAR_A[i]]), .y(na[i]));
    abs_dif #(.W(PIX_W)) u_nb (.a(w[12]), .b(w[NEAR_B[i]]), .y(nb[i]));
    abs_dif #(.W(PIX_W)) u_fa (.a(w[12]), .b(w[FAR_A[i]]),  .y(fa[i]));
    abs_dif #(.W(PIX_W)) u_fb (.a(w[12]), .b(w[FAR_B[i]]),  .y(fb[i]));
    assign d[i] = DSUM_W'(na[i]) + DSUM_W'(nb[i]) + DSUM_W'(fa[i] >> 1) + DSUM_W'(fb[i] >> 1);
  end

  always_comb begin
    dmin_o = d[0];
    dir_o  = 2'd0;
    for (int i = 1; i < 4; i++) begin
      if (d[i] < dmin_o) begin
        dmin_o = d[i];
        dir_o  = 2'(i);
      end
    end
    noisy_edge_o = dmin_o > t2;
  end
endmodule
