// type2_epf -- Type2 edge-preserve filtering, the restoration used for noisy
// edge pixels.
//
// Four VAR units measure how uniform each main direction of the 5x5 window is,
// using the four pixels of the line without the (noisy) centre.  A minimum
// unit picks the most uniform direction and drives the select of a
// multiplexer whose inputs are the medians of the four directions, so the
// centre is replaced by the median of the line the edge most probably
// follows.  Ties go to the lowest direction index (0 horizontal, 1 vertical,
// 2 diagonal, 3 anti-diagonal, the same order as the Type2 edge detector).
// w[0] is P1, w[12] the centre.  Combinational.
module type2_epf
  import nr_pkg::*;
(
  input  pixel_t     w [25],
  output dsum_t      var_o [4],
  output logic [1:0] dir_o,
  output pixel_t     pix_o
);
  localparam int IDX [4][4] = '{
    '{10, 11, 13, 14},   // horizontal     P11 P12 P14 P15
    '{ 2,  7, 17, 22},   // vertical       P3  P8  P18 P23
    '{ 0,  6, 18, 24},   // diagonal       P1  P7  P19 P25
    '{ 4,  8, 16, 20}    // anti-diagonal  P5  P9  P17 P21
  };

  pixel_t line_px [4][4];
  pixel_t med [4];

  for (genvar i = 0; i < 4; i++) begin : g_dir
    for (genvar j = 0; j < 4; j++) begin : g_px
      assign line_px[i][j] = w[IDX[i][j]];
    end
    var_unit u_var (.p(line_px[i]), .var_o(var_o[i]));
    median4  u_med (.p(line_px[i]), .med_o(med[i]));
  end

  dsum_t vmin;
  always_comb begin
    vmin  = var_o[0];
    dir_o = 2'd0;
    for (int i = 1; i < 4; i++) begin
      if (var_o[i] < vmin) begin
        vmin  = var_o[i];
        dir_o = 2'(i);
      end
    end
    pix_o = med[dir_o];
  end
endmodule
