// denoise_core -- the complete per-pixel algorithm on one 5x5 window.
//
// The central 3x3 block (P7 P8 P9 P12 P13 P14 P17 P18 P19 of the 5x5
// window) is sorted; the sorted values F1..F9 feed the Type1 edge detector,
// the disorder analyzer, the noisy-pixel checker and the Average module.  The
// 5x5 window feeds the Type2 edge detector and the Type2 edge-preserve filter;
// the 3x3 block feeds the similarity checker and the Type1 edge-preserve
// filter.  All detectors and restorers run in parallel and the image
// formation multiplexer picks the result, so the core is one combinational
// cloud from window to output pixel.
//
// w[0] is P1 (top left of the 5x5 window), w[12] the centre.  thr carries
// T1..T5, npc_en enables the noisy-pixel check, border forces pass-through.
module denoise_core
  import nr_pkg::*;
(
  input  pixel_t     w [25],
  input  thr_t       thr,
  input  logic       npc_en,
  input  logic       border,
  output pixel_t     pix_o,
  output pix_class_e class_o
);
  pixel_t p3 [9];
  pixel_t f [9];

  for (genvar r = 0; r < 3; r++) begin : g_r
    for (genvar c = 0; c < 3; c++) begin : g_c
      assign p3[3*r + c] = w[5*(r+1) + (c+1)];
    end
  end

  logic edge1, noisy_edge, disorder, noisy, similar;
  pixel_t p_avg, p_epf1, p_epf2;
  dsum_t d [4];
  dsum_t dmin;
  dsum_t vars [4];
  logic [1:0] dir2, dir_epf1, dir_epf2;
  logic [3:0] sim_count;

  sorter9 u_sort (.p(p3), .f(f));

  type1_edge_detector u_t1 (.f4(f[3]), .f5(f[4]), .f6(f[5]), .t1(thr.t1), .edge_o(edge1));

  disorder_analyzer u_dis (.p5(p3[4]), .f4(f[3]), .f5(f[4]), .f6(f[5]), .t3(thr.t3),
                           .disorder_o(disorder));

  noisy_pixel_checker u_npc (.p5(p3[4]), .f1(f[0]), .f9(f[8]), .t4(thr.t4), .noisy_o(noisy));

  averaging_module u_avg (.f4(f[3]), .f5(f[4]), .f6(f[5]), .avg_o(p_avg));

  type2_edge_detector u_t2 (.w(w), .t2(thr.t2), .d(d), .dmin_o(dmin), .dir_o(dir2),
                            .noisy_edge_o(noisy_edge));

  similarity_checker u_sim (.p(p3), .t4(thr.t4), .t5(thr.t5), .count_o(sim_count),
                            .similar_o(similar));

  type1_epf u_epf1 (.p(p3), .dir_o(dir_epf1), .pix_o(p_epf1));

  type2_epf u_epf2 (.w(w), .var_o(vars), .dir_o(dir_epf2), .pix_o(p_epf2));

  image_formation u_form (
    .border, .npc_en, .edge1, .noisy_edge, .disorder, .noisy, .similar,
    .p_center(w[12]), .p_avg, .p_epf1, .p_epf2, .pix_o, .class_o
  );
endmodule
