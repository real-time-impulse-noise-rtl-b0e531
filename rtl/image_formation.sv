// image_formation -- the decision tree of the algorithm and the output
// multiplexer that places either the original or a restored value into the
// output image.
//
//   Type1 edge?
//     yes: Type2 noisy edge?   yes -> Type2 edge-preserve filter
//                              no  -> similar? yes -> unchanged, no -> Average
//     no:  disordered?         yes -> Type1 edge-preserve filter
//                              no  -> noisy pixel? (only if npc_en)
//                                       yes -> similar? yes -> unchanged,
//                                                       no  -> Average
//                                       no  -> unchanged
//
// The branch outcomes follow the block diagram of the algorithm, where a
// non-similar pixel goes to the Average filter and a similar one is kept.
// npc_en switches the noisy-pixel check off, which the algorithm does in its
// first iteration.  border forces the pixel through unchanged where the 5x5
// window leaves the image (border handling is this design's choice).
// Combinational.
module image_formation
  import nr_pkg::*;
(
  input  logic       border,
  input  logic       npc_en,
  input  logic       edge1,
  input  logic       noisy_edge,
  input  logic       disorder,
  input  logic       noisy,
  input  logic       similar,
  input  pixel_t     p_center,
  input  pixel_t     p_avg,
  input  pixel_t     p_epf1,
  input  pixel_t     p_epf2,
  output pixel_t     pix_o,
  output pix_class_e class_o
);
  always_comb begin
    if (border)                 class_o = CL_BORDER;
    else if (edge1) begin
      if (noisy_edge)           class_o = CL_NOISY_EDGE;
      else if (similar)         class_o = CL_EDGE_KEPT;
      else                      class_o = CL_EDGE_AVG;
    end else if (disorder)      class_o = CL_DISORDER;
    else if (npc_en && noisy) begin
      if (similar)              class_o = CL_SMOOTH_KEPT;
      else                      class_o = CL_SMOOTH_AVG;
    end else                    class_o = CL_SMOOTH_CLEAN;

    unique case (class_o)
      CL_EDGE_AVG, CL_SMOOTH_AVG: pix_o = p_avg;
      CL_NOISY_EDGE:              pix_o = p_epf2;
      CL_DISORDER:                pix_o = p_epf1;
      default:                    pix_o = p_center;
    endcase
  end
endmodule
