// impulse_denoiser -- real-time random-valued impulse noise removal for 8-bit
// grey-scale images streamed in raster order, one pixel per clock.
//
// The filter is applied twice: PASSES copies of denoise_stage are chained, the
// output stream of one feeding the next, because the algorithm's published
// results are obtained by running it two times over the image.  In the first
// pass the noisy-pixel check is switched off (with many noisy neighbours a
// pixel can hardly be found similar to them); NPC_EN gives, per pass, whether
// the check is on, bit i for pass i.  The thresholds T1..T5 (parameter THR)
// default to the published values 20, 150, 30, 10 and 6.
//
// Interface: valid/ready pixel stream in and out; out_class reports the path
// the last pass took for each pixel and out_last marks the last pixel of a
// frame.  Latency through each pass is 2*IMG_W + 3 cycles; a frame occupies a
// pass for IMG_W*IMG_H + 2*IMG_W + 3 cycles.  pass_draining shows which passes
// are flushing the end of a frame (and so holding back their input).
module impulse_denoiser
  import nr_pkg::*;
#(
  parameter int unsigned IMG_W  = 256,
  parameter int unsigned IMG_H  = 256,
  parameter int unsigned PASSES = 2,
  parameter logic [PASSES-1:0] NPC_EN = PASSES'(2'b10),
  parameter thr_t THR = THR_DEFAULT
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  pixel_t            in_pixel,
  output logic              out_valid,
  input  logic              out_ready,
  output pixel_t            out_pixel,
  output pix_class_e        out_class,
  output logic              out_last,
  output logic [PASSES-1:0] pass_draining
);
  logic       v   [PASSES+1];
  logic       r   [PASSES+1];
  pixel_t     px  [PASSES+1];
  pix_class_e cl  [PASSES+1];
  logic       lst [PASSES+1];

  assign v[0]     = in_valid;
  assign px[0]    = in_pixel;
  assign in_ready = r[0];
  assign cl[0]    = CL_BORDER;
  assign lst[0]   = 1'b0;

  for (genvar i = 0; i < PASSES; i++) begin : g_pass
    denoise_stage #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_stage (
      .clk, .rst_n, .thr(THR), .npc_en(NPC_EN[i]),
      .in_valid(v[i]), .in_ready(r[i]), .in_pixel(px[i]),
      .out_valid(v[i+1]), .out_ready(r[i+1]), .out_pixel(px[i+1]),
      .out_class(cl[i+1]), .out_last(lst[i+1]), .draining(pass_draining[i])
    );
  end

  assign out_valid      = v[PASSES];
  assign r[PASSES]      = out_ready;
  assign out_pixel      = px[PASSES];
  assign out_class      = cl[PASSES];
  assign out_last       = lst[PASSES];
endmodule
