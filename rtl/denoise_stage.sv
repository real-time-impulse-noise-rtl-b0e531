// denoise_stage -- one pass of the impulse-noise filter over a raster-scanned
// image of IMG_W x IMG_H pixels, one pixel per clock.
//
// Partitioning: a four-row line buffer and a 5x5 register window turn the
// input stream into a sliding 5x5 neighbourhood.  After the pixel with linear
// index n has been shifted in, the window centre holds pixel n - (2*IMG_W+2).
// Image formation: every window whose centre lies inside the frame is handed
// to the denoise core and the result is written to the output register, so
// the output is the same raster stream, one pixel per input pixel.  Centres
// within two pixels of the frame edge have incomplete windows and pass
// through unchanged.
//
// Flow control is valid/ready on both sides.  The whole stage moves one step
// when the output register is empty or being read (out_ready).  After the
// last pixel of a frame the stage drains for 2*IMG_W+3 steps, shifting in
// zeros, to push out the last rows; in_ready is low while it drains.  A frame
// therefore takes IMG_W*IMG_H + 2*IMG_W + 3 cycles without back-pressure and
// the first output appears 2*IMG_W + 3 cycles after the first input.
// out_last marks the last pixel of a frame.  None of this flow control is
// specified by the algorithm description; it is this design's own.
module denoise_stage
  import nr_pkg::*;
#(
  parameter int unsigned IMG_W = 256,
  parameter int unsigned IMG_H = 256
) (
  input  logic       clk,
  input  logic       rst_n,
  input  thr_t       thr,
  input  logic       npc_en,
  // pixel stream in
  input  logic       in_valid,
  output logic       in_ready,
  input  pixel_t     in_pixel,
  // pixel stream out
  output logic       out_valid,
  input  logic       out_ready,
  output pixel_t     out_pixel,
  output pix_class_e out_class,
  output logic       out_last,
  // status
  output logic       draining
);
  localparam int unsigned NPIX   = IMG_W * IMG_H;
  localparam int unsigned OFFSET = 2 * IMG_W + 2;        // centre lag in pixels
  localparam int unsigned NSTEP  = NPIX + OFFSET + 1;    // steps per frame
  localparam int unsigned CW     = $clog2(NSTEP + 1);
  localparam int unsigned XW     = (IMG_W > 1) ? $clog2(IMG_W) : 1;
  localparam int unsigned YW     = (IMG_H > 1) ? $clog2(IMG_H) : 1;

  logic          can_step, step, in_fire;
  logic [CW-1:0] nstep;        // index of the pixel shifted in at the next step
  pixel_t        shift_px;
  pixel_t        tap [4];
  pixel_t        win [5][5];
  pixel_t        wflat [25];
  logic          win_valid;
  logic [XW-1:0] xc;
  logic [YW-1:0] yc;
  logic          border;
  pixel_t        core_px;
  pix_class_e    core_cl;

  assign can_step = !out_valid || out_ready;
  assign in_ready = can_step && !draining;
  assign in_fire  = in_valid && in_ready;
  assign step     = in_fire || (draining && can_step);
  assign shift_px = draining ? '0 : in_pixel;

  line_buffer #(.IMG_W(IMG_W), .LINES(4)) u_lb (
    .clk, .rst_n, .en(step), .din(shift_px), .tap(tap)
  );

  // 5x5 window: row 4 is the newest row, column 4 the newest column
  always_ff @(posedge clk) begin
    if (step) begin
      for (int r = 0; r < 5; r++) begin
        for (int c = 0; c < 4; c++) win[r][c] <= win[r][c+1];
      end
      win[4][4] <= shift_px;
      for (int r = 0; r < 4; r++) win[r][4] <= tap[3-r];
    end
  end

  always_comb begin
    for (int r = 0; r < 5; r++)
      for (int c = 0; c < 5; c++) wflat[5*r + c] = win[r][c];
  end

  // frame position of the window centre
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nstep     <= '0;
      draining  <= 1'b0;
      win_valid <= 1'b0;
      xc        <= '0;
      yc        <= '0;
    end else if (step) begin
      win_valid <= (nstep >= CW'(OFFSET)) && (nstep < CW'(OFFSET + NPIX));
      if (nstep == CW'(OFFSET)) begin
        xc <= '0;
        yc <= '0;
      end else if (win_valid) begin
        if (xc == XW'(IMG_W - 1)) begin
          xc <= '0;
          yc <= yc + 1'b1;
        end else begin
          xc <= xc + 1'b1;
        end
      end
      if (nstep == CW'(NPIX - 1))       draining <= 1'b1;
      if (nstep == CW'(NSTEP - 1)) begin
        draining <= 1'b0;
        nstep    <= '0;
      end else begin
        nstep    <= nstep + 1'b1;
      end
    end
  end

  assign border = (xc < XW'(2)) || (xc >= XW'(IMG_W - 2)) ||
                  (yc < YW'(2)) || (yc >= YW'(IMG_H - 2));

  denoise_core u_core (
    .w(wflat), .thr, .npc_en, .border, .pix_o(core_px), .class_o(core_cl)
  );

  // output register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_pixel <= '0;
      out_class <= CL_BORDER;
      out_last  <= 1'b0;
    end else if (step) begin
      out_valid <= win_valid;
      out_pixel <= core_px;
      out_class <= core_cl;
      out_last  <= win_valid && (xc == XW'(IMG_W - 1)) && (yc == YW'(IMG_H - 1));
    end else if (out_ready) begin
      out_valid <= 1'b0;
    end
  end

  // a held output must stay stable until it is taken
  property p_out_stable;
    @(posedge clk) disable iff (!rst_n)
      out_valid && !out_ready |=> out_valid && $stable(out_pixel);
  endproperty
  assert property (p_out_stable);
endmodule
