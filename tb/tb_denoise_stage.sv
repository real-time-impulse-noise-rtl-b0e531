// tb_denoise_stage -- streams three noisy frames through one filter pass at a
// reduced frame size and compares every output pixel and class with the
// reference filter.  Frame 1 runs without gaps or back-pressure and its
// cycle count is checked against IMG_W*IMG_H + 2*IMG_W + 3; frames 2 and 3
// use random input gaps and random output back-pressure.  Also checks
// out_last and counts drain stalls and back-pressure stalls.
module tb_denoise_stage;
  import nr_pkg::*;
  import nr_ref_pkg::*;
  localparam int W = 20;
  localparam int H = 14;
  localparam int FRAMES = 3;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, in_valid, in_ready, out_valid, out_ready, out_last, draining;
  pixel_t in_pixel, out_pixel;
  pix_class_e out_class;
  thr_t thr;
  logic npc_en;

  denoise_stage #(.IMG_W(W), .IMG_H(H)) dut (
    .clk, .rst_n, .thr, .npc_en, .in_valid, .in_ready, .in_pixel,
    .out_valid, .out_ready, .out_pixel, .out_class, .out_last, .draining
  );

  int unsigned img [FRAMES][];
  int unsigned exp_px [FRAMES][];
  int unsigned exp_cl [FRAMES][];
  bit gaps;
  int drain_stalls = 0, bp_stalls = 0, lasts = 0;
  int seen [8];
  int cyc = 0;

  // source
  initial begin
    in_valid = 0; in_pixel = '0;
    wait (rst_n);
    for (int f = 0; f < FRAMES; f++) begin
      gaps = (f != 0);
      for (int i = 0; i < W * H; i++) begin
        @(negedge clk);
        while (gaps && $urandom_range(0, 4) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1; in_pixel = pixel_t'(img[f][i]);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
      @(negedge clk) in_valid = 0;
    end
  end

  // sink and checks
  int frame_start, frame_cycles;
  initial begin
    out_ready = 1;
    wait (rst_n);
    for (int f = 0; f < FRAMES; f++) begin
      automatic int k = 0;
      while (k < W * H) begin
        @(negedge clk);
        out_ready = (f == 0) ? 1'b1 : ($urandom_range(0, 3) != 0);
        @(posedge clk);
        if (!out_ready && out_valid) bp_stalls++;
        if (out_valid && out_ready) begin
          checks++;
          seen[out_class]++;
          if (out_pixel != pixel_t'(exp_px[f][k]) || out_class != pix_class_e'(exp_cl[f][k])) begin
            failures++;
            $display("FAIL frame %0d pixel %0d (%0d,%0d): %0d class %0d, exp %0d class %0d",
                     f, k, k % W, k / W, out_pixel, out_class, exp_px[f][k], exp_cl[f][k]);
          end
          checks++;
          if (out_last != (k == W * H - 1)) begin failures++; $display("FAIL out_last at %0d", k); end
          if (out_last) lasts++;
          k++;
        end
      end
      if (f == 0) begin
        frame_cycles = cyc - frame_start;
        checks++;
        // first input accepted at frame_start; the last output leaves
        // IMG_W*IMG_H + 2*IMG_W + 2 cycles later
        if (frame_cycles != W * H + 2 * W + 2) begin
          failures++;
          $display("FAIL frame 0 took %0d cycles, expected %0d", frame_cycles, W * H + 2 * W + 2);
        end
      end
    end
    checks++;
    if (drain_stalls == 0 || bp_stalls == 0) begin
      failures++; $display("FAIL stall never seen: drain %0d back-pressure %0d", drain_stalls, bp_stalls);
    end
    checks++;
    if (seen[CL_BORDER] == 0 || seen[CL_NOISY_EDGE] + seen[CL_DISORDER] == 0) begin
      failures++; $display("FAIL restoration paths never taken");
    end
    $display("drain stall cycles %0d, back-pressure cycles %0d, frames %0d", drain_stalls, bp_stalls, lasts);
    for (int c = 0; c < 8; c++) $display("class %0d: %0d", c, seen[c]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc++;
    if (draining && in_valid) drain_stalls++;
    if (in_valid && in_ready && cyc > 0 && frame_start == 0) frame_start = cyc;
  end

  initial begin
    frame_start = 0;
    thr = THR_DEFAULT; npc_en = 1;
    for (int f = 0; f < FRAMES; f++) begin
      img[f] = new[W * H];
      for (int i = 0; i < W * H; i++) begin
        automatic int unsigned v = phantom(i % W, i / W, W, H);
        if ($urandom_range(0, 99) < 20) v = $urandom_range(0, 255);
        img[f][i] = v;
      end
      ref_frame(img[f], W, H, REF_THR, 1'b1, exp_px[f], exp_cl[f]);
    end
    rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
