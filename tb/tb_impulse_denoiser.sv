// tb_impulse_denoiser -- end-to-end test of the two-pass denoiser at its
// default size (256 x 256 pixels, 8 bit, two passes, published thresholds).
//
// A synthetic head-slice phantom is corrupted with random-valued impulse
// noise at the densities 5, 10, 15, 20, 30 and 40 percent, one frame each,
// streamed back to back.  Every output pixel and its class is compared with
// the reference filter applied twice (first pass without, second pass with
// the noisy-pixel check), and the output of the first pass is checked as
// well.  The sink applies random back-pressure on some frames.  The test
// counts the mechanisms of the design and fails if one never happens:
// drain stalls at a frame end, output back-pressure, every restoration path
// (Type1 and Type2 edge-preserve filtering, Average for edges and for smooth
// pixels), the noisy-pixel check acting in the second pass and staying off in
// the first.  It prints the PSNR of each noisy and filtered frame against the
// clean phantom; the filtered one must be better.
module tb_impulse_denoiser;
  import nr_pkg::*;
  import nr_ref_pkg::*;
  localparam int W = 256;
  localparam int H = 256;
  localparam int NF = 6;
  localparam int DENS [NF] = '{5, 10, 15, 20, 30, 40};
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, in_valid, in_ready, out_valid, out_ready, out_last;
  pixel_t in_pixel, out_pixel;
  pix_class_e out_class;
  logic [1:0] pass_draining;

  impulse_denoiser dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_pixel,
    .out_valid, .out_ready, .out_pixel, .out_class, .out_last, .pass_draining
  );

  int unsigned clean [];
  int unsigned noisy [NF][];
  int unsigned exp1 [NF][];
  int unsigned cls1 [NF][];
  int unsigned exp2 [NF][];
  int unsigned cls2 [NF][];
  bit ready_go = 0;
  int drain_stalls = 0, bp_stalls = 0, cyc = 0;
  int seen1 [8], seen2 [8];

  function automatic real psnr_of(real se);
    if (se == 0.0) return 99.0;
    return 10.0 * $log10(255.0 * 255.0 * real'(W * H) / se);
  endfunction

  // reference data
  initial begin
    clean = new[W * H];
    for (int i = 0; i < W * H; i++) clean[i] = phantom(i % W, i / W, W, H);
    for (int f = 0; f < NF; f++) begin
      noisy[f] = new[W * H];
      for (int i = 0; i < W * H; i++)
        noisy[f][i] = ($urandom_range(0, 999) < DENS[f] * 10) ? $urandom_range(0, 255) : clean[i];
      ref_frame(noisy[f], W, H, REF_THR, 1'b0, exp1[f], cls1[f]);
      ref_frame(exp1[f], W, H, REF_THR, 1'b1, exp2[f], cls2[f]);
    end
    rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    ready_go = 1;
  end

  // source: frames back to back
  initial begin
    in_valid = 0; in_pixel = '0;
    wait (ready_go);
    for (int f = 0; f < NF; f++) begin
      for (int i = 0; i < W * H; i++) begin
        @(negedge clk);
        in_valid = 1; in_pixel = pixel_t'(noisy[f][i]);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
    end
    @(negedge clk) in_valid = 0;
  end

  always @(posedge clk) begin
    cyc++;
    if (pass_draining != 0 && in_valid) drain_stalls++;
  end

  // first-pass monitor
  initial begin
    wait (ready_go);
    for (int f = 0; f < NF; f++) begin
      automatic int k = 0;
      while (k < W * H) begin
        @(posedge clk);
        if (dut.g_pass[0].u_stage.out_valid && dut.g_pass[0].u_stage.out_ready) begin
          checks++;
          seen1[dut.g_pass[0].u_stage.out_class]++;
          if (dut.g_pass[0].u_stage.out_pixel != pixel_t'(exp1[f][k]) ||
              dut.g_pass[0].u_stage.out_class != pix_class_e'(cls1[f][k])) begin
            failures++;
            if (failures < 10) $display("FAIL pass 1 frame %0d pixel %0d", f, k);
          end
          k++;
        end
      end
    end
  end

  // sink
  initial begin
    int unsigned got [];
    got = new[W * H];
    out_ready = 1;
    wait (ready_go);
    for (int f = 0; f < NF; f++) begin
      automatic int k = 0;
      while (k < W * H) begin
        @(negedge clk);
        out_ready = (f % 2 == 0) ? 1'b1 : ($urandom_range(0, 4) != 0);
        @(posedge clk);
        if (out_valid && !out_ready) bp_stalls++;
        if (out_valid && out_ready) begin
          checks++;
          seen2[out_class]++;
          got[k] = out_pixel;
          if (out_pixel != pixel_t'(exp2[f][k]) || out_class != pix_class_e'(cls2[f][k]) ||
              out_last != (k == W * H - 1)) begin
            failures++;
            if (failures < 10)
              $display("FAIL frame %0d pixel (%0d,%0d): %0d class %0d last %0b, exp %0d class %0d",
                       f, k % W, k / W, out_pixel, out_class, out_last, exp2[f][k], cls2[f][k]);
          end
          k++;
        end
      end
      begin
        real sn, sd, pn, pd;
        sn = 0.0; sd = 0.0;
        for (int i = 0; i < W * H; i++) begin
          sn += real'((int'(noisy[f][i]) - int'(clean[i])) * (int'(noisy[f][i]) - int'(clean[i])));
          sd += real'((int'(got[i]) - int'(clean[i])) * (int'(got[i]) - int'(clean[i])));
        end
        pn = psnr_of(sn); pd = psnr_of(sd);
        $display("noise %0d%%: PSNR noisy %0.2f dB, filtered %0.2f dB (cycle %0d)", DENS[f], pn, pd, cyc);
        checks++;
        if (pd <= pn) begin failures++; $display("FAIL filtering did not improve PSNR"); end
      end
    end
    $display("drain stall cycles %0d, back-pressure cycles %0d", drain_stalls, bp_stalls);
    for (int c = 0; c < 8; c++) $display("class %0d: pass 1 %0d, pass 2 %0d", c, seen1[c], seen2[c]);
    checks++;
    if (drain_stalls == 0 || bp_stalls == 0) begin failures++; $display("FAIL a stall never happened"); end
    checks++;
    if (seen1[CL_SMOOTH_KEPT] + seen1[CL_SMOOTH_AVG] != 0) begin
      failures++; $display("FAIL noisy-pixel check acted in the first pass");
    end
    foreach (seen2[c]) begin
      // an edge pixel cannot be similar to its neighbours at T4 = 10, T5 = 6
      if (c == CL_EDGE_KEPT) continue;
      checks++;
      if (seen2[c] == 0) begin failures++; $display("FAIL class %0d never reached", c); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
