// tb_denoise_core -- checks the whole per-pixel algorithm against the
// reference model on the four worked-example windows and on random windows
// built to reach every branch (flat, edge, spike and random neighbourhoods),
// with the noisy-pixel check both on and off and with the default and wider
// similarity thresholds.  Counts how often each class
// occurs and fails if one never does.
module tb_denoise_core;
  import nr_pkg::*;
  import nr_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int seen [8];

  pixel_t w [25];
  thr_t thr;
  logic npc_en, border;
  pixel_t pix_o;
  pix_class_e class_o;
  denoise_core dut (.w, .thr, .npc_en, .border, .pix_o, .class_o);

  task automatic chk(string tag);
    win_t rw;
    int unsigned ep, ec;
    #1;
    for (int i = 0; i < 25; i++) rw[i/5][i%5] = w[i];
    ref_pixel(rw, '{t1: thr.t1, t2: thr.t2, t3: thr.t3, t4: thr.t4, t5: thr.t5}, npc_en, ep, ec);
    if (border) begin ep = w[12]; ec = 0; end
    checks++;
    seen[class_o]++;
    if (pix_o != pixel_t'(ep) || class_o != pix_class_e'(ec)) begin
      failures++;
      $display("FAIL %s pix=%0d class=%0d exp %0d %0d", tag, pix_o, class_o, ep, ec);
    end
  endtask

  initial begin
    thr = THR_DEFAULT; border = 0; npc_en = 1;
    w = '{30,42,65,146,190, 33,53,144,191,170, 38,39,180,182,112, 75,143,175,135,244, 178,189,60,90,67};
    chk("edge");
    w = '{89,15,26,31,103, 6,21,31,65,138, 12,25,236,104,158, 26,107,19,139,159, 41,27,103,182,160};
    chk("noisy edge");
    checks++; if (class_o != CL_NOISY_EDGE || pix_o != 84) begin failures++; $display("FAIL noisy edge %0d %0d", class_o, pix_o); end
    w = '{96,97,98,97,93, 95,99,103,104,97, 91,92,68,103,96, 91,95,103,101,96, 91,97,100,96,94};
    chk("noisy smooth");
    for (int n = 0; n < 20000; n++) begin
      automatic int kind = n % 6;
      automatic int base = $urandom_range(20, 230);
      for (int i = 0; i < 25; i++) begin
        case (kind)
          0: w[i] = pixel_t'($urandom);
          1: w[i] = pixel_t'(base + $urandom_range(0, 6) - 3);
          2: w[i] = pixel_t'(((i % 5) + (i / 5) < 4 + $urandom_range(0,1)) ? base / 4 : 200 + $urandom_range(0, 40));
          3: w[i] = pixel_t'(base + $urandom_range(0, 20) - 10);
          4: w[i] = pixel_t'(((i % 5) < 2) ? base / 3 : ((i % 5) == 2 ? base : 220));
          default: w[i] = pixel_t'(base + $urandom_range(0, 60) - 30);
        endcase
      end
      if (kind >= 1 && $urandom_range(0, 1)) w[12] = pixel_t'($urandom);
      npc_en = (n % 7) != 0;
      border = (n % 97) == 0;
      // every fourth window uses a wide similarity threshold, the only way an
      // edge pixel can be found similar to its neighbours (with T4 = 10 and
      // T5 = 6 the seven similar values leave no gap above T1 = 20)
      thr = THR_DEFAULT;
      if (n % 4 == 3) thr.t4 = 8'($urandom_range(30, 120));
      chk("random");
    end
    for (int c = 0; c < 8; c++) begin
      checks++;
      $display("class %0d seen %0d times", c, seen[c]);
      if (seen[c] == 0) begin failures++; $display("FAIL class %0d never reached", c); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
