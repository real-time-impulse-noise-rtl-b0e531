// tb_type2_epf -- checks Type2 edge-preserve filtering: per-direction VAR,
// the chosen direction and the output median.  On the noisy edge block of the
// worked example the anti-diagonal (103 65 107 41) is the most uniform line,
// giving (65+103)/2 = 84.  Random windows are checked against the reference.
module tb_type2_epf;
  import nr_pkg::*;
  import nr_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  pixel_t w [25];
  dsum_t var_o [4];
  logic [1:0] dir_o;
  pixel_t pix_o;
  type2_epf dut (.w, .var_o, .dir_o, .pix_o);

  function automatic win_t to_win(pixel_t x [25]);
    win_t r;
    for (int i = 0; i < 25; i++) r[i/5][i%5] = x[i];
    return r;
  endfunction

  task automatic chk(string tag);
    win_t rw = to_win(w);
    #1;
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (var_o[i] != dsum_t'(line_var(rw, i))) begin
        failures++; $display("FAIL %s var%0d=%0d exp %0d", tag, i, var_o[i], line_var(rw, i));
      end
    end
    checks++;
    if (pix_o != pixel_t'(epf2(rw))) begin
      failures++; $display("FAIL %s pix=%0d exp %0d", tag, pix_o, epf2(rw));
    end
  endtask

  initial begin
    w = '{89,15,26,31,103, 6,21,31,65,138, 12,25,236,104,158, 26,107,19,139,159, 41,27,103,182,160};
    chk("noisy edge");
    checks++;
    if (dir_o != 2'd3 || pix_o != 84) begin failures++; $display("FAIL noisy edge dir=%0d pix=%0d", dir_o, pix_o); end
    for (int n = 0; n < 3000; n++) begin
      for (int i = 0; i < 25; i++) w[i] = pixel_t'($urandom);
      if (n % 2 == 0) begin   // plant a uniform line in a random direction
        automatic int d = $urandom_range(0, 3);
        automatic int v = $urandom_range(0, 240);
        for (int k = -2; k <= 2; k++) if (k != 0)
          w[5*(2 + k*DR[d]) + 2 + k*DC[d]] = pixel_t'(v + $urandom_range(0, 15));
      end
      chk("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
