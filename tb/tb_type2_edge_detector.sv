// tb_type2_edge_detector -- checks the four weighted directional sums, their
// minimum, the winning direction and the noisy-edge decision.  Directed
// windows are the edge and noisy-edge blocks of the worked example (the edge
// block has D = 248, 158, 303, 54, so the anti-diagonal wins and 54 <= 150);
// random windows are checked against the reference model.
module tb_type2_edge_detector;
  import nr_pkg::*;
  import nr_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  pixel_t w [25];
  logic [9:0] t2;
  dsum_t d [4];
  dsum_t dmin_o;
  logic [1:0] dir_o;
  logic noisy_edge_o;
  type2_edge_detector dut (.w, .t2, .d, .dmin_o, .dir_o, .noisy_edge_o);

  function automatic win_t to_win(pixel_t x [25]);
    win_t r;
    for (int i = 0; i < 25; i++) r[i/5][i%5] = x[i];
    return r;
  endfunction

  task automatic chk_ref(string tag);
    win_t rw = to_win(w);
    int unsigned m = 100000; int md = 0;
    #1;
    for (int i = 0; i < 4; i++) begin
      int unsigned e = type2_d(rw, i);
      checks++;
      if (d[i] != dsum_t'(e)) begin failures++; $display("FAIL %s D%0d=%0d exp %0d", tag, i, d[i], e); end
      if (e < m) begin m = e; md = i; end
    end
    checks++;
    if (dmin_o != dsum_t'(m) || dir_o != 2'(md) || noisy_edge_o != (m > t2)) begin
      failures++;
      $display("FAIL %s dmin=%0d dir=%0d noisy=%0b exp %0d %0d %0b", tag, dmin_o, dir_o, noisy_edge_o, m, md, m > t2);
    end
  endtask

  initial begin
    t2 = 10'd150;
    w = '{30,42,65,146,190, 33,53,144,191,170, 38,39,180,182,112, 75,143,175,135,244, 178,189,60,90,67};
    #1;
    checks++;
    if (d[0] != 248 || d[1] != 158 || d[2] != 303 || d[3] != 54 || dir_o != 3 || noisy_edge_o) begin
      failures++;
      $display("FAIL edge block: D=%0d %0d %0d %0d dir=%0d noisy=%0b", d[0], d[1], d[2], d[3], dir_o, noisy_edge_o);
    end
    chk_ref("edge");
    w = '{89,15,26,31,103, 6,21,31,65,138, 12,25,236,104,158, 26,107,19,139,159, 41,27,103,182,160};
    #1;
    checks++;
    if (!noisy_edge_o) begin failures++; $display("FAIL noisy edge block not detected"); end
    chk_ref("noisy edge");
    for (int n = 0; n < 3000; n++) begin
      for (int i = 0; i < 25; i++) w[i] = pixel_t'($urandom);
      t2 = 10'($urandom_range(0, 800));
      chk_ref("random");
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
