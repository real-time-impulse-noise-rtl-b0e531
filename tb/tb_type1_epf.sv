// tb_type1_epf -- checks Type1 edge-preserve filtering.  On the disorder
// block of the worked example the anti-diagonal pair (27, 45) is the closest
// pair, giving 36; random blocks are checked against the reference.
module tb_type1_epf;
  import nr_pkg::*;
  import nr_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  pixel_t p [9];
  logic [1:0] dir_o;
  pixel_t pix_o;
  type1_epf dut (.p, .dir_o, .pix_o);

  task automatic chk(string tag);
    win_t rw;
    #1;
    for (int r = 0; r < 5; r++) for (int c = 0; c < 5; c++) rw[r][c] = 0;
    for (int i = 0; i < 9; i++) rw[1 + i/3][1 + i%3] = p[i];
    checks++;
    if (pix_o != pixel_t'(epf1(rw))) begin
      failures++; $display("FAIL %s pix=%0d exp %0d", tag, pix_o, epf1(rw));
    end
  endtask

  initial begin
    p = '{74,80,27,83,234,199,45,57,21};
    chk("disorder");
    checks++;
    if (dir_o != 2'd3 || pix_o != 36) begin failures++; $display("FAIL disorder dir=%0d pix=%0d", dir_o, pix_o); end
    for (int n = 0; n < 3000; n++) begin
      for (int i = 0; i < 9; i++) p[i] = pixel_t'($urandom);
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
