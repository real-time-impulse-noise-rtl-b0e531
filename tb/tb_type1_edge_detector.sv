// tb_type1_edge_detector -- checks the Type1 edge rule (F5-F4 > T1 or
// F6-F5 > T1) on the worked-example blocks, at the threshold boundary and on
// random sorted triples.
module tb_type1_edge_detector;
  import nr_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  pixel_t f4, f5, f6;
  logic [7:0] t1;
  logic edge_o;
  type1_edge_detector dut (.f4, .f5, .f6, .t1, .edge_o);

  task automatic chk(int a, int b, int c, int t, bit exp);
    f4 = pixel_t'(a); f5 = pixel_t'(b); f6 = pixel_t'(c); t1 = 8'(t); #1;
    checks++;
    if (edge_o !== exp) begin
      failures++;
      $display("FAIL F4=%0d F5=%0d F6=%0d T1=%0d edge=%0b exp %0b", a, b, c, t, edge_o, exp);
    end
  endtask

  initial begin
    chk(143, 144, 175, 20, 1);   // edge block: F6-F5 = 31
    chk(57, 74, 80, 20, 0);      // disorder block
    chk(31, 65, 104, 20, 1);     // noisy edge block
    chk(99, 101, 103, 20, 0);    // noisy smooth block
    chk(100, 120, 140, 20, 0);   // both gaps equal T1: not an edge
    chk(100, 121, 140, 20, 1);   // lower gap one above T1
    chk(100, 119, 140, 20, 1);   // upper gap one above T1
    for (int n = 0; n < 3000; n++) begin
      automatic int a = $urandom_range(0, 255);
      automatic int b = $urandom_range(a, 255);
      automatic int c = $urandom_range(b, 255);
      automatic int t = $urandom_range(0, 60);
      chk(a, b, c, t, ((b - a) > t) || ((c - b) > t));
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
