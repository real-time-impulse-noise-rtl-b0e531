// tb_noisy_pixel_checker -- checks the noisy-pixel rule (F9-P5 < T4 or
// P5-F1 < T4) on the worked-example noisy smooth block, at the boundary and
// on random inputs with F1 <= P5 <= F9.
module tb_noisy_pixel_checker;
  import nr_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  pixel_t p5, f1, f9;
  logic [7:0] t4;
  logic noisy_o;
  noisy_pixel_checker dut (.p5, .f1, .f9, .t4, .noisy_o);

  task automatic chk(int c, int lo, int hi, int t, bit exp);
    p5 = pixel_t'(c); f1 = pixel_t'(lo); f9 = pixel_t'(hi); t4 = 8'(t); #1;
    checks++;
    if (noisy_o !== exp) begin
      failures++;
      $display("FAIL P5=%0d F1=%0d F9=%0d T4=%0d got %0b exp %0b", c, lo, hi, t, noisy_o, exp);
    end
  endtask

  initial begin
    chk(68, 68, 104, 10, 1);     // noisy smooth block: P5 is the minimum
    chk(100, 90, 110, 10, 0);    // both distances equal T4
    chk(101, 90, 110, 10, 1);    // F9-P5 = 9
    chk(99, 90, 110, 10, 1);     // P5-F1 = 9
    for (int n = 0; n < 3000; n++) begin
      automatic int lo = $urandom_range(0, 255);
      automatic int c  = $urandom_range(lo, 255);
      automatic int hi = $urandom_range(c, 255);
      automatic int t  = $urandom_range(0, 40);
      chk(c, lo, hi, t, ((hi - c) < t) || ((c - lo) < t));
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
