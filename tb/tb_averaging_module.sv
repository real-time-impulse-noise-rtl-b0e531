// tb_averaging_module -- checks (F4+F5+F6)/3 on the worked example
// ((99+101+103)/3 = 101), on the extremes and on random triples.
module tb_averaging_module;
  import nr_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  pixel_t f4, f5, f6, avg_o;
  averaging_module dut (.f4, .f5, .f6, .avg_o);

  task automatic chk(int a, int b, int c, int exp);
    f4 = pixel_t'(a); f5 = pixel_t'(b); f6 = pixel_t'(c); #1;
    checks++;
    if (avg_o != pixel_t'(exp)) begin
      failures++;
      $display("FAIL %0d %0d %0d -> %0d exp %0d", a, b, c, avg_o, exp);
    end
  endtask

  initial begin
    chk(99, 101, 103, 101);
    chk(255, 255, 255, 255);
    chk(0, 0, 2, 0);
    chk(0, 1, 2, 1);
    for (int n = 0; n < 3000; n++) begin
      automatic int a = $urandom_range(0, 255), b = $urandom_range(0, 255), c = $urandom_range(0, 255);
      chk(a, b, c, (a + b + c) / 3);
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
