// tb_disorder_analyzer -- checks the disorder rule (|P5-F4|, |P5-F5| and
// |P5-F6| all above T3) on the worked-example disorder block, at the
// threshold boundary and on random inputs.
module tb_disorder_analyzer;
  import nr_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  pixel_t p5, f4, f5, f6;
  logic [7:0] t3;
  logic disorder_o;
  disorder_analyzer dut (.p5, .f4, .f5, .f6, .t3, .disorder_o);

  function automatic int iabs(int v); return v < 0 ? -v : v; endfunction

  task automatic chk(int c, int a, int b, int d, int t, bit exp);
    p5 = pixel_t'(c); f4 = pixel_t'(a); f5 = pixel_t'(b); f6 = pixel_t'(d); t3 = 8'(t); #1;
    checks++;
    if (disorder_o !== exp) begin
      failures++;
      $display("FAIL P5=%0d F4..F6=%0d %0d %0d T3=%0d got %0b exp %0b", c, a, b, d, t, disorder_o, exp);
    end
  endtask

  initial begin
    chk(234, 57, 74, 80, 30, 1);   // disorder block of the worked example
    chk(144, 143, 144, 175, 30, 0);
    chk(100, 130, 140, 150, 30, 0); // |P5-F4| equals T3
    chk(100, 131, 140, 150, 30, 1);
    chk(200, 131, 140, 170, 30, 0); // |P5-F6| equals T3
    for (int n = 0; n < 3000; n++) begin
      automatic int a = $urandom_range(0, 255);
      automatic int b = $urandom_range(a, 255);
      automatic int d = $urandom_range(b, 255);
      automatic int c = $urandom_range(0, 255);
      automatic int t = $urandom_range(0, 80);
      chk(c, a, b, d, t, (iabs(c - a) > t) && (iabs(c - b) > t) && (iabs(c - d) > t));
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
