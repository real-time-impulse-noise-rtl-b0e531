// tb_sorter9 -- checks the 3x3 sorter against the four sorted blocks of the
// worked example (edge, disorder, noisy edge, noisy smooth) and against an
// insertion sort on random blocks, including blocks with many equal values.
module tb_sorter9;
  import nr_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  pixel_t p [9];
  pixel_t f [9];
  sorter9 dut (.p(p), .f(f));

  task automatic check_sorted(string tag);
    int unsigned a [9];
    for (int i = 0; i < 9; i++) a[i] = p[i];
    for (int i = 1; i < 9; i++) begin
      int unsigned k = a[i]; int j = i - 1;
      while (j >= 0 && a[j] > k) begin a[j+1] = a[j]; j--; end
      a[j+1] = k;
    end
    for (int i = 0; i < 9; i++) begin
      checks++;
      if (f[i] != pixel_t'(a[i])) begin
        failures++;
        $display("FAIL %s F%0d=%0d expected %0d", tag, i + 1, f[i], a[i]);
      end
    end
  endtask

  task automatic check_list(pixel_t in [9], pixel_t exp [9], string tag);
    p = in; #1;
    for (int i = 0; i < 9; i++) begin
      checks++;
      if (f[i] != exp[i]) begin failures++; $display("FAIL %s F%0d=%0d exp %0d", tag, i+1, f[i], exp[i]); end
    end
  endtask

  initial begin
    check_list('{53,144,191,39,180,182,143,175,135}, '{39,53,135,143,144,175,180,182,191}, "edge");
    check_list('{74,80,27,83,234,199,45,57,21},      '{21,27,45,57,74,80,83,199,234}, "disorder");
    check_list('{21,31,65,25,236,104,107,19,139},    '{19,21,25,31,65,104,107,139,236}, "noisy edge");
    check_list('{99,103,104,92,68,103,95,103,101},   '{68,92,95,99,101,103,103,103,104}, "noisy smooth");
    for (int n = 0; n < 2000; n++) begin
      for (int i = 0; i < 9; i++) p[i] = (n % 3 == 0) ? pixel_t'($urandom_range(0, 3)) : pixel_t'($urandom);
      #1 check_sorted("random");
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
