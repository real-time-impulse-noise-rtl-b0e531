// tb_var_unit -- checks the VAR unit (sum of absolute deviations from the
// rounded-down mean) on the anti-diagonal of the worked-example noisy edge
// block (103 65 107 41: mean 79, VAR 104) and on random lines.
module tb_var_unit;
  import nr_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  pixel_t p [4];
  dsum_t var_o;
  var_unit dut (.p, .var_o);

  task automatic chk();
    int m = (p[0] + p[1] + p[2] + p[3]) / 4;
    int e = 0;
    #1;
    for (int i = 0; i < 4; i++) e += (p[i] > m) ? p[i] - m : m - p[i];
    checks++;
    if (var_o != dsum_t'(e)) begin
      failures++;
      $display("FAIL %0d %0d %0d %0d var=%0d exp %0d", p[0], p[1], p[2], p[3], var_o, e);
    end
  endtask

  initial begin
    p = '{103, 65, 107, 41}; chk();
    checks++; if (var_o != 104) begin failures++; $display("FAIL anti-diagonal var %0d", var_o); end
    p = '{0, 0, 255, 255}; chk();
    p = '{255, 255, 255, 255}; chk();
    for (int n = 0; n < 3000; n++) begin
      for (int i = 0; i < 4; i++) p[i] = pixel_t'($urandom);
      chk();
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
