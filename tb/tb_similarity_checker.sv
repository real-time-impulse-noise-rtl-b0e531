// tb_similarity_checker -- checks the similar-neighbour count and the
// similarity decision: the noisy smooth block of the worked example has no
// neighbour within T4 = 10 of its centre 68, a flat block has eight, and
// random blocks are checked against a direct count.
module tb_similarity_checker;
  import nr_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  pixel_t p [9];
  logic [7:0] t4;
  logic [3:0] t5, count_o;
  logic similar_o;
  similarity_checker dut (.p, .t4, .t5, .count_o, .similar_o);

  task automatic chk(string tag);
    int n = 0;
    #1;
    for (int i = 0; i < 9; i++)
      if (i != 4 && ((p[i] > p[4]) ? p[i] - p[4] : p[4] - p[i]) < t4) n++;
    checks++;
    if (count_o != 4'(n) || similar_o != (n >= t5)) begin
      failures++;
      $display("FAIL %s count=%0d similar=%0b exp %0d %0b", tag, count_o, similar_o, n, n >= t5);
    end
  endtask

  initial begin
    t4 = 8'd10; t5 = 4'd6;
    p = '{99,103,104,92,68,103,95,103,101};
    chk("noisy smooth");
    checks++; if (count_o != 0 || similar_o) begin failures++; $display("FAIL noisy smooth similar"); end
    p = '{50,50,50,50,50,50,50,50,50};
    chk("flat");
    checks++; if (count_o != 8 || !similar_o) begin failures++; $display("FAIL flat not similar"); end
    p = '{60,40,59,41,50,55,45,100,0};   // six within 10 (60 and 40 are exactly 10 away)
    chk("boundary");
    for (int n = 0; n < 3000; n++) begin
      automatic int base = $urandom_range(0, 255);
      for (int i = 0; i < 9; i++) p[i] = pixel_t'((base + $urandom_range(0, 30)) % 256);
      t4 = 8'($urandom_range(0, 30)); t5 = 4'($urandom_range(0, 9));
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
