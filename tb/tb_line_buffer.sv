// tb_line_buffer -- drives a random pixel stream with random enable gaps
// through a short line buffer and checks that tap i always shows the pixel
// written (i+1) rows (of IMG_W enabled cycles) earlier.
module tb_line_buffer;
  import nr_pkg::*;
  localparam int W = 7;
  localparam int L = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, en;
  pixel_t din;
  pixel_t tap [L];
  line_buffer #(.IMG_W(W), .LINES(L)) dut (.clk, .rst_n, .en, .din, .tap);

  pixel_t hist [$];   // every pixel written, oldest first

  initial begin
    rst_n = 0; en = 0; din = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      en  = ($urandom_range(0, 3) != 0);
      din = pixel_t'($urandom);
      #1;
      if (en && hist.size() >= L * W) begin
        for (int i = 0; i < L; i++) begin
          checks++;
          if (tap[i] != hist[hist.size() - (i + 1) * W]) begin
            failures++;
            $display("FAIL step %0d tap%0d=%0d exp %0d", hist.size(), i, tap[i], hist[hist.size() - (i + 1) * W]);
          end
        end
      end
      @(posedge clk);
      if (en) hist.push_back(din);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
