// tb_image_formation -- walks every combination of the detector flags and
// checks the class and the selected value against the decision tree.
module tb_image_formation;
  import nr_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic border, npc_en, edge1, noisy_edge, disorder, noisy, similar;
  pixel_t p_center, p_avg, p_epf1, p_epf2, pix_o;
  pix_class_e class_o;
  image_formation dut (.border, .npc_en, .edge1, .noisy_edge, .disorder, .noisy, .similar,
                       .p_center, .p_avg, .p_epf1, .p_epf2, .pix_o, .class_o);

  initial begin
    p_center = 8'd10; p_avg = 8'd20; p_epf1 = 8'd30; p_epf2 = 8'd40;
    for (int v = 0; v < 128; v++) begin
      pix_class_e ec;
      pixel_t ep;
      {border, npc_en, edge1, noisy_edge, disorder, noisy, similar} = 7'(v);
      #1;
      if (border)                              begin ec = CL_BORDER;       ep = 10; end
      else if (edge1 && noisy_edge)            begin ec = CL_NOISY_EDGE;   ep = 40; end
      else if (edge1 && similar)               begin ec = CL_EDGE_KEPT;    ep = 10; end
      else if (edge1)                          begin ec = CL_EDGE_AVG;     ep = 20; end
      else if (disorder)                       begin ec = CL_DISORDER;     ep = 30; end
      else if (npc_en && noisy && similar)     begin ec = CL_SMOOTH_KEPT;  ep = 10; end
      else if (npc_en && noisy)                begin ec = CL_SMOOTH_AVG;   ep = 20; end
      else                                     begin ec = CL_SMOOTH_CLEAN; ep = 10; end
      checks++;
      if (class_o != ec || pix_o != ep) begin
        failures++;
        $display("FAIL flags=%b class=%0d pix=%0d exp %0d %0d", 7'(v), class_o, pix_o, ec, ep);
      end
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
