// disorder_analyzer -- decides whether a non-edge 3x3 block is disordered.
//
// Three ABS-DIF units form |P5-F4|, |P5-F5| and |P5-F6|, three comparators test
// each against T3 and an AND gate combines them: the block is disordered when
// the centre differs by more than T3 from all three middle sorted values.
// Combinational.
module disorder_analyzer
  import nr_pkg::*;
(
  input  pixel_t     p5,
  input  pixel_t     f4,
  input  pixel_t     f5,
  input  pixel_t     f6,
  input  logic [7:0] t3,
  output logic       disorder_o
);
  pixel_t d4, d5, d6;
  abs_dif #(.W(PIX_W)) u_d4 (.a(p5), .b(f4), .y(d4));
  abs_dif #(.W(PIX_W)) u_d5 (.a(p5), .b(f5), .y(d5));
  abs_dif #(.W(PIX_W)) u_d6 (.a(p5), .b(f6), .y(d6));
  always_comb disorder_o = (d4 > t3) && (d5 > t3) && (d6 > t3);
endmodule
