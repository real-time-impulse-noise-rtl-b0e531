// abs_dif -- the ABS-DIF unit used throughout the datapath: |a - b| of two
// unsigned values.  Purely combinational.
module abs_dif #(
  parameter int unsigned W = 8
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W-1:0] y
);
  always_comb y = (a > b) ? a - b : b - a;
endmodule
