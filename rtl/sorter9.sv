// sorter9 -- sorts the nine pixels P1..P9 of a 3x3 window into ascending
// order F1..F9 (F1 smallest, F9 largest).
//
// The sorter itself is not designed in the algorithm description, which only
// asks for a simple sorting structure.  This one is an odd-even transposition
// network: nine layers of compare-and-swap cells, alternately on the even and
// odd neighbouring pairs.  It is combinational; p[0] is P1 and f[0] is F1.
module sorter9
  import nr_pkg::*;
(
  input  pixel_t p [9],
  output pixel_t f [9]
);
  pixel_t stage [10][9];

  always_comb begin
    stage[0] = p;
    for (int s = 0; s < 9; s++) begin
      stage[s+1] = stage[s];
      for (int i = s % 2; i + 1 < 9; i += 2) begin
        if (stage[s][i] > stage[s][i+1]) begin
          stage[s+1][i]   = stage[s][i+1];
          stage[s+1][i+1] = stage[s][i];
        end
      end
    end
    f = stage[9];
  end
endmodule
