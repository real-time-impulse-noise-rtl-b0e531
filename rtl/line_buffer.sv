// line_buffer -- row memory that turns a raster pixel stream into the rows of
// a 5x5 window.
//
// One memory of IMG_W words, each holding LINES pixels of one column, works as
// LINES chained delay lines of one image row each.  On every enabled cycle the
// word at the current column pointer is read (tap[0] is the pixel one row
// above the incoming one, tap[LINES-1] the pixel LINES rows above), the
// incoming pixel and the upper taps are written back shifted by one row, and
// the pointer advances, wrapping at IMG_W.  Reads are combinational from the
// array, writes take effect at the clock edge.  Only the pointer is reset; the
// memory content is not.
module line_buffer
  import nr_pkg::*;
#(
  parameter int unsigned IMG_W = 256,
  parameter int unsigned LINES = 4
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   en,
  input  pixel_t din,
  output pixel_t tap [LINES]
);
  localparam int unsigned AW = (IMG_W > 1) ? $clog2(IMG_W) : 1;

  logic [LINES*PIX_W-1:0] mem [IMG_W];
  logic [AW-1:0] ptr;
  logic [LINES*PIX_W-1:0] rd;

  assign rd = mem[ptr];
  for (genvar i = 0; i < LINES; i++) begin : g_tap
    assign tap[i] = rd[i*PIX_W +: PIX_W];
  end

  always_ff @(posedge clk) begin
    if (en) mem[ptr] <= {rd[(LINES-1)*PIX_W-1:0], din};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    ptr <= '0;
    else if (en)   ptr <= (ptr == AW'(IMG_W - 1)) ? '0 : ptr + 1'b1;
  end
endmodule
