// nr_pkg -- types and constants shared by the impulse-noise removal datapath.
//
// Pixels are 8-bit grey levels (the evaluated MR images are 8-bit, 256x256).
// The five thresholds T1..T5 of the detection stages travel together as one
// struct; their default values are the ones used for the published results
// (T1=20, T2=150, T3=30, T4=10, T5=6).  The widths of the threshold fields are
// a choice of this design: T2 is compared with a weighted sum of four absolute
// differences (at most 2*255 + 2*127 = 764), so it needs 10 bits, and T5 is
// compared with a count of at most 8 similar neighbours.
//
// pix_class_e names the path a pixel takes through the decision tree of the
// algorithm; it is reported next to every output pixel.
package nr_pkg;

  localparam int unsigned PIX_W = 8;
  localparam int unsigned DSUM_W = 10;   // width of directional sums (max 764 / 1020)

  typedef logic [PIX_W-1:0] pixel_t;
  typedef logic [DSUM_W-1:0] dsum_t;

  typedef struct packed {
    logic [7:0]  t1;  // Type1 edge strength threshold
    logic [9:0]  t2;  // Type2 directional-sum threshold
    logic [7:0]  t3;  // disorder threshold
    logic [7:0]  t4;  // noisy-pixel / similarity threshold
    logic [3:0]  t5;  // minimum number of similar neighbours
  } thr_t;

  localparam thr_t THR_DEFAULT = '{t1: 8'd20, t2: 10'd150, t3: 8'd30, t4: 8'd10, t5: 4'd6};

  // Decision-tree outcome for one pixel (Fig. 1 of the algorithm description)
  typedef enum logic [2:0] {
    CL_BORDER        = 3'd0,  // window incomplete at the image border: pixel passed through
    CL_EDGE_KEPT     = 3'd1,  // edge, similar to neighbours: unchanged
    CL_EDGE_AVG      = 3'd2,  // edge, not similar: Average restoration
    CL_NOISY_EDGE    = 3'd3,  // noisy edge: Type2 edge-preserve filtering
    CL_DISORDER      = 3'd4,  // disordered block: Type1 edge-preserve filtering
    CL_SMOOTH_CLEAN  = 3'd5,  // smooth, not noisy: unchanged
    CL_SMOOTH_KEPT   = 3'd6,  // smooth, flagged noisy but similar: unchanged
    CL_SMOOTH_AVG    = 3'd7   // smooth, noisy, not similar: Average restoration
  } pix_class_e;

endpackage
