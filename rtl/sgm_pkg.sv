// sgm_pkg: widths, types and small helpers shared by the SGM stereo engine.
//
// The widths follow the bus labels of the architecture this RTL implements:
// 8-bit pixels, 12-bit matching costs (the 12x64 cost bus), 10-bit adaptive
// penalties (the 10x4 P2 bus), 16-bit path costs (the 16x4x64 bus into the
// summation) and 16-bit aggregated costs (16x64). 16-bit path costs also
// reproduce the 183 KB on-chip buffer figure of the 450-pixel-wide target.
// The path-direction encoding is this design's own choice.
package sgm_pkg;

  localparam int PIX_W = 8;    // pixel width
  localparam int CPD_W = 12;   // matching cost width
  localparam int P2_W  = 10;   // adaptive penalty width
  localparam int LR_W  = 16;   // path cost width
  localparam int SUM_W = 16;   // aggregated cost width
  localparam int OUT_W = 8;    // output disparity map width

  typedef logic [PIX_W-1:0] pix_t;
  typedef logic [CPD_W-1:0] cpd_t;
  typedef logic [P2_W-1:0]  p2_t;
  typedef logic [LR_W-1:0]  lr_t;
  typedef logic [SUM_W-1:0] sum_t;

  // The four causal path directions, in image coordinates (y grows downward):
  //   DIR_0   predecessor (x-1, y)
  //   DIR_45  predecessor (x-1, y-1)
  //   DIR_90  predecessor (x,   y-1)
  //   DIR_135 predecessor (x+1, y-1)
  typedef enum logic [1:0] {DIR_0 = 2'd0, DIR_45 = 2'd1, DIR_90 = 2'd2, DIR_135 = 2'd3} dir_e;

  localparam int NDIR = 4;

endpackage
