// post_proc: sub-pixel refinement and scaling of the checked disparity.
//
// A parabola through the aggregated costs a = S(d-1), c = S(d), b = S(d+1)
// has its minimum at d + (a - b) / (2 (a + b - 2c)). The disparity range
// [0, D-1] is mapped onto the 8-bit output by the factor SCALE = 256/D, so the
// output is SCALE*d + round(SCALE (a - b) / (2 (a + b - 2c))), limited to
// [0, 255]. Because c is the minimum, the correction lies within +-SCALE/2.
// A flat neighbourhood (a + b = 2c) gets no correction, and a pixel that
// failed the consistency check gives 0. Registered: out_v follows chk_v by
// one clock. The interpolation and the [0,255] range follow the paper; the
// rounding and the value for invalid pixels are this design's choices.
module post_proc
  import sgm_pkg::*;
#(
  parameter int W = 450,
  parameter int H = 375,
  parameter int D = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 chk_v,
  input  logic [$clog2(D)-1:0] disp,
  input  logic                 ok,
  input  sum_t                 trip [3],
  input  logic [$clog2(W)-1:0] chk_x,
  input  logic [$clog2(H)-1:0] chk_y,
  output logic                 out_v,
  output logic [OUT_W-1:0]     out,
  output logic                 out_ok,
  output logic [$clog2(W)-1:0] out_x,
  output logic [$clog2(H)-1:0] out_y
);
  localparam int SCALE = 256 / D;
  localparam int NW    = SUM_W + 2 + $clog2(SCALE + 1);

  logic [SUM_W+1:0] den;      // a + b - 2c
  logic [SUM_W:0]   mag;      // |a - b|
  logic [NW-1:0]    q;        // round(SCALE*|a-b| / (2 den))
  logic             neg;
  int               val;

  always_comb begin
    den = (SUM_W+2)'(trip[0]) + (SUM_W+2)'(trip[2]) - ((SUM_W+2)'(trip[1]) << 1);
    neg = trip[0] < trip[2];
    mag = neg ? (SUM_W+1)'(trip[2] - trip[0]) : (SUM_W+1)'(trip[0] - trip[2]);
    if (den == '0) q = '0;
    else           q = (NW'(mag) * NW'(SCALE) + NW'(den)) / (NW'(den) << 1);
    // a - b > 0 means the minimum lies towards d+1
    val = SCALE * int'(disp) + (neg ? -int'(q) : int'(q));
    if (val < 0)   val = 0;
    if (val > 255) val = 255;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_v  <= 1'b0;
      out    <= '0;
      out_ok <= 1'b0;
      out_x  <= '0;
      out_y  <= '0;
    end else begin
      out_v <= chk_v;
      if (chk_v) begin
        out    <= ok ? OUT_W'(val) : '0;
        out_ok <= ok;
        out_x  <= chk_x;
        out_y  <= chk_y;
      end
    end
  end
endmodule
