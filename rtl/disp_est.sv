// disp_est: cost aggregation and winner-take-all disparity.
//
// S(p,d) = sum of the four path costs Lr(p,d) is registered one clock after
// lr_v (sum_v). In the next clock a comparator tree finds the best disparity
// db = argmin_d S(p,d) (lowest d on ties) and the selection stage picks
// S(db-1), S(db), S(db+1) for the sub-pixel interpolation of the
// post-processing; at either end of the range the missing neighbour is
// replaced by S(db). db, the three costs and the centre position are
// registered and est_v pulses two clocks after lr_v. sum holds until the next
// lr_v, at least M-1 clocks after est_v. Each path cost is at most
// C + P2 < 2^13, so the 4-way sum fits the 16-bit aggregate bus.
// Summation, comparator and best-index stages follow the paper's block
// diagram; the edge rule for the neighbour costs is this design's choice.
module disp_est
  import sgm_pkg::*;
#(
  parameter int W = 450,
  parameter int H = 375,
  parameter int D = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 lr_v,
  input  lr_t                  lr  [NDIR][D],
  input  logic [$clog2(W)-1:0] xc,
  input  logic [$clog2(H)-1:0] yc,
  output sum_t                 sum [D],
  output logic [$clog2(D)-1:0] db,
  output sum_t                 trip [3],
  output logic [$clog2(W)-1:0] est_x,
  output logic [$clog2(H)-1:0] est_y,
  output logic                 est_v
);
  localparam int DW = $clog2(D);

  logic                 sum_v;
  logic [$clog2(W)-1:0] xs;
  logic [$clog2(H)-1:0] ys;
  sum_t                 best;
  logic [DW-1:0]        best_idx;

  min_tree #(.N(D), .WIDTH(SUM_W)) u_cmp (.vals(sum), .min_val(best), .min_idx(best_idx));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum_v <= 1'b0;
      est_v <= 1'b0;
      xs    <= '0;
      ys    <= '0;
      est_x <= '0;
      est_y <= '0;
      db    <= '0;
      for (int d = 0; d < D; d++) sum[d] <= '0;
      for (int k = 0; k < 3; k++) trip[k] <= '0;
    end else begin
      sum_v <= lr_v;
      est_v <= sum_v;
      if (lr_v) begin
        xs <= xc;
        ys <= yc;
        for (int d = 0; d < D; d++)
          sum[d] <= SUM_W'(lr[DIR_0][d]) + SUM_W'(lr[DIR_45][d])
                  + SUM_W'(lr[DIR_90][d]) + SUM_W'(lr[DIR_135][d]);
      end
      if (sum_v) begin
        db      <= best_idx;
        est_x   <= xs;
        est_y   <= ys;
        trip[1] <= best;
        trip[0] <= (best_idx == '0)        ? best : sum[best_idx - 1'b1];
        trip[2] <= (best_idx == DW'(D-1))  ? best : sum[best_idx + 1'b1];
      end
    end
  end
endmodule
