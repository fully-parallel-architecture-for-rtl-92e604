// lr_calc_sub: one disparity lane of the path-cost recursion.
//
//   Lr(p,d) = C(p,d) + min(L1, L2, L3, minLr + P2r) - minLr
// with L1 = Lr(p-r,d), L2 = Lr(p-r,d-1) + P1, L3 = Lr(p-r,d+1) + P1 and
// minLr = min_k Lr(p-r,k). L2 and L3 arrive with P1 already added and one
// bit wider than a path cost, so that a lane at the edge of the disparity
// range can be given an all-ones value that never wins. Purely
// combinational; the caller registers the result. Because min(...) - minLr
// lies in [0, P2r], Lr never exceeds C + P2r and fits LR_W bits.
module lr_calc_sub
  import sgm_pkg::*;
(
  input  cpd_t           cpd,
  input  logic [LR_W:0]  l1,
  input  logic [LR_W:0]  l2,
  input  logic [LR_W:0]  l3,
  input  lr_t            min_prev,
  input  p2_t            p2r,
  output lr_t            lr
);
  logic [LR_W:0] l4, m01, m23, m;
  assign l4  = (LR_W+1)'(min_prev) + (LR_W+1)'(p2r);
  assign m01 = (l1 < l2) ? l1 : l2;
  assign m23 = (l3 < l4) ? l3 : l4;
  assign m   = (m01 < m23) ? m01 : m23;
  assign lr  = LR_W'((LR_W+1)'(cpd) + m - (LR_W+1)'(min_prev));
endmodule
