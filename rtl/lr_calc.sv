// lr_calc: path-cost engine for one aggregation direction.
//
// D lr_calc_sub lanes evaluate the SGM recursion for all disparities of one
// pixel at once. Their inputs come from the path predecessor p-r:
//   DIR_0    the previous pixel of the same line, kept in a register;
//   DIR_45   the previous line at x-1,
//   DIR_90   the previous line at x,
//   DIR_135  the previous line at x+1,
// the last three from a W-word path-cost RAM (D costs per word) and a W-word
// minimum buffer. The RAM is read at x (x+1 for DIR_135) and written at x once
// the new costs exist, so every word is read before it is overwritten; for
// DIR_45 the word read for the previous pixel is kept one more pixel (the
// delay register that aligns it). A predecessor outside the image counts as
// all-zero costs, which makes Lr = C on the first pixel of a path. A
// comparator tree gives the new minimum, stored beside the costs.
//
// Timing (one pixel every M >= 3 clocks): cpd_v pulses with the costs, the
// penalty P2r and the centre position xc, yc; these are latched and the RAM
// read in that clock; the lanes compute in the next clock; lr and lr_v appear
// in the clock after that (2 clocks after cpd_v), and in that clock the new
// costs and their minimum are written back. lr holds until the next pixel.
// The lane structure, the minimum tree, the on-chip buffer and the delay
// alignment follow the paper's path-cost module; the RAM addressing and the
// border rule are this design's own. The paper sizes the buffer for D+5 words
// of path cost per position; this design stores D costs plus the minimum.
module lr_calc
  import sgm_pkg::*;
#(
  parameter dir_e DIR = DIR_0,
  parameter int   W   = 450,
  parameter int   H   = 375,
  parameter int   M   = 9,
  parameter int   D   = 64,
  parameter int   P1  = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cpd_v,
  input  cpd_t                 cpd [D],
  input  p2_t                  p2r,
  input  logic [$clog2(W)-1:0] xc,
  input  logic [$clog2(H)-1:0] yc,
  output lr_t                  lr  [D],
  output logic                 lr_v
);
  localparam int XW     = $clog2(W);
  localparam int YW     = $clog2(H);
  localparam int XC_MAX = W - 1 - (M - 1) / 2;   // last centre column

  typedef logic [D-1:0][LR_W-1:0] lrvec_t;

  cpd_t           cpd_q [D];
  p2_t            p2_q;
  logic [XW-1:0]  xc_q;
  logic [YW-1:0]  yc_q;
  logic           calc;
  lrvec_t         prev;
  lr_t            prev_min;
  logic           prev_ok;
  lr_t            lr_n [D];
  lr_t            min_n;
  logic [$clog2(D)-1:0] min_idx_unused;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      calc <= 1'b0;
      lr_v <= 1'b0;
      p2_q <= '0;
      xc_q <= '0;
      yc_q <= '0;
      for (int d = 0; d < D; d++) begin
        cpd_q[d] <= '0;
        lr[d]    <= '0;
      end
    end else begin
      calc <= cpd_v;
      lr_v <= calc;
      if (cpd_v) begin
        cpd_q <= cpd;
        p2_q  <= p2r;
        xc_q  <= xc;
        yc_q  <= yc;
      end
      if (calc) lr <= lr_n;
    end
  end

  // predecessor costs and the new minimum
  min_tree #(.N(D), .WIDTH(LR_W)) u_min (.vals(lr), .min_val(min_n), .min_idx(min_idx_unused));

  generate
    if (DIR == DIR_0) begin : g_reg
      lrvec_t last;
      lr_t    last_min;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          last     <= '0;
          last_min <= '0;
        end else if (lr_v) begin
          for (int d = 0; d < D; d++) last[d] <= lr[d];
          last_min <= min_n;
        end
      end
      assign prev     = last;
      assign prev_min = last_min;
      assign prev_ok  = (xc_q != '0);
    end else begin : g_ram
      lrvec_t        ram  [W];
      lr_t           mbuf [W];
      lrvec_t        rd;
      lr_t           rd_min;
      logic [XW-1:0] ra;
      assign ra = (DIR == DIR_135 && int'(xc) < W - 1) ? xc + 1'b1 : xc;
      always_ff @(posedge clk) begin
        if (cpd_v) begin
          rd     <= ram[ra];
          rd_min <= mbuf[ra];
        end
        if (lr_v) begin
          for (int d = 0; d < D; d++) ram[xc_q][d] <= lr[d];
          mbuf[xc_q] <= min_n;
        end
      end
      if (DIR == DIR_45) begin : g_45
        // keep the word read for the previous pixel (x-1) one pixel longer
        lrvec_t rd_hold;
        lr_t    rd_min_hold;
        always_ff @(posedge clk) begin
          if (cpd_v) begin
            rd_hold     <= rd;
            rd_min_hold <= rd_min;
          end
        end
        assign prev     = rd_hold;
        assign prev_min = rd_min_hold;
        assign prev_ok  = (xc_q != '0) && (yc_q != '0);
      end else if (DIR == DIR_90) begin : g_90
        assign prev     = rd;
        assign prev_min = rd_min;
        assign prev_ok  = (yc_q != '0);
      end else begin : g_135
        assign prev     = rd;
        assign prev_min = rd_min;
        assign prev_ok  = (yc_q != '0) && (int'(xc_q) < XC_MAX);
      end
    end
  endgenerate

  // D lanes
  localparam logic [LR_W:0] INF = '1;
  lr_t pmin;
  assign pmin = prev_ok ? prev_min : '0;

  for (genvar d = 0; d < D; d++) begin : g_lane
    logic [LR_W:0] l1, l2, l3;
    assign l1 = prev_ok ? (LR_W+1)'(prev[d]) : '0;
    if (d == 0) begin : g_lo
      assign l2 = INF;
    end else begin : g_l2
      assign l2 = (prev_ok ? (LR_W+1)'(prev[d-1]) : '0) + (LR_W+1)'(P1);
    end
    if (d == D - 1) begin : g_hi
      assign l3 = INF;
    end else begin : g_l3
      assign l3 = (prev_ok ? (LR_W+1)'(prev[d+1]) : '0) + (LR_W+1)'(P1);
    end
    lr_calc_sub u_sub (
      .cpd(cpd_q[d]), .l1(l1), .l2(l2), .l3(l3),
      .min_prev(pmin), .p2r(p2_q), .lr(lr_n[d])
    );
  end
endmodule
