// sgm_top: fully parallel semi-global stereo matching engine.
//
// Input: a rectified left/right pixel pair per in_v strobe, in raster order,
// W x H pixels per frame, at most one strobe every M clocks (the core clock is
// M times the pixel rate). Output: one 8-bit disparity map value per window
// centre (x,y) with 0 <= x < W-(M-1)/2 and 0 <= y < H-(M-1)/2; the centre lags
// the newest input pixel by (M-1)/2 columns and lines, so the last (M-1)/2
// columns and lines of a frame are never centres.
//
// Data flow per pixel:
//   line_buffer x2 -> disp_scan (left: M columns, right: D+M-1 columns)
//   -> D cost_pe (unified rank cost, one window line per clock, M clocks)
//      and p2r_calc (adaptive P2 per path direction)
//   -> lr_calc x4 (0/45/90/135 degree paths, on-chip path-cost RAMs)
//   -> disp_est (sum, winner-take-all, neighbour costs)
//   -> validation_check (left/right consistency, D-1 pixel steps of delay)
//   -> post_proc (parabola sub-pixel refinement, scaling to 8 bits)
//   -> median_filter (5x5 median over the map).
// The map before the median filter leaves on the raw_* ports (one value per
// window centre, with the consistency flag); the filtered map on out_v/disp,
// for map positions at least (MED_K-1)/2 from every map edge.
// Every stage latches what it needs on its valid pulse and holds it for the
// M clocks until the next pixel, so stages never stall. The first window
// line is read in the clock after the column enters the scan registers; the
// result of a centre appears about M+9 clocks after its window completes,
// plus D-1 further pixel steps in the consistency check. flush makes one such
// step without a new pixel (use it D-1 times after the last pixel of a frame,
// with at least M clocks between strobes); it must not coincide with in_v.
// The block structure and the parallelism (D disparity lanes, M clocks per
// pixel, four path engines) follow the paper; the pipeline timing is this
// design's own.
module sgm_top
  import sgm_pkg::*;
#(
  parameter int W        = 450,
  parameter int H        = 375,
  parameter int D        = 64,
  parameter int M        = 9,
  parameter int P1       = 8,
  parameter int P2_PRIME = 1000,
  parameter int MED_K    = 5
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_v,
  input  pix_t                 pix_l,
  input  pix_t                 pix_r,
  input  logic                 flush,
  // checked and refined map, before the median filter
  output logic                 raw_v,
  output logic [OUT_W-1:0]     raw_disp,
  output logic                 raw_ok,
  output logic [$clog2(W)-1:0] raw_x,
  output logic [$clog2(H)-1:0] raw_y,
  // final map after the 5x5 median filter
  output logic                 out_v,
  output logic [OUT_W-1:0]     disp,
  output logic [$clog2(W)-1:0] out_x,
  output logic [$clog2(H)-1:0] out_y
);
  localparam int XW = $clog2(W);
  localparam int YW = $clog2(H);
  localparam int C  = (M - 1) / 2;
  localparam int NC = D + M - 1;

  // ---------------------------------------------------------------- position
  logic [XW-1:0] x;
  logic [YW-1:0] y;
  logic          sof_unused, eof_unused;
  coord_gen #(.W(W), .H(H)) u_coord (
    .clk, .rst_n, .pix_v(in_v), .x, .y, .sof(sof_unused), .eof(eof_unused)
  );

  // ------------------------------------------------------------ line buffers
  pix_t          col_l [M];
  pix_t          col_r [M];
  logic          col_v;
  logic [XW-1:0] col_x;
  logic [YW-1:0] col_y;

  line_buffer #(.W(W), .H(H), .M(M)) u_lb_l (
    .clk, .rst_n, .pix_v(in_v), .pix(pix_l), .x, .y,
    .col(col_l), .col_v(col_v), .col_x(col_x), .col_y(col_y)
  );
  line_buffer #(.W(W), .H(H), .M(M)) u_lb_r (
    .clk, .rst_n, .pix_v(in_v), .pix(pix_r), .x, .y,
    .col(col_r), .col_v(), .col_x(), .col_y()
  );

  // --------------------------------------------------------- scan registers
  pix_t cols_l [M][M];
  pix_t cols_r [NC][M];
  disp_scan #(.W(W), .M(M), .D(1)) u_scan_l (
    .clk, .rst_n, .col_v, .col(col_l), .x(col_x), .cols(cols_l)
  );
  disp_scan #(.W(W), .M(M), .D(D)) u_scan_r (
    .clk, .rst_n, .col_v, .col(col_r), .x(col_x), .cols(cols_r)
  );

  // windows as [line][column]: line 0 is the oldest line, column 0 the oldest
  pix_t win_l [M][M];
  pix_t win_r [D][M][M];
  always_comb begin
    for (int r = 0; r < M; r++)
      for (int c = 0; c < M; c++) begin
        win_l[r][c] = cols_l[M-1-c][M-1-r];
        for (int d = 0; d < D; d++) win_r[d][r][c] = cols_r[d+M-1-c][M-1-r];
      end
  end

  // ------------------------------------------------ pixel sequence and centre
  // seq[k] is high k+1 clocks after the column entered the scan registers.
  logic [M-1:0]  seq;
  logic          ctr1, ctr2;
  logic [XW-1:0] xc1, xc2, xc3;
  logic [YW-1:0] yc1, yc2, yc3;
  logic          p2_en;
  assign p2_en = seq[M-2];          // last clock of the window read-out

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seq  <= '0;
      ctr1 <= 1'b0;
      ctr2 <= 1'b0;
      xc1  <= '0;
      xc2  <= '0;
      yc1  <= '0;
      yc2  <= '0;
    end else begin
      seq <= {seq[M-2:0], col_v};
      if (col_v) begin
        ctr1 <= (int'(col_x) >= C) && (int'(col_y) >= C);
        xc1  <= col_x - XW'(C);
        yc1  <= col_y - YW'(C);
      end
      if (p2_en) begin
        ctr2 <= ctr1;
        xc2  <= xc1;
        yc2  <= yc1;
      end
    end
  end

  // ------------------------------------------------------- matching cost PEs
  cpd_t cpd   [D];
  logic pe_v  [D];
  for (genvar d = 0; d < D; d++) begin : g_pe
    cost_pe #(.M(M)) u_pe (
      .clk, .rst_n, .start(col_v), .win_l(win_l), .win_r(win_r[d]),
      .cpd(cpd[d]), .cpd_v(pe_v[d])
    );
  end

  p2_t p2r [NDIR];
  p2r_calc #(.M(M), .P1(P1), .P2_PRIME(P2_PRIME)) u_p2r (
    .clk, .rst_n, .en(p2_en), .win_l(win_l), .p2r(p2r)
  );

  // ------------------------------------------------------ path cost engines
  logic cpd_v;
  assign cpd_v = pe_v[0] && ctr2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xc3  <= '0;
      yc3  <= '0;
    end else if (cpd_v) begin
      xc3  <= xc2;
      yc3  <= yc2;
    end
  end

  lr_t  lr   [NDIR][D];
  logic lr_v [NDIR];
  for (genvar r = 0; r < NDIR; r++) begin : g_lr
    lr_calc #(.DIR(dir_e'(r)), .W(W), .H(H), .M(M), .D(D), .P1(P1)) u_lr (
      .clk, .rst_n, .cpd_v, .cpd(cpd), .p2r(p2r[r]), .xc(xc2), .yc(yc2),
      .lr(lr[r]), .lr_v(lr_v[r])
    );
  end

  // ------------------------------------------------------ disparity estimate
  sum_t          sum  [D];
  logic [$clog2(D)-1:0] db;
  sum_t          trip [3];
  logic [XW-1:0] est_x;
  logic [YW-1:0] est_y;
  logic          est_v;
  disp_est #(.W(W), .H(H), .D(D)) u_est (
    .clk, .rst_n, .lr_v(lr_v[0]), .lr(lr), .xc(xc3), .yc(yc3),
    .sum, .db, .trip, .est_x, .est_y, .est_v
  );

  // -------------------------------------------------------- validation check
  logic                 chk_v, chk_ok;
  logic [$clog2(D)-1:0] chk_d;
  sum_t                 chk_trip [3];
  logic [XW-1:0]        chk_x;
  logic [YW-1:0]        chk_y;
  validation_check #(.W(W), .H(H), .D(D)) u_chk (
    .clk, .rst_n, .est_v, .adv(flush), .sum, .db, .trip, .est_x, .est_y,
    .chk_v, .disp(chk_d), .ok(chk_ok), .chk_trip, .chk_x, .chk_y
  );

  // --------------------------------------------------------- post processing
  post_proc #(.W(W), .H(H), .D(D)) u_post (
    .clk, .rst_n, .chk_v, .disp(chk_d), .ok(chk_ok), .trip(chk_trip),
    .chk_x, .chk_y, .out_v(raw_v), .out(raw_disp), .out_ok(raw_ok), .out_x(raw_x), .out_y(raw_y)
  );

  median_filter #(.W(W), .H(H), .K(MED_K)) u_median (
    .clk, .rst_n, .in_v(raw_v), .in_d(raw_disp), .in_x(raw_x), .in_y(raw_y),
    .med_v(out_v), .med(disp), .med_x(out_x), .med_y(out_y)
  );

  // ---------------------------------------------------------------- checks
  int unsigned gap;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) gap <= M;
    else        gap <= in_v ? 1 : ((gap < M) ? gap + 1 : gap);
  end
  a_rate: assert property (@(posedge clk) disable iff (!rst_n) in_v |-> gap >= M)
    else $error("sgm_top: pixel strobes closer than M clocks");
  a_flush: assert property (@(posedge clk) disable iff (!rst_n) !(flush && in_v))
    else $error("sgm_top: flush together with a pixel");
endmodule
