// median_filter: K x K median filter over the 8-bit disparity map stream.
//
// The map arrives in raster order, one value per in_v with its position.
// A line_buffer holds the last K-1 map lines and a disp_scan register the last
// K columns, giving the K x K neighbourhood of position (x-(K-1)/2, y-(K-1)/2).
// The median is found by ranking: value i is the median when fewer than
// (K*K+1)/2 values are below it and at least that many are at or below it,
// one comparator per pair of window values, all in one clock.
// Only positions whose whole window lies inside the map are produced, so the
// filtered map loses (K-1)/2 positions on every side. med_v follows in_v by
// three clocks. The paper applies a 5x5 median filter in post-processing;
// the rank-based circuit and the border rule are this design's choices.
module median_filter
  import sgm_pkg::*;
#(
  parameter int W = 450,
  parameter int H = 375,
  parameter int K = 5
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_v,
  input  logic [OUT_W-1:0]     in_d,
  input  logic [$clog2(W)-1:0] in_x,
  input  logic [$clog2(H)-1:0] in_y,
  output logic                 med_v,
  output logic [OUT_W-1:0]     med,
  output logic [$clog2(W)-1:0] med_x,
  output logic [$clog2(H)-1:0] med_y
);
  localparam int XW = $clog2(W);
  localparam int YW = $clog2(H);
  localparam int N  = K * K;
  localparam int HALF = (N + 1) / 2;
  localparam int CW = $clog2(N + 1);

  pix_t          col [K];
  logic          col_v;
  logic [XW-1:0] col_x;
  logic [YW-1:0] col_y;
  line_buffer #(.W(W), .H(H), .M(K)) u_lines (
    .clk, .rst_n, .pix_v(in_v), .pix(in_d), .x(in_x), .y(in_y),
    .col, .col_v, .col_x, .col_y
  );

  pix_t cols [K][K];
  disp_scan #(.W(W), .M(K), .D(1)) u_cols (
    .clk, .rst_n, .col_v, .col, .x(col_x), .cols
  );

  // rank-based median of the K*K window
  pix_t          v [N];
  pix_t          m;
  always_comb begin
    for (int j = 0; j < K; j++)
      for (int r = 0; r < K; r++) v[j*K + r] = cols[j][r];
    m = v[0];
    for (int i = N - 1; i >= 0; i--) begin
      logic [CW-1:0] lt, le;
      lt = '0;
      le = '0;
      for (int j = 0; j < N; j++) begin
        lt = lt + CW'(v[j] <  v[i]);
        le = le + CW'(v[j] <= v[i]);
      end
      if (int'(lt) < HALF && int'(le) >= HALF) m = v[i];
    end
  end

  logic          s1, full1;
  logic [XW-1:0] x1;
  logic [YW-1:0] y1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1    <= 1'b0;
      full1 <= 1'b0;
      x1    <= '0;
      y1    <= '0;
      med_v <= 1'b0;
      med   <= '0;
      med_x <= '0;
      med_y <= '0;
    end else begin
      s1    <= col_v;
      med_v <= s1 && full1;
      if (col_v) begin
        full1 <= (int'(col_x) >= K - 1) && (int'(col_y) >= K - 1);
        x1    <= col_x - XW'((K - 1) / 2);
        y1    <= col_y - YW'((K - 1) / 2);
      end
      if (s1) begin
        med   <= m;
        med_x <= x1;
        med_y <= y1;
      end
    end
  end
endmodule
