// disp_scan: column scan register feeding the disparity-parallel cost PEs.
//
// A shift register of NC = D+M-1 image columns, each M pixels tall. On col_v
// the new column enters at position 0 and every column moves one place, so
// position j holds image column x-j. The MxM window for disparity d is
// positions d..d+M-1, centred on column x-d-(M-1)/2, which makes the 64
// disparity windows plain slices of one register (the "8xMx64 parallel
// data" of the architecture). When the new column is the first of a line
// (x = 0) all older positions are cleared, so windows reaching past the
// left image border see zeros. The left image uses this module with D = 1.
// Registers only change on col_v and hold for the M clocks the cost PEs use.
module disp_scan
  import sgm_pkg::*;
#(
  parameter int W = 450,
  parameter int M = 9,
  parameter int D = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 col_v,
  input  pix_t                 col  [M],
  input  logic [$clog2(W)-1:0] x,
  output pix_t                 cols [D+M-1][M]
);
  localparam int NC = D + M - 1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < NC; j++)
        for (int r = 0; r < M; r++) cols[j][r] <= '0;
    end else if (col_v) begin
      cols[0] <= col;
      for (int j = 1; j < NC; j++)
        for (int r = 0; r < M; r++)
          cols[j][r] <= (x == '0) ? '0 : cols[j-1][r];
    end
  end
endmodule
