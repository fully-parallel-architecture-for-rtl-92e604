// line_buffer: M-line buffer of one camera for MxM window matching.
//
// M-1 line memories of W pixels hold the previous M-1 image lines. On each
// pixel strobe the memories are read at column x and written back shifted by
// one line (memory k receives what memory k-1 held, memory 0 the new pixel),
// so one read-modify-write per memory per pixel is enough. The output column
// col[k] is the pixel k lines above the new one (col[0] is the new pixel);
// lines above the top of the image read as 0, which gives the zero padding
// the cost windows use at the image border. The column is registered and
// valid (col_v) one clock after the strobe, together with its position.
// The paper specifies two 9-line buffers for 9x9 matching; the memory
// organisation and the zero padding are this design's choices.
module line_buffer
  import sgm_pkg::*;
#(
  parameter int W = 450,
  parameter int H = 375,
  parameter int M = 9
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 pix_v,
  input  pix_t                 pix,
  input  logic [$clog2(W)-1:0] x,
  input  logic [$clog2(H)-1:0] y,
  output pix_t                 col [M],
  output logic                 col_v,
  output logic [$clog2(W)-1:0] col_x,
  output logic [$clog2(H)-1:0] col_y
);
  pix_t mem [M-1][W];

  always_ff @(posedge clk) begin
    if (pix_v) begin
      mem[0][x] <= pix;
      for (int k = 1; k < M-1; k++) mem[k][x] <= mem[k-1][x];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col_v <= 1'b0;
      col_x <= '0;
      col_y <= '0;
      for (int k = 0; k < M; k++) col[k] <= '0;
    end else begin
      col_v <= pix_v;
      if (pix_v) begin
        col_x  <= x;
        col_y  <= y;
        col[0] <= pix;
        for (int k = 1; k < M; k++)
          col[k] <= (int'(y) >= k) ? mem[k-1][x] : '0;
      end
    end
  end
endmodule
