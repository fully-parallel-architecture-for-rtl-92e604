// tb_line_buffer: streams two random frames into an M-line buffer and checks
// every output column against the image: col[k] must be the pixel k lines
// above the new one, or 0 above the top line, one clock after the strobe.
module tb_line_buffer;
  import sgm_pkg::*;
  localparam int W = 8, H = 6, M = 4;
  logic clk = 0, rst_n = 1, pix_v = 0;
  pix_t pix = 0;
  logic [$clog2(W)-1:0] x = 0;
  logic [$clog2(H)-1:0] y = 0;
  pix_t col [M];
  logic col_v;
  logic [$clog2(W)-1:0] col_x;
  logic [$clog2(H)-1:0] col_y;
  int checks = 0, failures = 0;
  pix_t img [2][H][W];
  always #5 clk = ~clk;
  line_buffer #(.W(W), .H(H), .M(M)) dut (.clk, .rst_n, .pix_v, .pix, .x, .y, .col, .col_v, .col_x, .col_y);

  initial begin
    for (int f = 0; f < 2; f++) for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) img[f][r][c] = pix_t'($urandom);
    @(posedge clk) rst_n <= 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < 2; f++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          @(negedge clk);
          pix_v = 1; pix = img[f][r][c]; x = ($clog2(W))'(c); y = ($clog2(H))'(r);
          @(negedge clk);
          pix_v = 0;
          checks++;
          if (!col_v || int'(col_x) != c || int'(col_y) != r) begin
            failures++;
            $display("no column or wrong position at (%0d,%0d)", c, r);
          end
          for (int k = 0; k < M; k++) begin
            automatic pix_t e = (r >= k) ? img[f][r-k][c] : '0;
            checks++;
            if (col[k] != e) begin
              failures++;
              $display("frame %0d (%0d,%0d) line -%0d: got %0d expected %0d", f, c, r, k, col[k], e);
            end
          end
          repeat ($urandom % 2) @(negedge clk);
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
