// tb_disp_scan: shifts random columns through the scan register over two
// lines and checks that position j holds column x-j of the current line, or
// zeros for positions left of the image.
module tb_disp_scan;
  import sgm_pkg::*;
  localparam int W = 10, M = 3, D = 4, NC = D + M - 1;
  logic clk = 0, rst_n = 1, col_v = 0;
  pix_t col [M];
  logic [$clog2(W)-1:0] x = 0;
  pix_t cols [NC][M];
  pix_t img [2][W][M];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  disp_scan #(.W(W), .M(M), .D(D)) dut (.clk, .rst_n, .col_v, .col, .x, .cols);

  initial begin
    for (int l = 0; l < 2; l++) for (int c = 0; c < W; c++) for (int r = 0; r < M; r++) img[l][c][r] = pix_t'($urandom);
    for (int r = 0; r < M; r++) col[r] = '0;
    @(posedge clk) rst_n <= 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int l = 0; l < 2; l++)
      for (int c = 0; c < W; c++) begin
        @(negedge clk);
        col_v = 1; col = img[l][c]; x = ($clog2(W))'(c);
        @(negedge clk);
        col_v = 0;
        for (int j = 0; j < NC; j++)
          for (int r = 0; r < M; r++) begin
            automatic pix_t e = (j <= c) ? img[l][c-j][r] : '0;
            checks++;
            if (cols[j][r] != e) begin
              failures++;
              $display("line %0d x=%0d pos %0d row %0d: got %0d expected %0d", l, c, j, r, cols[j][r], e);
            end
          end
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
