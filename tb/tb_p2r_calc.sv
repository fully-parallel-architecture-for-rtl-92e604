// tb_p2r_calc: random left windows (with repeated grey levels so that zero
// and small differences occur); checks each direction's registered penalty
// against max(P1, P2'/|I(p) - I(p-r)|), P2' for a zero difference, with the
// neighbours taken at their image positions (left, upper-left, up,
// upper-right of the centre). Also checks the value holds while en is low.
module tb_p2r_calc;
  import sgm_pkg::*;
  localparam int M = 9, C = (M - 1) / 2, P1 = 8, P2_PRIME = 1000;
  logic clk = 0, rst_n = 1, en = 0;
  pix_t win_l [M][M];
  p2_t  p2r [NDIR];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  p2r_calc #(.M(M), .P1(P1), .P2_PRIME(P2_PRIME)) dut (.clk, .rst_n, .en, .win_l, .p2r);

  function automatic int pen(int a, int b);
    int df = (a > b) ? a - b : b - a;
    int v = (df == 0) ? P2_PRIME : P2_PRIME / df;
    return (v < P1) ? P1 : v;
  endfunction

  initial begin
    int e [NDIR];
    @(posedge clk) rst_n <= 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      for (int r = 0; r < M; r++) for (int c = 0; c < M; c++)
        win_l[r][c] = (n % 2 != 0) ? pix_t'(100 + $urandom % 4) : pix_t'($urandom);
      e[0] = pen(win_l[C][C], win_l[C][C-1]);     // (x-1, y)
      e[1] = pen(win_l[C][C], win_l[C-1][C-1]);   // (x-1, y-1)
      e[2] = pen(win_l[C][C], win_l[C-1][C]);     // (x,   y-1)
      e[3] = pen(win_l[C][C], win_l[C-1][C+1]);   // (x+1, y-1)
      en = 1;
      @(negedge clk);
      en = 0;
      for (int r = 0; r < M; r++) for (int c = 0; c < M; c++) win_l[r][c] = pix_t'($urandom);
      repeat (2) @(negedge clk);
      for (int r = 0; r < NDIR; r++) begin
        checks++;
        if (int'(p2r[r]) != e[r]) begin
          failures++;
          $display("window %0d dir %0d: got %0d expected %0d", n, r, p2r[r], e[r]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
