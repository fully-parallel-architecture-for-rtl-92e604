// tb_lr_calc: runs all four path-cost engines (0, 45, 90, 135 degrees) over
// two frames of random matching costs and penalties at a reduced size
// (W = 10, H = 6, 3x3 windows, D = 8) and checks every path cost against the
// recursion evaluated in software over the grid of window centres, with a
// predecessor outside the grid counting as zero costs. It also checks that
// lr_v follows cpd_v by exactly two clocks.
module tb_lr_calc;
  import sgm_pkg::*;
  localparam int W = 10, H = 6, M = 3, D = 8, P1 = 8;
  localparam int C = (M - 1) / 2, WC = W - C, HC = H - C;
  logic clk = 0, rst_n = 1, cpd_v = 0;
  cpd_t cpd [D];
  p2_t p2r [NDIR];
  logic [$clog2(W)-1:0] xc = 0;
  logic [$clog2(H)-1:0] yc = 0;
  lr_t lr [NDIR][D];
  logic lr_v [NDIR];
  int checks = 0, failures = 0;
  int unsigned ref_lr [NDIR][HC][WC][D];
  always #5 clk = ~clk;

  for (genvar r = 0; r < NDIR; r++) begin : g
    lr_calc #(.DIR(dir_e'(r)), .W(W), .H(H), .M(M), .D(D), .P1(P1)) dut (
      .clk, .rst_n, .cpd_v, .cpd, .p2r(p2r[r]), .xc, .yc, .lr(lr[r]), .lr_v(lr_v[r]));
  end

  initial begin
    int dxs [NDIR] = '{-1, -1, 0, 1};
    int dys [NDIR] = '{0, -1, -1, -1};
    @(posedge clk) rst_n <= 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < 2; f++)
      for (int y = 0; y < HC; y++)
        for (int x = 0; x < WC; x++) begin
          @(negedge clk);
          for (int d = 0; d < D; d++) cpd[d] = cpd_t'($urandom % 160);
          for (int r = 0; r < NDIR; r++) p2r[r] = p2_t'(P1 + $urandom % 200);
          xc = ($clog2(W))'(x); yc = ($clog2(H))'(y);
          // software recursion
          for (int r = 0; r < NDIR; r++) begin
            automatic int px = x + dxs[r], py = y + dys[r];
            automatic bit has = px >= 0 && px < WC && py >= 0;
            automatic int unsigned mn = 0;
            if (has) begin
              mn = ref_lr[r][py][px][0];
              for (int d = 1; d < D; d++) if (ref_lr[r][py][px][d] < mn) mn = ref_lr[r][py][px][d];
            end
            for (int d = 0; d < D; d++) begin
              automatic int unsigned best;
              if (!has) ref_lr[r][y][x][d] = cpd[d];
              else begin
                best = ref_lr[r][py][px][d];
                if (d > 0 && ref_lr[r][py][px][d-1] + P1 < best) best = ref_lr[r][py][px][d-1] + P1;
                if (d < D-1 && ref_lr[r][py][px][d+1] + P1 < best) best = ref_lr[r][py][px][d+1] + P1;
                if (mn + p2r[r] < best) best = mn + p2r[r];
                ref_lr[r][y][x][d] = cpd[d] + best - mn;
              end
            end
          end
          cpd_v = 1;
          @(negedge clk);
          cpd_v = 0;
          for (int r = 0; r < NDIR; r++) begin
            checks++;
            if (lr_v[r]) begin failures++; $display("lr_v early"); end
          end
          @(negedge clk);
          for (int r = 0; r < NDIR; r++) begin
            checks++;
            if (!lr_v[r]) begin failures++; $display("lr_v missing at (%0d,%0d) dir %0d", x, y, r); end
            for (int d = 0; d < D; d++) begin
              checks++;
              if (lr[r][d] != lr_t'(ref_lr[r][y][x][d])) begin
                failures++;
                if (failures < 20) $display("frame %0d (%0d,%0d) dir %0d d=%0d: got %0d expected %0d", f, x, y, r, d, lr[r][d], ref_lr[r][y][x][d]);
              end
            end
          end
          repeat (M + 3) @(negedge clk);
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
