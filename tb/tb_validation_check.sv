// tb_validation_check: streams four lines of synthetic aggregated costs
// (a true disparity per pixel plus noise and occasional random minima) at a
// reduced size (20 centres per line, D = 8), then D-1 adv steps. A software
// model forms the right-image disparity D_m(q) = argmin_d S(q+d, d) over the
// left pixels of the same line and the check |D_b - D_m(x - D_b)| <= 1 with
// D_b <= x. Every result must come out in order, with the forwarded
// disparity, costs and position, two clocks after the step D-1 steps later.
module tb_validation_check;
  import sgm_pkg::*;
  localparam int W = 24, H = 8, D = 8, WC = 20, NL = 4;
  logic clk = 0, rst_n = 1, est_v = 0, adv = 0;
  sum_t sum [D];
  logic [$clog2(D)-1:0] db;
  sum_t trip [3];
  logic [$clog2(W)-1:0] est_x = 0;
  logic [$clog2(H)-1:0] est_y = 0;
  logic chk_v, ok;
  logic [$clog2(D)-1:0] disp;
  sum_t chk_trip [3];
  logic [$clog2(W)-1:0] chk_x;
  logic [$clog2(H)-1:0] chk_y;
  int checks = 0, failures = 0;
  int S [NL][WC][D];
  int dbr [NL][WC];
  int okr [NL][WC];
  int nout = 0, npass = 0, nfail = 0;
  longint cyc = 0, step_cyc [$];
  bit armed = 0;
  always #5 clk = ~clk;
  validation_check #(.W(W), .H(H), .D(D)) dut (.clk, .rst_n, .est_v, .adv, .sum, .db, .trip, .est_x, .est_y,
    .chk_v, .disp, .ok, .chk_trip, .chk_x, .chk_y);

  always @(posedge clk) begin
    cyc++;
    if (est_v || adv) step_cyc.push_back(cyc);
    if (chk_v && armed) begin
      automatic int l = nout / WC, x = nout % WC;
      checks += 3;
      if (nout >= NL * WC) begin failures++; $display("extra output"); end
      else begin
        if (int'(chk_x) != x || int'(chk_y) != l + 1 || int'(disp) != dbr[l][x] || int'(chk_trip[1]) != l * 100 + x) begin
          failures++; $display("output %0d: wrong position, disparity or costs", nout);
        end
        if (int'(ok) != okr[l][x]) begin
          failures++; $display("line %0d x %0d: ok=%0d expected %0d (db=%0d)", l, x, ok, okr[l][x], dbr[l][x]);
        end
        if (cyc - step_cyc[nout + D - 1] != 2) begin
          failures++; $display("output %0d latency %0d", nout, cyc - step_cyc[nout + D - 1]);
        end
        if (okr[l][x] != 0) npass++; else nfail++;
      end
      nout++;
    end
  end

  initial begin
    for (int l = 0; l < NL; l++) begin
      for (int x = 0; x < WC; x++) begin
        automatic int dt = (x >= 8 && x < 14) ? 5 : 2;
        for (int d = 0; d < D; d++) S[l][x][d] = 10 * ((d > dt) ? d - dt : dt - d) + $urandom % 12;
        if ($urandom % 5 == 0) S[l][x][$urandom % D] = $urandom % 4;
        dbr[l][x] = 0;
        for (int d = 1; d < D; d++) if (S[l][x][d] < S[l][x][dbr[l][x]]) dbr[l][x] = d;
      end
      for (int x = 0; x < WC; x++) begin
        automatic int q = x - dbr[l][x];
        automatic int dm = 0, bs = 1 << 30;
        if (q < 0) okr[l][x] = 0;
        else begin
          for (int d = 0; d < D && q + d < WC; d++) if (S[l][q+d][d] < bs) begin bs = S[l][q+d][d]; dm = d; end
          okr[l][x] = ((dm > dbr[l][x]) ? dm - dbr[l][x] : dbr[l][x] - dm) <= 1;
        end
      end
    end
    @(posedge clk) rst_n <= 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    armed = 1;
    for (int l = 0; l < NL; l++)
      for (int x = 0; x < WC; x++) begin
        @(negedge clk);
        for (int d = 0; d < D; d++) sum[d] = sum_t'(S[l][x][d]);
        db = ($clog2(D))'(dbr[l][x]);
        trip[0] = sum_t'($urandom); trip[1] = sum_t'(l * 100 + x); trip[2] = sum_t'($urandom);
        est_x = ($clog2(W))'(x); est_y = ($clog2(H))'(l + 1);
        est_v = 1;
        @(negedge clk);
        est_v = 0;
        repeat (3) @(negedge clk);
      end
    for (int k = 0; k < D - 1; k++) begin
      @(negedge clk);
      adv = 1;
      @(negedge clk);
      adv = 0;
      repeat (3) @(negedge clk);
    end
    repeat (10) @(negedge clk);
    checks += 3;
    if (nout != NL * WC) begin failures++; $display("%0d outputs, expected %0d", nout, NL * WC); end
    if (npass == 0 || nfail == 0) begin failures++; $display("check never passed or never failed"); end
    if (step_cyc.size() != NL * WC + D - 1) failures++;
    $display("passed %0d failed %0d", npass, nfail);
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
