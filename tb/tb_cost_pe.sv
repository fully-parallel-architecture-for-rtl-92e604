// tb_cost_pe: gives the cost PE random 9x9 window pairs (some with few grey
// levels so that ties occur), started back to back every M clocks, and
// compares each cost with |rank_L - rank_R| + rank SAD computed directly from
// the windows. It also checks the latency of M+1 clocks from start to cpd_v.
module tb_cost_pe;
  import sgm_pkg::*;
  localparam int M = 9, C = (M - 1) / 2, N = 200;
  logic clk = 0, rst_n = 1, start = 0;
  pix_t win_l [M][M];
  pix_t win_r [M][M];
  cpd_t cpd;
  logic cpd_v;
  int checks = 0, failures = 0;
  int expq [$];
  longint tstart [$];
  longint cyc = 0;
  bit armed = 0;
  always #5 clk = ~clk;
  cost_pe #(.M(M)) dut (.clk, .rst_n, .start, .win_l, .win_r, .cpd, .cpd_v);

  function automatic int ref_cost();
    int sl = 0, sr = 0, rs = 0;
    for (int r = 0; r < M; r++)
      for (int c = 0; c < M; c++) begin
        bit tl = win_l[r][c] < win_l[C][C];
        bit tr = win_r[r][c] < win_r[C][C];
        sl += int'(tl); sr += int'(tr); rs += int'(tl != tr);
      end
    return ((sl > sr) ? sl - sr : sr - sl) + rs;
  endfunction

  always @(posedge clk) begin
    cyc++;
    if (start) tstart.push_back(cyc);
    if (cpd_v && armed) begin
    checks += 2;
    if (expq.size() == 0) begin failures++; $display("unexpected cpd_v"); end
    else begin
      automatic int e = expq.pop_front();
      automatic longint t0 = tstart.pop_front();
      if (int'(cpd) != e) begin failures++; $display("cost %0d expected %0d", cpd, e); end
      if (cyc - t0 != 64'(M + 1)) begin failures++; $display("latency %0d expected %0d", cyc - t0, M + 1); end
    end
    end
  end

  initial begin
    @(posedge clk) rst_n <= 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    armed = 1;
    // as in the engine, the windows change at the clock edge that samples start
    for (int n = 0; n < N; n++) begin
      automatic int lv = (n % 3 == 0) ? 4 : 256;
      @(negedge clk);
      start = 1;
      @(posedge clk);
      @(negedge clk);
      start = 0;
      for (int r = 0; r < M; r++) for (int c = 0; c < M; c++) begin
        win_l[r][c] = pix_t'($urandom % lv);
        win_r[r][c] = (n % 4 == 1) ? win_l[r][c] : pix_t'($urandom % lv);
      end
      expq.push_back(ref_cost());
      repeat (M - 2) @(negedge clk);
    end
    repeat (3 * M) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d costs missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (N * M * 2 + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
