// tb_disp_est: random path costs (small ranges so that ties occur); checks
// the registered sums, the first minimum disparity, the neighbour costs
// (S(db) at the range ends), the forwarded position and that est_v follows
// lr_v by two clocks.
module tb_disp_est;
  import sgm_pkg::*;
  localparam int W = 450, H = 375, D = 64;
  logic clk = 0, rst_n = 1, lr_v = 0;
  lr_t lr [NDIR][D];
  logic [$clog2(W)-1:0] xc = 0;
  logic [$clog2(H)-1:0] yc = 0;
  sum_t sum [D];
  logic [$clog2(D)-1:0] db;
  sum_t trip [3];
  logic [$clog2(W)-1:0] est_x;
  logic [$clog2(H)-1:0] est_y;
  logic est_v;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  disp_est #(.W(W), .H(H), .D(D)) dut (.clk, .rst_n, .lr_v, .lr, .xc, .yc, .sum, .db, .trip, .est_x, .est_y, .est_v);

  initial begin
    int s [D];
    @(posedge clk) rst_n <= 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 500; n++) begin
      automatic int lim = (n % 3 == 0) ? 3 : 5000;
      automatic int bi = 0;
      @(negedge clk);
      for (int d = 0; d < D; d++) begin
        s[d] = 0;
        for (int r = 0; r < NDIR; r++) begin
          lr[r][d] = lr_t'($urandom % lim);
          s[d] += int'(lr[r][d]);
        end
        if (s[d] < s[bi]) bi = d;
      end
      if (n % 10 == 1) bi = 0;
      if (n % 10 == 1) for (int r = 0; r < NDIR; r++) lr[r][0] = 0;
      if (n % 10 == 2) begin bi = D-1; for (int r = 0; r < NDIR; r++) for (int d = 0; d < D-1; d++) lr[r][d] = lr_t'(6000); end
      for (int d = 0; d < D; d++) begin s[d] = 0; for (int r = 0; r < NDIR; r++) s[d] += int'(lr[r][d]); end
      bi = 0;
      for (int d = 1; d < D; d++) if (s[d] < s[bi]) bi = d;
      xc = ($clog2(W))'($urandom % W); yc = ($clog2(H))'($urandom % H);
      lr_v = 1;
      @(negedge clk);
      lr_v = 0;
      checks++;
      if (est_v) begin failures++; $display("est_v early"); end
      @(negedge clk);
      checks += 5;
      if (!est_v) begin failures++; $display("est_v missing"); end
      if (int'(db) != bi) begin failures++; $display("db %0d expected %0d", db, bi); end
      if (int'(trip[1]) != s[bi] || int'(trip[0]) != s[(bi > 0) ? bi-1 : bi] || int'(trip[2]) != s[(bi < D-1) ? bi+1 : bi]) begin
        failures++; $display("neighbour costs %0d %0d %0d wrong for db=%0d", trip[0], trip[1], trip[2], bi);
      end
      if (est_x != xc || est_y != yc) begin failures++; $display("position not forwarded"); end
      begin
        automatic bit bad = 0;
        for (int d = 0; d < D; d++) if (int'(sum[d]) != s[d]) bad = 1;
        if (bad) begin failures++; $display("sums wrong"); end
      end
      repeat (6) @(negedge clk);
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
