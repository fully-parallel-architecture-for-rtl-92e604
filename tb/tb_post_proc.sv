// tb_post_proc: random disparities and neighbour costs (S(d) the smallest,
// including flat and range-end cases) for D = 64 and D = 16; checks the
// parabola-refined, scaled and limited output value (computed in floating
// point), 0 for failed checks, the forwarded position and the one-clock
// latency.
module tb_post_proc;
  import sgm_pkg::*;
  localparam int W = 450, H = 375;
  logic clk = 0, rst_n = 1, chk_v = 0, ok = 0;
  logic [5:0] disp64;
  logic [3:0] disp16;
  sum_t trip [3];
  logic [$clog2(W)-1:0] chk_x = 0;
  logic [$clog2(H)-1:0] chk_y = 0;
  logic out_v64, out_v16, ok64, ok16;
  logic [7:0] o64, o16;
  logic [$clog2(W)-1:0] x64, x16;
  logic [$clog2(H)-1:0] y64, y16;
  int checks = 0, failures = 0, nsub = 0;
  always #5 clk = ~clk;
  post_proc #(.W(W), .H(H), .D(64)) dut64 (.clk, .rst_n, .chk_v, .disp(disp64), .ok, .trip, .chk_x, .chk_y,
    .out_v(out_v64), .out(o64), .out_ok(ok64), .out_x(x64), .out_y(y64));
  post_proc #(.W(W), .H(H), .D(16)) dut16 (.clk, .rst_n, .chk_v, .disp(disp16), .ok, .trip, .chk_x, .chk_y,
    .out_v(out_v16), .out(o16), .out_ok(ok16), .out_x(x16), .out_y(y16));

  function automatic int expect_val(int d, int scale, int a, int c, int b, bit good);
    real den, v;
    if (!good) return 0;
    den = real'(a) + real'(b) - 2.0 * real'(c);
    v = (den == 0.0) ? 0.0 : $floor(((a > b) ? a - b : b - a) * scale / (2.0 * den) + 0.5);
    if (a < b) v = -v;
    v = scale * d + v;
    if (v < 0) v = 0;
    if (v > 255) v = 255;
    return int'(v);
  endfunction

  initial begin
    @(posedge clk) rst_n <= 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 3000; n++) begin
      automatic int c = $urandom % 20000;
      automatic int a = c + ((n % 9 == 0) ? 0 : $urandom % 3000);
      automatic int b = c + ((n % 13 == 0) ? 0 : $urandom % 3000);
      automatic int d = $urandom % 64;
      automatic int e64, e16;
      if (n % 17 == 0) d = 0;
      if (n % 19 == 0) d = 63;
      @(negedge clk);
      disp64 = 6'(d); disp16 = 4'(d % 16);
      trip[0] = sum_t'(a); trip[1] = sum_t'(c); trip[2] = sum_t'(b);
      ok = (n % 7 != 3);
      chk_x = ($clog2(W))'($urandom % W); chk_y = ($clog2(H))'($urandom % H);
      e64 = expect_val(d, 4, a, c, b, ok);
      e16 = expect_val(d % 16, 16, a, c, b, ok);
      if (ok && e64 != 4 * d) nsub++;
      chk_v = 1;
      @(negedge clk);
      chk_v = 0;
      checks += 3;
      if (!out_v64 || !out_v16 || x64 != chk_x || y16 != chk_y || ok64 != ok) begin failures++; $display("valid/position/flag wrong"); end
      if (int'(o64) != e64) begin failures++; if (failures < 10) $display("D=64 d=%0d a=%0d c=%0d b=%0d: got %0d expected %0d", d, a, c, b, o64, e64); end
      if (int'(o16) != e16) begin failures++; if (failures < 10) $display("D=16 d=%0d a=%0d c=%0d b=%0d: got %0d expected %0d", d % 16, a, c, b, o16, e16); end
    end
    checks++;
    if (nsub == 0) failures++;
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
