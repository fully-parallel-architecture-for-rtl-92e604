// tb_coord_gen: checks the raster counters against a software count over
// three frames of randomly spaced pixel strobes, including the line and
// frame wrap and the start/end-of-frame flags.
module tb_coord_gen;
  localparam int W = 5, H = 3;
  logic clk = 0, rst_n = 1, pix_v = 0;
  logic [$clog2(W)-1:0] x;
  logic [$clog2(H)-1:0] y;
  logic sof, eof;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  coord_gen #(.W(W), .H(H)) dut (.clk, .rst_n, .pix_v, .x, .y, .sof, .eof);

  initial begin
    automatic int ex = 0, ey = 0;
    @(posedge clk) rst_n <= 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 3 * W * H; n++) begin
      @(negedge clk);
      checks++;
      if (int'(x) != ex || int'(y) != ey || sof != (ex == 0 && ey == 0) || eof != (ex == W-1 && ey == H-1)) begin
        failures++;
        $display("pixel %0d: got (%0d,%0d) sof=%0d eof=%0d, expected (%0d,%0d)", n, x, y, sof, eof, ex, ey);
      end
      pix_v = 1;
      @(negedge clk);
      pix_v = 0;
      repeat ($urandom % 3) @(negedge clk);
      ex++;
      if (ex == W) begin ex = 0; ey = (ey == H-1) ? 0 : ey + 1; end
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
