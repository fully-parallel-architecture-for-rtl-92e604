// tb_median_filter: streams two random 12 x 8 maps (values from a small set so
// that ties occur) and checks each produced value against a sorted 5x5
// neighbourhood, that exactly the positions with a full window are produced,
// and that med_v follows the input strobe of its last window value by three
// clocks.
module tb_median_filter;
  import sgm_pkg::*;
  localparam int W = 12, H = 8, K = 5, R = (K - 1) / 2;
  logic clk = 0, rst_n = 1, in_v = 0;
  logic [7:0] in_d = 0;
  logic [$clog2(W)-1:0] in_x = 0;
  logic [$clog2(H)-1:0] in_y = 0;
  logic med_v;
  logic [7:0] med;
  logic [$clog2(W)-1:0] med_x;
  logic [$clog2(H)-1:0] med_y;
  int checks = 0, failures = 0, nout = 0;
  int img [H][W];
  longint cyc = 0, last_in = 0;
  bit armed = 0;
  always #5 clk = ~clk;
  median_filter #(.W(W), .H(H), .K(K)) dut (.clk, .rst_n, .in_v, .in_d, .in_x, .in_y, .med_v, .med, .med_x, .med_y);

  always @(posedge clk) begin
    cyc++;
    if (in_v) last_in = cyc;
    if (med_v && armed) begin
      automatic int v [K*K];
      automatic int k = 0;
      automatic int x = int'(med_x), y = int'(med_y);
      nout++;
      checks += 2;
      if (cyc - last_in != 3) begin failures++; $display("latency %0d", cyc - last_in); end
      if (x < R || y < R || x >= W - R || y >= H - R) begin failures++; $display("bad position (%0d,%0d)", x, y); end
      else begin
        for (int dy = -R; dy <= R; dy++) for (int dx = -R; dx <= R; dx++) v[k++] = img[y+dy][x+dx];
        v.sort();
        if (int'(med) != v[K*K/2]) begin failures++; $display("(%0d,%0d): got %0d expected %0d", x, y, med, v[K*K/2]); end
      end
    end
  end

  initial begin
    @(posedge clk) rst_n <= 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    armed = 1;
    for (int f = 0; f < 2; f++) begin
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) img[y][x] = (f == 0) ? $urandom % 6 : $urandom % 256;
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          @(negedge clk);
          in_v = 1; in_d = 8'(img[y][x]); in_x = ($clog2(W))'(x); in_y = ($clog2(H))'(y);
          @(negedge clk);
          in_v = 0;
          repeat (3) @(negedge clk);
        end
    end
    repeat (10) @(negedge clk);
    checks++;
    if (nout != 2 * (W - 2 * R) * (H - 2 * R)) begin failures++; $display("%0d outputs", nout); end
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
