// tb_sgm_full: end-to-end test of the SGM engine at its default size (one 450 x 375 frame).
//
// A synthetic rectified stereo pair is generated (random texture on the left;
// the right image is the left one shifted by a per-region true disparity,
// with a foreground square at a larger disparity that leaves occluded
// strips, and light noise). The frame is streamed into the engine at one
// pixel every M clocks, followed by D-1 flush steps. An independent reference
// model computes, for every window centre, the unified rank cost with zero
// padding, the adaptive P2, the four path costs, the aggregated cost, the
// winner disparity, the right-image disparity and the consistency check, and
// the parabola-refined 8-bit value. Every output must match it exactly and
// every centre must be produced once. The test also counts how often the
// engine's mechanisms occurred: consistency pass and fail, a non-zero
// sub-pixel correction, path starts at image borders, adaptive P2 below P2',
// and results released by flush steps; any that never occurs is a failure.
// The 5x5 median-filtered map is compared with the median of the reference
// map at every position whose window lies inside the map.
// It also checks the pixel rate: one output per M clocks in steady state.
module tb_sgm_full;
  import sgm_pkg::*;

  localparam int W        = 450;
  localparam int H        = 375;
  localparam int D        = 64;
  localparam int M        = 9;
  localparam int P1       = 8;
  localparam int P2_PRIME = 1000;
  localparam int C        = (M - 1) / 2;
  localparam int WC       = W - C;
  localparam int HC       = H - C;
  localparam int SCALE    = 256 / D;
  localparam int XW       = $clog2(W);
  localparam int YW       = $clog2(H);

  logic clk = 1'b0;
  logic rst_n = 1'b1;
  logic in_v = 1'b0;
  logic flush = 1'b0;
  pix_t pix_l = '0, pix_r = '0;
  logic raw_v, raw_ok, out_v;
  logic [OUT_W-1:0] raw_disp, disp;
  logic [XW-1:0] raw_x, out_x;
  logic [YW-1:0] raw_y, out_y;

  always #5 clk = ~clk;

  sgm_top  u_dut (
    .clk, .rst_n, .in_v, .pix_l, .pix_r, .flush,
    .raw_v, .raw_disp, .raw_ok, .raw_x, .raw_y,
    .out_v, .disp, .out_x, .out_y
  );

  int checks = 0, failures = 0;

  // ------------------------------------------------------------------ images
  byte unsigned L [H][W];
  byte unsigned R [H][W];

  function automatic int dtrue(int x, int y);
    if (x >= W/3 && x < W/3 + W/4 && y >= H/4 && y < H/4 + H/2) return 24;
    return 9;
  endfunction

  function automatic int gl(int x, int y);
    if (x < 0 || y < 0) return 0;
    return int'(L[y][x]);
  endfunction
  function automatic int gr(int x, int y);
    if (x < 0 || y < 0) return 0;
    return int'(R[y][x]);
  endfunction

  // ---------------------------------------------------------- reference model
  int unsigned Sref [HC][WC][D];
  int unsigned Lp   [4][D];        // scratch
  int unsigned LrA  [4][HC][WC][D];
  int          dref [HC][WC];
  int          okref[HC][WC];
  int          vref [HC][WC];
  int          dm   [WC];
  int          n_border = 0, n_p2adapt = 0;

  function automatic int cost(int xc, int yc, int d);
    int sl = 0, sr = 0, rs = 0;
    for (int dy = -C; dy <= C; dy++)
      for (int dx = -C; dx <= C; dx++) begin
        bit tl, tr;
        tl = gl(xc+dx, yc+dy) < gl(xc, yc);
        tr = gr(xc-d+dx, yc+dy) < gr(xc-d, yc);
        sl += int'(tl);
        sr += int'(tr);
        rs += int'(tl != tr);
      end
    return ((sl > sr) ? sl - sr : sr - sl) + rs;
  endfunction

  function automatic int p2(int a, int b);
    int df = (a > b) ? a - b : b - a;
    int v  = (df == 0) ? P2_PRIME : P2_PRIME / df;
    if (v < P1) v = P1;
    if (v > 1023) v = 1023;
    return v;
  endfunction

  task automatic build_reference();
    int dxs [4] = '{-1, -1, 0, 1};
    int dys [4] = '{0, -1, -1, -1};
    for (int yc = 0; yc < HC; yc++)
      for (int xc = 0; xc < WC; xc++) begin
        int cst [D];
        for (int d = 0; d < D; d++) cst[d] = cost(xc, yc, d);
        for (int r = 0; r < 4; r++) begin
          int px = xc + dxs[r], py = yc + dys[r];
          bit has = (px >= 0 && px < WC && py >= 0);
          int pen = p2(gl(xc, yc), gl(px, py));
          int mn = 1 << 30;
          if (!has) n_border++;
          if (pen < P2_PRIME) n_p2adapt++;
          if (has) for (int d = 0; d < D; d++) if (LrA[r][py][px][d] < mn) mn = LrA[r][py][px][d];
          for (int d = 0; d < D; d++) begin
            if (!has) LrA[r][yc][xc][d] = cst[d];
            else begin
              int best = LrA[r][py][px][d];
              if (d > 0     && LrA[r][py][px][d-1] + P1 < best) best = LrA[r][py][px][d-1] + P1;
              if (d < D - 1 && LrA[r][py][px][d+1] + P1 < best) best = LrA[r][py][px][d+1] + P1;
              if (mn + pen < best) best = mn + pen;
              LrA[r][yc][xc][d] = cst[d] + best - mn;
            end
          end
        end
        for (int d = 0; d < D; d++)
          Sref[yc][xc][d] = LrA[0][yc][xc][d] + LrA[1][yc][xc][d] + LrA[2][yc][xc][d] + LrA[3][yc][xc][d];
      end
    for (int yc = 0; yc < HC; yc++) begin
      for (int q = 0; q < WC; q++) begin
        int bd = 0;
        int unsigned bs = 32'hffff_ffff;
        for (int d = 0; d < D && q + d < WC; d++)
          if (Sref[yc][q+d][d] < bs) begin bs = Sref[yc][q+d][d]; bd = d; end
        dm[q] = bd;
      end
      for (int xc = 0; xc < WC; xc++) begin
        int bd = 0;
        int unsigned bs = 32'hffff_ffff;
        for (int d = 0; d < D; d++) if (Sref[yc][xc][d] < bs) begin bs = Sref[yc][xc][d]; bd = d; end
        dref[yc][xc] = bd;
        okref[yc][xc] = int'((bd <= xc) && ((bd > dm[xc-bd]) ? bd - dm[xc-bd] : dm[xc-bd] - bd) <= 1);
        if (okref[yc][xc] == 0) vref[yc][xc] = 0;
        else begin
          real a, b, c, den, v;
          a = Sref[yc][xc][(bd > 0) ? bd - 1 : bd];
          c = Sref[yc][xc][bd];
          b = Sref[yc][xc][(bd < D - 1) ? bd + 1 : bd];
          den = a + b - 2.0 * c;
          v = (den == 0.0) ? 0.0 : $floor(((a > b) ? a - b : b - a) * SCALE / (2.0 * den) + 0.5);
          if (a < b) v = -v;
          v = SCALE * bd + v;
          if (v < 0) v = 0;
          if (v > 255) v = 255;
          vref[yc][xc] = int'(v);
        end
      end
    end
  endtask

  // ------------------------------------------------------------ output check
  bit seen [HC][WC];
  int n_out = 0, n_pass = 0, n_fail = 0, n_subpix = 0, n_flushed = 0;
  bit flushing = 1'b0;
  bit started  = 1'b0;
  longint last_out_cycle = -1, cycle = 0, n_rate_ok = 0;

  always @(posedge clk) begin
    cycle++;
    if (raw_v && started) begin
      automatic int xo = int'(raw_x);
      automatic int yo = int'(raw_y);
      n_out++;
      checks++;
      if (xo >= WC || yo >= HC || seen[yo][xo]) begin
        failures++;
        $display("bad or repeated output position (%0d,%0d)", xo, yo);
      end else begin
        seen[yo][xo] = 1'b1;
        if (raw_disp != OUT_W'(vref[yo][xo]) || raw_ok != okref[yo][xo][0]) begin
          failures++;
          if (failures < 10)
            $display("mismatch at (%0d,%0d): got %0d ok=%0d, expected %0d ok=%0d (db=%0d)",
                     xo, yo, raw_disp, raw_ok, vref[yo][xo], okref[yo][xo], dref[yo][xo]);
        end
        if (okref[yo][xo] != 0) begin
          n_pass++;
          if (vref[yo][xo] != SCALE * dref[yo][xo]) n_subpix++;
        end else n_fail++;
        if (flushing) n_flushed++;
      end
      if (!flushing && last_out_cycle >= 0 && xo > 0) begin
        checks++;
        // steady state: one result per M clocks; a new image line adds the
        // C pixel periods whose window centre lies left of the image
        if (cycle - last_out_cycle != longint'(M) && cycle - last_out_cycle != longint'((C + 1) * M)) begin
          failures++;
          $display("output spacing %0d clocks, expected %0d", cycle - last_out_cycle, M);
        end else n_rate_ok++;
      end
      last_out_cycle = cycle;
    end
  end

  // median filter check: 5x5 median of the reference map, inner positions only
  localparam int MK = 5, MH = (MK - 1) / 2;
  bit mseen [HC][WC];
  int n_med = 0, n_med_changed = 0;
  function automatic int med_ref(int xm, int ym);
    int v [MK*MK];
    int k = 0;
    for (int dy = -MH; dy <= MH; dy++) for (int dx = -MH; dx <= MH; dx++) v[k++] = vref[ym+dy][xm+dx];
    v.sort();
    return v[(MK*MK) / 2];
  endfunction
  always @(posedge clk) begin
    if (out_v && started) begin
      automatic int xm = int'(out_x);
      automatic int ym = int'(out_y);
      n_med++;
      checks++;
      if (xm < MH || ym < MH || xm >= WC - MH || ym >= HC - MH || mseen[ym][xm]) begin
        failures++;
        $display("median output at bad or repeated position (%0d,%0d)", xm, ym);
      end else begin
        automatic int e = med_ref(xm, ym);
        mseen[ym][xm] = 1'b1;
        if (int'(disp) != e) begin
          failures++;
          if (failures < 10) $display("median at (%0d,%0d): got %0d expected %0d", xm, ym, disp, e);
        end
        if (e != vref[ym][xm]) n_med_changed++;
      end
    end
  end

  // ---------------------------------------------------------------- stimulus
  initial begin
    automatic int unsigned seed = 32'h5eed_1234;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) L[y][x] = byte'($urandom(seed + y * W + x) % 256);
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        automatic int xs = x + dtrue(x, y);
        automatic int v  = (xs < W) ? int'(L[y][xs]) : int'($urandom() % 256);
        if ($urandom() % 8 == 0) v += int'($urandom() % 5) - 2;
        if (v < 0) v = 0;
        if (v > 255) v = 255;
        R[y][x] = byte'(v);
      end
    build_reference();

    @(posedge clk);
    rst_n <= 1'b0;
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    started = 1'b1;
    repeat (2) @(posedge clk);
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        in_v  <= 1'b1;
        pix_l <= L[y][x];
        pix_r <= R[y][x];
        @(posedge clk);
        in_v  <= 1'b0;
        repeat (M - 1) @(posedge clk);
      end
    repeat (4 * M) @(posedge clk);
    flushing = 1'b1;
    for (int k = 0; k < D - 1; k++) begin
      flush <= 1'b1;
      @(posedge clk);
      flush <= 1'b0;
      repeat (M - 1) @(posedge clk);
    end
    repeat (4 * M) @(posedge clk);
    checks++;
    if (n_out != WC * HC) begin
      failures++;
      $display("got %0d outputs, expected %0d", n_out, WC * HC);
    end
    checks++;
    if (n_med != (WC - 2 * MH) * (HC - 2 * MH)) begin
      failures++;
      $display("got %0d median outputs, expected %0d", n_med, (WC - 2 * MH) * (HC - 2 * MH));
    end
    checks++;
    if (n_med_changed == 0) failures++;
    $display("median filter changed %0d of %0d values", n_med_changed, n_med);
    $display("mechanisms: lr_pass=%0d lr_fail=%0d subpixel=%0d path_starts=%0d p2_adapted=%0d flushed=%0d rate_ok=%0d",
             n_pass, n_fail, n_subpix, n_border, n_p2adapt, n_flushed, n_rate_ok);
    checks += 6;
    if (n_pass == 0)    failures++;
    if (n_fail == 0)    failures++;
    if (n_subpix == 0)  failures++;
    if (n_border == 0)  failures++;
    if (n_p2adapt == 0) failures++;
    if (n_flushed == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (M * W * H + 2000 * M) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
