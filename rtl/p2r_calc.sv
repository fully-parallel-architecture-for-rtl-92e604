// p2r_calc: adaptive large-disparity-jump penalty P2 for the four paths.
//
// Pixel selection takes the left-image centre pixel p and its predecessors
// p-r on the 0, 45, 90 and 135 degree paths out of the left window (the
// centre's left neighbour, upper-left, upper and upper-right neighbours).
// For each, P2 = max(P1, P2' / |I(p) - I(p-r)|), with a zero difference giving
// P2' itself, is read from a 2^8-entry table indexed by the absolute pixel
// difference; the table is computed at elaboration from P1 and P2'. The four
// penalties are registered on en and hold until the next en. The formula and
// the table lookup follow the paper; the values of P1 and P2' and the
// zero-difference rule are this design's choice (the paper gives none).
module p2r_calc
  import sgm_pkg::*;
#(
  parameter int M        = 9,
  parameter int P1       = 8,
  parameter int P2_PRIME = 1000
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  pix_t win_l [M][M],      // [line][column], centre at [(M-1)/2][(M-1)/2]
  output p2_t  p2r [NDIR]         // indexed by dir_e
);
  localparam int C = (M - 1) / 2;

  function automatic p2_t lut_entry(int diff);
    int v;
    v = (diff == 0) ? P2_PRIME : P2_PRIME / diff;
    if (v < P1) v = P1;
    if (v > (1 << P2_W) - 1) v = (1 << P2_W) - 1;
    return p2_t'(v);
  endfunction

  p2_t lut [256];
  always_comb begin
    for (int i = 0; i < 256; i++) lut[i] = lut_entry(i);
  end

  pix_t nb [NDIR];
  // columns run left (index 0) to right (index M-1), lines top to bottom
  assign nb[DIR_0]   = win_l[C][C-1];
  assign nb[DIR_45]  = win_l[C-1][C-1];
  assign nb[DIR_90]  = win_l[C-1][C];
  assign nb[DIR_135] = win_l[C-1][C+1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NDIR; r++) p2r[r] <= '0;
    end else if (en) begin
      for (int r = 0; r < NDIR; r++)
        p2r[r] <= lut[(win_l[C][C] > nb[r]) ? win_l[C][C] - nb[r] : nb[r] - win_l[C][C]];
    end
  end
endmodule
