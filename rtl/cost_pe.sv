// cost_pe: unified rank matching cost for one disparity.
//
// Computes C_R = |sum_q T[L(q) < L(p)] - sum_q T[R(q) < R(p)]|       (rank filter / AD)
//              +  sum_q |T[L(q) < L(p)] - T[R(q) < R(p)]|            (rank SAD)
// over the MxM windows around the left centre p and the right centre p-d.
// The window is processed one line per clock (time-division): a tap counter
// selects line t of both windows (the tap buffer), the line rank units count
// the left and right rank bits and their mismatches on that line (each at
// most M, 4 bits for M = 9), and three accumulators sum the M line results.
// start pulses for one clock; the windows are read in the M clocks after it
// (so start may coincide with the clock edge that loads them) and must hold
// during those M clocks. cpd is registered at the end of the M-th clock and cpd_v
// pulses in the clock after, i.e. M+1 clocks after start. The line-by-line
// split, the three accumulators and the final |l - r| + rsad follow the
// paper's PE; the handshake is this design's choice.
module cost_pe
  import sgm_pkg::*;
#(
  parameter int M = 9
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  pix_t win_l [M][M],   // [line][column], centre at [(M-1)/2][(M-1)/2]
  input  pix_t win_r [M][M],
  output cpd_t cpd,
  output logic cpd_v
);
  localparam int C    = (M - 1) / 2;
  localparam int TW   = $clog2(M);
  localparam int LW   = $clog2(M + 1);       // one line count
  localparam int AW   = $clog2(M * M + 1);   // window count

  logic [TW-1:0] tap;
  logic          busy;

  // tap buffer: select line `tap` of both windows
  pix_t line_l [M];
  pix_t line_r [M];
  always_comb begin
    for (int c = 0; c < M; c++) begin
      line_l[c] = win_l[tap][c];
      line_r[c] = win_r[tap][c];
    end
  end

  // line rank units (Line RT for left and right, Line RSAD)
  logic [LW-1:0] rt_l, rt_r, rsad;
  always_comb begin
    rt_l = '0;
    rt_r = '0;
    rsad = '0;
    for (int c = 0; c < M; c++) begin
      rt_l = rt_l + LW'(line_l[c] < win_l[C][C]);
      rt_r = rt_r + LW'(line_r[c] < win_r[C][C]);
      rsad = rsad + LW'((line_l[c] < win_l[C][C]) != (line_r[c] < win_r[C][C]));
    end
  end

  // down-by-M accumulators
  logic [AW-1:0] acc_l, acc_r, acc_s;
  logic [AW-1:0] sum_l, sum_r, sum_s;
  assign sum_l = ((tap == '0) ? '0 : acc_l) + AW'(rt_l);
  assign sum_r = ((tap == '0) ? '0 : acc_r) + AW'(rt_r);
  assign sum_s = ((tap == '0) ? '0 : acc_s) + AW'(rsad);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tap   <= '0;
      busy  <= 1'b0;
      acc_l <= '0;
      acc_r <= '0;
      acc_s <= '0;
      cpd   <= '0;
      cpd_v <= 1'b0;
    end else begin
      cpd_v <= 1'b0;
      if (busy) begin
        acc_l <= sum_l;
        acc_r <= sum_r;
        acc_s <= sum_s;
        if (tap == TW'(M-1)) begin
          busy  <= 1'b0;
          tap   <= '0;
          cpd   <= ((sum_l > sum_r) ? CPD_W'(sum_l) - CPD_W'(sum_r) : CPD_W'(sum_r) - CPD_W'(sum_l))
                 + CPD_W'(sum_s);
          cpd_v <= 1'b1;
        end else begin
          tap <= tap + 1'b1;
        end
      end
      // a new window may start in the clock that reads the last line
      if (start) begin
        busy <= 1'b1;
        tap  <= '0;
      end
    end
  end
endmodule
