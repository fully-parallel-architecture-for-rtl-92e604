// validation_check: left-right consistency check of the winner disparity.
//
// The right-image disparity D_m(q) = argmin_d S(q+d, d) is built from the same
// aggregated costs as the left one, while the left pixels stream by. A shift
// register holds one candidate per right pixel: entry k belongs to right pixel
// q = x-k of the current step. Each step (est_v) shifts it by one and entry d
// (1 <= d <= x) takes S(x,d) with disparity d if that is lower than the cost it
// holds (the earlier, lower d wins ties); entry 0 starts from S(x,0). After D-1
// more steps a candidate can no longer change, so entries D-1..2D-2 keep only
// the final 6-bit D_m. The left result D_b(x) waits D-1 steps in a delay line;
// it is then compared with D_m(x-D_b), which sits at entry D-1+D_b.
// It passes when D_b <= x (the right pixel lies in the image) and
// |D_b - D_m| <= LR_TOL. Entries are never updated from another line, so the
// register runs on across line and frame ends: the last D-1 results of a
// frame come out during the next frame, or earlier with adv, which makes one
// step without a new pixel. chk_v pulses two clocks after the step that
// releases a result. The check itself follows the paper's left/right
// disparity selection and validation check; the streaming organisation and the
// tolerance are this design's choices.
module validation_check
  import sgm_pkg::*;
#(
  parameter int W      = 450,
  parameter int H      = 375,
  parameter int D      = 64,
  parameter int LR_TOL = 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 est_v,
  input  logic                 adv,
  input  sum_t                 sum  [D],
  input  logic [$clog2(D)-1:0] db,
  input  sum_t                 trip [3],
  input  logic [$clog2(W)-1:0] est_x,
  input  logic [$clog2(H)-1:0] est_y,
  output logic                 chk_v,
  output logic [$clog2(D)-1:0] disp,
  output logic                 ok,
  output sum_t                 chk_trip [3],
  output logic [$clog2(W)-1:0] chk_x,
  output logic [$clog2(H)-1:0] chk_y
);
  localparam int DW = $clog2(D);
  localparam int NH = 2 * D - 1;

  typedef struct packed {
    logic                 valid;
    logic [$clog2(W)-1:0] x;
    logic [$clog2(H)-1:0] y;
    logic [DW-1:0]        db;
    sum_t [2:0]           trip;
  } item_t;

  sum_t          cand_cost [D];
  logic [DW-1:0] cand_dm   [NH];
  item_t         dl        [D];
  logic          step_d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < D; k++)  cand_cost[k] <= '1;
      for (int k = 0; k < NH; k++) cand_dm[k]   <= '0;
      for (int k = 0; k < D; k++)  dl[k]        <= '0;
      step_d <= 1'b0;
    end else begin
      step_d <= est_v || adv;
      if (est_v) begin
        cand_cost[0] <= sum[0];
        cand_dm[0]   <= '0;
        for (int d = 1; d < D; d++) begin
          if (d <= int'(est_x) && sum[d] < cand_cost[d-1]) begin
            cand_cost[d] <= sum[d];
            cand_dm[d]   <= DW'(d);
          end else begin
            cand_cost[d] <= cand_cost[d-1];
            cand_dm[d]   <= cand_dm[d-1];
          end
        end
        for (int k = D; k < NH; k++) cand_dm[k] <= cand_dm[k-1];
        dl[0] <= '{valid: 1'b1, x: est_x, y: est_y, db: db, trip: {trip[2], trip[1], trip[0]}};
        for (int k = 1; k < D; k++) dl[k] <= dl[k-1];
      end else if (adv) begin
        cand_cost[0] <= '1;
        cand_dm[0]   <= '0;
        for (int k = 1; k < D; k++)  cand_cost[k] <= cand_cost[k-1];
        for (int k = 1; k < NH; k++) cand_dm[k]   <= cand_dm[k-1];
        dl[0] <= '0;
        for (int k = 1; k < D; k++) dl[k] <= dl[k-1];
      end
    end
  end

  // check the result released by the last step
  item_t         it;
  logic [DW-1:0] dm;
  logic [DW:0]   diff;
  assign it   = dl[D-1];
  assign dm   = cand_dm[D - 1 + int'(it.db)];
  assign diff = (it.db > dm) ? (DW+1)'(it.db - dm) : (DW+1)'(dm - it.db);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      chk_v <= 1'b0;
      disp  <= '0;
      ok    <= 1'b0;
      chk_x <= '0;
      chk_y <= '0;
      for (int k = 0; k < 3; k++) chk_trip[k] <= '0;
    end else begin
      chk_v <= step_d && it.valid;
      if (step_d) begin
        disp  <= it.db;
        ok    <= (int'(it.db) <= int'(it.x)) && (int'(diff) <= LR_TOL);
        chk_x <= it.x;
        chk_y <= it.y;
        for (int k = 0; k < 3; k++) chk_trip[k] <= it.trip[k];
      end
    end
  end

  a_no_adv_during_step: assert property (@(posedge clk) disable iff (!rst_n) !(est_v && adv))
    else $error("validation_check: adv while a pixel step is active");
endmodule
