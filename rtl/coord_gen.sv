// coord_gen: raster position of the incoming pixel pair.
//
// Two counters step on every pixel strobe: x runs 0..W-1 and y runs 0..H-1,
// wrapping at the end of a line and of a frame. The outputs give the position
// of the pixel presented together with the strobe (they are registered and
// describe the *next* pixel to arrive). Reset starts a frame at (0,0). The
// architecture names a coordinate generator that feeds the path-cost RAM
// addressing; the counter form is this design's choice.
module coord_gen #(
  parameter int W = 450,
  parameter int H = 375
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 pix_v,
  output logic [$clog2(W)-1:0] x,
  output logic [$clog2(H)-1:0] y,
  output logic                 sof,    // current position is (0,0)
  output logic                 eof     // current position is (W-1,H-1)
);
  localparam int XW = $clog2(W);
  localparam int YW = $clog2(H);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= '0;
      y <= '0;
    end else if (pix_v) begin
      if (x == XW'(W-1)) begin
        x <= '0;
        y <= (y == YW'(H-1)) ? '0 : y + 1'b1;
      end else begin
        x <= x + 1'b1;
      end
    end
  end

  assign sof = (x == '0) && (y == '0);
  assign eof = (x == XW'(W-1)) && (y == YW'(H-1));
endmodule
