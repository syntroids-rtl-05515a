// Score screen and game-over screen.
//
// Like the other two drawing modules it walks over every pixel of the
// SIZE x SIZE screen, one pixel per clock: xcoord counts up every cycle and
// ycoord advances exactly when xcoord is at SIZE-1 (both are 5-bit counters
// that simply overflow, as in the original specification). For each pixel it
// outputs the colour:
//   * score mode: one dot per point, the first 'score' pixels in row-major
//     order, in scorecolor (the nearest enemy's colour); all others black;
//   * game over: the same dots with both screen diagonals drawn red on top.
// The pixel on 'pix' is combinational from the counters, so x, y and colour
// always belong together; the counters start at (0,0) after reset.
// The pixel walk is the original design's; the dot layout and the look of
// the game-over screen are this design's choice.
module score_board
  import syntroids_pkg::*;
#(
  parameter int SIZE = 32
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [SCORE_W-1:0] score,
  input  color_t             scorecolor,
  input  logic               gameover,
  output pixel_t             pix
);
  coord_t xcoord, ycoord;

  always_ff @(posedge clk) begin
    if (rst) begin
      xcoord <= '0;
      ycoord <= '0;
    end else begin
      xcoord <= (xcoord == coord_t'(SIZE - 1)) ? '0 : xcoord + 1'b1;
      if (xcoord == coord_t'(SIZE - 1))
        ycoord <= (ycoord == coord_t'(SIZE - 1)) ? '0 : ycoord + 1'b1;
    end
  end

  always_comb begin
    logic [SCORE_W:0] lin;
    lin       = (SCORE_W + 1)'(ycoord) * (SCORE_W + 1)'(SIZE) + (SCORE_W + 1)'(xcoord);
    pix.x     = xcoord;
    pix.y     = ycoord;
    pix.color = (lin < {1'b0, score}) ? scorecolor : BLACK;
    if (gameover && (xcoord == ycoord || xcoord == coord_t'(SIZE - 1) - ycoord))
      pix.color = RED;
  end
endmodule
