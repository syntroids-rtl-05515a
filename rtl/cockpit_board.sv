// Cockpit view: the windshield, looking along the player's rotation.
//
// Walks every pixel of the 32 x 32 screen, one per clock, and decides for
// each whether, and which, enemy it shows. An enemy with radius <= VIEW_R is
// drawn as a square of side s = (VIEW_R + 1 - radius) / 4 pixels (closer is
// bigger; s = 0 is not drawn). Its centre column is 16 + rel, where
// rel = angle - rotation read as a signed 8-bit number (one angle step per
// pixel), and its centre row is 16. The square spans columns
// [cx - s/2, cx - s/2 + s - 1] and the same rows around 16. Where squares
// overlap the nearest enemy wins. The pixel output is combinational from the
// pixel counters and the enemy data.
// Drawing enemies as squares by distance, rotation and player orientation is
// the original's; the projection and sizes are this design's choice.
module cockpit_board
  import syntroids_pkg::*;
#(
  parameter int N_ENEMIES = 4,
  parameter int VIEW_R    = 40
) (
  input  logic   clk,
  input  logic   rst,
  input  angle_t rotation,
  input  enemy_t enemies [N_ENEMIES],
  output pixel_t pix
);
  coord_t xcoord, ycoord;

  always_ff @(posedge clk) begin
    if (rst) begin
      xcoord <= '0;
      ycoord <= '0;
    end else begin
      xcoord <= xcoord + 1'b1;
      if (xcoord == '1) ycoord <= ycoord + 1'b1;
    end
  end

  always_comb begin
    radius_t best;
    best      = MAX_RADIUS;
    pix.x     = xcoord;
    pix.y     = ycoord;
    pix.color = BLACK;
    for (int i = 0; i < N_ENEMIES; i++) begin
      logic signed [9:0] rel, s, x0, y0, px, py;
      rel = 10'(signed'(enemies[i].angle - rotation));
      s   = (enemies[i].radius <= radius_t'(VIEW_R)) ?
            10'((VIEW_R + 1 - int'(enemies[i].radius)) / 4) : 10'sd0;
      x0  = 10'sd16 + rel - (s >>> 1);
      y0  = 10'sd16 - (s >>> 1);
      px  = signed'({5'd0, xcoord});
      py  = signed'({5'd0, ycoord});
      if (s != 0 && px >= x0 && px < x0 + s && py >= y0 && py < y0 + s &&
          enemies[i].radius <= best) begin
        best      = enemies[i].radius;
        pix.color = enemy_color(i);
      end
    end
  end
endmodule
