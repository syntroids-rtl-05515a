// Radar view: the enemies seen from above, relative to the player's heading.
//
// The player sits in the screen centre as a white 2x2 block (pixels 15..16
// in both directions). Once per clock the module converts one enemy (index
// e, cycling over all N_ENEMIES) from polar to screen coordinates:
//   rel  = angle - rotation           (8-bit, 256 steps per turn)
//   d    = radius / 4                  (0..15 pixels)
//   x    = 16 + (d * sin(rel)) >> 4,  y = 16 - (d * cos(rel)) >> 4
// with sin/cos taken from a 17-entry quarter-wave table of round(16*sin)
// at 64 steps per turn. The results are kept in per-enemy registers, so the
// positions are at most N_ENEMIES clocks old. In parallel the module walks
// every pixel (one per clock, same counters as the other boards) and outputs
// the enemy colour where an enemy sits, the player block, or black.
// The conversion to Cartesian coordinates relative to the screen's
// orientation is the original's; scale, table and layout are this design's.
// Lint reports the two low bits of the relative angle as unused: the table has
// 64 steps per turn, so only the upper six of its eight bits are used.
module radar_board
  import syntroids_pkg::*;
#(
  parameter int N_ENEMIES = 4
) (
  input  logic   clk,
  input  logic   rst,
  input  angle_t rotation,
  input  enemy_t enemies [N_ENEMIES],
  output pixel_t pix
);
  localparam int IDX_W = (N_ENEMIES > 1) ? $clog2(N_ENEMIES) : 1;

  // round(16*sin(k*pi/32)), k = 0..16
  localparam logic [4:0] SIN_Q [17] = '{5'd0, 5'd2, 5'd3, 5'd5, 5'd6, 5'd8, 5'd9, 5'd10, 5'd11,
                                         5'd12, 5'd13, 5'd14, 5'd15, 5'd15, 5'd16, 5'd16, 5'd16};

  // Signed 16*sin for a 6-bit phase (64 steps per turn).
  function automatic logic signed [5:0] sin64(input logic [5:0] ph);
    logic [4:0] k;
    logic [4:0] m;
    k = {1'b0, ph[3:0]};
    m = ph[4] ? SIN_Q[16 - k] : SIN_Q[k];
    return ph[5] ? -signed'({1'b0, m}) : signed'({1'b0, m});
  endfunction

  coord_t xcoord, ycoord;
  logic [IDX_W-1:0] e;
  coord_t ex [N_ENEMIES];
  coord_t ey [N_ENEMIES];

  always_ff @(posedge clk) begin
    if (rst) begin
      xcoord <= '0;
      ycoord <= '0;
      e      <= '0;
      for (int i = 0; i < N_ENEMIES; i++) begin
        ex[i] <= 5'd16;
        ey[i] <= 5'd16;
      end
    end else begin
      xcoord <= xcoord + 1'b1;
      if (xcoord == '1) ycoord <= ycoord + 1'b1;
      e <= (e == IDX_W'(N_ENEMIES - 1)) ? '0 : e + 1'b1;
      begin
        angle_t             rel;
        logic [5:0]         ph;
        logic signed [10:0] dx, dy;
        logic [3:0]         d;
        rel = enemies[e].angle - rotation;
        ph  = rel[7:2];
        d   = enemies[e].radius[5:2];
        dx  = (signed'({7'd0, d}) * 11'(sin64(ph))) >>> 4;
        dy  = (signed'({7'd0, d}) * 11'(sin64(ph + 6'd16))) >>> 4;
        ex[e] <= coord_t'(11'sd16 + dx);
        ey[e] <= coord_t'(11'sd16 - dy);
      end
    end
  end

  always_comb begin
    pix.x     = xcoord;
    pix.y     = ycoord;
    pix.color = BLACK;
    for (int i = 0; i < N_ENEMIES; i++)
      if (ex[i] == xcoord && ey[i] == ycoord) pix.color = enemy_color(i);
    if ((xcoord == 5'd15 || xcoord == 5'd16) && (ycoord == 5'd15 || ycoord == 5'd16))
      pix.color = WHITE;
  end
endmodule
