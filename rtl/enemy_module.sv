// One enemy (asteroid), stored in polar coordinates around the player.
//
// The game keeps one of these per enemy. On a 'move' tick from the game
// logic the enemy comes one radius step closer (saturating at 0, which is the
// player's position); on 'respawn' it is placed back at the maximum radius
// and the angle supplied by the game logic. Respawn wins over move.
// Both inputs are sampled on the rising clock edge; the new position is
// visible on 'enemy' in the next cycle. Synchronous active-high reset
// places the enemy at maximum radius, angle 0.
// Storing angle and radius and moving/resetting the enemy follow the original
// game; the widths and the one-step-inward move are this design's choice.
module enemy_module
  import syntroids_pkg::*;
(
  input  logic   clk,
  input  logic   rst,
  input  logic   move,
  input  logic   respawn,
  input  angle_t new_angle,
  output enemy_t enemy
);
  always_ff @(posedge clk) begin
    if (rst) begin
      enemy.angle  <= '0;
      enemy.radius <= MAX_RADIUS;
    end else if (respawn) begin
      enemy.angle  <= new_angle;
      enemy.radius <= MAX_RADIUS;
    end else if (move && enemy.radius != '0) begin
      enemy.radius <= enemy.radius - 1'b1;
    end
  end
endmodule
