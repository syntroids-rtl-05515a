// Game logic: game state, score, enemy timing and shot evaluation.
//
// Mirrors the rules of the original game's GameLogic specification:
//   * gamestart (a shooting gesture while the game is over) clears the score,
//     respawns every enemy and starts a new game;
//   * while the game is over and not restarted the score holds;
//   * while running, the score rises by one exactly when the shot window is
//     open (shotCounter > 0) and the enemy selected by 'counter' is hit,
//     i.e. it is visible (radius <= VIEW_R) and lies within HIT_TOL angle
//     steps of the player's rotation. A hit enemy respawns.
//   * the game is over as soon as any enemy reaches radius 0.
// 'counter' visits one enemy per clock. A shot loads shotCounter with
// N_ENEMIES, so every enemy is tested exactly once per shot.
// Enemy motion: a prescaler makes one tick every MOVE_DIV clocks; each enemy
// has its own period (in ticks) and receives a one-cycle 'move' pulse when
// its down-counter expires. Every shot-down enemy comes back one tick faster,
// down to MIN_PERIOD ("enemies moving faster and faster"). Respawn angles
// come from an 8-bit LFSR, spread over the enemies by adding i*256/N.
// scorecolor is the colour of the nearest (most dangerous) enemy.
// Timing: move/respawn are registered pulses; score and gameover change one
// clock after the event. Reset is synchronous and starts in the game-over
// state, so the first gesture starts the first game.
// The score rules, per-enemy move clocks, random respawn and hit/game-over
// checks are the original's; counter sizes, the hit predicate, the LFSR and
// the speed-up law are this design's choices.
module game_logic
  import syntroids_pkg::*;
#(
  parameter int N_ENEMIES    = 4,
  parameter int MOVE_DIV     = 65536,
  parameter int START_PERIOD = 12,
  parameter int MIN_PERIOD   = 2,
  parameter int HIT_TOL      = 6,
  parameter int VIEW_R       = 40
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 gamestart,
  input  logic                 shot,
  input  angle_t               rotation,
  input  enemy_t               enemies   [N_ENEMIES],
  output logic [N_ENEMIES-1:0] move,
  output logic [N_ENEMIES-1:0] respawn,
  output angle_t               new_angle [N_ENEMIES],
  output logic                 gameover,
  output logic [SCORE_W-1:0]   score,
  output color_t               scorecolor,
  output logic                 hit_event   // one-cycle pulse per enemy shot down
);
  localparam int IDX_W = (N_ENEMIES > 1) ? $clog2(N_ENEMIES) : 1;
  localparam int DIV_W = (MOVE_DIV > 1) ? $clog2(MOVE_DIV) : 1;
  localparam int PER_W = $clog2(START_PERIOD + 1);
  localparam int SC_W  = $clog2(N_ENEMIES + 1);

  logic [IDX_W-1:0] counter;
  logic [SC_W-1:0]  shot_cnt;
  logic [DIV_W-1:0] div_cnt;
  logic [7:0]       lfsr;
  logic [PER_W-1:0] period  [N_ENEMIES];
  logic [PER_W-1:0] per_cnt [N_ENEMIES];

  // hitenemy (angle of enemy[counter]) rotation
  function automatic logic hitenemy(input enemy_t e, input angle_t rot);
    logic signed [ANGLE_W-1:0] d;
    d = signed'(e.angle - rot);
    return (e.radius <= radius_t'(VIEW_R)) && (d <= ANGLE_W'(HIT_TOL)) && (d >= -ANGLE_W'(HIT_TOL));
  endfunction

  enemy_t sel;
  logic   hit_now, player_hit, tick;
  always_comb begin
    sel        = enemies[counter];
    hit_now    = (shot_cnt != '0) && hitenemy(sel, rotation);
    player_hit = 1'b0;
    for (int i = 0; i < N_ENEMIES; i++)
      if (enemies[i].radius == '0 && !respawn[i]) player_hit = 1'b1;  // ignore an enemy being respawned
    tick = (div_cnt == DIV_W'(MOVE_DIV - 1)) || (MOVE_DIV == 1);
  end

  // Most dangerous enemy sets the score colour.
  always_comb begin
    radius_t best;
    best       = MAX_RADIUS;
    scorecolor = enemy_color(0);
    for (int i = 0; i < N_ENEMIES; i++)
      if (enemies[i].radius < best) begin
        best       = enemies[i].radius;
        scorecolor = enemy_color(i);
      end
  end

  always_comb
    for (int i = 0; i < N_ENEMIES; i++)
      new_angle[i] = lfsr + angle_t'((i * 256) / N_ENEMIES);

  always_ff @(posedge clk) begin
    if (rst) begin
      counter   <= '0;
      shot_cnt  <= '0;
      div_cnt   <= '0;
      lfsr      <= 8'h5A;
      gameover  <= 1'b1;
      score     <= '0;
      move      <= '0;
      respawn   <= '0;
      hit_event <= 1'b0;
      for (int i = 0; i < N_ENEMIES; i++) begin
        period[i]  <= PER_W'(START_PERIOD);
        per_cnt[i] <= PER_W'(START_PERIOD - 1);
      end
    end else begin
      lfsr      <= {lfsr[6:0], 1'b0} ^ (lfsr[7] ? 8'h71 : 8'h00);
      counter   <= (counter == IDX_W'(N_ENEMIES - 1)) ? '0 : counter + 1'b1;
      div_cnt   <= tick ? '0 : div_cnt + 1'b1;
      move      <= '0;
      respawn   <= '0;
      hit_event <= 1'b0;
      if (gamestart) begin
        score    <= '0;
        gameover <= 1'b0;
        shot_cnt <= '0;
        respawn  <= '1;
        for (int i = 0; i < N_ENEMIES; i++) begin
          period[i]  <= PER_W'(START_PERIOD);
          per_cnt[i] <= PER_W'(START_PERIOD - 1);
        end
      end else if (!gameover) begin
        if (player_hit) gameover <= 1'b1;
        // shot window
        if (shot) shot_cnt <= SC_W'(N_ENEMIES);
        else if (shot_cnt != '0) shot_cnt <= shot_cnt - 1'b1;
        // per-enemy move clocks
        if (tick)
          for (int i = 0; i < N_ENEMIES; i++)
            if (per_cnt[i] == '0) begin
              move[i]    <= 1'b1;
              per_cnt[i] <= period[i] - 1'b1;
            end else begin
              per_cnt[i] <= per_cnt[i] - 1'b1;
            end
        if (hit_now && !player_hit) begin
          score            <= score + 1'b1;
          hit_event        <= 1'b1;
          respawn[counter] <= 1'b1;
          move[counter]    <= 1'b0;
          if (period[counter] > PER_W'(MIN_PERIOD)) period[counter] <= period[counter] - 1'b1;
        end
      end
    end
  end

  initial assert (MIN_PERIOD >= 1 && START_PERIOD >= MIN_PERIOD) else $error("bad enemy periods");
endmodule
