// Testbench for game_logic. The enemies are modelled here (polar position
// updated from the move/respawn pulses). Checked: start in game over with
// no motion; restart clears the score and respawns all enemies at angles
// spread by 256/N; move period MOVE_DIV*START_PERIOD; a shot at a visible
// enemy scores exactly one point within N+2 clocks and respawns only that
// enemy, which then moves faster; a shot that misses scores nothing; score
// colour = nearest enemy's colour; an enemy at radius 0 ends the game; the
// score then holds even when shooting; a restart clears it again.
module tb_game_logic;
  import syntroids_pkg::*;
  localparam int N = 4, DIV = 4, SP = 3, MINP = 1, TOL = 6, VR = 40;
  localparam int T = (N > 2) ? 2 : N - 1;  // enemy that is shot at
  logic clk = 0, rst = 1, gamestart = 0, shot = 0, gameover, hit_event;
  angle_t rotation = '0;
  enemy_t en [N];
  logic [N-1:0] move, respawn;
  angle_t new_angle [N];
  logic [SCORE_W-1:0] score;
  color_t scorecolor;
  int checks = 0, failures = 0;
  int moves [N];
  int respawns [N];

  game_logic #(.N_ENEMIES(N), .MOVE_DIV(DIV), .START_PERIOD(SP), .MIN_PERIOD(MINP), .HIT_TOL(TOL), .VIEW_R(VR)) dut (
    .clk(clk), .rst(rst), .gamestart(gamestart), .shot(shot), .rotation(rotation), .enemies(en),
    .move(move), .respawn(respawn), .new_angle(new_angle), .gameover(gameover), .score(score),
    .scorecolor(scorecolor), .hit_event(hit_event));

  always #5 clk = ~clk;

  // enemy model
  always @(posedge clk) if (!rst)
    for (int i = 0; i < N; i++) begin
      if (respawn[i]) begin en[i].angle <= new_angle[i]; en[i].radius <= '1; respawns[i]++; end
      else if (move[i]) begin if (en[i].radius != 0) en[i].radius <= en[i].radius - 1'b1; moves[i]++; end
    end

  task automatic fail(input string m);
    failures++; if (failures < 10) $display("FAIL: %s", m);
  endtask

  task automatic clocks(input int n);
    repeat (n) @(posedge clk);
    #1;
  endtask

  // true if rot is more than the hit tolerance away from every enemy
  function automatic logic clear_of_all(input angle_t rot);
    for (int i = 0; i < N; i++)
      if (signed'(angle_t'(en[i].angle - rot)) <= TOL && signed'(angle_t'(en[i].angle - rot)) >= -TOL) return 1'b0;
    return 1'b1;
  endfunction

  function automatic color_t nearest_color();
    int best; color_t c;
    best = 64; c = enemy_color(0);
    for (int i = 0; i < N; i++) if (en[i].radius < best) begin best = en[i].radius; c = enemy_color(i); end
    return c;
  endfunction

  initial begin
    int m0, s0;
    for (int i = 0; i < N; i++) begin en[i] = '{angle: 8'(i * 10), radius: 6'd63}; moves[i] = 0; respawns[i] = 0; end
    clocks(2); rst = 0;
    checks++; if (!gameover || score != 0) fail("reset state");
    clocks(100);
    checks++; if (moves[0] != 0) fail("enemies move while game over");
    // start
    gamestart = 1; clocks(1); gamestart = 0;
    checks++; if (respawn != '1 || gameover || score != 0) fail("restart");
    clocks(1);
    for (int i = 1; i < N; i++) begin
      checks++; if (angle_t'(en[i].angle - en[0].angle) != angle_t'(i * 256 / N)) fail("respawn angle spread");
    end
    // move rate
    m0 = moves[0];
    clocks(DIV * SP * 10);
    checks++; if (moves[0] - m0 < 9 || moves[0] - m0 > 11) fail($sformatf("moves in window %0d", moves[0] - m0));
    // wait until enemies visible
    while (en[T].radius > VR - 4) clocks(1);
    checks++; if (scorecolor != nearest_color()) fail("score colour");
    // miss
    rotation = en[T].angle + 8'd40;
    for (int tries = 0; tries < 256 && !clear_of_all(rotation); tries++) rotation = rotation + 8'd1;
    s0 = score;
    shot = 1; clocks(1); shot = 0; clocks(N + 2);
    checks++; if (score != s0) fail("miss scored");
    // hit enemy 2
    rotation = en[T].angle + 8'd3; s0 = score;
    for (int i = 0; i < N; i++) respawns[i] = 0;
    shot = 1; clocks(1); shot = 0; clocks(N + 2);
    checks++; if (score != s0 + 1) fail($sformatf("hit gave score %0d from %0d", score, s0));
    checks++; if (respawns[T] != 1 || respawns.sum() != 1) fail("wrong enemy respawned");
    checks++; if (en[T].radius < 6'd62) fail("hit enemy not reset");
    checks++; if (scorecolor != nearest_color()) fail("score colour after hit");
    // enemy 2 now moves faster (period SP-1)
    m0 = moves[T];
    clocks(DIV * (SP - 1) * 12);
    checks++; if (moves[T] - m0 < 11 || moves[T] - m0 > 13) fail($sformatf("speed-up: %0d moves", moves[T] - m0));
    // game over
    begin
      int late = 0;
      while (!gameover) begin
        for (int i = 0; i < N; i++) if (en[i].radius == 0) begin late++; break; end
        clocks(1);
      end
      checks++; if (late > 1) fail("game over late after radius 0");
    end
    s0 = score;
    rotation = en[0].angle;
    shot = 1; clocks(1); shot = 0; clocks(20);
    checks++; if (score != s0) fail("score changed while game over");
    m0 = moves[N-1];
    clocks(100);
    checks++; if (moves[N-1] != m0) fail("enemies moved after game over");
    gamestart = 1; clocks(1); gamestart = 0; clocks(1);
    checks++; if (score != 0 || gameover) fail("restart after game over");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
