// End-to-end testbench of the whole game, at reduced timing parameters
// (PRESCALE 2, MOVE_DIV 64, SPI_CLK_DIV 2, WAIT_W 1, GYRO_SHIFT 8) so a complete
// game fits in a short simulation. The motion sensor is the behavioural SPI
// model; the LED panel is modelled by two line shift registers clocked by
// 'extclock' and latched by 'buffer_pin'.
//
// Script: wait for the sensor initialisation; push (acc z) to start a game;
// tilt about y to cockpit mode; turn (gyro x, one sample) to face an enemy;
// push to shoot it; turn away and shoot into empty space; tilt on to score
// mode; wait until an enemy reaches the player; check the static game-over
// screen line by line on the panel pins; push to restart.
// Every mechanism must have happened at least once: sensor init writes,
// accelerometer and gyroscope reads, game start, all three modes, a
// rotation, enemy moves, a hit, a miss, a faster respawned enemy, game
// over, score held during game over, restart, ghosting waits, line
// latches, pixel writes.
module tb_syntroids_top;
  import syntroids_pkg::*;
  localparam int N = 4;
  logic clk100 = 0, rst = 1;
  logic [2:0] color1, color2;
  logic [3:0] row_addr;
  logic extclock, buffer_pin, driver_pin, sclk, sdi, sdo, gameover;
  logic [1:0] cs_n, mode;
  logic [SCORE_W-1:0] score;
  int checks = 0, failures = 0;

  syntroids_top #(.N_ENEMIES(N), .MOVE_DIV(64), .PRESCALE(2), .SPI_CLK_DIV(2), .WAIT_W(1), .GYRO_SHIFT(8)) dut (
    .clk_100mhz(clk100), .rst(rst), .color1(color1), .color2(color2), .row_addr(row_addr),
    .extclock(extclock), .buffer_pin(buffer_pin), .driver_pin(driver_pin), .spi_sclk(sclk),
    .spi_sdi(sdi), .spi_sdo(sdo), .spi_cs_n(cs_n), .gameover(gameover), .score(score), .mode(mode));

  sensor_model dev (.sclk(sclk), .cs_n(cs_n[0]), .sdi(sdi), .sdo(sdo));

  always #5 clk100 = ~clk100;

  task automatic fail(input string m);
    failures++; if (failures < 10) $display("FAIL: %s", m);
  endtask

  // ---------------- mechanism counters ----------------
  int n_start = 0, n_shot = 0, n_hit = 0, n_move = 0, n_latch = 0, n_wait = 0, n_write = 0;
  int n_mode [3] = '{0, 0, 0};
  int n_fast = 0, n_cs1 = 0;
  always @(posedge dut.clk) if (!dut.rst_g) begin
    n_start += dut.gamestart;
    n_shot  += dut.shot;
    n_hit   += dut.hit_event;
    n_move  += $countones(dut.e_move);
    n_latch += buffer_pin;
    n_write += dut.write;
    n_wait  += (dut.u_led.state == 3'd5);
    n_mode[mode] += 1;
    for (int i = 0; i < N; i++) if (dut.u_logic.period[i] < 12) n_fast = 1;
    if (cs_n[1] == 1'b0) n_cs1++;
  end

  // ---------------- panel model ----------------
  color_t sh1 [$], sh2 [$];
  color_t lines1 [16][32];
  color_t lines2 [16][32];
  int latched [16];
  logic ext_q = 0;
  always @(posedge dut.clk) begin
    if (extclock && !ext_q) begin sh1.push_back(color1); sh2.push_back(color2); end
    if (buffer_pin) begin
      logic [3:0] ln;
      ln = row_addr + 1'b1;
      if (sh1.size() >= 32) begin
        for (int x = 0; x < 32; x++) begin
          lines1[ln][x] = sh1[sh1.size() - 32 + x];
          lines2[ln][x] = sh2[sh2.size() - 32 + x];
        end
        latched[ln]++;
      end
      sh1.delete(); sh2.delete();
    end
    ext_q = extclock;
  end

  // ---------------- sensor helpers ----------------
  task automatic set16(input logic [6:0] a, input logic signed [15:0] v);
    dev.regs[a] = v[7:0]; dev.regs[a + 7'd1] = v[15:8];
  endtask

  task automatic wait_gyr_reads(input int n);
    repeat (n) @(posedge dut.gyr_fin);
  endtask

  task automatic gesture();
    set16(7'h2C, 16'sd30000);
    repeat (2) @(posedge dut.acc_fin);
    set16(7'h2C, 16'sd0);
    repeat (2) @(posedge dut.acc_fin);
  endtask

  task automatic turn(input int delta);   // heading += delta (|delta| < 128)
    dev.oneshot_addr  = (mode == 2'(MODE_COCKPIT)) ? 7'h18 : 7'h1C;
    dev.oneshot_val   = 16'(delta * 256);
    dev.oneshot_valid = 1'b1;
    wait (!dev.oneshot_valid);
    wait_gyr_reads(2);
  endtask

  function automatic int nearest();
    int best, k;
    best = 64; k = 0;
    for (int i = 0; i < N; i++) if (dut.enemies[i].radius < best) begin best = dut.enemies[i].radius; k = i; end
    return k;
  endfunction

  initial begin
    int s0, k, d, rot0;
    for (int i = 0; i < 16; i++) latched[i] = 0;
    repeat (40) @(posedge clk100);
    #1 rst = 0;
    // initialisation
    wait_gyr_reads(2);
    checks++; if (dev.writes != 2 || dev.regs[7'h10] != 8'hC0 || dev.regs[7'h20] != 8'hC0) fail("sensor init");
    checks++; if (!gameover) fail("not in game over after reset");
    // start
    gesture();
    checks++; if (gameover || n_start != 1) fail($sformatf("game did not start: accz=%0d starts=%0d reads=%0d", dut.sens[2], n_start, dev.reads));
    // tilt into cockpit mode
    set16(7'h1A, 16'sd2048);
    wait (mode == 2'(MODE_COCKPIT));
    set16(7'h1A, 16'sd0);
    wait_gyr_reads(2);
    checks++; if (mode != 2'(MODE_COCKPIT)) fail("cockpit mode");
    // wait until enemy visible, then aim at it
    wait (dut.enemies[0].radius <= 38);
    k = 1;
    d = int'(signed'(8'(dut.enemies[k].angle - dut.rotation)));
    rot0 = dut.rotation;
    turn(d);
    checks++; if (dut.rotation != 8'(rot0 + d)) fail($sformatf("rotation %0d exp %0d", dut.rotation, 8'(rot0 + d)));
    s0 = score;
    gesture();
    checks++; if (score != s0 + 1) fail($sformatf("hit: score %0d from %0d", score, s0));
    // miss: look away from all enemies (they are 64 apart)
    turn(32);
    s0 = score;
    gesture();
    checks++; if (score != s0) fail("miss scored");
    checks++; if (n_shot < 2) fail("shots not detected");
    // score mode
    set16(7'h1A, 16'sd2048);
    wait (mode == 2'(MODE_SCORE));
    set16(7'h1A, 16'sd0);
    // game over
    wait (gameover);
    s0 = score;
    repeat (3) @(posedge dut.u_led.coord_y[3]);  // let memory and panel settle
    for (int i = 0; i < 16; i++) latched[i] = 0;
    wait (latched[15] >= 1 && latched[0] >= 1 && latched[7] >= 1);
    repeat (1) @(posedge dut.u_led.coord_y[3]);
    begin
      color_t sc;
      sc = enemy_color(nearest());
      for (int y = 0; y < 32; y++) for (int x = 0; x < 32; x++) begin
        color_t e, g;
        e = (y * 32 + x < int'(score)) ? sc : 3'b000;
        if (x == y || x + y == 31) e = 3'b100;
        g = (y < 16) ? lines1[y][x] : lines2[y - 16][x];
        checks++;
        if (g != e) fail($sformatf("game-over screen (%0d,%0d) = %0d exp %0d", x, y, g, e));
      end
    end
    gesture();
    checks++; if (gameover) fail("restart");
    checks++; if (score != 0) fail("score not cleared on restart");
    // mechanism coverage
    checks++; if (dev.reads < 24) fail("sensor reads");
    checks++; if (n_start < 2) fail("restart count");
    checks++; if (n_hit < 1) fail("no hit");
    checks++; if (n_move < 10) fail("no enemy moves");
    checks++; if (n_fast < 1) fail("no speed-up");
    checks++; if (n_latch < 16) fail("no line latches");
    checks++; if (n_wait < 1) fail("no ghosting wait");
    checks++; if (n_write < 1024) fail("few pixel writes");
    for (int i = 0; i < 3; i++) begin checks++; if (n_mode[i] == 0) fail($sformatf("mode %0d never used", i)); end
    checks++; if (driver_pin) fail("driver pin");
    checks++; if (n_cs1 != 0) fail("second chip select used");
    $display("mechanisms: starts=%0d shots=%0d hits=%0d moves=%0d latches=%0d waits=%0d writes=%0d modes=%0d/%0d/%0d reads=%0d",
             n_start, n_shot, n_hit, n_move, n_latch, n_wait, n_write, n_mode[0], n_mode[1], n_mode[2], dev.reads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk100);
    failures++;
    $display("watchdog: mode=%0d gameover=%0d score=%0d", mode, gameover, score);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
