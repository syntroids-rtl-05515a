// Full-size testbench: the game top with every parameter at its default
// (100 MHz board clock divided by 10, MOVE_DIV 65536, SPI_CLK_DIV 4,
// WAIT_W 4, four enemies). One complete operation: the sensor is
// initialised and read, a push gesture starts a game, and one complete
// panel refresh (16 line pairs) is checked on the panel pins against the
// radar picture computed here from the enemies' positions: the player block
// in the centre, one dot per enemy. The refresh period is checked too:
// 32 columns x (5 + 16) clocks per line, and so is the sensor sample period:
// 12 SPI transactions of 131 clocks.
module tb_syntroids_full;
  import syntroids_pkg::*;
  logic clk100 = 0, rst = 1;
  logic [2:0] color1, color2;
  logic [3:0] row_addr;
  logic extclock, buffer_pin, driver_pin, sclk, sdi, sdo, gameover;
  logic [1:0] cs_n, mode;
  logic [SCORE_W-1:0] score;
  int checks = 0, failures = 0;

  syntroids_top dut (
    .clk_100mhz(clk100), .rst(rst), .color1(color1), .color2(color2), .row_addr(row_addr),
    .extclock(extclock), .buffer_pin(buffer_pin), .driver_pin(driver_pin), .spi_sclk(sclk),
    .spi_sdi(sdi), .spi_sdo(sdo), .spi_cs_n(cs_n), .gameover(gameover), .score(score), .mode(mode));

  sensor_model dev (.sclk(sclk), .cs_n(cs_n[0]), .sdi(sdi), .sdo(sdo));

  always #5 clk100 = ~clk100;

  task automatic fail(input string m);
    failures++; if (failures < 10) $display("FAIL: %s", m);
  endtask

  color_t sh1 [$], sh2 [$];
  color_t lines1 [16][32];
  color_t lines2 [16][32];
  int latched [16];
  int gcyc = 0, last_latch = -1, period_bad = 0, periods = 0;
  logic ext_q = 0;
  int last_upd = -1, upd_period = 0, upd_count = 0;
  always @(posedge dut.clk) if (dut.sens_upd[5]) begin
    if (last_upd >= 0) upd_period = gcyc - last_upd;
    last_upd = gcyc; upd_count++;
  end
  always @(posedge dut.clk) begin
    gcyc++;
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
      if (last_latch >= 0) begin periods++; if (gcyc - last_latch != 32 * 21) period_bad++; end
      last_latch = gcyc;
      sh1.delete(); sh2.delete();
    end
    ext_q = extclock;
  end

  function automatic int tsin(input int ph);
    real v;
    v = 16.0 * $sin(2.0 * 3.14159265358979 * ph / 64.0);
    return (v >= 0) ? int'($floor(v + 0.5)) : -int'($floor(-v + 0.5));
  endfunction

  initial begin
    int ex [4], ey [4];
    for (int i = 0; i < 16; i++) latched[i] = 0;
    repeat (100) @(posedge clk100);
    #1 rst = 0;
    repeat (2) @(posedge dut.gyr_fin);
    checks++; if (dev.writes != 2) fail("sensor init");
    // start gesture
    dev.regs[7'h2C] = 8'h30; dev.regs[7'h2D] = 8'h75;   // acc z = 30000
    wait (!gameover);
    dev.regs[7'h2C] = 8'h00; dev.regs[7'h2D] = 8'h00;
    checks++; if (score != 0 || mode != 2'(MODE_RADAR)) fail("start state");
    // one full refresh after the picture is in memory
    repeat (2) @(posedge dut.u_led.coord_y[3]);
    for (int i = 0; i < 16; i++) latched[i] = 0;
    period_bad = 0; periods = 0;
    wait (latched[0] >= 1 && latched[15] >= 1 && latched[8] >= 1);
    for (int i = 0; i < 4; i++) begin
      int rel, ph, d;
      rel = (int'(dut.enemies[i].angle) - int'(dut.rotation)) & 255;
      ph = rel / 4; d = int'(dut.enemies[i].radius) / 4;
      ex[i] = 16 + int'($floor(real'(d * tsin(ph)) / 16.0));
      ey[i] = 16 - int'($floor(real'(d * tsin((ph + 16) % 64)) / 16.0));
    end
    for (int y = 0; y < 32; y++) for (int x = 0; x < 32; x++) begin
      color_t e, g;
      e = 3'b000;
      for (int i = 0; i < 4; i++) if (ex[i] == x && ey[i] == y) e = enemy_color(i);
      if ((x == 15 || x == 16) && (y == 15 || y == 16)) e = 3'b111;
      g = (y < 16) ? lines1[y][x] : lines2[y - 16][x];
      checks++;
      if (g != e) fail($sformatf("radar pixel (%0d,%0d) = %0d exp %0d", x, y, g, e));
    end
    checks++; if (periods < 16 || period_bad != 0) fail($sformatf("line period wrong %0d of %0d", period_bad, periods));
    // 12 SPI transactions (6 accelerometer + 6 gyroscope reads) of 32*4+3 clocks
    checks++; if (upd_count < 3 || upd_period != 12 * (32 * 4 + 3)) fail("sensor sample period");
    $display("gyroscope sample period: %0d game clocks (%0d samples)", upd_period, upd_count);
    $display("game clocks simulated: %0d, lines latched: %0d", gcyc, periods + 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000000) @(posedge clk100);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
