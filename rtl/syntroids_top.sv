// Syntroids game top level: a space shooter on a 32 x 32 LED panel,
// steered by moving the panel itself.
//
// Data flow, from sensor to screen:
//   clk_prescaler      board clock (100 MHz) -> game clock (DIV = 10: 10 MHz)
//   sensor_ctrl        schedules: init once, then accelerometer / gyroscope
//   sensor_init, 2 x sensor_part   produce SPI commands and register commands
//   submodule_chooser  forwards the running part's commands
//   spi_master (spi_write, spi_read) + sensor_selector  -> SPI pins, chip selects
//   register_manager + 6 x sensor_register   acc x,y,z and gyro x,y,z
//   rotation_calculator, gamemode_chooser, action_converter
//                      heading, game mode, shot / restart gesture
//   game_logic + N_ENEMIES x enemy_module    game state, score, enemies
//   radar_board, cockpit_board, score_board  one pixel per clock each
//   game_module        picks the pixel for the current mode
//   led_matrix (video_ram)   video memory and panel refresh -> panel pins
// 'rst' is synchronous and active high; it is sampled by the prescaler on
// clk_100mhz and, through one register, by all game logic on the game clock,
// so it must be held for at least 2*DIV board clocks.
// Registers between synthesized modules (enemy outputs, the game module's
// output, the sensor registers) break the combinational paths between them.
// Parameters are passed down so that a simulation can run the game faster
// (MOVE_DIV) or with a different number of enemies; GYRO_SHIFT sets how many
// integrated gyroscope counts make one turn (see rotation_calculator).
// Lint notes that stand: 'rst_g' has a power-up value and is also written by a
// process. The value (1) keeps the game logic in reset until the first game
// clock edge, before the board reset has passed through the register; FPGA
// flip-flops take such a value from the bitstream. Unused signals: the tilt
// angle, the hit event, the panel read-back colour and the 'updated' strobes
// of the accelerometer and gyroscope-x registers have no consumer in the game.
// driver_pin is constant low (panel always enabled) and spi_cs_n[1] constant
// high (the second sensor on the board is never addressed).
module syntroids_top
  import syntroids_pkg::*;
#(
  parameter int N_ENEMIES   = 4,
  parameter int MOVE_DIV    = 65536,
  parameter int PRESCALE    = 10,
  parameter int SPI_CLK_DIV = 4,
  parameter int WAIT_W      = 4,
  parameter int GYRO_SHIFT  = 20
) (
  input  logic               clk_100mhz,
  input  logic               rst,
  // LED panel
  output logic [2:0]         color1,
  output logic [2:0]         color2,
  output logic [3:0]         row_addr,
  output logic               extclock,
  output logic               buffer_pin,
  output logic               driver_pin,
  // motion sensor (SPI, mode 3)
  output logic               spi_sclk,
  output logic               spi_sdi,
  input  logic               spi_sdo,
  output logic [1:0]         spi_cs_n,
  // status
  output logic               gameover,
  output logic [SCORE_W-1:0] score,
  output logic [1:0]         mode
);
  logic clk;
  logic rst_g = 1'b1;  // power-up value: game logic starts in reset

  clk_prescaler #(.DIV(PRESCALE)) u_prescaler (.clk_in(clk_100mhz), .rst(rst), .clk_out(clk));

  always_ff @(posedge clk) rst_g <= rst;

  // ---------------- sensor path ----------------
  part_e    part_ctrl;
  logic     init_fin, acc_fin, gyr_fin;
  spi_cmd_t part_spi [3];
  reg_cmd_t part_reg [3];
  logic     part_st  [3];
  logic     part_go  [3];
  spi_cmd_t spi_cmd;
  spi_rsp_t spi_rsp;
  reg_cmd_t reg_cmd;
  logic     sensor_type, cs_active;

  sensor_ctrl u_sensor (.clk(clk), .rst(rst_g), .init_finished(init_fin),
                        .acc_finished(acc_fin), .gyr_finished(gyr_fin), .part_ctrl(part_ctrl));

  sensor_init u_init (.clk(clk), .rst(rst_g), .start(part_go[0]), .rsp(spi_rsp),
                      .spi_cmd(part_spi[0]), .reg_cmd(part_reg[0]), .sensor_type(part_st[0]),
                      .finished(init_fin));

  sensor_part #(.REG_ADDR('{7'h28, 7'h29, 7'h2A, 7'h2B, 7'h2C, 7'h2D}), .SENSOR_TYPE(1'b0),
                .MODULE_TYPE(1'b0)) u_acc (
    .clk(clk), .rst(rst_g), .start(part_go[1]), .rsp(spi_rsp), .spi_cmd(part_spi[1]),
    .reg_cmd(part_reg[1]), .sensor_type(part_st[1]), .finished(acc_fin));

  sensor_part #(.REG_ADDR('{7'h18, 7'h19, 7'h1A, 7'h1B, 7'h1C, 7'h1D}), .SENSOR_TYPE(1'b0),
                .MODULE_TYPE(1'b1)) u_gyr (
    .clk(clk), .rst(rst_g), .start(part_go[2]), .rsp(spi_rsp), .spi_cmd(part_spi[2]),
    .reg_cmd(part_reg[2]), .sensor_type(part_st[2]), .finished(gyr_fin));

  submodule_chooser u_chooser (.clk(clk), .rst(rst_g), .part_ctrl(part_ctrl), .part_spi(part_spi),
                               .part_reg(part_reg), .part_stype(part_st), .start(part_go),
                               .spi_cmd(spi_cmd), .reg_cmd(reg_cmd), .sensor_type(sensor_type));

  spi_master #(.CLK_DIV(SPI_CLK_DIV)) u_spi (.clk(clk), .rst(rst_g), .cmd(spi_cmd), .rsp(spi_rsp),
                                            .cs_active(cs_active), .sclk(spi_sclk), .sdi(spi_sdi),
                                            .sdo(spi_sdo));

  sensor_selector #(.N_CS(2)) u_select (.cs_active(cs_active), .sensor_type(sensor_type), .cs_n(spi_cs_n));

  logic [5:0]  reg_we;
  logic [15:0] reg_wdata;
  logic [15:0] sens   [6];
  logic [5:0]  sens_upd;

  register_manager u_regman (.clk(clk), .rst(rst_g), .cmd(reg_cmd), .we(reg_we), .wdata(reg_wdata));

  for (genvar i = 0; i < 6; i++) begin : g_sreg
    sensor_register #(.W(16)) u_sreg (.clk(clk), .rst(rst_g), .we(reg_we[i]), .d(reg_wdata),
                                      .q(sens[i]), .updated(sens_upd[i]));
  end

  // ---------------- converters ----------------
  mode_e  mode_q;
  angle_t rotation, tilt;
  logic   shot, gamestart;

  gamemode_chooser #(.SHIFT(GYRO_SHIFT)) u_mode (.clk(clk), .rst(rst_g), .sample(sens_upd[4]), .gyr_y(sens[4]),
                           .mode(mode_q), .tilt(tilt));

  rotation_calculator #(.SHIFT(GYRO_SHIFT)) u_rot (.clk(clk), .rst(rst_g), .mode(mode_q), .sample(sens_upd[5]),
                             .gyr_x(sens[3]), .gyr_z(sens[5]), .rotation(rotation));

  action_converter u_action (.clk(clk), .rst(rst_g), .acc_z(sens[2]), .gyr_x(sens[3]),
                             .gyr_y(sens[4]), .gyr_z(sens[5]), .gameover(gameover),
                             .shot(shot), .gamestart(gamestart));

  // ---------------- game ----------------
  enemy_t                enemies   [N_ENEMIES];
  angle_t                new_angle [N_ENEMIES];
  logic [N_ENEMIES-1:0]  e_move, e_respawn;
  color_t                scorecolor;
  logic                  hit_event;

  game_logic #(.N_ENEMIES(N_ENEMIES), .MOVE_DIV(MOVE_DIV)) u_logic (
    .clk(clk), .rst(rst_g), .gamestart(gamestart), .shot(shot), .rotation(rotation),
    .enemies(enemies), .move(e_move), .respawn(e_respawn), .new_angle(new_angle),
    .gameover(gameover), .score(score), .scorecolor(scorecolor), .hit_event(hit_event));

  for (genvar i = 0; i < N_ENEMIES; i++) begin : g_enemy
    enemy_module u_enemy (.clk(clk), .rst(rst_g), .move(e_move[i]), .respawn(e_respawn[i]),
                          .new_angle(new_angle[i]), .enemy(enemies[i]));
  end

  // ---------------- video ----------------
  pixel_t radar_pix, cockpit_pix, score_pix, wpix;
  logic   write;

  radar_board #(.N_ENEMIES(N_ENEMIES)) u_radar (.clk(clk), .rst(rst_g), .rotation(rotation),
                                               .enemies(enemies), .pix(radar_pix));
  cockpit_board #(.N_ENEMIES(N_ENEMIES)) u_cockpit (.clk(clk), .rst(rst_g), .rotation(rotation),
                                                   .enemies(enemies), .pix(cockpit_pix));
  score_board u_score (.clk(clk), .rst(rst_g), .score(score), .scorecolor(scorecolor),
                       .gameover(gameover), .pix(score_pix));

  game_module u_gm (.clk(clk), .rst(rst_g), .mode(mode_q), .gameover(gameover),
                    .radar_pix(radar_pix), .cockpit_pix(cockpit_pix), .score_pix(score_pix),
                    .write(write), .wpix(wpix));

  color_t readback;
  led_matrix #(.SIZE(SCREEN), .WAIT_W(WAIT_W)) u_led (
    .clk(clk), .rst(rst_g), .write(write), .writecolor(wpix.color), .xcoordinate(wpix.x),
    .ycoordinate(wpix.y), .color(readback), .color1(color1), .color2(color2),
    .row_addr(row_addr), .extclock(extclock), .buffer_pin(buffer_pin), .driver_pin(driver_pin));

  assign mode = mode_q;
endmodule
