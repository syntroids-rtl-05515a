// Shared types and constants of the space-shooter game.
//
// Screen: a 32 x 32 RGB LED panel, pixel colour 3 bits {R,G,B}, coordinates
// 5 bits. Enemies live in polar coordinates around the player: an 8-bit angle
// (256 steps per full turn) and a 6-bit radius (0 = the player is hit).
// Angle and radius widths, the enemy colours and the command encodings of the
// sensor path are choices of this design; the 32 x 32 screen, the 3-bit
// colour and the 5-bit pixel counters are the original game's.
package syntroids_pkg;

  localparam int SCREEN   = 32;
  localparam int COORD_W  = 5;
  localparam int COLOR_W  = 3;
  localparam int ANGLE_W  = 8;
  localparam int RADIUS_W = 6;
  localparam int SCORE_W  = 10;

  typedef logic [COLOR_W-1:0]  color_t;
  typedef logic [COORD_W-1:0]  coord_t;
  typedef logic [ANGLE_W-1:0]  angle_t;
  typedef logic [RADIUS_W-1:0] radius_t;

  localparam radius_t MAX_RADIUS = '1;

  localparam color_t BLACK = 3'b000;
  localparam color_t RED   = 3'b100;
  localparam color_t WHITE = 3'b111;

  typedef struct packed {
    angle_t  angle;
    radius_t radius;
  } enemy_t;

  // Enemy colour by index (player is white, game-over red).
  function automatic color_t enemy_color(input int idx);
    case (idx % 5)
      0:       return 3'b001;  // blue
      1:       return 3'b110;  // yellow
      2:       return 3'b010;  // green
      3:       return 3'b101;  // purple
      default: return 3'b011;  // cyan
    endcase
  endfunction

  typedef enum logic [1:0] {MODE_RADAR = 2'd0, MODE_COCKPIT = 2'd1, MODE_SCORE = 2'd2} mode_e;

  // One pixel produced by a drawing module.
  typedef struct packed {
    coord_t x;
    coord_t y;
    color_t color;
  } pixel_t;

  // SPI command / response.
  typedef enum logic [1:0] {SPI_NONE = 2'd0, SPI_READ = 2'd1, SPI_WRITE = 2'd2} spi_op_e;
  typedef struct packed {
    spi_op_e    op;
    logic [6:0] addr;
    logic [7:0] data;
  } spi_cmd_t;
  typedef struct packed {
    logic       finished;   // one-cycle pulse at the end of a transfer
    logic [7:0] data;       // byte read (valid with finished)
  } spi_rsp_t;

  // RegisterManager command: setRegister moduleType index byte.
  typedef struct packed {
    logic       valid;
    logic       module_type;  // 0 accelerometer, 1 gyroscope
    logic [2:0] index;        // 0..5: x_lo, x_hi, y_lo, y_hi, z_lo, z_hi
    logic [7:0] data;
  } reg_cmd_t;

  typedef enum logic [1:0] {PART_NONE = 2'd0, PART_INIT = 2'd1, PART_ACC = 2'd2, PART_GYR = 2'd3} part_e;

endpackage
