// Game-mode chooser: picks radar, cockpit or score mode from the tilt.
//
// The gyroscope y rate is integrated on every new sample (magnitudes below
// DEADBAND dropped) into a tilt angle, tilt = accumulator[SHIFT+7:SHIFT],
// 256 steps per turn, starting at 0 = screen facing up. The mode follows the
// tilt, read as a signed number:
//   -32 .. 31   screen roughly horizontal      -> radar
//    32 .. 95   screen turned towards player   -> cockpit
//    96 .. 127 and -128 .. -97 (upside down)   -> score
//   -96 .. -33  no mode: the previous one stays
// The mode register updates one clock after the tilt. Reset: radar.
// Using the y-axis rotation to choose among the three modes is the
// original's; the thresholds are this design's.
// SHIFT = 20 scales a full turn to the real sensor: at a 245 deg/s full
// scale (8.75 mdeg/s per LSB) and about 6360 samples per second (one per 1572 clocks) at the
// default clocks, a steady rotation of d deg/s adds about d * 727000 per second,
// so turning the board through 360 deg moves the angle through
// 727000 * 360 / 2^28 * 360 deg = about 351 deg. The sample rate follows
// the SPI timing, so SHIFT must change with it.
module gamemode_chooser
  import syntroids_pkg::*;
#(
  parameter int DEADBAND = 64,
  parameter int SHIFT    = 20
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               sample,
  input  logic signed [15:0] gyr_y,
  output mode_e              mode,
  output angle_t             tilt
);
  localparam int AW = SHIFT + ANGLE_W;
  logic [AW-1:0] acc;

  assign tilt = acc[AW-1:SHIFT];

  always_ff @(posedge clk) begin
    if (rst) begin
      acc  <= '0;
      mode <= MODE_RADAR;
    end else begin
      if (sample && (gyr_y >= 16'(DEADBAND) || gyr_y <= -16'(DEADBAND)))
        acc <= acc + AW'(gyr_y);
      if (signed'(tilt) >= -8'sd32 && signed'(tilt) < 8'sd32)      mode <= MODE_RADAR;
      else if (signed'(tilt) >= 8'sd32 && signed'(tilt) < 8'sd96)  mode <= MODE_COCKPIT;
      else if (signed'(tilt) >= 8'sd96 || signed'(tilt) < -8'sd96) mode <= MODE_SCORE;
    end
  end
endmodule
