// Rotation calculator: the player's heading, integrated from the gyroscope.
//
// On every new gyroscope sample ('sample' high for one clock) the rate of
// the axis that matches the way the screen is held is added to an
// accumulator: the x axis in cockpit mode (screen upright), the z axis in
// the other modes (screen flat or overhead). Rates with magnitude below
// DEADBAND are dropped so that sensor noise does not make the view drift.
// The heading is the accumulator's bits [SHIFT+7:SHIFT]: 256 steps per
// turn; the accumulator wraps like the angle does. 'rotation' is valid one
// clock after the sample. Reset sets the starting heading to 0.
// Integrating the x or z rate depending on the mode is the original's;
// which axis goes with which mode, DEADBAND and SHIFT are this design's.
// SHIFT = 20 scales a full turn to the real sensor: at a 245 deg/s full
// scale (8.75 mdeg/s per LSB) and about 6360 samples per second (one per 1572 clocks) at the
// default clocks, a steady rotation of d deg/s adds about d * 727000 per second,
// so turning the board through 360 deg moves the angle through
// 727000 * 360 / 2^28 * 360 deg = about 351 deg. The sample rate follows
// the SPI timing, so SHIFT must change with it.
module rotation_calculator
  import syntroids_pkg::*;
#(
  parameter int DEADBAND = 64,
  parameter int SHIFT    = 20
) (
  input  logic               clk,
  input  logic               rst,
  input  mode_e              mode,
  input  logic               sample,
  input  logic signed [15:0] gyr_x,
  input  logic signed [15:0] gyr_z,
  output angle_t             rotation
);
  localparam int AW = SHIFT + ANGLE_W;
  logic [AW-1:0] acc;

  always_ff @(posedge clk) begin
    if (rst) acc <= '0;
    else if (sample) begin
      logic signed [16:0] rate;
      rate = (mode == MODE_COCKPIT) ? 17'(gyr_x) : 17'(gyr_z);
      if (rate >= 17'(DEADBAND) || rate <= -17'(DEADBAND))
        acc <= acc + AW'(rate);
    end
  end

  assign rotation = acc[AW-1:SHIFT];
endmodule
