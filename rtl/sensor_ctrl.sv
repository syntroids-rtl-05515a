// Sensor scheduler: decides which sensor submodule runs next.
//
// Emits one-clock commands on 'part_ctrl' (PART_NONE otherwise):
//   * PART_INIT in the first clock after reset, and never again;
//   * PART_ACC when the initialisation part or the gyroscope part reports
//     'finished';
//   * PART_GYR when the accelerometer part reports 'finished'.
// So the sensor is initialised once, then the accelerometer and gyroscope
// reading parts run alternately and forever, each one only after the
// previous one has finished. The response to a 'finished' input is in the
// same clock (combinational), as in the original specification where the
// next part is started exactly when the finished signal arrives.
// The four rules are the original's; the strict alternation is this design's
// choice among the schedules they allow.
module sensor_ctrl
  import syntroids_pkg::*;
(
  input  logic  clk,
  input  logic  rst,
  input  logic  init_finished,
  input  logic  acc_finished,
  input  logic  gyr_finished,
  output part_e part_ctrl
);
  logic started;

  always_ff @(posedge clk)
    if (rst) started <= 1'b0;
    else     started <= 1'b1;

  always_comb begin
    if (!started)                          part_ctrl = PART_INIT;
    else if (init_finished || gyr_finished) part_ctrl = PART_ACC;
    else if (acc_finished)                  part_ctrl = PART_GYR;
    else                                    part_ctrl = PART_NONE;
  end

  // Initialisation happens only once.
  assert property (@(posedge clk) disable iff (rst) started |-> part_ctrl != PART_INIT);
endmodule
