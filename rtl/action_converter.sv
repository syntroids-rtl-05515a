// Action converter: recognises the shooting gesture.
//
// A shot is a quick push of the screen towards the target: the
// accelerometer z value leaves the band |acc_z| < ACC_TH. To avoid taking
// the centrifugal acceleration of a turn for a push, the gesture only counts
// while all three gyroscope rates are below GYR_TH in magnitude. The
// condition is evaluated every clock on the current sensor registers and a
// one-clock pulse is produced on its rising edge, so one push gives one
// action. The pulse goes to 'shot' while the game runs and to 'gamestart'
// while the game is over (the same gesture restarts the game).
// Outputs are registered (one clock after the condition rises).
// Using acc z and the three gyroscope values is the original's; the
// thresholds are this design's.
module action_converter #(
  parameter int ACC_TH = 24000,
  parameter int GYR_TH = 4000
) (
  input  logic               clk,
  input  logic               rst,
  input  logic signed [15:0] acc_z,
  input  logic signed [15:0] gyr_x,
  input  logic signed [15:0] gyr_y,
  input  logic signed [15:0] gyr_z,
  input  logic               gameover,
  output logic               shot,
  output logic               gamestart
);
  function automatic logic [16:0] mag(input logic signed [15:0] v);
    return (v < 0) ? 17'(-17'(v)) : 17'(v);
  endfunction

  logic gesture, gesture_q;
  assign gesture = (mag(acc_z) >= 17'(ACC_TH)) && (mag(gyr_x) < 17'(GYR_TH)) &&
                   (mag(gyr_y) < 17'(GYR_TH)) && (mag(gyr_z) < 17'(GYR_TH));

  always_ff @(posedge clk) begin
    if (rst) begin
      gesture_q <= 1'b0;
      shot      <= 1'b0;
      gamestart <= 1'b0;
    end else begin
      gesture_q <= gesture;
      shot      <= gesture && !gesture_q && !gameover;
      gamestart <= gesture && !gesture_q && gameover;
    end
  end
endmodule
