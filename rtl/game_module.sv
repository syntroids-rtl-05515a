// Game module: picks which drawing module's pixel goes to video memory.
//
// The radar, cockpit and score boards run in parallel and each produce one
// pixel per clock for the same screen position. This module forwards the
// score board's pixel when the game is over, and otherwise the pixel of the
// board that matches the current game mode. The choice is registered (one
// clock of latency); 'write' is high from the first clock after reset on,
// so the video memory is rewritten continuously.
// The selection rule is the original game's; the output register stands for
// one of the hand-inserted registers between synthesized modules.
module game_module
  import syntroids_pkg::*;
(
  input  logic   clk,
  input  logic   rst,
  input  mode_e  mode,
  input  logic   gameover,
  input  pixel_t radar_pix,
  input  pixel_t cockpit_pix,
  input  pixel_t score_pix,
  output logic   write,
  output pixel_t wpix
);
  always_ff @(posedge clk) begin
    if (rst) begin
      write <= 1'b0;
      wpix  <= '0;
    end else begin
      write <= 1'b1;
      if (gameover) wpix <= score_pix;
      else
        case (mode)
          MODE_RADAR:   wpix <= radar_pix;
          MODE_COCKPIT: wpix <= cockpit_pix;
          default:      wpix <= score_pix;
        endcase
    end
  end
endmodule
