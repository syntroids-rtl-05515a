// Clock prescaler: derives the game clock from the board clock.
//
// The original game ran on a 100 MHz board oscillator but, for timing
// closure, clocked its logic at 10 MHz; DIV = 10 reproduces that ratio.
// A counter on clk_in toggles clk_out every DIV/2 input cycles, giving a
// 50 % duty clock for even DIV (for odd DIV the high phase is one input
// cycle shorter). Reset is synchronous, active high, and leaves clk_out low.
// How the division is done is this design's choice; only the two
// frequencies come from the original.
module clk_prescaler #(
  parameter int DIV = 10
) (
  input  logic clk_in,
  input  logic rst,
  output logic clk_out
);
  localparam int HALF_HI = DIV / 2;        // cycles high
  localparam int HALF_LO = DIV - DIV / 2;  // cycles low
  localparam int CW = $clog2(DIV + 1);

  logic [CW-1:0] cnt;

  always_ff @(posedge clk_in) begin
    if (rst) begin
      cnt     <= '0;
      clk_out <= 1'b0;
    end else if ((!clk_out && cnt == CW'(HALF_LO - 1)) || (clk_out && cnt == CW'(HALF_HI - 1))) begin
      cnt     <= '0;
      clk_out <= !clk_out;
    end else begin
      cnt <= cnt + 1'b1;
    end
  end

  initial assert (DIV >= 2) else $error("DIV must be at least 2");
endmodule
