// Sensor register: holds one 16-bit sensor value for the game.
//
// Written by the register manager ('we' with 'd'), read at any time on 'q',
// independent of the SPI traffic. 'updated' pulses for one clock after each
// write, so consumers can treat every write as a new sample. Reset clears
// the value to 0. The register itself is the original's; the strobe is this
// design's addition for the integrating converters.
module sensor_register #(
  parameter int W = 16
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         we,
  input  logic [W-1:0] d,
  output logic [W-1:0] q,
  output logic         updated
);
  always_ff @(posedge clk) begin
    if (rst) begin
      q       <= '0;
      updated <= 1'b0;
    end else begin
      updated <= we;
      if (we) q <= d;
    end
  end
endmodule
