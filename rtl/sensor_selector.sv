// Sensor selector: drives the sensor's chip-select pins.
//
// The sensor board carries several devices behind one SPI bus, each with its
// own active-low chip select. While the SPI controller runs a transaction
// ('cs_active'), the chip select of the device named by 'sensor_type' is
// pulled low; all others stay high. Purely combinational.
// The chip-select handling is the original's; N_CS = 2 is this design's
// assumption.
module sensor_selector #(
  parameter int N_CS = 2,
  localparam int TW  = (N_CS > 1) ? $clog2(N_CS) : 1
) (
  input  logic            cs_active,
  input  logic [TW-1:0]   sensor_type,
  output logic [N_CS-1:0] cs_n
);
  always_comb
    for (int i = 0; i < N_CS; i++)
      cs_n[i] = !(cs_active && sensor_type == TW'(i));
endmodule
