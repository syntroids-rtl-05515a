// Sensor initialisation: writes the sensor's configuration registers once.
//
// On 'start' it issues the first SPI write in the same clock; each time the
// SPI controller answers it issues the next write, and after the last one it
// pulses 'finished' (in the clock of the last answer) and goes idle.
// The default writes switch on the LSM9DS1 gyroscope (CTRL_REG1_G, 0x10)
// and accelerometer (CTRL_REG6_XL, 0x20) at 952 Hz output rate (0xC0).
// Register addresses and values are this design's assumption; the original
// only says that this module initialises the device.
// Lint reports the data byte of the SPI answer as unused: writes return
// nothing of interest, only the finished flag is needed.
module sensor_init
  import syntroids_pkg::*;
#(
  parameter int         N_INIT = 2,
  parameter logic [6:0] INIT_ADDR [N_INIT] = '{7'h10, 7'h20},
  parameter logic [7:0] INIT_DATA [N_INIT] = '{8'hC0, 8'hC0},
  parameter logic       SENSOR_TYPE = 1'b0
) (
  input  logic     clk,
  input  logic     rst,
  input  logic     start,
  input  spi_rsp_t rsp,
  output spi_cmd_t spi_cmd,
  output reg_cmd_t reg_cmd,
  output logic     sensor_type,
  output logic     finished
);
  localparam int KW = (N_INIT > 1) ? $clog2(N_INIT) : 1;
  logic          active;
  logic [KW-1:0] k;

  assign sensor_type = SENSOR_TYPE;
  assign reg_cmd     = '0;

  always_comb begin
    spi_cmd  = '0;
    finished = 1'b0;
    if (!active) begin
      if (start) spi_cmd = '{op: SPI_WRITE, addr: INIT_ADDR[0], data: INIT_DATA[0]};
    end else if (rsp.finished) begin
      if (k == KW'(N_INIT - 1)) finished = 1'b1;
      else spi_cmd = '{op: SPI_WRITE, addr: INIT_ADDR[k + 1'b1], data: INIT_DATA[k + 1'b1]};
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      active <= 1'b0;
      k      <= '0;
    end else if (!active) begin
      if (start) begin
        active <= 1'b1;
        k      <= '0;
      end
    end else if (rsp.finished) begin
      if (k == KW'(N_INIT - 1)) active <= 1'b0;
      else                      k      <= k + 1'b1;
    end
  end
endmodule
