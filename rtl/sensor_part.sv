// Sensor part: reads one 3-axis sensor (six byte registers) over SPI.
//
// Configured by six register addresses (REG_ADDR, low/high byte of x, y, z),
// the sensor type that picks the chip select and the module type that picks
// the sensor registers the values go to. On 'start' it requests register 1
// in the same clock, then waits. Each time the SPI controller answers
// ('rsp.finished') it, in that same clock,
//   * issues a register-manager command setRegister(MODULE_TYPE, k, byte)
//     for the byte just read (k = 0..5), and
//   * requests the next register, or after the sixth pulses 'finished'
//     and waits for the next start.
// Between answers the SPI command is "none". One pass takes six SPI
// transactions plus six clocks.
// The wait-then-advance sequence and the command per answer are the
// original's; default addresses are the LSM9DS1 accelerometer output
// registers (0x28..0x2D), an assumption of this design.
module sensor_part
  import syntroids_pkg::*;
#(
  parameter logic [6:0] REG_ADDR [6] = '{7'h28, 7'h29, 7'h2A, 7'h2B, 7'h2C, 7'h2D},
  parameter logic       SENSOR_TYPE = 1'b0,
  parameter logic       MODULE_TYPE = 1'b0
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
  logic       active;
  logic [2:0] k;      // register being read

  assign sensor_type = SENSOR_TYPE;

  always_comb begin
    spi_cmd  = '0;
    reg_cmd  = '0;
    finished = 1'b0;
    if (!active) begin
      if (start) spi_cmd = '{op: SPI_READ, addr: REG_ADDR[0], data: 8'h00};
    end else if (rsp.finished) begin
      reg_cmd = '{valid: 1'b1, module_type: MODULE_TYPE, index: k, data: rsp.data};
      if (k == 3'd5) finished = 1'b1;
      else spi_cmd = '{op: SPI_READ, addr: REG_ADDR[k + 3'd1], data: 8'h00};
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
      if (k == 3'd5) active <= 1'b0;
      else           k      <= k + 1'b1;
    end
  end
endmodule
