// Submodule chooser: connects the selected sensor part to the shared SPI
// controller, register manager and sensor selector.
//
// It remembers the last non-NONE command on 'part_ctrl' and, from then on,
// forwards only that part's SPI command, register-manager command and sensor
// type; the other parts' outputs are ignored. In the clock in which a new
// command arrives, the SPI command and sensor type already come from the new
// part (so it may issue its first SPI request in the clock it is started),
// while the register-manager command still comes from the part that was
// running: that is the clock in which it delivers its last byte. It also turns
// 'part_ctrl' into a one-clock start pulse for each part. Before the first
// command it forwards "no command".
// Forwarding only the selected module's signals is the original's; the
// encodings are this design's.
module submodule_chooser
  import syntroids_pkg::*;
(
  input  logic     clk,
  input  logic     rst,
  input  part_e    part_ctrl,
  // per part: index 0 init, 1 accelerometer, 2 gyroscope
  input  spi_cmd_t part_spi   [3],
  input  reg_cmd_t part_reg   [3],
  input  logic     part_stype [3],
  output logic     start      [3],
  output spi_cmd_t spi_cmd,
  output reg_cmd_t reg_cmd,
  output logic     sensor_type
);
  part_e sel_q, sel;

  always_ff @(posedge clk)
    if (rst)                        sel_q <= PART_NONE;
    else if (part_ctrl != PART_NONE) sel_q <= part_ctrl;

  assign sel = (part_ctrl != PART_NONE) ? part_ctrl : sel_q;

  always_comb begin
    spi_cmd     = '0;
    reg_cmd     = '0;
    sensor_type = 1'b0;
    for (int i = 0; i < 3; i++) begin
      start[i] = (part_ctrl == part_e'(i + 1));
      if (sel == part_e'(i + 1)) begin
        spi_cmd     = part_spi[i];
        sensor_type = part_stype[i];
      end
      if (sel_q == part_e'(i + 1)) reg_cmd = part_reg[i];
    end
  end
endmodule
