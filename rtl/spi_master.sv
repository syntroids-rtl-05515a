// SPI transaction controller for the motion sensor.
//
// Accepts one command at a time on 'cmd' (a one-clock request while idle):
//   SPI_READ  addr       -> sends {1, addr}, then reads one byte
//   SPI_WRITE addr data  -> sends {0, addr}, then sends 'data'
// The address byte and a written data byte go through spi_write, a read data
// byte through spi_read; this module sequences the two and multiplexes their
// serial clocks onto 'sclk'. 'cs_active' is high for the whole transaction
// (the sensor selector turns it into a chip-select pin). When the
// transaction ends the module is idle again and 'rsp.finished' pulses for
// that one clock with the byte read in 'rsp.data'; a new command may be
// given in that same clock, the chip select is then inactive for one clock
// between the two transactions.
// A transaction takes 32*CLK_DIV + 3 clocks from the command to 'finished'.
// The read/write framing is that of the LSM9DS1-type sensor on the original
// board (this design's assumption); the split into a coordinating module and
// separate write and read parts is the original's.
// Lint reports the busy outputs of the two shift parts and the data byte of a
// stored read command as unused: the state machine follows the parts' done
// pulses, and a read sends no data byte.
module spi_master
  import syntroids_pkg::*;
#(
  parameter int CLK_DIV = 4
) (
  input  logic     clk,
  input  logic     rst,
  input  spi_cmd_t cmd,
  output spi_rsp_t rsp,
  output logic     cs_active,
  output logic     sclk,
  output logic     sdi,
  input  logic     sdo
);
  typedef enum logic [1:0] {IDLE, ADDR, WDATA, RDATA} state_e;
  state_e   state;
  spi_cmd_t cur;

  logic       w_start, w_busy, w_done, w_sclk;
  logic [7:0] w_data;
  logic       r_start, r_busy, r_done, r_sclk;
  logic [7:0] r_data;

  spi_write #(.CLK_DIV(CLK_DIV)) u_write (
    .clk(clk), .rst(rst), .start(w_start), .data(w_data),
    .busy(w_busy), .done(w_done), .sclk(w_sclk), .sdi(sdi));

  spi_read #(.CLK_DIV(CLK_DIV)) u_read (
    .clk(clk), .rst(rst), .start(r_start), .sdo(sdo),
    .busy(r_busy), .done(r_done), .sclk(r_sclk), .data(r_data));

  assign sclk      = w_sclk & r_sclk;
  assign cs_active = (state != IDLE);

  always_comb begin
    w_start = 1'b0;
    w_data  = '0;
    r_start = 1'b0;
    if (state == IDLE && cmd.op != SPI_NONE) begin
      w_start = 1'b1;
      w_data  = {cmd.op == SPI_READ, cmd.addr};
    end else if (state == ADDR && w_done) begin
      if (cur.op == SPI_READ) r_start = 1'b1;
      else begin
        w_start = 1'b1;
        w_data  = cur.data;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= IDLE;
      cur   <= '0;
      rsp   <= '0;
    end else begin
      rsp.finished <= 1'b0;
      case (state)
        IDLE: if (cmd.op != SPI_NONE) begin
          cur   <= cmd;
          state <= ADDR;
        end
        ADDR: if (w_done) state <= (cur.op == SPI_READ) ? RDATA : WDATA;
        WDATA: if (w_done) begin
          state        <= IDLE;
          rsp.finished <= 1'b1;
        end
        default: if (r_done) begin
          state        <= IDLE;
          rsp.finished <= 1'b1;
          rsp.data     <= r_data;
        end
      endcase
    end
  end

  // Commands are only given while idle.
  assert property (@(posedge clk) disable iff (rst) cmd.op != SPI_NONE |-> state == IDLE);
endmodule
