// SPI byte writer: shifts one byte out on the serial data line.
//
// Combines the three parts of the original write path: a state manager (the
// bit counter below), the serial clock generator and the data-out driver.
// SPI mode 3: the serial clock idles high; each bit is put on 'sdi' with a
// falling clock edge and is taken by the device on the following rising
// edge. Each clock phase lasts CLK_DIV system clocks, so the serial clock
// runs at f_clk / (2*CLK_DIV) and can be changed freely.
// Interface: pulse 'start' with 'data' while 'busy' is low; 'busy' stays high
// for 16*CLK_DIV clocks, then 'done' pulses for one clock with the clock
// line back high. MSB first. Synchronous active-high reset.
module spi_write #(
  parameter int CLK_DIV = 4
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       start,
  input  logic [7:0] data,
  output logic       busy,
  output logic       done,
  output logic       sclk,
  output logic       sdi
);
  localparam int DW = (CLK_DIV > 1) ? $clog2(CLK_DIV) : 1;

  logic [7:0]    shreg;
  logic [3:0]    bits;     // bits still to send
  logic [DW-1:0] div;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      sclk  <= 1'b1;
      sdi   <= 1'b0;
      shreg <= '0;
      bits  <= '0;
      div   <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy  <= 1'b1;
          sclk  <= 1'b0;
          sdi   <= data[7];
          shreg <= {data[6:0], 1'b0};
          bits  <= 4'd8;
          div   <= '0;
        end
      end else if (div != DW'(CLK_DIV - 1)) begin
        div <= div + 1'b1;
      end else begin
        div <= '0;
        if (!sclk) begin            // rising edge: device samples
          sclk <= 1'b1;
          bits <= bits - 1'b1;
        end else if (bits != 0) begin // falling edge: next bit
          sclk  <= 1'b0;
          sdi   <= shreg[7];
          shreg <= {shreg[6:0], 1'b0};
        end else begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (rst) start |-> !busy);
endmodule
