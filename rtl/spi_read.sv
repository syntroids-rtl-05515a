// SPI byte reader: clocks one byte in from the device's data-out pin.
//
// Combines the three parts of the original read path: state manager (bit
// counter), serial clock generator and the 'sdo' sampler. SPI mode 3: the
// clock idles high, the device changes 'sdo' after each falling edge and
// the reader samples it at the rising edge. Each phase lasts CLK_DIV
// system clocks.
// Interface: pulse 'start' while 'busy' is low; after 16*CLK_DIV clocks
// 'done' pulses for one clock and 'data' holds the byte (MSB received
// first) until the next start. Synchronous active-high reset.
module spi_read #(
  parameter int CLK_DIV = 4
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       start,
  input  logic       sdo,
  output logic       busy,
  output logic       done,
  output logic       sclk,
  output logic [7:0] data
);
  localparam int DW = (CLK_DIV > 1) ? $clog2(CLK_DIV) : 1;

  logic [3:0]    bits;
  logic [DW-1:0] div;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0;
      done <= 1'b0;
      sclk <= 1'b1;
      data <= '0;
      bits <= '0;
      div  <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          sclk <= 1'b0;
          bits <= 4'd8;
          div  <= '0;
        end
      end else if (div != DW'(CLK_DIV - 1)) begin
        div <= div + 1'b1;
      end else begin
        div <= '0;
        if (!sclk) begin              // rising edge: sample
          sclk <= 1'b1;
          data <= {data[6:0], sdo};
          bits <= bits - 1'b1;
        end else if (bits != 0) begin
          sclk <= 1'b0;
        end else begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (rst) start |-> !busy);
endmodule
