// LED matrix driver with built-in video memory.
//
// The panel is SIZE x SIZE RGB LEDs split into an upper and a lower half
// that are driven in parallel. Each half has a shift register one line long
// (shifted on every rising 'extclock', fed from color1 / color2), a latch
// register that holds the line being shown (loaded while 'buffer_pin' is
// high) and a line address 'row_addr' shared by both halves.
//
// The driver follows the temporal rules of the original specification with a
// fixed step order. For every column x of the next line (coord_y + 1):
//   LOOK1  address video memory with (x, coord_y+1) of the upper half
//   LOOK2  color1 <= memory output; address (x, coord_y+1) of the lower half
//   LOOK3  color2 <= memory output; address the read-back pixel
//          (xcoordinate, ycoordinate)
//   CLKH   extclock high; color1/2 and coordinates hold; the read-back
//          colour appears on 'color'. If x is the last column, buffer_pin is
//          high in this cycle, one cycle before x wraps.
//   CLKL   extclock low, coord_x + 1; on the wrap coord_y + 1, so row_addr
//          now selects the line just latched.
//   WAIT   waitcounter counts up from 0 until it overflows back to 0
//          (2**WAIT_W cycles): slows the shift clock to avoid ghosting.
// A column thus takes 5 + 2**WAIT_W clocks, a full refresh SIZE/2 lines of
// SIZE columns. Every memory colour is taken one clock after its lookup
// (one-cycle memory latency). 'driver_pin' (output enable, active high =
// off) is tied low as in the original.
// Pixel writes ('write', 'writecolor', 'xcoordinate', 'ycoordinate') go to
// the memory's write port in the same clock, independent of the refresh.
// Outputs are registered. Reset is synchronous: extclock low, coordinates 0.
// The step order, WAIT_W, the 4-bit line address and the memory latency are
// this design's choices; the rules they satisfy are the original's.
module led_matrix
  import syntroids_pkg::*;
#(
  parameter int SIZE   = 32,
  parameter int WAIT_W = 4,
  localparam int YW    = $clog2(SIZE / 2),
  localparam int XW    = $clog2(SIZE)
) (
  input  logic          clk,
  input  logic          rst,
  // pixel write / read-back port
  input  logic          write,
  input  color_t        writecolor,
  input  logic [XW-1:0] xcoordinate,
  input  logic [XW-1:0] ycoordinate,
  output color_t        color,
  // panel pins
  output color_t        color1,
  output color_t        color2,
  output logic [YW-1:0] row_addr,
  output logic          extclock,
  output logic          buffer_pin,
  output logic          driver_pin
);
  typedef enum logic [2:0] {LOOK1, LOOK2, LOOK3, CLKH, CLKL, WAIT} state_e;

  state_e              state;
  logic [XW-1:0]       coord_x;
  logic [YW-1:0]       coord_y;
  logic [WAIT_W-1:0]   waitcounter;
  logic [2*XW-1:0]     rampos;
  color_t              ramout;
  logic [YW-1:0]       ynext;

  assign ynext      = coord_y + 1'b1;
  assign row_addr   = coord_y;
  assign driver_pin = 1'b0;

  always_comb begin
    case (state)
      LOOK1:   rampos = {1'b0, ynext, coord_x};   // rampos1 coord_x (coord_y+1)
      LOOK2:   rampos = {1'b1, ynext, coord_x};   // rampos2 coord_x (coord_y+1)
      default: rampos = {ycoordinate, xcoordinate}; // rampos_R
    endcase
  end

  video_ram #(.SIZE(SIZE), .COLOR_W(COLOR_W)) u_ram (
    .clk   (clk),
    .we    (write),
    .waddr ({ycoordinate, xcoordinate}),
    .wdata (writecolor),
    .raddr (rampos),
    .rdata (ramout)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      state       <= LOOK1;
      coord_x     <= '0;
      coord_y     <= '0;
      waitcounter <= '0;
      color1      <= BLACK;
      color2      <= BLACK;
      color       <= BLACK;
      extclock    <= 1'b0;
      buffer_pin  <= 1'b0;
    end else begin
      buffer_pin <= 1'b0;
      case (state)
        LOOK1: state <= LOOK2;
        LOOK2: begin
          color1 <= ramout;
          state  <= LOOK3;
        end
        LOOK3: begin
          color2     <= ramout;
          extclock   <= 1'b1;
          buffer_pin <= (coord_x == XW'(SIZE - 1));
          state      <= CLKH;
        end
        CLKH: begin
          color    <= ramout;
          extclock <= 1'b0;
          state    <= CLKL;
        end
        CLKL: begin
          coord_x <= (coord_x == XW'(SIZE - 1)) ? '0 : coord_x + 1'b1;
          if (coord_x == XW'(SIZE - 1)) coord_y <= ynext;
          state <= WAIT;
        end
        default: begin  // WAIT
          waitcounter <= waitcounter + 1'b1;
          if (waitcounter == '1) state <= LOOK1;
        end
      endcase
    end
  end

  // extclock is only ever high for one clock, during CLKH.
  assert property (@(posedge clk) disable iff (rst) extclock |-> state == CLKH);
  // coordinates and colours are stable while extclock is high.
  assert property (@(posedge clk) disable iff (rst) extclock |=> $stable(coord_x) && $stable(color1) && $stable(color2));
endmodule
