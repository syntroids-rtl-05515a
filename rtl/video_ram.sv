// Video memory: one colour per pixel of the SIZE x SIZE screen.
//
// A plain array of SIZE*SIZE words of COLOR_W bits with one write port and
// one read port that work independently; only one word can be read per
// clock. Address = y * SIZE + x, i.e. {y, x} for SIZE = 32.
// Timing: a write with 'we' high lands at the rising edge; 'rdata' shows the
// word at 'raddr' one clock after the address is applied (a registered
// read, as FPGA block RAM provides). The content is not reset.
// Separate write and single read ports follow the original; the one-cycle
// read latency is this design's assumption.
module video_ram #(
  parameter int SIZE    = 32,
  parameter int COLOR_W = 3,
  localparam int AW     = $clog2(SIZE * SIZE)
) (
  input  logic               clk,
  input  logic               we,
  input  logic [AW-1:0]      waddr,
  input  logic [COLOR_W-1:0] wdata,
  input  logic [AW-1:0]      raddr,
  output logic [COLOR_W-1:0] rdata
);
  logic [COLOR_W-1:0] mem [SIZE * SIZE];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
