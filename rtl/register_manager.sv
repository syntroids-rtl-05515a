// Register manager: turns byte-wise register commands into 16-bit writes.
//
// The sensor delivers each axis as two bytes, low byte first. For a command
// with an even index (0, 2, 4) the byte is cached; for an odd index (1, 3, 5)
// the cached low byte and the new high byte are written as one 16-bit value
// to sensor register module_type*3 + index/2 (0..2 accelerometer x, y, z;
// 3..5 gyroscope x, y, z). The write is registered: 'we' pulses (one-hot
// over the six registers) one clock after the command. Synchronous reset.
// Caching the intermediate byte is the original's; the encoding is this
// design's.
module register_manager
  import syntroids_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  reg_cmd_t    cmd,
  output logic [5:0]  we,
  output logic [15:0] wdata
);
  logic [7:0] cache;

  always_ff @(posedge clk) begin
    if (rst) begin
      cache <= '0;
      we    <= '0;
      wdata <= '0;
    end else begin
      we <= '0;
      if (cmd.valid) begin
        if (!cmd.index[0]) cache <= cmd.data;
        else begin
          wdata <= {cmd.data, cache};
          we[(cmd.module_type ? 3 : 0) + int'(cmd.index[2:1])] <= 1'b1;
        end
      end
    end
  end
endmodule
