// Behavioural model of the SPI accelerometer/gyroscope used by the game
// (an LSM9DS1-type device): 128 byte registers behind an SPI mode-3 slave.
// Not synthesizable; for testbenches only.
//
// A transfer starts with chip select low. Byte 1 = {R/W, address}
// (R/W = 1: read). On a read the addressed register is driven on 'sdo'
// MSB first, each bit changed after a falling serial clock edge; on a write
// the second byte is stored. 'regs' can be set by the testbench at any time;
// 'oneshot_*' lets a testbench give one 16-bit register pair (low byte at
// 'oneshot_addr', high byte at the next address) a value for exactly one
// read of the pair, after which the previous value is back.
// Counters report how many reads and writes the model has served.
module sensor_model (
  input  logic sclk,
  input  logic cs_n,
  input  logic sdi,
  output logic sdo
);
  logic [7:0]  regs [128];
  logic [7:0]  shin;
  logic [7:0]  shout;
  logic [7:0]  addr;
  int          nbits;
  int          reads, writes;
  logic        oneshot_valid;
  logic [15:0] oneshot_val;
  logic [15:0] saved;
  logic [6:0]  oneshot_addr;

  initial begin
    for (int i = 0; i < 128; i++) regs[i] = 8'h00;
    sdo = 1'b0; nbits = 0; reads = 0; writes = 0; oneshot_valid = 1'b0;
    oneshot_addr = 7'h1C; oneshot_val = '0; saved = '0; shin = '0; shout = '0; addr = '0;
  end

  always @(negedge cs_n) nbits = 0;

  always @(posedge sclk) if (!cs_n) begin
    shin  = {shin[6:0], sdi};
    nbits = nbits + 1;
    if (nbits == 8) begin
      addr = shin;
      if (addr[7]) begin
        if (addr[6:0] == oneshot_addr && oneshot_valid) begin
          saved                    = {regs[oneshot_addr + 7'd1], regs[oneshot_addr]};
          regs[oneshot_addr]       = oneshot_val[7:0];
          regs[oneshot_addr + 7'd1] = oneshot_val[15:8];
        end
        shout = regs[addr[6:0]];
        reads = reads + 1;
        if (addr[6:0] == oneshot_addr + 7'd1 && oneshot_valid) begin
          regs[oneshot_addr]        = saved[7:0];
          regs[oneshot_addr + 7'd1] = saved[15:8];
          oneshot_valid             = 1'b0;
        end
      end
    end else if (nbits == 16 && !addr[7]) begin
      regs[addr[6:0]] = shin;
      writes = writes + 1;
    end
  end

  always @(negedge sclk) if (!cs_n && nbits >= 8 && nbits < 16 && addr[7]) begin
    sdo   = shout[7];
    shout = {shout[6:0], 1'b0};
  end
endmodule
