// Testbench for spi_master with the behavioural sensor model: random
// writes followed by reads of the same registers must return the written
// bytes; transaction length, chip-select framing and the one-clock
// 'finished' pulse are checked.
module tb_spi_master;
  import syntroids_pkg::*;
  localparam int CD = 2;
  logic clk = 0, rst = 1, cs_active, sclk, sdi, sdo;
  spi_cmd_t cmd = '0;
  spi_rsp_t rsp;
  logic [7:0] shadow [128];
  int checks = 0, failures = 0;

  spi_master #(.CLK_DIV(CD)) dut (.clk(clk), .rst(rst), .cmd(cmd), .rsp(rsp), .cs_active(cs_active),
                                  .sclk(sclk), .sdi(sdi), .sdo(sdo));
  sensor_model dev (.sclk(sclk), .cs_n(!cs_active), .sdi(sdi), .sdo(sdo));
  always #5 clk = ~clk;

  task automatic xfer(input spi_op_e op, input logic [6:0] a, input logic [7:0] d, output logic [7:0] q);
    int t;
    cmd = '{op: op, addr: a, data: d};
    @(posedge clk); #1 cmd = '0;
    t = 1;
    while (!rsp.finished) begin
      checks++; if (!cs_active) begin failures++; $display("FAIL cs dropped"); end
      @(posedge clk); #1 t++;
    end
    checks++; if (cs_active) begin failures++; $display("FAIL cs still active at finish"); end
    checks++; if (t != 32 * CD + 3) begin failures++; $display("FAIL transaction took %0d", t); end
    q = rsp.data;
    @(posedge clk); #1;
    checks++; if (rsp.finished) begin failures++; $display("FAIL finished longer than a clock"); end
  endtask

  initial begin
    logic [7:0] q;
    @(posedge clk); @(posedge clk); #1 rst = 0;
    for (int i = 0; i < 12; i++) begin
      logic [6:0] a; logic [7:0] d;
      a = 7'($urandom); d = 8'($urandom);
      xfer(SPI_WRITE, a, d, q);
      shadow[a] = d;
      checks++; if (dev.regs[a] != d) begin failures++; $display("FAIL write %h -> reg %h = %h", d, a, dev.regs[a]); end
      xfer(SPI_READ, a, 8'h00, q);
      checks++; if (q != d) begin failures++; $display("FAIL read reg %h got %h exp %h", a, q, d); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
