// Testbench for sensor_part: the testbench answers the SPI requests after
// random delays. The part must request the six configured registers in
// order (the first in the clock of 'start', each next one in the clock of
// the previous answer), issue one register-manager command per answer with
// module type, index and byte, pulse 'finished' with the sixth answer and
// stay quiet until started again.
module tb_sensor_part;
  import syntroids_pkg::*;
  localparam logic [6:0] ADDR [6] = '{7'h18, 7'h19, 7'h1A, 7'h1B, 7'h1C, 7'h1D};
  logic clk = 0, rst = 1, start = 0, stype, fin;
  spi_rsp_t rsp = '0;
  spi_cmd_t sc;
  reg_cmd_t rc;
  int checks = 0, failures = 0;

  sensor_part #(.REG_ADDR(ADDR), .SENSOR_TYPE(1'b1), .MODULE_TYPE(1'b1)) dut (
    .clk(clk), .rst(rst), .start(start), .rsp(rsp), .spi_cmd(sc), .reg_cmd(rc), .sensor_type(stype), .finished(fin));
  always #5 clk = ~clk;

  task automatic fail(input string m);
    failures++; if (failures < 8) $display("FAIL: %s", m);
  endtask

  initial begin
    @(posedge clk); @(posedge clk); #1 rst = 0;
    checks++; if (stype != 1'b1) fail("sensor type");
    for (int pass = 0; pass < 5; pass++) begin
      repeat (3) begin
        @(posedge clk); #1;
        checks++; if (sc.op != SPI_NONE || rc.valid || fin) fail("activity while idle");
      end
      start = 1; #1;
      checks++; if (sc.op != SPI_READ || sc.addr != ADDR[0]) fail("first request");
      @(posedge clk); #1 start = 0;
      for (int k = 0; k < 6; k++) begin
        logic [7:0] d;
        repeat ($urandom % 5 + 1) begin
          #1 checks++; if (sc.op != SPI_NONE || rc.valid || fin) fail($sformatf("not waiting at k=%0d", k));
          @(posedge clk); #1;
        end
        d = 8'($urandom);
        rsp = '{finished: 1'b1, data: d}; #1;
        checks++;
        if (!rc.valid || rc.module_type != 1'b1 || rc.index != 3'(k) || rc.data != d) fail($sformatf("reg cmd k=%0d", k));
        checks++;
        if (k < 5 && (sc.op != SPI_READ || sc.addr != ADDR[k + 1] || fin)) fail($sformatf("next request k=%0d", k));
        if (k == 5 && (sc.op != SPI_NONE || !fin)) fail("finish");
        @(posedge clk); #1 rsp = '0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
