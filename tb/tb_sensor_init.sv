// Testbench for sensor_init: on start it must write (0x10, 0xC0) and then
// (0x20, 0xC0), each write issued when the previous SPI transaction
// answers, and pulse 'finished' with the last answer; a second start
// repeats the sequence (the scheduler never gives one).
module tb_sensor_init;
  import syntroids_pkg::*;
  logic clk = 0, rst = 1, start = 0, stype, fin;
  spi_rsp_t rsp = '0;
  spi_cmd_t sc;
  reg_cmd_t rc;
  int checks = 0, failures = 0;
  localparam logic [6:0] A [2] = '{7'h10, 7'h20};
  localparam logic [7:0] D [2] = '{8'hC0, 8'hC0};

  sensor_init dut (.clk(clk), .rst(rst), .start(start), .rsp(rsp), .spi_cmd(sc), .reg_cmd(rc),
                   .sensor_type(stype), .finished(fin));
  always #5 clk = ~clk;

  task automatic fail(input string m);
    failures++; if (failures < 8) $display("FAIL: %s", m);
  endtask

  initial begin
    @(posedge clk); @(posedge clk); #1 rst = 0;
    for (int pass = 0; pass < 2; pass++) begin
      @(posedge clk); #1;
      checks++; if (sc.op != SPI_NONE || fin) fail("idle");
      start = 1; #1;
      checks++; if (sc.op != SPI_WRITE || sc.addr != A[0] || sc.data != D[0]) fail("first write");
      @(posedge clk); #1 start = 0;
      for (int k = 0; k < 2; k++) begin
        repeat (4) begin
          #1 checks++; if (sc.op != SPI_NONE || fin || rc.valid) fail("waiting");
          @(posedge clk); #1;
        end
        rsp.finished = 1; #1;
        checks++;
        if (k == 0 && (sc.op != SPI_WRITE || sc.addr != A[1] || sc.data != D[1] || fin)) fail("second write");
        if (k == 1 && (sc.op != SPI_NONE || !fin)) fail("finished");
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
