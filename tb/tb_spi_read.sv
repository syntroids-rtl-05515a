// Testbench for spi_read: a mode-3 transmitter model changes sdo after each
// falling serial clock; the reader must return the byte MSB first, with
// 'done' 16*CLK_DIV + 1 clocks after 'start'.
module tb_spi_read;
  localparam int CD = 2;
  logic clk = 0, rst = 1, start = 0, busy, done, sclk, sdo = 0;
  logic [7:0] data, tx = '0, sh;
  int checks = 0, failures = 0;

  spi_read #(.CLK_DIV(CD)) dut (.clk(clk), .rst(rst), .start(start), .sdo(sdo), .busy(busy),
                                .done(done), .sclk(sclk), .data(data));
  always #5 clk = ~clk;
  always @(negedge sclk) begin sdo = sh[7]; sh = {sh[6:0], 1'b0}; end

  initial begin
    @(posedge clk); @(posedge clk); #1 rst = 0;
    for (int i = 0; i < 40; i++) begin
      int t;
      tx = 8'($urandom); sh = tx; sdo = ~tx[7];
      start = 1; @(posedge clk); #1 start = 0;
      t = 1;
      while (!done) begin @(posedge clk); #1 t++; end
      checks++;
      if (data != tx) begin failures++; $display("FAIL sent %h got %h", tx, data); end
      checks++;
      if (t != 16 * CD + 1) begin failures++; $display("FAIL duration %0d", t); end
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
