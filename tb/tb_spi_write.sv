// Testbench for spi_write: an SPI mode-3 receiver model samples sdi on the
// rising serial clock; each random byte must arrive MSB first in exactly
// eight clocks, the clock must idle high, and 'done' must come
// 16*CLK_DIV + 1 clocks after 'start'.
module tb_spi_write;
  localparam int CD = 3;
  logic clk = 0, rst = 1, start = 0, busy, done, sclk, sdi;
  logic [7:0] data = '0, got;
  int nb, checks = 0, failures = 0;

  spi_write #(.CLK_DIV(CD)) dut (.clk(clk), .rst(rst), .start(start), .data(data), .busy(busy),
                                 .done(done), .sclk(sclk), .sdi(sdi));
  always #5 clk = ~clk;
  always @(posedge sclk) begin got = {got[6:0], sdi}; nb++; end

  initial begin
    @(posedge clk); @(posedge clk); #1 rst = 0;
    @(posedge clk); #1;
    checks++; if (sclk !== 1'b1) begin failures++; $display("FAIL idle clock low"); end
    for (int i = 0; i < 40; i++) begin
      int t;
      data = 8'($urandom); nb = 0; got = '0;
      start = 1; @(posedge clk); #1 start = 0;
      t = 1;
      while (!done) begin @(posedge clk); #1 t++; end
      checks++;
      if (got != data || nb != 8) begin failures++; $display("FAIL byte %h got %h bits %0d", data, got, nb); end
      checks++;
      if (t != 16 * CD + 1) begin failures++; $display("FAIL duration %0d", t); end
      checks++; if (sclk !== 1'b1 || busy) begin failures++; $display("FAIL not idle after done"); end
      repeat ($urandom % 3) @(posedge clk);
      #1;
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
