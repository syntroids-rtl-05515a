// Testbench for clk_prescaler: the divided clock must have a period of DIV
// input clocks, DIV/2 high, starting low out of reset.
module tb_clk_prescaler;
  logic clk_in = 0, rst = 1, clk_out;
  int checks = 0, failures = 0;
  int cyc = 0, last_rise = -1, last_fall = -1, rises = 0;

  clk_prescaler #(.DIV(10)) dut (.clk_in(clk_in), .rst(rst), .clk_out(clk_out));

  always #5 clk_in = ~clk_in;
  always @(posedge clk_in) cyc++;

  initial begin
    repeat (3) @(posedge clk_in);
    checks++; if (clk_out !== 1'b0) begin failures++; $display("FAIL: clk_out high in reset"); end
    rst = 0;
  end

  logic prev = 0;
  always @(posedge clk_in) if (!rst) begin
    #1;
    if (clk_out && !prev) begin
      if (last_rise >= 0) begin
        checks++;
        if (cyc - last_rise != 10) begin failures++; $display("FAIL: period %0d", cyc - last_rise); end
      end
      last_rise = cyc; rises++;
    end
    if (!clk_out && prev) begin
      checks++;
      if (cyc - last_rise != 5) begin failures++; $display("FAIL: high time %0d", cyc - last_rise); end
    end
    prev = clk_out;
    if (rises == 20) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
