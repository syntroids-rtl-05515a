// Testbench for sensor_register: value held between writes, updated one
// clock after a write, with a one-clock 'updated' strobe.
module tb_sensor_register;
  logic clk = 0, rst = 1, we = 0, upd;
  logic [15:0] d = '0, q, e = '0;
  int checks = 0, failures = 0;

  sensor_register #(.W(16)) dut (.clk(clk), .rst(rst), .we(we), .d(d), .q(q), .updated(upd));
  always #5 clk = ~clk;

  initial begin
    @(posedge clk); @(posedge clk); #1;
    checks++; if (q != 0) begin failures++; $display("FAIL reset value"); end
    rst = 0;
    for (int n = 0; n < 500; n++) begin
      logic w;
      w = ($urandom % 3) == 0; we = w; d = 16'($urandom);
      @(posedge clk); #1;
      if (w) e = d;
      checks++;
      if (q != e || upd != w) begin failures++; if (failures < 5) $display("FAIL n=%0d", n); end
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
