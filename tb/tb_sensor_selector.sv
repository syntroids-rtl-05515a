// Testbench for sensor_selector: exhaustive check of the chip selects.
module tb_sensor_selector;
  logic cs_active = 0;
  logic [0:0] stype = '0;
  logic [1:0] cs_n;
  int checks = 0, failures = 0;

  sensor_selector #(.N_CS(2)) dut (.cs_active(cs_active), .sensor_type(stype), .cs_n(cs_n));

  initial begin
    for (int r = 0; r < 4; r++)
      for (int a = 0; a < 2; a++)
        for (int t = 0; t < 2; t++) begin
          logic [1:0] e;
          cs_active = a[0]; stype = t[0];
          #1;
          e = 2'b11;
          if (a == 1) e[t] = 1'b0;
          checks++;
          if (cs_n != e) begin failures++; $display("FAIL a=%0d t=%0d got %b exp %b", a, t, cs_n, e); end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
