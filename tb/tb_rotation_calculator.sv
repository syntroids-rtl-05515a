// Testbench for rotation_calculator: random gyroscope samples in random
// modes against a reference integrator (x axis in cockpit mode, z else,
// dead band DEADBAND, heading = accumulator >> SHIFT modulo 256).
module tb_rotation_calculator;
  import syntroids_pkg::*;
  localparam int DB = 64, SH = 8;
  logic clk = 0, rst = 1, sample = 0;
  mode_e mode = MODE_RADAR;
  logic signed [15:0] gx = '0, gz = '0;
  angle_t rotation;
  longint acc = 0;
  int checks = 0, failures = 0;

  rotation_calculator #(.DEADBAND(DB), .SHIFT(SH)) dut (.clk(clk), .rst(rst), .mode(mode), .sample(sample),
                                                      .gyr_x(gx), .gyr_z(gz), .rotation(rotation));
  always #5 clk = ~clk;

  initial begin
    @(posedge clk); @(posedge clk); #1 rst = 0;
    for (int n = 0; n < 3000; n++) begin
      int r;
      sample = ($urandom % 2) == 1;
      mode = mode_e'($urandom % 3);
      gx = 16'($urandom % 4000) - 16'sd2000;
      gz = 16'($urandom % 4000) - 16'sd2000;
      if (n % 7 == 0) gz = 16'sd40;   // inside the dead band
      r = (mode == MODE_COCKPIT) ? int'(gx) : int'(gz);
      if (sample && (r >= DB || r <= -DB)) acc += r;
      @(posedge clk); #1;
      checks++;
      if (rotation != angle_t'((acc >>> SH) & 255)) begin
        failures++; if (failures < 5) $display("FAIL n=%0d got %0d exp %0d", n, rotation, (acc >>> SH) & 255);
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
