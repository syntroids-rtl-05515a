// Testbench for gamemode_chooser: tilts the device step by step through a
// full turn and back and checks the tilt integration and the mode bands
// (radar |tilt|<32, cockpit 32..95, score beyond 96, hold in -96..-33).
module tb_gamemode_chooser;
  import syntroids_pkg::*;
  localparam int SH = 8;
  logic clk = 0, rst = 1, sample = 0;
  logic signed [15:0] gy = '0;
  mode_e mode, em;
  angle_t tilt;
  longint acc = 0;
  int checks = 0, failures = 0;
  int seen [3] = '{0, 0, 0};

  gamemode_chooser #(.DEADBAND(64), .SHIFT(SH)) dut (.clk(clk), .rst(rst), .sample(sample), .gyr_y(gy),
                                                   .mode(mode), .tilt(tilt));
  always #5 clk = ~clk;

  initial begin
    em = MODE_RADAR;
    @(posedge clk); @(posedge clk); #1 rst = 0;
    for (int n = 0; n < 1200; n++) begin
      int t;
      sample = 1;
      gy = (n < 600) ? 16'sd256 + 16'($urandom % 200) : -16'sd300 - 16'($urandom % 100);
      acc += gy;
      @(posedge clk); #1;
      sample = 0;
      t = int'((acc >>> SH) & 255);
      checks++; if (tilt != angle_t'(t)) begin failures++; $display("FAIL tilt %0d exp %0d", tilt, t); end
      if (t >= 128) t -= 256;
      if (t >= -32 && t < 32) em = MODE_RADAR;
      else if (t >= 32 && t < 96) em = MODE_COCKPIT;
      else if (t >= 96 || t < -96) em = MODE_SCORE;
      @(posedge clk); #1;
      checks++;
      if (mode != em) begin failures++; if (failures < 5) $display("FAIL tilt %0d mode %0d exp %0d", t, mode, em); end
      seen[mode]++;
    end
    for (int i = 0; i < 3; i++) begin
      checks++; if (seen[i] == 0) begin failures++; $display("FAIL mode %0d never chosen", i); end
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
