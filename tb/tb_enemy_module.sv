// Testbench for enemy_module: random move / respawn pulses against a
// reference model of the polar position.
module tb_enemy_module;
  import syntroids_pkg::*;
  logic clk = 0, rst = 1, move = 0, respawn = 0;
  angle_t new_angle = '0;
  enemy_t enemy;
  int checks = 0, failures = 0;
  int exp_a, exp_r;

  enemy_module dut (.clk(clk), .rst(rst), .move(move), .respawn(respawn),
                    .new_angle(new_angle), .enemy(enemy));

  always #5 clk = ~clk;

  initial begin
    @(posedge clk); @(posedge clk); #1 rst = 0;
    exp_a = 0; exp_r = 63;
    checks++; if (enemy.radius != 63 || enemy.angle != 0) begin failures++; $display("FAIL reset"); end
    for (int i = 0; i < 2000; i++) begin
      move      = ($urandom % 3) != 0;
      respawn   = ($urandom % 40) == 0;
      new_angle = angle_t'($urandom);
      @(posedge clk);
      if (respawn) begin exp_a = new_angle; exp_r = 63; end
      else if (move && exp_r > 0) exp_r--;
      #1;
      checks++;
      if (enemy.radius != radius_t'(exp_r) || enemy.angle != angle_t'(exp_a)) begin
        failures++;
        if (failures < 5) $display("FAIL step %0d: got %0d/%0d exp %0d/%0d", i, enemy.angle, enemy.radius, exp_a, exp_r);
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
