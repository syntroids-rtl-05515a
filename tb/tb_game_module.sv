// Testbench for game_module: the registered pixel must come from the
// score board when the game is over, else from the board of the mode.
module tb_game_module;
  import syntroids_pkg::*;
  logic clk = 0, rst = 1, gameover = 0, write;
  mode_e mode = MODE_RADAR;
  pixel_t rp, cp, sp, wpix, exp_p;
  int checks = 0, failures = 0;

  game_module dut (.clk(clk), .rst(rst), .mode(mode), .gameover(gameover), .radar_pix(rp),
                   .cockpit_pix(cp), .score_pix(sp), .write(write), .wpix(wpix));
  always #5 clk = ~clk;

  initial begin
    rp = '0; cp = '0; sp = '0;
    @(posedge clk); @(posedge clk); #1;
    checks++; if (write !== 1'b0) begin failures++; $display("FAIL write in reset"); end
    rst = 0;
    for (int i = 0; i < 1000; i++) begin
      rp = pixel_t'($urandom); cp = pixel_t'($urandom); sp = pixel_t'($urandom);
      mode = mode_e'($urandom % 3); gameover = ($urandom % 4) == 0;
      exp_p = gameover ? sp : (mode == MODE_RADAR) ? rp : (mode == MODE_COCKPIT) ? cp : sp;
      @(posedge clk); #1;
      checks++;
      if (wpix != exp_p || !write) begin
        failures++;
        if (failures < 5) $display("FAIL i=%0d mode=%0d go=%0d", i, mode, gameover);
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
