// Testbench for score_board: pixel walk order, score dots in the score
// colour, and the red diagonals of the game-over screen.
module tb_score_board;
  import syntroids_pkg::*;
  logic clk = 0, rst = 1, gameover = 0;
  logic [SCORE_W-1:0] score = '0;
  color_t scorecolor = 3'b010;
  pixel_t pix;
  int checks = 0, failures = 0;

  score_board #(.SIZE(32)) dut (.clk(clk), .rst(rst), .score(score), .scorecolor(scorecolor),
                                .gameover(gameover), .pix(pix));
  always #5 clk = ~clk;

  task automatic frame(input int sc, input logic go, input color_t col);
    score = SCORE_W'(sc); gameover = go; scorecolor = col;
    for (int n = 0; n < 1024; n++) begin
      int ex, ey; color_t ec;
      ex = n % 32; ey = n / 32;
      ec = (n < sc) ? col : 3'b000;
      if (go && (ex == ey || ex + ey == 31)) ec = 3'b100;
      #1;
      checks++;
      if (pix.x != coord_t'(ex) || pix.y != coord_t'(ey) || pix.color != ec) begin
        failures++;
        if (failures < 6) $display("FAIL n=%0d got (%0d,%0d,%0d) exp (%0d,%0d,%0d)", n, pix.x, pix.y, pix.color, ex, ey, ec);
      end
      @(posedge clk);
    end
  endtask

  initial begin
    @(posedge clk); @(posedge clk); #1 rst = 0;
    frame(37, 0, 3'b010);
    frame(0, 0, 3'b001);
    frame(300, 1, 3'b101);
    frame(1023, 0, 3'b110);
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
