// Testbench for cockpit_board: every pixel of several frames is compared
// with squares computed here (side (VIEW_R+1-radius)/4, centre column
// 16 + signed(angle-rotation), centre row 16, nearest enemy on top).
module tb_cockpit_board;
  import syntroids_pkg::*;
  localparam int N = 4;
  localparam int VR = 40;
  logic clk = 0, rst = 1;
  angle_t rotation = '0;
  enemy_t enemies [N];
  pixel_t pix;
  int checks = 0, failures = 0, lit = 0;

  cockpit_board #(.N_ENEMIES(N), .VIEW_R(VR)) dut (.clk(clk), .rst(rst), .rotation(rotation),
                                                  .enemies(enemies), .pix(pix));
  always #5 clk = ~clk;

  function automatic color_t expect_px(input int x, input int y);
    int best; color_t c;
    best = 64; c = 3'b000;
    for (int i = 0; i < N; i++) begin
      int r, s, rel, x0, y0;
      r = enemies[i].radius;
      s = (r <= VR) ? (VR + 1 - r) / 4 : 0;
      rel = (int'(enemies[i].angle) - int'(rotation)) & 255;
      if (rel >= 128) rel -= 256;
      x0 = 16 + rel - s / 2;
      y0 = 16 - s / 2;
      if (s > 0 && x >= x0 && x < x0 + s && y >= y0 && y < y0 + s && r < best) begin
        best = r; c = enemy_color(i);
      end
    end
    return c;
  endfunction

  task automatic check_frame();
    for (int n = 0; n < 1024; n++) begin
      color_t ec;
      #1;
      ec = expect_px(pix.x, pix.y);
      if (ec != 0) lit++;
      checks++;
      if (pix.color != ec) begin
        failures++;
        if (failures < 6) $display("FAIL (%0d,%0d) got %0d exp %0d", pix.x, pix.y, pix.color, ec);
      end
      @(posedge clk);
    end
  endtask

  initial begin
    enemies[0] = '{angle: 8'd250, radius: 6'd10};
    enemies[1] = '{angle: 8'd8,   radius: 6'd25};
    enemies[2] = '{angle: 8'd3,   radius: 6'd38};
    enemies[3] = '{angle: 8'd128, radius: 6'd5};
    @(posedge clk); @(posedge clk); #1 rst = 0;
    check_frame();
    for (int t = 0; t < 6; t++) begin
      rotation = angle_t'($urandom % 16);
      for (int i = 0; i < N; i++) enemies[i] = '{angle: angle_t'(($urandom % 40) - 20), radius: radius_t'($urandom % 50)};
      check_frame();
    end
    checks++; if (lit < 50) begin failures++; $display("FAIL: too few lit pixels %0d", lit); end
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
