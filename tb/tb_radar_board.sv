// Testbench for radar_board: enemies at known polar positions must appear
// at the Cartesian pixels computed here with real-valued sine/cosine
// (16*sin rounded, 64 directions, distance radius/4), the player block in
// the centre, black elsewhere.
module tb_radar_board;
  import syntroids_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst = 1;
  angle_t rotation = '0;
  enemy_t enemies [N];
  pixel_t pix;
  int checks = 0, failures = 0;

  radar_board #(.N_ENEMIES(N)) dut (.clk(clk), .rst(rst), .rotation(rotation), .enemies(enemies), .pix(pix));
  always #5 clk = ~clk;

  function automatic int tsin(input int ph);  // round(16*sin(2*pi*ph/64))
    real v;
    v = 16.0 * $sin(2.0 * 3.14159265358979 * ph / 64.0);
    return (v >= 0) ? int'($floor(v + 0.5)) : -int'($floor(-v + 0.5));
  endfunction

  function automatic int fdiv16(input int v);   // floor(v/16)
    return int'($floor(real'(v) / 16.0));
  endfunction

  task automatic check_frame();
    int ex[N], ey[N];
    for (int i = 0; i < N; i++) begin
      int rel, ph, d;
      rel = (int'(enemies[i].angle) - int'(rotation)) & 255;
      ph  = rel / 4;
      d   = int'(enemies[i].radius) / 4;
      ex[i] = 16 + fdiv16(d * tsin(ph));
      ey[i] = 16 - fdiv16(d * tsin((ph + 16) % 64));
    end
    repeat (N + 2) @(posedge clk);
    #1;
    // align to pixel (0,0)
    while (!(pix.x == 0 && pix.y == 0)) begin @(posedge clk); #1; end
    for (int n = 0; n < 1024; n++) begin
      int x, y; color_t ec;
      x = pix.x; y = pix.y;
      ec = 3'b000;
      for (int i = 0; i < N; i++) if (ex[i] == x && ey[i] == y) ec = enemy_color(i);
      if ((x == 15 || x == 16) && (y == 15 || y == 16)) ec = 3'b111;
      checks++;
      if (pix.color != ec || x != n % 32 || y != n / 32) begin
        failures++;
        if (failures < 6) $display("FAIL (%0d,%0d) got %0d exp %0d", x, y, pix.color, ec);
      end
      @(posedge clk); #1;
    end
  endtask

  initial begin
    for (int i = 0; i < N; i++) enemies[i] = '{angle: angle_t'(i * 64), radius: 6'd40};
    @(posedge clk); @(posedge clk); #1 rst = 0;
    check_frame();
    for (int t = 0; t < 6; t++) begin
      for (int i = 0; i < N; i++) enemies[i] = '{angle: angle_t'($urandom), radius: radius_t'($urandom)};
      rotation = angle_t'($urandom);
      check_frame();
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
