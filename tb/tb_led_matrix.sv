// Testbench for led_matrix: fills the video memory with a random image
// through the write port, then models the panel (two line shift registers
// clocked by extclock, latched by buffer_pin) and checks for a full refresh
// that every latched line holds the right pixels of both halves, that the
// line address selects the line just latched, that the column period is
// 5 + 2**WAIT_W clocks (ghosting delay), that driver_pin stays low and that
// the read-back port returns the addressed pixel.
module tb_led_matrix;
  import syntroids_pkg::*;
  localparam int WAIT_W = 2;
  localparam int STEP   = 5 + (1 << WAIT_W);
  logic clk = 0, rst = 1, write = 0;
  color_t writecolor = '0, color, color1, color2;
  logic [4:0] xc = '0, yc = '0;
  logic [3:0] row_addr;
  logic extclock, buffer_pin, driver_pin;
  color_t img [32][32];
  color_t sh1 [$], sh2 [$];
  int checks = 0, failures = 0, lines = 0, cyc = 0, last_rise = -1;
  logic ext_q = 0;
  logic [3:0] latched_line;
  int latch_pending = 0;

  led_matrix #(.SIZE(32), .WAIT_W(WAIT_W)) dut (
    .clk(clk), .rst(rst), .write(write), .writecolor(writecolor), .xcoordinate(xc), .ycoordinate(yc),
    .color(color), .color1(color1), .color2(color2), .row_addr(row_addr), .extclock(extclock),
    .buffer_pin(buffer_pin), .driver_pin(driver_pin));

  always #5 clk = ~clk;

  task automatic fail(input string m);
    failures++;
    if (failures < 8) $display("FAIL: %s", m);
  endtask

  // Panel model, sampled once per clock.
  always @(posedge clk) if (!rst && !write) begin
    cyc++;
    checks++; if (driver_pin) fail("driver_pin high");
    if (latch_pending == 1) latch_pending = 2;
    else if (latch_pending == 2) begin  // line address moves with the x wrap, two clocks after the latch
      latch_pending = 0;
      checks++;
      if (row_addr != latched_line) fail($sformatf("row_addr %0d after latching line %0d", row_addr, latched_line));
    end
    if (extclock && !ext_q) begin
      sh1.push_back(color1); sh2.push_back(color2);
      if (last_rise >= 0) begin
        checks++;
        if (cyc - last_rise != STEP) fail($sformatf("column period %0d", cyc - last_rise));
      end
      last_rise = cyc;
    end
    if (buffer_pin) begin
      logic [3:0] ln;
      ln = row_addr + 1'b1;
      checks++;
      if (sh1.size() != 32) fail($sformatf("latched after %0d shifts", sh1.size()));
      else for (int x = 0; x < 32; x++) begin
        checks++;
        if (sh1[x] != img[ln][x] || sh2[x] != img[ln + 16][x])
          fail($sformatf("line %0d col %0d: %0d/%0d exp %0d/%0d", ln, x, sh1[x], sh2[x], img[ln][x], img[ln + 16][x]));
      end
      sh1.delete(); sh2.delete();
      latched_line  = ln;
      latch_pending = 1;
      lines++;
    end
    ext_q = extclock;
  end

  initial begin
    for (int y = 0; y < 32; y++) for (int x = 0; x < 32; x++) img[y][x] = color_t'($urandom);
    // fill memory while held in reset (write port works independently)
    @(posedge clk);
    #1 write = 1;
    for (int y = 0; y < 32; y++) for (int x = 0; x < 32; x++) begin
      xc = 5'(x); yc = 5'(y); writecolor = img[y][x];
      @(posedge clk); #1;
    end
    write = 0;
    rst   = 0;
    xc = 5'd7; yc = 5'd21;
    wait (lines == 17);
    // read-back port: colour appears after the lookup slot
    repeat (3 * STEP) @(posedge clk);
    #1;
    checks++; if (color != img[21][7]) fail($sformatf("read-back %0d exp %0d", color, img[21][7]));
    $display("lines latched: %0d", lines);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
