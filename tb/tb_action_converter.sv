// Testbench for action_converter: pushes with and without rotation, while
// running and while game over. One push with quiet gyroscopes gives exactly
// one 'shot' (running) or 'gamestart' (game over) pulse, one clock after
// the acceleration crosses the threshold; pushes during a turn give none.
module tb_action_converter;
  localparam int ACC_TH = 24000, GYR_TH = 4000;
  logic clk = 0, rst = 1, gameover = 0, shot, gamestart;
  logic signed [15:0] az = '0, gx = '0, gy = '0, gz = '0;
  int checks = 0, failures = 0, n_shot = 0, n_start = 0;

  action_converter #(.ACC_TH(ACC_TH), .GYR_TH(GYR_TH)) dut (.clk(clk), .rst(rst), .acc_z(az), .gyr_x(gx),
      .gyr_y(gy), .gyr_z(gz), .gameover(gameover), .shot(shot), .gamestart(gamestart));
  always #5 clk = ~clk;
  always @(posedge clk) begin n_shot += shot; n_start += gamestart; end

  task automatic push(input logic signed [15:0] peak, input logic turning, input logic go, input int exp_shot, input int exp_start);
    int s0, t0, first;
    s0 = n_shot; t0 = n_start; first = -1;
    gameover = go;
    gz = turning ? 16'sd9000 : 16'sd100; gx = -16'sd50; gy = 16'sd300;
    az = 16'sd2000; repeat (3) @(posedge clk);
    #1 az = peak;
    for (int i = 0; i < 8; i++) begin
      @(posedge clk); #1;
      if ((shot || gamestart) && first < 0) first = i;
    end
    az = 16'sd1000; repeat (4) @(posedge clk); #1;
    checks++;
    if (n_shot - s0 != exp_shot || n_start - t0 != exp_start) begin
      failures++; $display("FAIL push peak=%0d turn=%0d go=%0d: shots %0d starts %0d", peak, turning, go, n_shot - s0, n_start - t0);
    end
    if (exp_shot + exp_start > 0) begin
      checks++; if (first != 0) begin failures++; $display("FAIL latency %0d", first); end
    end
  endtask

  initial begin
    @(posedge clk); @(posedge clk); #1 rst = 0;
    push(16'sd30000, 0, 0, 1, 0);
    push(-16'sd30000, 0, 0, 1, 0);
    push(16'sd30000, 1, 0, 0, 0);
    push(16'sd20000, 0, 0, 0, 0);
    push(16'sd30000, 0, 1, 0, 1);
    push(16'sd30000, 1, 1, 0, 0);
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
