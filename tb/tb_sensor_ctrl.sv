// Testbench for sensor_ctrl: INIT exactly once at the start, then ACC and
// GYR alternately, each issued in the clock its predecessor finishes and
// NONE at all other times.
module tb_sensor_ctrl;
  import syntroids_pkg::*;
  logic clk = 0, rst = 1, fi = 0, fa = 0, fg = 0;
  part_e pc;
  int checks = 0, failures = 0, n_init = 0;

  sensor_ctrl dut (.clk(clk), .rst(rst), .init_finished(fi), .acc_finished(fa), .gyr_finished(fg), .part_ctrl(pc));
  always #5 clk = ~clk;

  task automatic expect_pc(input part_e e, input string where);
    checks++;
    if (pc != e) begin failures++; $display("FAIL %s: got %0d exp %0d", where, pc, e); end
  endtask

  initial begin
    @(posedge clk); @(posedge clk); #1 rst = 0;
    expect_pc(PART_INIT, "first clock");
    @(posedge clk); #1;
    repeat (5) begin expect_pc(PART_NONE, "waiting for init"); @(posedge clk); #1; end
    fi = 1; #1 expect_pc(PART_ACC, "init finished"); @(posedge clk); #1 fi = 0;
    for (int r = 0; r < 20; r++) begin
      repeat ($urandom % 6 + 1) begin #1 expect_pc(PART_NONE, "busy"); @(posedge clk); #1; end
      if (r % 2 == 0) begin fa = 1; #1 expect_pc(PART_GYR, "acc finished"); end
      else            begin fg = 1; #1 expect_pc(PART_ACC, "gyr finished"); end
      @(posedge clk); #1 fa = 0; fg = 0;
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
