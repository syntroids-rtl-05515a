// Testbench for video_ram: random writes, reads with one-clock latency,
// read and write in the same clock to different addresses.
module tb_video_ram;
  logic clk = 0, we = 0;
  logic [9:0] waddr = '0, raddr = '0;
  logic [2:0] wdata = '0, rdata;
  logic [2:0] ref_mem [1024];
  int checks = 0, failures = 0;

  video_ram #(.SIZE(32), .COLOR_W(3)) dut (.clk(clk), .we(we), .waddr(waddr), .wdata(wdata),
                                         .raddr(raddr), .rdata(rdata));
  always #5 clk = ~clk;

  initial begin
    for (int a = 0; a < 1024; a++) begin
      we = 1; waddr = 10'(a); wdata = 3'($urandom); ref_mem[a] = wdata;
      @(posedge clk); #1;
    end
    we = 0;
    for (int i = 0; i < 3000; i++) begin
      logic [9:0] ra;
      ra = 10'($urandom);
      raddr = ra;
      // concurrent write somewhere else
      we = ($urandom % 2) == 1; waddr = 10'($urandom); wdata = 3'($urandom);
      if (waddr == ra) we = 0;
      @(posedge clk);
      if (we) ref_mem[waddr] = wdata;
      #1;
      checks++;
      if (rdata != ref_mem[ra]) begin
        failures++;
        if (failures < 5) $display("FAIL addr %0d: got %0d exp %0d", ra, rdata, ref_mem[ra]);
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
