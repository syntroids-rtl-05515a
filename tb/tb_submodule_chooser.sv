// Testbench for submodule_chooser: after each selection only the selected
// part's SPI command and sensor type are forwarded, starting in the clock of
// the selection; register commands come from the previously selected part
// in that clock and from the new one afterwards; start pulses follow
// part_ctrl.
module tb_submodule_chooser;
  import syntroids_pkg::*;
  logic clk = 0, rst = 1;
  part_e pc = PART_NONE;
  spi_cmd_t ps [3];
  reg_cmd_t pr [3];
  logic pt [3];
  logic st [3];
  spi_cmd_t sc; reg_cmd_t rc; logic stype;
  int checks = 0, failures = 0;
  int sel = -1, sel_q = -1;

  submodule_chooser dut (.clk(clk), .rst(rst), .part_ctrl(pc), .part_spi(ps), .part_reg(pr),
                         .part_stype(pt), .start(st), .spi_cmd(sc), .reg_cmd(rc), .sensor_type(stype));
  always #5 clk = ~clk;

  initial begin
    for (int i = 0; i < 3; i++) begin ps[i] = '0; pr[i] = '0; pt[i] = 0; end
    @(posedge clk); @(posedge clk); #1 rst = 0;
    for (int n = 0; n < 500; n++) begin
      for (int i = 0; i < 3; i++) begin ps[i] = spi_cmd_t'($urandom); pr[i] = reg_cmd_t'($urandom); pt[i] = 1'($urandom); end
      pc = (($urandom % 4) == 0) ? part_e'($urandom % 4) : PART_NONE;
      sel_q = sel;
      if (pc != PART_NONE) sel = int'(pc) - 1;
      #1;
      checks++;
      if (sel < 0) begin
        if (sc != '0 || rc != '0) begin failures++; $display("FAIL forwarded before selection"); end
      end else if (sc != ps[sel] || stype != pt[sel]) begin
        failures++; if (failures < 5) $display("FAIL spi n=%0d sel=%0d", n, sel);
      end
      checks++;
      if (sel_q < 0 ? rc != '0 : rc != pr[sel_q]) begin
        failures++; if (failures < 5) $display("FAIL reg n=%0d sel_q=%0d", n, sel_q);
      end
      for (int i = 0; i < 3; i++) begin
        checks++;
        if (st[i] != (int'(pc) == i + 1)) begin failures++; $display("FAIL start[%0d]", i); end
      end
      @(posedge clk); #1;
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
