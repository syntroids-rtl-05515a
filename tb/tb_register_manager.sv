// Testbench for register_manager: random byte commands; every odd-index
// command must write {byte, last even-index byte} to register
// module*3 + index/2 one clock later, even-index commands write nothing.
module tb_register_manager;
  import syntroids_pkg::*;
  logic clk = 0, rst = 1;
  reg_cmd_t cmd = '0;
  logic [5:0] we;
  logic [15:0] wdata;
  int checks = 0, failures = 0, commits = 0;
  logic [7:0] cache = '0;

  register_manager dut (.clk(clk), .rst(rst), .cmd(cmd), .we(we), .wdata(wdata));
  always #5 clk = ~clk;

  initial begin
    @(posedge clk); @(posedge clk); #1 rst = 0;
    for (int n = 0; n < 1000; n++) begin
      logic [5:0] ewe; logic [15:0] ed;
      cmd = '{valid: ($urandom % 3) != 0, module_type: 1'($urandom), index: 3'($urandom % 6), data: 8'($urandom)};
      ewe = '0; ed = '0;
      if (cmd.valid) begin
        if (cmd.index[0] == 0) cache = cmd.data;
        else begin ewe[cmd.module_type * 3 + cmd.index / 2] = 1'b1; ed = {cmd.data, cache}; end
      end
      @(posedge clk); #1;
      checks++;
      if (we != ewe || (ewe != 0 && wdata != ed)) begin
        failures++; if (failures < 5) $display("FAIL n=%0d we=%b exp %b data %h exp %h", n, we, ewe, wdata, ed);
      end
      if (ewe != 0) commits++;
    end
    checks++; if (commits < 100) begin failures++; $display("FAIL few commits"); end
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
