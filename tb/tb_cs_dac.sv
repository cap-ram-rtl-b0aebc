// tb_cs_dac: checks the DAC model against the line 1200 mV - 40 mV * code:
// precharge to VDD, the level during the DAC phase, and that the level is
// held after the phase ends, for every code.
module tb_cs_dac;
  import capram_pkg::*;
  logic clk = 0, pre = 0, dac = 0;
  logic [3:0] code = 0;
  logic [MV_W-1:0] ibl;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  cs_dac dut (.clk(clk), .pre(pre), .dac(dac), .code(code), .ibl_mv(ibl));
  task automatic chk(int exp, string what);
    checks++;
    if (int'(ibl) != exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, ibl, exp); end
  endtask
  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int c = 0; c < 16; c++) begin
      @(negedge clk); pre = 1; dac = 0; code = 4'(c);
      @(negedge clk); pre = 0; chk(1200, "precharge");
      dac = 1; #1 chk(1200 - 40*c, "dac phase");
      @(negedge clk); dac = 0; code = ~code; #1 chk(1200 - 40*c, "hold");
      @(negedge clk); chk(1200 - 40*c, "hold2");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
