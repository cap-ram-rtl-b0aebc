// tb_sram_readout: write data reaches the global bitlines only while wr is
// high; a read registers
// the bitline word one clock later with rvalid, and the word is held while
// no read is issued.
module tb_sram_readout;
  logic clk = 0, rst_n = 0, rd = 0, wr = 0, rvalid;
  logic [127:0] wdata = 0, gbl_r = 0, gbl_w, rdata, exp;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  sram_readout dut (.*);
  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 30; it++) begin
      for (int k = 0; k < 128; k += 32) begin wdata[k +: 32] = $urandom; gbl_r[k +: 32] = $urandom; end
      wr = 1; #1 chk(gbl_w == wdata, "write path");
      wr = 0; #1 chk(gbl_w == '0, "write drivers off");
      exp = gbl_r; rd = 1;
      @(negedge clk); rd = 0; gbl_r = ~gbl_r;
      chk(rvalid && rdata == exp, "read data");
      @(negedge clk); chk(!rvalid && rdata == exp, "hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
