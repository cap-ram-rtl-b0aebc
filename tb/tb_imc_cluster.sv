// tb_imc_cluster: writes random bytes into the eight cells, reads each cell
// back, then runs Pre/DAC/Mul/Acc with each word line and random input
// voltages; expects VDD - V_IN during Acc when the selected cell is 1 and
// 0 when it is 0, and 0 outside the Acc phase.
module tb_imc_cluster;
  import capram_pkg::*;
  logic clk = 0, wr_en = 0, gbl_w = 0, gbl_r;
  logic [7:0] wl = 0;
  imc_phase_t ph = '0;
  logic [MV_W-1:0] ibl = 0, drop;
  int checks = 0, failures = 0;
  logic [7:0] mem;
  always #5 clk = ~clk;
  imc_cluster dut (.clk(clk), .wl(wl), .wr_en(wr_en), .gbl_w(gbl_w), .gbl_r(gbl_r),
                   .ph(ph), .ibl_mv(ibl), .drop_mv(drop));
  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int it = 0; it < 20; it++) begin
      mem = 8'($urandom);
      for (int r = 0; r < 8; r++) begin
        @(negedge clk); wl = 8'(1 << r); wr_en = 1; gbl_w = mem[r];
      end
      @(negedge clk); wr_en = 0;
      for (int r = 0; r < 8; r++) begin
        wl = 8'(1 << r); #1 chk(gbl_r == mem[r], "read");
      end
      wl = 0; #1 chk(gbl_r == 0, "no wl");
      for (int r = 0; r < 8; r++) begin
        automatic int v = 600 + int'($urandom_range(0, 15)) * 40;
        @(negedge clk); ph = '{pre:1, default:0};
        @(negedge clk); ph = '{dac:1, default:0}; ibl = MV_W'(v);
        @(negedge clk); ph = '{mul:1, default:0}; wl = 8'(1 << r); ibl = 0;
        @(negedge clk); ph = '{acc:1, default:0}; wl = 0;
        #1 chk(int'(drop) == (mem[r] ? 1200 - v : 0), $sformatf("mac row %0d v %0d", r, v));
        @(negedge clk); ph = '0; #1 chk(drop == 0, "idle");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
