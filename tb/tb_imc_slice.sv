// tb_imc_slice: full 128-column slice. Fills the eight rows with random
// bits through the global bitlines, reads them back, then runs MAC phases
// with random 4-bit inputs (as IBL voltages 1200 - 40*x mV) and checks the
// output-line charge against 40 * sum_i w_i x_i, plus all-ones and a
// disabled slice (charge 0).
module tb_imc_slice;
  import capram_pkg::*;
  localparam int N = 128;
  logic clk = 0, wr_en = 0, en = 1;
  logic [7:0] wl = 0;
  logic [N-1:0] gbl_w = 0, gbl_r;
  imc_phase_t ph = '0;
  logic [N-1:0][MV_W-1:0] ibl;
  logic [Q_W-1:0] line_q;
  logic [N-1:0] mem [8];
  int x [N];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  imc_slice dut (.clk(clk), .wl(wl), .wr_en(wr_en), .gbl_w(gbl_w), .gbl_r(gbl_r),
                 .ph(ph), .en(en), .ibl_mv(ibl), .line_q(line_q));
  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic run_mac(int r, logic e, int exp);
    @(negedge clk); en = e; ph = '{pre:1, default:0};
    @(negedge clk); ph = '{dac:1, default:0};
    for (int c = 0; c < N; c++) ibl[c] = MV_W'(1200 - 40 * x[c]);
    @(negedge clk); ph = '{mul:1, default:0}; wl = 8'(1 << r);
    @(negedge clk); ph = '{acc:1, default:0}; wl = 0;
    #1 chk(int'(line_q) == exp, $sformatf("line row %0d got %0d exp %0d", r, line_q, exp));
    @(negedge clk); ph = '0;
  endtask
  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int c = 0; c < N; c++) ibl[c] = 1200;
    for (int r = 0; r < 8; r++) begin
      for (int k = 0; k < N; k += 32) mem[r][k +: 32] = $urandom;
      @(negedge clk); wl = 8'(1 << r); wr_en = 1; gbl_w = mem[r];
    end
    @(negedge clk); wr_en = 0;
    for (int r = 0; r < 8; r++) begin
      wl = 8'(1 << r); #1 chk(gbl_r == mem[r], "read");
    end
    wl = 0;
    for (int it = 0; it < 24; it++) begin
      automatic int r = it % 8, exp = 0;
      for (int c = 0; c < N; c++) begin
        x[c] = (it == 0) ? 15 : int'($urandom_range(0, 15));
        if (mem[r][c]) exp += 40 * x[c];
      end
      run_mac(r, 1'b1, exp);
    end
    run_mac(1, 1'b0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
