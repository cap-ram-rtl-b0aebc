// tb_cisar_adc: loads random line charges, fires random CI patterns on both
// sides and checks the comparator outputs against an independent running
// sum (each CI cell removes 1200 units of charge).
module tb_cisar_adc;
  import capram_pkg::*;
  logic clk = 0, load = 0, comp_p, comp_n;
  logic [Q_W-1:0] line_p = 0, line_n = 0;
  logic [15:0] ci_p = 0, ci_n = 0;
  longint qp, qn;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  cisar_adc dut (.*);
  task automatic chk(string what);
    checks++;
    if (comp_p != (qp > qn) || comp_n != (qn > qp)) begin
      failures++; $display("FAIL %s qp=%0d qn=%0d cp=%b cn=%b", what, qp, qn, comp_p, comp_n);
    end
  endtask
  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int it = 0; it < 40; it++) begin
      @(negedge clk); load = 1;
      line_p = Q_W'($urandom_range(0, 76800)); line_n = (it % 4 == 0) ? line_p : Q_W'($urandom_range(0, 76800));
      qp = line_p; qn = line_n;
      @(negedge clk); load = 0; chk("after load");
      for (int s = 0; s < 6; s++) begin
        ci_p = 16'($urandom); ci_n = (s % 2) ? 16'h0 : 16'($urandom);
        qp += 1200 * $countones(ci_p); qn += 1200 * $countones(ci_n);
        @(negedge clk); ci_p = 0; ci_n = 0; chk("after ci");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
