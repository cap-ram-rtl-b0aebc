// tb_adder_tree: random signed accumulator values; each level output must
// equal the sum of its accumulators weighted 2^(bit position), with
// accumulator #7 the most significant.
module tb_adder_tree;
  logic signed [7:0][11:0] acc;
  logic signed [3:0][19:0] l1;
  logic signed [1:0][19:0] l2;
  logic signed [19:0] l3;
  int checks = 0, failures = 0;
  int a [8];
  adder_tree dut (.*);
  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask
  initial begin
    for (int it = 0; it < 200; it++) begin
      automatic int e3 = 0;
      for (int i = 0; i < 8; i++) begin
        a[i] = (it == 0) ? -1088 : (it == 1) ? 1071 : int'($urandom_range(0, 2175)) - 1088;
        acc[i] = 12'(a[i]);
      end
      #1;
      for (int i = 0; i < 4; i++) chk(int'(signed'(l1[i])), 2 * a[2*i+1] + a[2*i], "l1");
      for (int i = 0; i < 2; i++)
        chk(int'(signed'(l2[i])), 8 * a[4*i+3] + 4 * a[4*i+2] + 2 * a[4*i+1] + a[4*i], "l2");
      for (int i = 0; i < 8; i++) e3 += a[i] * (1 << i);
      chk(int'(l3), e3, "l3");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
