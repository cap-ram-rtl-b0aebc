// tb_serial_acc: random one-cycle sums (first) and two-cycle sums
// (16*high + low) with random carries; the accumulator must hold its value
// when in_valid is low.
module tb_serial_acc;
  logic clk = 0, rst_n = 0, in_valid = 0, first = 0, cin = 0;
  logic signed [6:0] din = 0;
  logic signed [11:0] acc;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  serial_acc dut (.*);
  task automatic chk(int exp, string what);
    checks++;
    if (int'(acc) != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, acc, exp); end
  endtask
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 100; it++) begin
      automatic int a = int'($urandom_range(0, 127)) - 64, b = int'($urandom_range(0, 127)) - 64;
      automatic int ca = $urandom_range(0, 1), cb = $urandom_range(0, 1);
      in_valid = 1; first = 1; din = 7'(a); cin = ca[0];
      @(negedge clk); chk(a + ca, "first");
      in_valid = 0; din = 7'(b); @(negedge clk); chk(a + ca, "hold");
      if (it % 2) begin
        in_valid = 1; first = 0; din = 7'(b); cin = cb[0];
        @(negedge clk); chk(16 * (a + ca) + b + cb, "second");
      end
      in_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
