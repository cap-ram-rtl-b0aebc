// tb_sar_ctrl: checks the eight-step sequence after start - EN patterns
// FFFF, FFFF(hold), FFFF, FF00, F000, C000, 8000, 0000, the bit index of
// each step, last on the final step, busy, and that a conversion takes
// exactly 8 clocks and a new start is accepted right after.
module tb_sar_ctrl;
  logic clk = 0, rst_n = 0, start = 0, busy, step, hold, last;
  logic [2:0] bit_idx;
  logic [15:0] en;
  int checks = 0, failures = 0;
  localparam logic [15:0] EXP_EN [8] = '{16'hFFFF, 16'hFFFF, 16'hFFFF, 16'hFF00, 16'hF000, 16'hC000, 16'h8000, 16'h0000};
  localparam int EXP_BIT [8] = '{6, 6, 5, 4, 3, 2, 1, 0};
  always #5 clk = ~clk;
  sar_ctrl dut (.*);
  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    chk(!busy && !step, "idle");
    for (int conv = 0; conv < 3; conv++) begin
      start = 1; @(negedge clk); start = 0;
      for (int s = 0; s < 8; s++) begin
        chk(step && busy && en == EXP_EN[s] && int'(bit_idx) == EXP_BIT[s] &&
            hold == (s == 1) && last == (s == 7), $sformatf("conv %0d step %0d en %h", conv, s, en));
        if (s < 7) @(negedge clk);
        else if (conv < 2) start = 1;
      end
      @(negedge clk);
      if (conv == 2) chk(!busy, "idle after last");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
