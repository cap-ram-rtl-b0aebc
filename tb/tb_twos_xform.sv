// tb_twos_xform: exhaustive - with sel the output plus the carry equals the
// negated code, without sel the code passes unchanged.
module tb_twos_xform;
  logic sel, cin;
  logic signed [6:0] din, dout;
  int checks = 0, failures = 0;
  twos_xform dut (.*);
  initial begin
    for (int s = 0; s < 2; s++)
      for (int v = -64; v < 64; v++) begin
        sel = s[0]; din = 7'(v);
        #1 checks++;
        if ((s && (int'(dout) + int'(cin) != -v)) || (!s && (dout != din || cin))) begin
          failures++; $display("FAIL sel=%0d v=%0d dout=%0d cin=%0d", s, v, dout, cin);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
