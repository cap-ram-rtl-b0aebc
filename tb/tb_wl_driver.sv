// tb_wl_driver: checks the row decode for every normal-access address
// (exactly one word line, in the addressed slice, write enable only on
// writes) and the IMC word lines for single-ended '+', single-ended '-' and
// differential modes.
module tb_wl_driver;
  import capram_pkg::*;
  logic mem_sel = 0, mem_we = 0, imc_mul = 0, imc_single = 0, imc_pol = 0;
  logic [8:0] mem_addr = 0;
  logic [2:0] imc_wl = 0;
  logic [63:0][7:0] wl;
  logic [63:0] wr_en, slice_en;
  int checks = 0, failures = 0;
  wl_driver dut (.*);
  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int a = 0; a < 512; a++) begin
      automatic logic ok;
      mem_sel = 1; mem_addr = 9'(a); mem_we = a[0] ^ a[4]; imc_mul = 0;
      #1 ok = 1;
      for (int s = 0; s < 64; s++)
        for (int w = 0; w < 8; w++)
          if (wl[s][w] != (s == a / 8 && w == a % 8)) ok = 0;
      for (int s = 0; s < 64; s++) if (wr_en[s] != (mem_we && s == a / 8)) ok = 0;
      chk(ok, $sformatf("addr %0d", a));
    end
    mem_sel = 0; #1 chk(wl == '0 && wr_en == '0, "idle");
    for (int m = 0; m < 3; m++)
      for (int w = 0; w < 8; w++) begin
        automatic logic ok;
        imc_mul = 1; imc_wl = 3'(w); imc_single = (m != 2); imc_pol = (m == 1);
        mem_sel = 1; mem_we = 1; mem_addr = 9'($urandom);
        #1 ok = 1;
        for (int s = 0; s < 64; s++) begin
          automatic logic act = (m == 2) || (s % 2 == m);
          if (slice_en[s] != act) ok = 0;
          if (wl[s] != (act ? 8'(1 << w) : 8'h0)) ok = 0;
        end
        chk(ok && wr_en == '0, $sformatf("imc mode %0d wl %0d", m, w));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
