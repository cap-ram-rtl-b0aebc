// tb_digital_periphery: random ADC codes for each of the seven weight
// formats, with one-cycle (4-bit input) and two-cycle (8-bit input) sums.
// Reference: result k at level L = sum over the 2^L ADCs from k*2^L of
// 2^(2^L-1-j) * V(ADC k*2^L+j), where the first ADC (weight MSB) counts
// negative for 2's complement formats of 2 bits or more, and V is the code
// (one cycle) or 16*high + low (two cycles). Single-ended formats get codes
// 0..63, ternary formats -64..63.
module tb_digital_periphery;
  import capram_pkg::*;
  logic clk = 0, rst_n = 0, code_valid = 0, first = 1, res_valid;
  adc_code_t [31:0] codes;
  wcfg_e wcfg = W1_2S;
  res_t [31:0] res;
  logic [1:0] res_level;
  int checks = 0, failures = 0;
  int v [32];
  always #5 clk = ~clk;
  digital_periphery dut (.*);
  initial begin
    #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 140; it++) begin
      int lvl, n, ter, two;
      wcfg = wcfg_e'(it % 7);
      ter = (wcfg >= W2_TER); two = (it / 7) % 2;
      lvl = (wcfg == W1_2S || wcfg == W2_TER) ? 0 : (wcfg == W2_2S || wcfg == W3_TER) ? 1 :
            (wcfg == W4_2S || wcfg == W5_TER) ? 2 : 3;
      n = 1 << lvl;
      for (int h = 0; h <= two; h++) begin
        for (int a = 0; a < 32; a++) begin
          automatic int c = ter ? int'($urandom_range(0, 127)) - 64 : int'($urandom_range(0, 63));
          if (it < 14) c = ter ? -64 : 63;
          codes[a] = 7'(c);
          v[a] = (h == 0) ? c : 16 * v[a] + c;
        end
        @(negedge clk); code_valid = 1; first = (h == 0);
        @(negedge clk); code_valid = 0;
      end
      checks++;
      begin
        automatic logic ok = res_valid && (int'(res_level) == lvl);
        for (int k = 0; k < 32; k++) begin
          automatic int exp = 0;
          if (k < 32 / n)
            for (int j = 0; j < n; j++) begin
              automatic int cf = 1 << (n - 1 - j);
              if (!ter && n > 1 && j == 0) cf = -cf;
              exp += cf * v[k * n + j];
            end
          if (int'(res[k]) != exp) begin
            ok = 0; $display("FAIL it %0d cfg %s k %0d got %0d exp %0d", it, wcfg.name(), k, res[k], exp);
          end
        end
        if (!ok) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
