// tb_sar_adc_logic: the per-ADC SAR logic run with the shared SAR control and
// the analog ADC model around it. Random line charges in all three modes
// (differential, single '+', single '-'); the code must equal
// floor((Qmeasured - Qother) / 1200) clipped to -64..63 (differential) or
// to 0..63 with the sign dropped (single-ended), valid one clock after the
// last step, 9 clocks after start.
module tb_sar_adc_logic;
  import capram_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, step, hold, last, load = 0;
  logic [2:0] bit_idx;
  logic [15:0] en, ci_p, ci_n;
  logic comp_p, comp_n, single = 0, swap = 0, valid;
  logic [Q_W-1:0] line_p = 0, line_n = 0;
  adc_code_t code;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  sar_ctrl u_ctrl (.clk(clk), .rst_n(rst_n), .start(start), .busy(busy), .step(step),
                   .hold(hold), .bit_idx(bit_idx), .last(last), .en(en));
  cisar_adc u_ana (.clk(clk), .load(load), .line_p(line_p), .line_n(line_n),
                   .ci_p(ci_p), .ci_n(ci_n), .comp_p(comp_p), .comp_n(comp_n));
  sar_adc_logic dut (.clk(clk), .rst_n(rst_n), .step(step), .hold(hold), .bit_idx(bit_idx),
                     .last(last), .en(en), .single(single), .swap(swap), .comp_p(comp_p),
                     .comp_n(comp_n), .ci_p(ci_p), .ci_n(ci_n), .code(code), .valid(valid));
  function automatic int fdiv(int a, int b);  // floor division
    int q = a / b;
    if ((a % b != 0) && (a < 0)) q -= 1;
    return q;
  endfunction
  initial begin
    #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      automatic int m = it % 3, qp, qn, exp, cyc;
      single = (m != 0); swap = (m == 2);
      qp = (m == 2) ? 0 : int'($urandom_range(0, 1920)) * 40;
      qn = (m == 1) ? 0 : int'($urandom_range(0, 1920)) * 40;
      if (it < 6) begin qp = (m == 2) ? 0 : 1200 * it; qn = (m == 1) ? 0 : 1200 * it; end
      if (m == 0) begin exp = fdiv(qp - qn, 1200); if (exp > 63) exp = 63; if (exp < -64) exp = -64; end
      else begin exp = ((m == 1) ? qp : qn) / 1200; if (exp > 63) exp = 63; end
      @(negedge clk); load = 1; line_p = Q_W'(qp); line_n = Q_W'(qn); start = 1;
      @(negedge clk); load = 0; start = 0;
      cyc = 0;
      while (!valid && cyc < 20) begin @(negedge clk); cyc++; end
      checks++;
      if (int'(code) != exp || cyc != 8) begin
        failures++; $display("FAIL mode %0d qp=%0d qn=%0d code=%0d exp=%0d cyc=%0d", m, qp, qn, code, exp, cyc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
