// tb_capram_top: end-to-end test of the full-size macro (512 x 128 array,
// 32 ADCs), default parameters. It fills all 512 rows with random weight
// bits through the SRAM port, reads a sample of rows back, and then issues
// IMC operations in every weight format: 2's complement 1/2/4/8 bit on the
// '+' and on the '-' slices (single-ended ADC), ternary 2/3/5 bit
// (differential ADC), 4-bit inputs in one operation and 8-bit inputs as
// two operations (high nibble, then low nibble), issued back to back.
// A reference model computes each slice MAC sum_i w_i x_i, the ADC code
// floor(MAC/30) (single-ended, clipped to 63) or floor((MAC+ - MAC-)/30)
// (differential, clipped to -64..63), and the shift-and-add over the ADCs
// of each weight. Checked: every result, the 12-clock operation period,
// and that each mechanism occurred (counted and reported).
module tb_capram_top;
  import capram_pkg::*;
  logic clk = 0, rst_n = 0;
  logic mem_req = 0, mem_we = 0, mem_ready, mem_rvalid;
  logic [8:0] mem_addr = 0;
  logic [127:0] mem_wdata = 0, mem_rdata;
  logic op_valid = 0, op_ready, op_pol = 0, op_first = 1;
  logic [127:0][3:0] op_x = '0;
  logic [2:0] op_wl = 0;
  wcfg_e op_wcfg = W1_2S;
  res_t [31:0] res;
  logic [1:0] res_level;
  logic res_valid;

  logic [127:0] wmem [64][8];   // [slice][row]
  int checks = 0, failures = 0;
  // mechanism counters
  int n_cfg [7];
  int n_single_p = 0, n_single_n = 0, n_diff = 0, n_twocycle = 0, n_b2b = 0;
  int n_clip = 0, n_read = 0, n_write = 0;

  always #5 clk = ~clk;

  capram_top dut (.*);

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int mac(int s, int r, logic [127:0][3:0] x);
    int m = 0;
    for (int c = 0; c < 128; c++) if (wmem[s][r][c]) m += int'(x[c]);
    return m;
  endfunction

  function automatic int fdiv30(int a);
    int q = a / 30;
    if ((a % 30 != 0) && (a < 0)) q -= 1;
    return q;
  endfunction

  // ADC code of pair p for one operation (reference, counts clipping).
  function automatic int adc_ref(int p, int r, logic [127:0][3:0] x, wcfg_e w, logic pol);
    int c;
    if (w >= W2_TER) begin
      c = fdiv30(mac(2*p, r, x) - mac(2*p+1, r, x));
      if (c > 63) begin c = 63; n_clip++; end
      if (c < -64) begin c = -64; n_clip++; end
    end else begin
      c = mac(2*p + int'(pol), r, x) / 30;
      if (c > 63) begin c = 63; n_clip++; end
    end
    return c;
  endfunction

  function automatic int lvl_of(wcfg_e w);
    case (w)
      W1_2S, W2_TER: return 0;
      W2_2S, W3_TER: return 1;
      W4_2S, W5_TER: return 2;
      default:       return 3;
    endcase
  endfunction

  // Expected results; v[] holds per-ADC accumulated values.
  task automatic expect_res(int v[32], wcfg_e w);
    int n = 1 << lvl_of(w);
    logic ok = (int'(res_level) == lvl_of(w));
    for (int k = 0; k < 32; k++) begin
      automatic int e = 0;
      if (k < 32 / n)
        for (int j = 0; j < n; j++) begin
          int cf = 1 << (n - 1 - j);
          if (w < W2_TER && n > 1 && j == 0) cf = -cf;
          e += cf * v[k * n + j];
        end
      if (int'(res[k]) != e) begin
        ok = 0;
        $display("FAIL %s k=%0d got %0d exp %0d", w.name(), k, res[k], e);
      end
    end
    chk(ok, $sformatf("results %s", w.name()));
  endtask

  // Queue of expected value sets, one per operation that ends a sum.
  typedef struct { int v[32]; wcfg_e w; } exp_t;
  exp_t expq [$];
  int issue_t [$];
  int tcnt = 0;
  always @(negedge clk) tcnt <= tcnt + 1;

  always @(negedge clk) if (res_valid && rst_n) begin
    if (expq.size() == 0) chk(0, "unexpected result");
    else if (expq[0].w == W1_2S && expq[0].v[0] == -999) void'(expq.pop_front());  // partial (high half)
    else begin
      automatic exp_t e = expq.pop_front();
      expect_res(e.v, e.w);
    end
  end

  int acc_v [32];
  task automatic issue(logic [127:0][3:0] x, int r, wcfg_e w, logic pol, logic first, logic ends);
    exp_t e;
    while (!op_ready) @(negedge clk);
    op_valid = 1; op_x = x; op_wl = 3'(r); op_wcfg = w; op_pol = pol; op_first = first;
    issue_t.push_back(tcnt);
    for (int p = 0; p < 32; p++) begin
      automatic int c = adc_ref(p, r, x, w, pol);
      acc_v[p] = first ? c : 16 * acc_v[p] + c;
    end
    if (ends) begin e.v = acc_v; e.w = w; end
    else begin e.v = acc_v; e.v[0] = -999; e.w = W1_2S; end
    expq.push_back(e);
    @(negedge clk);
    op_valid = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    // ---- fill the array through the SRAM port
    for (int a = 0; a < 512; a++) begin
      automatic logic [127:0] d;
      for (int k = 0; k < 128; k += 32) d[k +: 32] = $urandom;
      if (a / 8 == 0 && a % 8 == 7) d = '1;            // a full row for clipping
      wmem[a / 8][a % 8] = d;
      mem_req = 1; mem_we = 1; mem_addr = 9'(a); mem_wdata = d;
      @(negedge clk);
      if (mem_ready) n_write++;
    end
    mem_req = 0; mem_we = 0;
    for (int i = 0; i < 40; i++) begin
      automatic int a = (i * 37) % 512;
      mem_req = 1; mem_addr = 9'(a);
      @(negedge clk); mem_req = 0;
      chk(mem_rvalid && mem_rdata == wmem[a / 8][a % 8], $sformatf("read row %0d", a));
      n_read++;
    end
    // ---- IMC operations, issued back to back
    for (int it = 0; it < 42; it++) begin
      automatic logic [127:0][3:0] x, x2;
      automatic wcfg_e w = wcfg_e'(it % 7);
      automatic logic pol = (it / 7) % 2;
      automatic int r = (it * 3) % 8;
      automatic logic eight = (it % 3 == 2);
      for (int c = 0; c < 128; c++) begin
        x[c] = 4'($urandom); x2[c] = 4'($urandom);
        if (it < 7) x[c] = 4'hF;
      end
      if (it < 7) r = 7;
      n_cfg[w]++;
      if (w >= W2_TER) n_diff++; else if (pol) n_single_n++; else n_single_p++;
      if (eight) begin
        issue(x, r, w, pol, 1'b1, 1'b0);
        issue(x2, r, w, pol, 1'b0, 1'b1);
        n_twocycle++;
      end else issue(x, r, w, pol, 1'b1, 1'b1);
    end
    repeat (40) @(negedge clk);
    chk(expq.size() == 0, "all results returned");
    for (int i = 1; i < issue_t.size(); i++) begin
      if (issue_t[i] - issue_t[i-1] == 12) n_b2b++;
      chk(issue_t[i] - issue_t[i-1] >= 12, "operation period");
    end
    // ---- mechanisms
    for (int i = 0; i < 7; i++) chk(n_cfg[i] > 0, $sformatf("format %0d used", i));
    chk(n_single_p > 0, "single-ended +"); chk(n_single_n > 0, "single-ended -");
    chk(n_diff > 0, "differential"); chk(n_twocycle > 0, "8-bit two-cycle input");
    chk(n_b2b > 0, "back-to-back at 12 clocks"); chk(n_clip > 0, "ADC clipping");
    chk(n_read > 0 && n_write == 512, "SRAM read/write");
    $display("mechanisms: formats %0d/%0d/%0d/%0d/%0d/%0d/%0d single+ %0d single- %0d diff %0d two-cycle %0d b2b %0d clip %0d reads %0d writes %0d",
             n_cfg[0], n_cfg[1], n_cfg[2], n_cfg[3], n_cfg[4], n_cfg[5], n_cfg[6],
             n_single_p, n_single_n, n_diff, n_twocycle, n_b2b, n_clip, n_read, n_write);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
