// tb_cnn_workloads: the published networks run on the full-size macro with
// random weights and inputs. First the four layers of the pruned LeNet-5,
// all held in the macro at once, each layer in its own rows; then one
// 3x3x28 layer of ResNet-20 (layers 2 to 7), which is loaded after LeNet-5.
// C1 (row 0): 5 kernels of 5x5, 4-bit 2's complement weights, 8-bit input
// pixels, single-ended ADCs; a random 28x28 8-bit image is convolved at all
// 24x24 = 576 output positions.
// C3 (row 1): 16 kernels of 5x5x5 = 125 ternary weights, 4-bit inputs,
// differential ADCs, kernel k in pair k ('+' cell for +1, '-' cell for -1).
// FC5 (rows 2..5): 64 neurons of 256 ternary weights (256 = 16 maps of 4x4
// after C3 and pooling, the usual LeNet-5 size). A neuron is wider than the
// 128 columns and there are more neurons than the 32 pairs, so it takes four
// rows: row 2 + 2g + h holds inputs 128h..128h+127 of neurons 32g..32g+31,
// and the two halves of each neuron are added outside the macro.
// FC6 (row 6): 10 neurons of 64 ternary weights in pairs 0..9.
// C3, FC5 and FC6 get 16 random input vectors each; expected code per
// operation = floor((M+ - M-)/30) clipped to -64..63, M+/M- being the input
// sums over the +1/-1 weights.
// ResNet-20 layer (rows 0..3, rewritten): 28 kernels of 3x3x28 = 252 4-bit
// 2's complement weights, 4-bit inputs, single-ended ADCs. A kernel is wider
// than 128 columns, so it is split into two 126-input halves h, and all
// filters of one operation must share the same inputs: half h of kernel k
// sits in row 2h + k/16, polarity (k%16)/8, pairs 4(k%8)..4(k%8)+3. Each
// 252-input vector takes 8 operations (4 rows x 2 polarities); 4 vectors
// are run, each result is checked, and the halves are added outside.
// C1 mapping, as in the macro's mapping rules: kernel element e (= 5*ky + kx)
// goes to column e; bit b of the weight of kernel k goes to the '+' slice of
// pair 4k + (3 - b) (MSB in the lowest pair), row 0; unused columns hold 0.
// Each output position takes two operations (high nibble, low nibble);
// the result after the high nibble is a partial sum and is skipped.
// Checked: every result equals the bit-slice reference
//   sum_b s_b 2^b (16*A_b(hi) + A_b(lo)),  A_b(h) = min(floor(M_b(h)/30), 63)
// with M_b(h) the 1-bit x 4-bit MAC of weight bit b and nibble h, and s_3 = -1;
// the operation period is 12 clocks. The mean distance from the exact
// convolution, caused by flooring each partial sum to whole LSBs, is printed.
module tb_cnn_workloads;
  import capram_pkg::*;
  logic clk = 0, rst_n = 0;
  logic mem_req = 0, mem_we = 0, mem_ready, mem_rvalid;
  logic [8:0] mem_addr = 0;
  logic [127:0] mem_wdata = 0, mem_rdata;
  logic op_valid = 0, op_ready, op_pol = 0, op_first = 1;
  logic [127:0][3:0] op_x = '0;
  logic [2:0] op_wl = 0;
  wcfg_e op_wcfg = W4_2S;
  res_t [31:0] res;
  logic [1:0] res_level;
  logic res_valid;
  int checks = 0, failures = 0;

  int w [5][25];        // signed 4-bit weights
  int img [28][28];     // 8-bit pixels
  int t3 [16][125];     // C3 ternary weights
  int t5 [64][256];     // FC5 ternary weights
  int t6 [10][64];      // FC6 ternary weights
  int rw [28][252];     // ResNet-20 layer, signed 4-bit weights
  logic [127:0] rowdat [64][8];
  int expq [$];   // five expected values per output position
  longint abs_err = 0;
  int n_res = 0;
  int tern_exp [32];
  bit in_c1 = 1;

  always #5 clk = ~clk;
  capram_top dut (.*);

  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int code_of(int k, int b, int oy, int ox, int h);
    int m = 0;
    for (int e = 0; e < 25; e++)
      if ((w[k][e] >> b) & 1) m += (img[oy + e / 5][ox + e % 5] >> (4 * h)) & 15;
    m = m / 30;
    return (m > 63) ? 63 : m;
  endfunction

  bit finq [$];   // per operation: does its result end a sum?
  always @(negedge clk) if (!in_c1) ;
  else if (res_valid && rst_n && finq.size() > 0 && !finq[0]) void'(finq.pop_front());
  else if (res_valid && rst_n) begin
    automatic int e[5];
    if (finq.size() > 0) void'(finq.pop_front());
    checks++;
    if (expq.size() == 0) begin failures++; $display("FAIL unexpected result"); end
    else begin
      automatic logic ok = 1;
      for (int k = 0; k < 5; k++) e[k] = expq.pop_front();
      for (int k = 0; k < 5; k++) if (int'(res[k]) != e[k]) ok = 0;
      if (!ok) begin failures++; $display("FAIL position %0d: got %0d %0d %0d %0d %0d exp %0d %0d %0d %0d %0d", n_res, res[0], res[1], res[2], res[3], res[4], e[0], e[1], e[2], e[3], e[4]); end
      n_res++;
    end
  end

  initial begin
    automatic int t_last = 0, t = 0;
    for (int k = 0; k < 5; k++)
      for (int e = 0; e < 25; e++) w[k][e] = int'($urandom_range(0, 15)) - 8;
    for (int y = 0; y < 28; y++)
      for (int x = 0; x < 28; x++) img[y][x] = $urandom_range(0, 255);
    repeat (3) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 16; k++) for (int e = 0; e < 125; e++) t3[k][e] = int'($urandom_range(0, 2)) - 1;
    for (int k = 0; k < 64; k++) for (int e = 0; e < 256; e++) t5[k][e] = int'($urandom_range(0, 2)) - 1;
    for (int k = 0; k < 10; k++) for (int e = 0; e < 64; e++) t6[k][e] = int'($urandom_range(0, 2)) - 1;
    // build every row: C1 in row 0, C3 in row 1, FC6 in row 6
    for (int sl = 0; sl < 64; sl++) for (int r = 0; r < 8; r++) rowdat[sl][r] = '0;
    for (int p = 0; p < 20; p++)
      for (int e = 0; e < 25; e++) rowdat[2*p][0][e] = 1'((w[p / 4][e] >> (3 - p % 4)) & 1);
    for (int k = 0; k < 16; k++)
      for (int e = 0; e < 125; e++) begin
        rowdat[2*k][1][e]   = (t3[k][e] == 1);
        rowdat[2*k+1][1][e] = (t3[k][e] == -1);
      end
    for (int k = 0; k < 64; k++)
      for (int e = 0; e < 256; e++) begin
        rowdat[2*(k % 32)][2 + 2*(k / 32) + e / 128][e % 128]   = (t5[k][e] == 1);
        rowdat[2*(k % 32)+1][2 + 2*(k / 32) + e / 128][e % 128] = (t5[k][e] == -1);
      end
    for (int k = 0; k < 10; k++)
      for (int e = 0; e < 64; e++) begin
        rowdat[2*k][6][e]   = (t6[k][e] == 1);
        rowdat[2*k+1][6][e] = (t6[k][e] == -1);
      end
    for (int sl = 0; sl < 64; sl++)
      for (int r = 0; r < 8; r++) begin
        mem_req = 1; mem_we = 1; mem_addr = 9'(sl * 8 + r); mem_wdata = rowdat[sl][r];
        @(negedge clk);
      end
    mem_req = 0; mem_we = 0;
    for (int oy = 0; oy < 24; oy++)
      for (int ox = 0; ox < 24; ox++) begin
        automatic int e[5];
        for (int k = 0; k < 5; k++) begin
          automatic int exact = 0;
          e[k] = 0;
          for (int b = 0; b < 4; b++) begin
            automatic int v = 16 * code_of(k, b, oy, ox, 1) + code_of(k, b, oy, ox, 0);
            e[k] += (b == 3) ? -8 * v : (1 << b) * v;
          end
          for (int i = 0; i < 25; i++) exact += w[k][i] * img[oy + i / 5][ox + i % 5];
          // the macro's LSB is 30 input units: compare on that scale
          abs_err += (exact / 30 > e[k]) ? exact / 30 - e[k] : e[k] - exact / 30;
        end
        for (int k = 0; k < 5; k++) expq.push_back(e[k]);
        for (int h = 1; h >= 0; h--) begin
          while (!op_ready) begin @(negedge clk); t++; end
          if (t_last != 0) begin
            checks++;
            if (t - t_last != 12) begin failures++; $display("FAIL period %0d", t - t_last); end
          end
          t_last = t;
          finq.push_back(h == 0);
          op_valid = 1; op_first = (h == 1); op_wl = 0; op_pol = 0; op_wcfg = W4_2S;
          for (int c = 0; c < 128; c++)
            op_x[c] = (c < 25) ? 4'((img[oy + c / 5][ox + c % 5] >> (4 * h)) & 15) : 4'h0;
          @(negedge clk); t++;
          op_valid = 0;
        end
      end
    repeat (40) @(negedge clk);
    checks++;
    if (n_res != 576 || expq.size() != 0) begin failures++; $display("FAIL C1 got %0d results", n_res); end
    n_res = 0; in_c1 = 0;
    // op 0: C3 (row 1); ops 1..4: FC5 (rows 2..5); op 5: FC6 (row 6)
    for (int v = 0; v < 16; v++) begin
      automatic int xv [256];
      automatic int fc5_sum [64];
      for (int c = 0; c < 256; c++) xv[c] = (v == 0) ? 15 : int'($urandom_range(0, 15));
      for (int op = 0; op < 6; op++) begin
        automatic int ncol = (op == 0) ? 125 : (op == 5) ? 64 : 128;
        automatic int g = (op - 1) / 2, h = (op - 1) % 2;
        for (int k = 0; k < 32; k++) begin
          automatic int mp = 0, mn = 0, cd;
          for (int c = 0; c < ncol; c++) begin
            automatic int tw = (op == 0) ? t3[k % 16][c] : (op == 5) ? t6[k % 10][c]
                               : t5[32 * g + k][128 * h + c];
            automatic int xi = (op >= 1 && op <= 4) ? xv[128 * h + c] : xv[c];
            if (!(op == 0 && k >= 16) && !(op == 5 && k >= 10)) begin
              if (tw == 1) mp += xi;
              if (tw == -1) mn += xi;
            end
          end
          cd = (mp - mn) / 30;
          if (((mp - mn) % 30 != 0) && (mp - mn < 0)) cd -= 1;
          if (cd > 63) cd = 63;
          if (cd < -64) cd = -64;
          tern_exp[k] = cd;
        end
        while (!op_ready) @(negedge clk);
        op_valid = 1; op_first = 1; op_wl = 3'(op + 1); op_wcfg = W2_TER;
        for (int c = 0; c < 128; c++) op_x[c] = (c < ncol) ? 4'((op >= 1 && op <= 4) ? xv[128 * h + c] : xv[c]) : 4'h0;
        @(negedge clk); op_valid = 0;
        while (!res_valid) @(negedge clk);
        checks++;
        begin
          automatic logic ok = (res_level == 2'd0);
          for (int k = 0; k < 32; k++) if (int'(res[k]) != tern_exp[k]) ok = 0;
          if (!ok) begin failures++; $display("FAIL vector %0d op %0d: got %0d exp %0d", v, op, res[0], tern_exp[0]); end
        end
        // FC5: the two halves of each neuron are added outside the macro
        if (op >= 1 && op <= 4)
          for (int k = 0; k < 32; k++) fc5_sum[32 * g + k] = (h == 0) ? int'(res[k]) : fc5_sum[32 * g + k] + int'(res[k]);
        n_res++;
        @(negedge clk);
      end
      if (v == 1) $display("FC5 neuron 0, vector 1: %0d (sum of two half-neuron codes)", fc5_sum[0]);
    end
    checks++;
    if (n_res != 96) begin failures++; $display("FAIL ternary layers got %0d results", n_res); end
    // ResNet-20, one of layers 2..7
    for (int k = 0; k < 28; k++) for (int e = 0; e < 252; e++) rw[k][e] = int'($urandom_range(0, 15)) - 8;
    for (int sl = 0; sl < 64; sl++) for (int r = 0; r < 4; r++) rowdat[sl][r] = '0;
    for (int k = 0; k < 28; k++)
      for (int h = 0; h < 2; h++)
        for (int b = 0; b < 4; b++)
          for (int c = 0; c < 126; c++)
            rowdat[2 * (4 * (k % 8) + 3 - b) + (k % 16) / 8][2 * h + k / 16][c] = 1'((rw[k][126 * h + c] >> b) & 1);
    for (int sl = 0; sl < 64; sl++)
      for (int r = 0; r < 4; r++) begin
        @(negedge clk);
        while (!mem_ready) @(negedge clk);
        mem_req = 1; mem_we = 1; mem_addr = 9'(sl * 8 + r); mem_wdata = rowdat[sl][r];
        @(negedge clk);
        mem_req = 0; mem_we = 0;
      end
    for (int v = 0; v < 4; v++) begin
      automatic int xv [252];
      automatic int ksum [28];
      for (int c = 0; c < 252; c++) xv[c] = int'($urandom_range(0, 15));
      for (int op = 0; op < 8; op++) begin
        automatic int row = op / 2, pol = op % 2, h = row / 2;
        automatic int ex [8];
        for (int j = 0; j < 8; j++) begin
          automatic int k = 16 * (row % 2) + 8 * pol + j;
          ex[j] = 0;
          if (k < 28)
            for (int b = 0; b < 4; b++) begin
              automatic int m = 0;
              for (int c = 0; c < 126; c++) if ((rw[k][126 * h + c] >> b) & 1) m += xv[126 * h + c];
              m = m / 30;
              if (m > 63) m = 63;
              ex[j] += (b == 3) ? -8 * m : (1 << b) * m;
            end
        end
        while (!op_ready) @(negedge clk);
        op_valid = 1; op_first = 1; op_wl = 3'(row); op_pol = 1'(pol); op_wcfg = W4_2S;
        for (int c = 0; c < 128; c++) op_x[c] = (c < 126) ? 4'(xv[126 * h + c]) : 4'h0;
        @(negedge clk); op_valid = 0;
        while (!res_valid) @(negedge clk);
        checks++;
        begin
          automatic logic ok = (res_level == 2'd2);
          for (int j = 0; j < 8; j++) if (int'(res[j]) != ex[j]) ok = 0;
          if (!ok) begin failures++; $display("FAIL ResNet vector %0d op %0d: got %0d exp %0d", v, op, res[0], ex[0]); end
        end
        for (int j = 0; j < 8; j++) begin
          automatic int k = 16 * (row % 2) + 8 * pol + j;
          if (k < 28) ksum[k] = (h == 0) ? int'(res[j]) : ksum[k] + int'(res[j]);
        end
        n_res++;
        @(negedge clk);
      end
      if (v == 0) $display("ResNet-20 layer, kernel 0, vector 0: %0d (sum of two half-kernel results)", ksum[0]);
    end
    checks++;
    if (n_res != 96 + 32) begin failures++; $display("FAIL ResNet layer: %0d results in all", n_res); end
    $display("C1: 576 positions x 5 kernels, mean |macro - exact/30| = %0.2f", real'(abs_err) / (576.0 * 5.0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
