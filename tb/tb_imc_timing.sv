// tb_imc_timing: one operation must give Pre, DAC, Mul, Acc (with sar_start)
// on consecutive clocks, then wait for conv_done; ready comes back in the
// conv_done clock, so back-to-back operations start every 12 clocks when
// conv_done arrives 8 clocks after sar_start.
module tb_imc_timing;
  import capram_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, ready, sar_start, conv_done = 0;
  imc_phase_t ph;
  int checks = 0, failures = 0, cnt = -1;
  int pre_times [$];
  always #5 clk = ~clk;
  imc_timing dut (.*);
  // Model of the SAR control: conv_done 8 clocks after sar_start.
  always @(posedge clk) begin
    if (sar_start) cnt <= 0;
    else if (cnt >= 0 && cnt < 7) cnt <= cnt + 1;
    else cnt <= -1;
  end
  always_comb conv_done = (cnt == 7);
  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  int t = 0;
  always @(negedge clk) begin
    t <= t + 1;
    if (ph.pre) pre_times.push_back(t);
  end
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    chk(ready && ph == '0, "idle ready");
    start = 1; @(negedge clk);
    chk(ph == '{pre:1, default:0} && !ready, "pre"); @(negedge clk);
    chk(ph == '{dac:1, default:0}, "dac"); @(negedge clk);
    chk(ph == '{mul:1, default:0}, "mul"); @(negedge clk);
    chk(ph == '{acc:1, default:0} && sar_start, "acc");
    repeat (40) @(negedge clk);
    start = 0;
    repeat (20) @(negedge clk);
    chk(ready && ph == '0, "idle again");
    chk(pre_times.size() >= 4, "several ops");
    for (int i = 1; i < pre_times.size(); i++)
      chk(pre_times[i] - pre_times[i-1] == 12, $sformatf("period %0d", pre_times[i] - pre_times[i-1]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
