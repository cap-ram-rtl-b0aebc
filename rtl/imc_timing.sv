// imc_timing: the timing controller of one global cycle. An accepted
// operation (start while ready) runs the array phases Pre, DAC, Mul and Acc,
// one clock each (the order of the paper's phase diagram), pulses sar_start
// in the Acc clock and then waits for the shared SAR control to report its
// last step (conv_done). ready is high in IDLE and in the clock of the last
// SAR step, so back-to-back operations take 12 clocks each: 4 phase clocks
// + 8 SAR steps. The paper runs IMC and conversion serially in one 70 MHz
// global cycle; the clock here is the faster SAR clock, so one global cycle
// is 12 clocks - that ratio is this design's choice.
module imc_timing
  import capram_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  output logic       ready,
  output imc_phase_t ph,
  output logic       sar_start,
  input  logic       conv_done
);
  typedef enum logic [2:0] {S_IDLE, S_PRE, S_DAC, S_MUL, S_ACC, S_CONV} state_e;
  state_e st_q, st_d;

  always_comb begin
    ready = (st_q == S_IDLE) || (st_q == S_CONV && conv_done);
    st_d  = st_q;
    case (st_q)
      S_IDLE:  if (start) st_d = S_PRE;
      S_PRE:   st_d = S_DAC;
      S_DAC:   st_d = S_MUL;
      S_MUL:   st_d = S_ACC;
      S_ACC:   st_d = S_CONV;
      S_CONV:  if (conv_done) st_d = start ? S_PRE : S_IDLE;
      default: st_d = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) st_q <= S_IDLE;
    else        st_q <= st_d;
  end

  always_comb begin
    ph.pre    = st_q == S_PRE;
    ph.dac    = st_q == S_DAC;
    ph.mul    = st_q == S_MUL;
    ph.acc    = st_q == S_ACC;
    sar_start = st_q == S_ACC;
  end

  // At most one array phase at a time.
  a_phase_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(ph));
endmodule
