// cs_dac: behavioural model of one 4-bit current-steering input DAC (one per
// column). It is an analog circuit; this model gives its transfer function.
// In the Pre phase the input bitline (IBL) is precharged to VDD. In the DAC
// phase binary-weighted current paths (x8, x4, x2, x1) discharge it, so the
// IBL settles at VDD - STEP_MV * code, and it holds that level afterwards.
// The 1200 mV and 600 mV end points are the paper's simulated curve; the
// exactly linear 40 mV step is an idealisation of it.
// Timing: ibl_mv follows code combinationally during the DAC phase and is
// held from the clock edge that ends it.
module cs_dac
  import capram_pkg::*;
#(
  parameter int unsigned XB      = XBITS,
  parameter int unsigned VDD     = VDD_MV,
  parameter int unsigned STEP_MV = DAC_STEP_MV
) (
  input  logic             clk,
  input  logic             pre,
  input  logic             dac,
  input  logic [XB-1:0]    code,
  output logic [MV_W-1:0]  ibl_mv
);
  logic [MV_W-1:0] held_q, level;

  always_comb level = MV_W'(VDD) - MV_W'(STEP_MV * code);

  always_ff @(posedge clk) begin
    if (pre)      held_q <= MV_W'(VDD);
    else if (dac) held_q <= level;
  end

  always_comb ibl_mv = dac ? level : held_q;
endmodule
