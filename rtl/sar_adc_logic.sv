// sar_adc_logic: the register and combinational logic of one ciSAR ADC.
// It implements monotonic switching: at each step the comparator decides
// whether the measured line holds at least as much charge as the other one
// (that decision is the code bit), and the shared EN pattern is applied to
// the CI cells of the other, higher-voltage line, bringing the two lines
// closer. In a hold step the previous decision is reused, so the first bit
// gets two discharges of 16 cells. After the last step the code is valid
// for one clock (valid) and is held until the next conversion.
//   single = 0 : differential, code = signed 7-bit difference (+) - (-).
//   single = 1 : single-ended; the sign bit is dropped and the 6-bit
//                magnitude is returned (code[6] = 0).
//   swap       : in single-ended mode, the '-' slice is the active input;
//                the roles of the two lines are exchanged.
// The decision of the measured line is taken as the complement of the other
// line's comparator output, so an exact tie counts as "at least as much".
// Resulting code: floor((Qmeas - Qother) / LSB), clipped to -64..63.
module sar_adc_logic
  import capram_pkg::*;
#(
  parameter int unsigned N_CI = NCI
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            step,
  input  logic            hold,
  input  logic [2:0]      bit_idx,
  input  logic            last,
  input  logic [N_CI-1:0] en,
  input  logic            single,
  input  logic            swap,
  input  logic            comp_p,
  input  logic            comp_n,
  output logic [N_CI-1:0] ci_p,
  output logic [N_CI-1:0] ci_n,
  output adc_code_t       code,
  output logic            valid
);
  logic [ADC_BITS-1:0] bits_q;
  logic                dec_q, dec_now, dec;

  always_comb begin
    dec_now = swap ? !comp_p : !comp_n;
    dec     = hold ? dec_q : dec_now;
    // Discharge the line that is not (relatively) lower.
    ci_p = '0;
    ci_n = '0;
    if (step) begin
      if (dec ^ swap) ci_n = en;
      else            ci_p = en;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bits_q <= '0;
      dec_q  <= 1'b0;
      valid  <= 1'b0;
    end else begin
      valid <= step && last;
      if (step && !hold) begin
        bits_q[bit_idx] <= dec_now;
        dec_q           <= dec_now;
      end
    end
  end

  // Offset-binary bits to signed code; single-ended drops the sign bit.
  always_comb code = single ? adc_code_t'({1'b0, bits_q[5:0]})
                            : adc_code_t'({~bits_q[6], bits_q[5:0]});
endmodule
