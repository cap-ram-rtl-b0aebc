// twos_xform: the 2's complement transformation in front of an accumulator.
// When sel is set (this accumulator receives the partial sum of the MSB of
// a 2's complement weight, whose bit weight is negative) the code is bit-
// inverted and cin asks the accumulator adder for the "+1", so that
// dout + cin = -din. When sel is clear the code passes unchanged. Purely
// combinational. Using the accumulator's carry-in for the +1 is the paper's.
module twos_xform
  import capram_pkg::*;
#(
  parameter int unsigned W = ADC_BITS
) (
  input  logic                sel,
  input  logic signed [W-1:0] din,
  output logic signed [W-1:0] dout,
  output logic                cin
);
  always_comb begin
    dout = sel ? ~din : din;
    cin  = sel;
  end
endmodule
