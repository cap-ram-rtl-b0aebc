// cisar_adc: behavioural model of the analog part of one charge-injection SAR
// ADC: the comparator, the 2 x 16 charge-injection (CI) cells and the charge
// left on the two output lines, which serve as the sampling capacitors (no
// separate sample-and-hold). Charge is an integer deficit below VDD in
// mV x C_MOM units, so more charge deficit means a lower line voltage.
//   load      : at the edge that ends the Acc phase, the line charges of the
//               '+' and '-' slices are taken over.
//   ci_p/ci_n : each set bit is one CI cell firing on that line this clock;
//               it removes CI_UNIT of charge (the line voltage drops).
//   comp_p    : Comp+, high when the '+' line is lower (deficit larger);
//   comp_n    : Comp-, high when the '-' line is lower. Both are low on an
//               exact tie; the comparator is ideal (no offset or noise).
// One CI cell equals one ADC LSB, chosen here as 30 DAC codes.
module cisar_adc
  import capram_pkg::*;
#(
  parameter int unsigned N_CI = NCI,
  parameter int unsigned UNIT = CI_UNIT
) (
  input  logic             clk,
  input  logic             load,
  input  logic [Q_W-1:0]   line_p,
  input  logic [Q_W-1:0]   line_n,
  input  logic [N_CI-1:0]  ci_p,
  input  logic [N_CI-1:0]  ci_n,
  output logic             comp_p,
  output logic             comp_n
);
  localparam int unsigned DW = Q_W + 2;
  logic [DW-1:0] def_p, def_n;

  always_ff @(posedge clk) begin
    if (load) begin
      def_p <= DW'(line_p);
      def_n <= DW'(line_n);
    end else begin
      def_p <= def_p + DW'($countones(ci_p)) * DW'(UNIT);
      def_n <= def_n + DW'($countones(ci_n)) * DW'(UNIT);
    end
  end

  always_comb begin
    comp_p = def_p > def_n;
    comp_n = def_n > def_p;
  end
endmodule
