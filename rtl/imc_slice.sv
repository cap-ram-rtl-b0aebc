// imc_slice: behavioural model of one slice - NCOL clusters on a common
// output line. Each cluster multiplies its selected weight bit with its own
// column's input voltage; in the Acc phase the charge of all clusters is
// shared on the output line, so the line carries sum_i W_i * (VDD - V_IN,i),
// the analog MAC result. The model keeps that sum as an exact integer in
// mV x C_MOM units; the physical line voltage is VDD - line_q * C_MOM /
// (NCOL * C_MOM + C_P), a scale factor that only the ADC step depends on.
// A slice whose en is low keeps its capacitors precharged and its output
// switch open, so its line charge is 0 (used for single-ended conversion).
// Timing: line_q is valid during the Acc clock (combinational from the
// cluster capacitors) and 0 otherwise; the ADC takes it over at the edge
// that ends Acc and from then on holds the line charge itself.
module imc_slice
  import capram_pkg::*;
#(
  parameter int unsigned NC_COL = NCOL,
  parameter int unsigned NC     = NCELL
) (
  input  logic                         clk,
  input  logic [NC-1:0]                wl,
  input  logic                         wr_en,
  input  logic [NC_COL-1:0]            gbl_w,
  output logic [NC_COL-1:0]            gbl_r,
  input  imc_phase_t                   ph,
  input  logic                         en,
  input  logic [NC_COL-1:0][MV_W-1:0]  ibl_mv,
  output logic [Q_W-1:0]               line_q
);
  logic [NC_COL-1:0][MV_W-1:0] drop;
  imc_phase_t cph;

  // A disabled slice stays in precharge for the whole operation.
  always_comb begin
    cph.pre = ph.pre | (~en & (ph.dac | ph.mul | ph.acc));
    cph.dac = ph.dac & en;
    cph.mul = ph.mul & en;
    cph.acc = ph.acc & en;
  end

  for (genvar c = 0; c < NC_COL; c++) begin : g_col
    imc_cluster #(.NC(NC)) u_cl (
      .clk    (clk),
      .wl     (wl),
      .wr_en  (wr_en),
      .gbl_w  (gbl_w[c]),
      .gbl_r  (gbl_r[c]),
      .ph     (cph),
      .ibl_mv (ibl_mv[c]),
      .drop_mv(drop[c])
    );
  end

  always_comb begin
    line_q = '0;
    if (cph.acc)
      for (int c = 0; c < NC_COL; c++) line_q += Q_W'(drop[c]);
  end
endmodule
