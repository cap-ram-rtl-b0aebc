// imc_cluster: behavioural model of one CAP-RAM cluster - eight 6T SRAM cells
// that share one charge-domain multiply circuit (access switch to the local
// bitline, PMOS M1, input switch S_IN, output switch S_OUT and the MOM
// capacitor). The cells are plain storage; the capacitor voltage is kept as
// an integer number of mV.
//   Pre : C_MOM is precharged to VDD (through the input bitline).
//   DAC : C_MOM samples the input bitline voltage V_IN.
//   Mul : the selected cell gates M1; a '0' pulls C_MOM back to VDD (x0),
//         a '1' leaves V_IN on it (x1).
//   Acc : S_OUT closes and the charge deficit VDD - V_MOM is shared onto
//         the output line; drop_mv presents it (0 outside Acc) and the
//         slice sums it.
// Normal access: with wr_en the cell on the active word line takes gbl_w;
// gbl_r shows the cell on the active word line (0 when none is active).
// Following the paper, switch charge injection and coupling are taken as
// cancelled by transistor sizing, so the model is ideal. Cells have no reset.
module imc_cluster
  import capram_pkg::*;
#(
  parameter int unsigned NC  = NCELL,
  parameter int unsigned VDD = VDD_MV
) (
  input  logic             clk,
  input  logic [NC-1:0]    wl,
  input  logic             wr_en,
  input  logic             gbl_w,
  output logic             gbl_r,
  input  imc_phase_t       ph,
  input  logic [MV_W-1:0]  ibl_mv,
  output logic [MV_W-1:0]  drop_mv
);
  logic [NC-1:0]   cells;
  logic [MV_W-1:0] vmom_q;
  logic            lbl;  // value the selected cell puts on the local bitline

  always_comb lbl = |(cells & wl);

  always_ff @(posedge clk) begin
    if (wr_en) cells <= (cells & ~wl) | (wl & {NC{gbl_w}});
  end

  always_ff @(posedge clk) begin
    if (ph.pre)                vmom_q <= MV_W'(VDD);
    else if (ph.dac)           vmom_q <= ibl_mv;
    else if (ph.mul && !lbl)   vmom_q <= MV_W'(VDD);
  end

  always_comb gbl_r   = lbl;
  always_comb drop_mv = ph.acc ? MV_W'(VDD) - vmom_q : '0;
endmodule
