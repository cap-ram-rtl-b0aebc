// capram_top: the CAP-RAM macro. A 512 x 128 6T SRAM array is split into 64
// slices (32 '+'/'-' pairs) of 128 clusters; each cluster has 8 cells and one
// charge-domain multiply circuit. One IMC operation applies 128 4-bit input
// activations through 128 DACs to the same word line of every active slice,
// forms 32 (or 64) analog 128-term MACs on the slice output lines, converts
// them with 32 charge-injection SAR ADCs under one shared SAR control, and
// shifts/adds the codes in the digital periphery according to the weight
// format (2's complement 1/2/4/8 bit, single-ended ADC; ternary 2/3/5 bit,
// differential ADC).
//
// Interfaces
//   Normal SRAM port: mem_req/mem_we/mem_addr/mem_wdata, accepted when
//   mem_ready; read data in mem_rdata with mem_rvalid one clock later.
//   mem_addr = {pair[4:0], polarity ('+'=0, '-'=1), word line[2:0]}.
//   IMC port: op_valid/op_ready handshake. op_x holds the 128 input nibbles,
//   op_wl the word line (the layer row), op_pol the active polarity in
//   2's complement (single-ended) formats, op_wcfg the weight format and
//   op_first whether the accumulators start a new sum (clear it for the
//   low half of an 8-bit input, sent right after the high half).
//   Results: res[k], res_level and res_valid (see digital_periphery).
// Timing: an accepted operation takes 12 clocks (Pre, DAC, Mul, Acc, 8 SAR
// steps); operations can be issued back to back, one per 12 clocks, and
// res_valid follows 14 clocks after acceptance. The operation's inputs are
// registered at acceptance, its format and mode again at the Acc clock so
// that the next operation can be accepted while this one converts.
module capram_top
  import capram_pkg::*;
#(
  parameter int unsigned NC_COL = NCOL,
  parameter int unsigned NP     = NPAIR
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // normal SRAM access
  input  logic                        mem_req,
  input  logic                        mem_we,
  input  logic [$clog2(2*NP)+2:0]     mem_addr,
  input  logic [NC_COL-1:0]           mem_wdata,
  output logic                        mem_ready,
  output logic [NC_COL-1:0]           mem_rdata,
  output logic                        mem_rvalid,
  // in-memory computing
  input  logic                        op_valid,
  output logic                        op_ready,
  input  logic [NC_COL-1:0][XBITS-1:0] op_x,
  input  logic [2:0]                  op_wl,
  input  logic                        op_pol,
  input  logic                        op_first,
  input  wcfg_e                       op_wcfg,
  output res_t [NP-1:0]               res,
  output logic [1:0]                  res_level,
  output logic                        res_valid
);
  localparam int unsigned NS = 2 * NP;

  // ---------------- timing and operation registers ----------------
  imc_phase_t ph;
  logic       sar_start, conv_done, accept;

  logic [NC_COL-1:0][XBITS-1:0] x_q;
  logic [2:0]  wl_q;
  logic        pol_q, first_q;
  wcfg_e       wcfg_q;
  logic        cv_single, cv_pol, cv_first;
  wcfg_e       cv_wcfg;

  imc_timing u_timing (
    .clk(clk), .rst_n(rst_n), .start(op_valid), .ready(op_ready),
    .ph(ph), .sar_start(sar_start), .conv_done(conv_done)
  );

  always_comb accept = op_valid && op_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q <= '0; wl_q <= '0; pol_q <= 1'b0; first_q <= 1'b1; wcfg_q <= W1_2S;
      cv_single <= 1'b1; cv_pol <= 1'b0; cv_first <= 1'b1; cv_wcfg <= W1_2S;
    end else begin
      if (accept) begin
        x_q <= op_x; wl_q <= op_wl; pol_q <= op_pol; first_q <= op_first; wcfg_q <= op_wcfg;
      end
      if (ph.acc) begin
        cv_single <= !is_ternary(wcfg_q);
        cv_pol    <= pol_q;
        cv_first  <= first_q;
        cv_wcfg   <= wcfg_q;
      end
    end
  end

  // ---------------- drivers, readout, DACs ----------------
  logic [NS-1:0][NCELL-1:0] wl;
  logic [NS-1:0]            wr_en, slice_en;
  logic [NC_COL-1:0]        gbl_w, gbl_r;
  logic [NS-1:0][NC_COL-1:0] gbl_r_s;
  logic                     mem_sel;

  always_comb begin
    mem_ready = !(ph.pre || ph.dac || ph.mul || ph.acc);
    mem_sel   = mem_req && mem_ready;
  end

  wl_driver #(.NS(NS), .NC(NCELL)) u_drv (
    .mem_sel(mem_sel), .mem_we(mem_we), .mem_addr(mem_addr),
    .imc_mul(ph.mul), .imc_wl(wl_q), .imc_single(!is_ternary(wcfg_q)), .imc_pol(pol_q),
    .wl(wl), .wr_en(wr_en), .slice_en(slice_en)
  );

  sram_readout #(.NC_COL(NC_COL)) u_rd (
    .clk(clk), .rst_n(rst_n), .rd(mem_sel && !mem_we), .wr(mem_sel && mem_we), .wdata(mem_wdata),
    .gbl_r(gbl_r), .gbl_w(gbl_w), .rdata(mem_rdata), .rvalid(mem_rvalid)
  );

  // Global bitlines are shared by all slices; only the selected row drives.
  always_comb begin
    gbl_r = '0;
    for (int s = 0; s < NS; s++) gbl_r |= gbl_r_s[s];
  end

  logic [NC_COL-1:0][MV_W-1:0] ibl;
  for (genvar c = 0; c < NC_COL; c++) begin : g_dac
    cs_dac u_dac (.clk(clk), .pre(ph.pre), .dac(ph.dac), .code(x_q[c]), .ibl_mv(ibl[c]));
  end

  // ---------------- array ----------------
  logic [NS-1:0][Q_W-1:0] line;
  for (genvar s = 0; s < NS; s++) begin : g_slice
    imc_slice #(.NC_COL(NC_COL), .NC(NCELL)) u_slice (
      .clk(clk), .wl(wl[s]), .wr_en(wr_en[s]), .gbl_w(gbl_w), .gbl_r(gbl_r_s[s]),
      .ph(ph), .en(slice_en[s]), .ibl_mv(ibl), .line_q(line[s])
    );
  end

  // ---------------- ADCs ----------------
  logic            step, hold, last;
  logic [2:0]      bit_idx;
  logic [NCI-1:0]  en;
  logic            sar_busy;
  adc_code_t [NP-1:0] codes;
  logic [NP-1:0]   code_vld;

  sar_ctrl u_sar (
    .clk(clk), .rst_n(rst_n), .start(sar_start), .busy(sar_busy), .step(step),
    .hold(hold), .bit_idx(bit_idx), .last(last), .en(en)
  );
  always_comb conv_done = last;

  for (genvar p = 0; p < NP; p++) begin : g_adc
    logic [NCI-1:0] ci_p, ci_n;
    logic           comp_p, comp_n;
    cisar_adc u_ana (
      .clk(clk), .load(ph.acc), .line_p(line[2*p]), .line_n(line[2*p+1]),
      .ci_p(ci_p), .ci_n(ci_n), .comp_p(comp_p), .comp_n(comp_n)
    );
    sar_adc_logic u_log (
      .clk(clk), .rst_n(rst_n), .step(step), .hold(hold), .bit_idx(bit_idx),
      .last(last), .en(en), .single(cv_single), .swap(cv_single && cv_pol),
      .comp_p(comp_p), .comp_n(comp_n), .ci_p(ci_p), .ci_n(ci_n),
      .code(codes[p]), .valid(code_vld[p])
    );
  end

  // The shared SAR control must be idle when a conversion starts, and all
  // ADCs finish together.
  a_sar_idle: assert property (@(posedge clk) disable iff (!rst_n) sar_start |-> !sar_busy);
  a_adc_sync: assert property (@(posedge clk) disable iff (!rst_n) (code_vld == '0) || (&code_vld));

  // ---------------- digital periphery ----------------
  digital_periphery #(.NADC(NP)) u_peri (
    .clk(clk), .rst_n(rst_n), .code_valid(code_vld[0]), .codes(codes),
    .wcfg(cv_wcfg), .first(cv_first), .res(res), .res_level(res_level),
    .res_valid(res_valid)
  );
endmodule
