// digital_periphery: the shift-and-add periphery behind the 32 ADCs.
// The ADCs form NADC/8 groups of eight; ADC 8g+m feeds accumulator #(7-m)
// of group g, so the lowest-numbered slice pair, which holds the weight MSB,
// lands on accumulator #7, the one with the largest tree weight and with
// the SEL<3> 2's complement module. Accumulators #1, #3, #5 and #7 have a
// 2's complement module driven by SEL<0..3>; #0, #2, #4, #6 take the code
// directly. Each group has one adder tree (levels 1..3); level 0 is the
// accumulator itself. The weight format wcfg fixes the SEL bits and the
// output level (the number of ADCs per weight: 1, 2, 4 or 8).
// Timing: on code_valid the accumulators update (first = start a new sum,
// otherwise acc = 16*acc + code for the low half of an 8-bit input); the
// next clock res holds the results and res_valid pulses. For output level L
// result k is the MAC of the weight whose bits sit in ADCs k*2^L ..
// k*2^L + 2^L - 1; entries k >= NADC/2^L are zero.
module digital_periphery
  import capram_pkg::*;
#(
  parameter int unsigned NADC = NPAIR
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  code_valid,
  input  adc_code_t [NADC-1:0]  codes,
  input  wcfg_e                 wcfg,
  input  logic                  first,
  output res_t [NADC-1:0]       res,
  output logic [1:0]            res_level,
  output logic                  res_valid
);
  localparam int unsigned NG = NADC / GROUP;

  logic [3:0] sel;
  logic [1:0] lvl;
  always_comb begin
    sel = sel_mask(wcfg);
    lvl = tree_level(wcfg);
  end

  acc_t [NG-1:0][7:0]        accs;
  res_t [NG-1:0][3:0]        l1;
  res_t [NG-1:0][1:0]        l2;
  res_t [NG-1:0]             l3;

  for (genvar g = 0; g < NG; g++) begin : g_grp
    for (genvar a = 0; a < 8; a++) begin : g_acc
      adc_code_t din;
      logic      cin;
      if (a % 2 == 1) begin : g_x
        twos_xform u_x (.sel(sel[a/2]), .din(codes[g*8 + 7 - a]), .dout(din), .cin(cin));
      end else begin : g_d
        always_comb begin
          din = codes[g*8 + 7 - a];
          cin = 1'b0;
        end
      end
      serial_acc u_acc (
        .clk(clk), .rst_n(rst_n), .in_valid(code_valid), .first(first),
        .din(din), .cin(cin), .acc(accs[g][a])
      );
    end
    adder_tree u_tree (.acc(accs[g]), .l1(l1[g]), .l2(l2[g]), .l3(l3[g]));
  end

  // Output select: within a group, tree output i covers the 2^L
  // accumulators from #(i*2^L) up, i.e. ADCs counted from the other end.
  res_t [NADC-1:0] sel_res;
  always_comb begin
    sel_res = '0;
    for (int g = 0; g < NG; g++) begin
      case (lvl)
        2'd0: for (int j = 0; j < 8; j++) sel_res[g*8 + j] = res_t'(accs[g][7-j]);
        2'd1: for (int j = 0; j < 4; j++) sel_res[g*4 + j] = l1[g][3-j];
        2'd2: for (int j = 0; j < 2; j++) sel_res[g*2 + j] = l2[g][1-j];
        default: sel_res[g] = l3[g];
      endcase
    end
  end

  logic vld_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld_q <= 1'b0;
    else        vld_q <= code_valid;
  end

  always_comb begin
    res       = sel_res;
    res_level = lvl;
    res_valid = vld_q;
  end
endmodule
