// capram_pkg: sizes, types and small decode functions shared by the CAP-RAM
// macro. The array sizes (128 columns, 8 cells per cluster, 32 slice pairs),
// the 4-bit DAC, the 7-bit ADC with 16 charge-injection cells and the 1.2 V
// supply are the paper's numbers. The analog quantities are carried as
// integers: voltages in mV, output-line charge in units of (mV x C_MOM).
// Widths of the digital periphery and the one-LSB charge CI_UNIT are this
// design's choices (see the comments below).
package capram_pkg;

  localparam int unsigned NCOL      = 128;  // columns = DACs = clusters per slice
  localparam int unsigned NCELL     = 8;    // 6T cells per cluster
  localparam int unsigned NPAIR     = 32;   // slice pairs = ADCs
  localparam int unsigned NSLICE    = 2 * NPAIR;
  localparam int unsigned XBITS     = 4;    // DAC input bits
  localparam int unsigned ADC_BITS  = 7;
  localparam int unsigned NCI       = 16;   // CI cells per ADC side
  localparam int unsigned VDD_MV    = 1200;
  localparam int unsigned DAC_STEP_MV = 40; // 1200 mV .. 600 mV over codes 0..15
  localparam int unsigned MV_W      = 11;   // width of a voltage in mV
  localparam int unsigned Q_W       = 18;   // output-line charge width
  // Charge of one CI cell = one ADC LSB. 30 DAC codes per LSB makes the
  // 6-bit single-ended range cover the full MAC range 0..1920 (128 x 15).
  localparam int unsigned CI_UNIT   = 30 * DAC_STEP_MV;
  localparam int unsigned SAR_STEPS = 8;    // clocks per conversion
  localparam int unsigned ACC_W     = 12;   // accumulator width
  localparam int unsigned TREE_W    = 20;   // adder tree / result width
  localparam int unsigned GROUP     = 8;    // accumulators per adder tree

  // IMC phase strobes, one clock each, in the order Pre, DAC, Mul, Acc.
  typedef struct packed {
    logic pre;
    logic dac;
    logic mul;
    logic acc;
  } imc_phase_t;

  // Weight formats: 2's complement 1/2/4/8 bit, ternary 2/3/5 bit.
  typedef enum logic [2:0] {
    W1_2S  = 3'd0,
    W2_2S  = 3'd1,
    W4_2S  = 3'd2,
    W8_2S  = 3'd3,
    W2_TER = 3'd4,
    W3_TER = 3'd5,
    W5_TER = 3'd6
  } wcfg_e;

  typedef logic signed [ADC_BITS-1:0] adc_code_t;
  typedef logic signed [ACC_W-1:0]    acc_t;
  typedef logic signed [TREE_W-1:0]   res_t;

  // Ternary formats run the ADCs differentially; 2's complement single-ended.
  function automatic logic is_ternary(wcfg_e w);
    return (w == W2_TER) || (w == W3_TER) || (w == W5_TER);
  endfunction

  // Adder-tree level = log2(number of ADCs that hold one weight).
  function automatic logic [1:0] tree_level(wcfg_e w);
    case (w)
      W1_2S, W2_TER: return 2'd0;
      W2_2S, W3_TER: return 2'd1;
      W4_2S, W5_TER: return 2'd2;
      default:       return 2'd3;  // W8_2S
    endcase
  endfunction

  // SEL<3:0> drive the 2's complement modules of accumulators #1,#3,#5,#7:
  // set on the accumulator that receives the MSB of a 2's complement weight.
  function automatic logic [3:0] sel_mask(wcfg_e w);
    case (w)
      W2_2S:   return 4'b1111;
      W4_2S:   return 4'b1010;
      W8_2S:   return 4'b1000;
      default: return 4'b0000;
    endcase
  endfunction

endpackage
