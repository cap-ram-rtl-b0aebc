// sar_ctrl: the SAR control shared by all 32 ADCs. After start it runs eight
// steps, one per clock, and broadcasts the unary CI enable pattern EN<15:0>
// of each step together with which code bit the step decides:
//   step 0: EN=FFFF, decide bit 6 (sign)    } 16 cells twice = 32 LSB
//   step 1: EN=FFFF, hold (repeat step 0)   }
//   step 2: EN=FFFF, decide bit 5           16 LSB
//   step 3: EN=FF00, decide bit 4            8 LSB
//   step 4: EN=F000, decide bit 3            4 LSB
//   step 5: EN=C000, decide bit 2            2 LSB
//   step 6: EN=8000, decide bit 1            1 LSB
//   step 7: EN=0000, decide bit 0 (last)
// Discharging all 16 cells twice for the first bit, and the printed patterns
// FFFF/FF00/F000/C000/8000, follow the paper. The paper's waveform figure
// shows FF00 under the second bit; this design uses thermometer patterns
// whose cell count is the binary step size, so bit 5 uses FFFF once more.
// start is accepted only when idle (busy low).
module sar_ctrl
  import capram_pkg::*;
#(
  parameter int unsigned N_CI = NCI
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  output logic            busy,
  output logic            step,
  output logic            hold,
  output logic [2:0]      bit_idx,
  output logic            last,
  output logic [N_CI-1:0] en
);
  logic [3:0] cnt_q;  // 0 idle, 1..8 = step 0..7

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    cnt_q <= '0;
    else if (cnt_q == 4'd0)        cnt_q <= start ? 4'd1 : 4'd0;
    else if (cnt_q == 4'(SAR_STEPS)) cnt_q <= '0;
    else                           cnt_q <= cnt_q + 4'd1;
  end

  // Thermometer pattern of k cells, filled from the top bit down.
  function automatic logic [N_CI-1:0] thermo(int unsigned k);
    logic [N_CI-1:0] m = '0;
    for (int unsigned i = 0; i < N_CI; i++)
      if (i >= N_CI - k) m[i] = 1'b1;
    return m;
  endfunction

  always_comb begin
    busy    = cnt_q != 4'd0;
    step    = busy;
    hold    = cnt_q == 4'd2;
    last    = cnt_q == 4'(SAR_STEPS);
    en      = '0;
    bit_idx = '0;
    case (cnt_q)
      4'd1:    begin en = thermo(N_CI);     bit_idx = 3'd6; end
      4'd2:    begin en = thermo(N_CI);     bit_idx = 3'd6; end
      4'd3:    begin en = thermo(N_CI);     bit_idx = 3'd5; end
      4'd4:    begin en = thermo(N_CI / 2); bit_idx = 3'd4; end
      4'd5:    begin en = thermo(N_CI / 4); bit_idx = 3'd3; end
      4'd6:    begin en = thermo(N_CI / 8); bit_idx = 3'd2; end
      4'd7:    begin en = thermo(N_CI / 16); bit_idx = 3'd1; end
      default: begin en = '0;               bit_idx = 3'd0; end
    endcase
  end
endmodule
