// serial_acc: serial accumulator after one ADC (output level 0 of the
// periphery). With first set it starts a new sum, acc = din + cin; otherwise
// it shifts the previous sum by 4 bits and adds, acc = 16*acc + din + cin.
// 8-bit input activations are applied as two 4-bit halves in two global
// cycles, upper half first; up to 4-bit inputs take one cycle. The x16
// feedback is the paper's; the widths are this design's. acc changes at the
// clock edge where in_valid is high.
module serial_acc
  import capram_pkg::*;
#(
  parameter int unsigned IN_W = ADC_BITS,
  parameter int unsigned W    = ACC_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic                   first,
  input  logic signed [IN_W-1:0] din,
  input  logic                   cin,
  output logic signed [W-1:0]    acc
);
  logic signed [W-1:0] base, sum;

  always_comb begin
    base = first ? '0 : (acc <<< 4);
    sum  = base + W'(din) + W'({1'b0, cin});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        acc <= '0;
    else if (in_valid) acc <= sum;
  end
endmodule
