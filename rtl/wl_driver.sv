// wl_driver: row drivers of the 512-row array, as decode logic.
// Normal access: mem_addr = {pair[4:0], polarity, wl[2:0]} selects one slice
// (slice index 2*pair + polarity, in the physical order +#0, -#0, +#1, ...)
// and one of its eight word lines; mem_we turns it into a write.
// IMC (imc_mul high, the Mul phase): the same word line imc_wl is driven in
// every active slice. In differential mode (ternary weights) both slices of
// each pair are active; in single-ended mode (2's complement weights) only
// the slices of polarity imc_pol are. slice_en tells each slice whether it
// takes part in the operation (its output switch is used) and is valid for
// the whole operation. Everything is combinational. The address layout is
// this design's choice; driving one word line per slice is the paper's.
module wl_driver
  import capram_pkg::*;
#(
  parameter int unsigned NS = NSLICE,
  parameter int unsigned NC = NCELL
) (
  input  logic                    mem_sel,
  input  logic                    mem_we,
  input  logic [$clog2(NS)+$clog2(NC)-1:0] mem_addr,
  input  logic                    imc_mul,
  input  logic [$clog2(NC)-1:0]   imc_wl,
  input  logic                    imc_single,
  input  logic                    imc_pol,
  output logic [NS-1:0][NC-1:0]   wl,
  output logic [NS-1:0]           wr_en,
  output logic [NS-1:0]           slice_en
);
  localparam int unsigned WLB = $clog2(NC);
  logic [$clog2(NS)-1:0] a_slice;
  logic [WLB-1:0]        a_wl;

  always_comb begin
    {a_slice, a_wl} = mem_addr;
    for (int s = 0; s < NS; s++) begin
      slice_en[s] = !imc_single || (imc_pol == s[0]);
      wl[s]       = '0;
      wr_en[s]    = 1'b0;
      if (imc_mul) begin
        if (slice_en[s]) wl[s][imc_wl] = 1'b1;
      end else if (mem_sel && a_slice == s[$clog2(NS)-1:0]) begin
        wl[s][a_wl] = 1'b1;
        wr_en[s]    = mem_we;
      end
    end
  end
endmodule
