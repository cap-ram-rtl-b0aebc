// sram_readout: the normal-access read/write port of the array. During a
// write (wr) the write drivers put wdata on the global bitlines (gbl_w) for
// the row that the row drivers select; otherwise they drive nothing (0). A read samples the global bitlines, on which the cells of
// the selected word line appear, into the readout register; rdata/rvalid
// are valid one clock after rd. The one-clock registered read is this
// design's choice.
module sram_readout
  import capram_pkg::*;
#(
  parameter int unsigned NC_COL = NCOL
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rd,
  input  logic              wr,
  input  logic [NC_COL-1:0] wdata,
  input  logic [NC_COL-1:0] gbl_r,
  output logic [NC_COL-1:0] gbl_w,
  output logic [NC_COL-1:0] rdata,
  output logic              rvalid
);
  always_comb gbl_w = wr ? wdata : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rdata  <= '0;
      rvalid <= 1'b0;
    end else begin
      rvalid <= rd;
      if (rd) rdata <= gbl_r;
    end
  end
endmodule
