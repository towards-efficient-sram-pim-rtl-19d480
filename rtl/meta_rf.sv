// meta_rf - metadata register file of one PIM macro.
//
// Holds the sign and 2-bit DB index of every dyadic block stored in the macro:
// 64 rows x 256 blocks x 3 bits = 6 KB. A row is written from the meta buffer in
// one cycle; the read is synchronous (rd_data is valid the cycle after rd_en)
// and supplies the whole row, the metadata of all 256 blocks on the active
// word line.
// Follows the paper: one 6 KB RF per macro storing signs and indices. Own
// choice: the 768-bit row organisation and the synchronous read.
module meta_rf
  import dbpim_pkg::*;
#(
  parameter int ROWS = N_ROWS,
  parameter int NB   = WROW_W           // blocks per row
) (
  input  logic                    clk,
  input  logic                    wr_en,
  input  logic [$clog2(ROWS)-1:0] wr_row,
  input  meta_t [NB-1:0]          wr_data,
  input  logic                    rd_en,
  input  logic [$clog2(ROWS)-1:0] rd_row,
  output meta_t [NB-1:0]          rd_data
);
  meta_t [NB-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_row] <= wr_data;
    if (rd_en) rd_data <= mem[rd_row];
  end
endmodule
