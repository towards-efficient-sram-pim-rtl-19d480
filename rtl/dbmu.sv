// dbmu - dyadic block multiply unit: one column of 64 SRAM cells and its local
// processing unit (LPU).
//
// Each cell holds one "complementary pattern" dyadic block of a CSD weight, i.e.
// one of the two-digit blocks 01, 10, 0(-1), (-1)0. The cell's Q node stores a 1
// for a block whose non-zero digit is the upper one (10) and a 0 for 01; the
// complementary node Qbar holds the other digit, so one 6T cell carries both
// digits of the block. The block's sign and position come from the meta RF.
// The LPU performs two ANDs with the same broadcast input bit: o_q = Q & in and
// o_qb = Qbar & in. Exactly one of them is 1 when the input bit is 1.
//
// Interface: one cell is written per cycle (wr_en/wr_row/wr_q); the active word
// line rd_row selects the cell read combinationally into the LPU.
// Follows the paper: 64 cells, the Q/Qbar storage of a block and the two ANDs.
// Own choice: the cell is a flip-flop and the read is a multiplexer; the real
// cell is a full-custom 6T circuit.
module dbmu #(
  parameter int ROWS = 64
) (
  input  logic                    clk,
  input  logic                    wr_en,
  input  logic [$clog2(ROWS)-1:0] wr_row,
  input  logic                    wr_q,
  input  logic [$clog2(ROWS)-1:0] rd_row,
  input  logic                    in_bit,
  output logic                    o_q,
  output logic                    o_qb
);
  logic [ROWS-1:0] cell_q;
  logic            q;

  always_ff @(posedge clk)
    if (wr_en) cell_q[wr_row] <= wr_q;

  assign q    = cell_q[rd_row];
  assign o_q  = q & in_bit;    // IN x Q
  assign o_qb = ~q & in_bit;   // IN x Qbar
endmodule
