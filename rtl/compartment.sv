// compartment - sixteen DBMUs that share one broadcast input bit and one word
// line.
//
// Compartment k of a macro receives input feature k of the current 16-input
// group, one bit per cycle. Its 16 DBMUs hold the dyadic blocks of that input
// channel for 16 filters (phi_th = 1) or 8 filters of two blocks each
// (phi_th = 2). A whole 16-bit row of Q values is written in one cycle.
// Follows the paper: 16 DBMUs x 64 cells, a shared input per compartment.
// Own choice: the row-wide write port.
module compartment #(
  parameter int N_DBMU = 16,
  parameter int ROWS   = 64
) (
  input  logic                    clk,
  input  logic                    wr_en,
  input  logic [$clog2(ROWS)-1:0] wr_row,
  input  logic [N_DBMU-1:0]       wr_data,
  input  logic [$clog2(ROWS)-1:0] rd_row,
  input  logic                    in_bit,
  output logic [N_DBMU-1:0]       o_q,
  output logic [N_DBMU-1:0]       o_qb
);
  for (genvar d = 0; d < N_DBMU; d++) begin : g_dbmu
    dbmu #(.ROWS(ROWS)) u_dbmu (
      .clk    (clk),
      .wr_en  (wr_en),
      .wr_row (wr_row),
      .wr_q   (wr_data[d]),
      .rd_row (rd_row),
      .in_bit (in_bit),
      .o_q    (o_q[d]),
      .o_qb   (o_qb[d])
    );
  end
endmodule
