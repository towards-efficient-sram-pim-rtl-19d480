// pim_macro - customized SRAM-PIM macro: 16 compartments x 16 DBMUs x 64 rows
// (16 Kb of dyadic blocks) and 16 post-processing units.
//
// Each cycle the macro takes one input bit column of a 16-input group: bit k
// goes to compartment k, the column's row selects the word line, every DBMU
// ANDs its cell with its compartment's bit, and post-processing unit j sums
// DBMU column j with the CSD-based adder tree, shifts by the bit index and
// accumulates. The sign and position of every block come from the meta RF.
// Timing: col is registered at the input (stage 1). The meta RF is read with
// the same unregistered row in that cycle, so its synchronous output (meta)
// lines up with the registered column. Psum updates at the next edge, the
// accumulators one edge after a group's last column: acc is final 3 cycles
// after the last column is presented.
// phi2 has one bit per DBMU pair (2j, 2j+1). When it is 0 the pair holds two
// phi_th = 1 filters with results acc[2j] and acc[2j+1]; when it is 1 the pair
// holds one phi_th = 2 filter whose result is acc[2j], and acc[2j+1] is unused.
// Follows the paper: 16 compartments of 16 DBMUs x 64 cells, one input per
// compartment, 16 post-processing units. Own choice: the pipeline registers,
// the row-wide weight write port and the pairing of neighbouring
// DBMUs for phi_th = 2 filters.
module pim_macro
  import dbpim_pkg::*;
#(
  parameter int NC   = N_COMP,
  parameter int ND   = N_DBMU,
  parameter int ROWS = N_ROWS
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        wr_en,
  input  logic [$clog2(ROWS)-1:0]     wr_row,
  input  logic [NC-1:0][ND-1:0]       wr_data,   // [compartment][dbmu] Q bits
  input  col_t                        col,
  input  meta_t [NC-1:0][ND-1:0]      meta,      // metadata of the registered row
  input  logic [ND/2-1:0]             phi2,
  input  logic                        acc_clr,
  output logic signed [ACC_W-1:0]     acc [ND]
);
  col_t                col_q;
  logic [ND-1:0]       oq  [NC];
  logic [ND-1:0]       oqb [NC];
  logic [NC-1:0]       col_oq  [ND];
  logic [NC-1:0]       col_oqb [ND];
  meta_t [NC-1:0]      col_meta [ND];
  logic signed [TREE_W-1:0] tree [ND];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) col_q <= '0;
    else        col_q <= col;

  for (genvar c = 0; c < NC; c++) begin : g_comp
    compartment #(.N_DBMU(ND), .ROWS(ROWS)) u_comp (
      .clk     (clk),
      .wr_en   (wr_en),
      .wr_row  (wr_row),
      .wr_data (wr_data[c]),
      .rd_row  (col_q.row[$clog2(ROWS)-1:0]),
      .in_bit  (col_q.bits[c]),
      .o_q     (oq[c]),
      .o_qb    (oqb[c])
    );
  end

  // regroup compartment-major outputs into DBMU columns
  always_comb
    for (int d = 0; d < ND; d++)
      for (int c = 0; c < NC; c++) begin
        col_oq[d][c]   = oq[c][d];
        col_oqb[d][c]  = oqb[c][d];
        col_meta[d][c] = meta[c][d];
      end

  for (genvar d = 0; d < ND; d++) begin : g_ppu
    localparam int NB = (d % 2 == 0) ? d + 1 : d;   // odd neighbour of an even unit
    post_processing_unit #(.N_TERMS(NC)) u_ppu (
      .clk      (clk),
      .rst_n    (rst_n),
      .o_q      (col_oq[d]),
      .o_qb     (col_oqb[d]),
      .meta     (col_meta[d]),
      .pair_sum (tree[NB]),
      .pair_en  ((d % 2 == 0) && phi2[d/2]),
      .valid    (col_q.valid),
      .first    (col_q.first),
      .last     (col_q.last),
      .idx      (col_q.idx),
      .neg      (col_q.neg),
      .acc_clr  (acc_clr),
      .tree_sum (tree[d]),
      .acc      (acc[d])
    );
  end
endmodule
