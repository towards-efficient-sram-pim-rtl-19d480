// pim_core - four meta RFs, four PIM macros and the output RF.
//
// The IPU's bit column (col) is broadcast to all four macros, which hold
// different filters of the same layer, so one input group serves up to 64
// filters (phi_th = 1) or 32 (phi_th = 2). Each macro has its own meta RF, read
// with the column's row in the cycle the macro registers the column.
// Weight rows (256 Q bits) and metadata rows (768 bits) are written one row per
// cycle into the selected macro. out_cap copies all accumulators into the
// output RF; out_sel picks which macro's 16 values are read. phi2[m] is the
// per-DBMU-pair phi_th = 2 mask of macro m (see pim_macro).
// Follows the paper: the composition of the PIM core. Own choice: broadcast of
// the same inputs to all macros and the write ports.
module pim_core
  import dbpim_pkg::*;
#(
  parameter int NM   = N_MACRO,
  parameter int ROWS = N_ROWS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // weight row write
  input  logic                      wr_en,
  input  logic [$clog2(NM)-1:0]     wr_macro,
  input  logic [$clog2(ROWS)-1:0]   wr_row,
  input  logic [WROW_W-1:0]         wr_data,
  // metadata row write
  input  logic                      mwr_en,
  input  logic [$clog2(NM)-1:0]     mwr_macro,
  input  logic [$clog2(ROWS)-1:0]   mwr_row,
  input  logic [MROW_W-1:0]         mwr_data,
  // computation
  input  col_t                      col,
  input  logic [NM-1:0][N_DBMU/2-1:0] phi2,
  input  logic                      acc_clr,
  input  logic                      out_cap,
  input  logic [$clog2(NM)-1:0]     out_sel,
  output logic signed [ACC_W-1:0]   out_data [N_DBMU]
);
  logic signed [ACC_W-1:0] acc [NM][N_DBMU];
  meta_t [WROW_W-1:0]      meta [NM];

  for (genvar m = 0; m < NM; m++) begin : g_macro
    meta_rf #(.ROWS(ROWS)) u_meta (
      .clk     (clk),
      .wr_en   (mwr_en && mwr_macro == m),
      .wr_row  (mwr_row),
      .wr_data (mwr_data),
      .rd_en   (col.valid),
      .rd_row  (col.row[$clog2(ROWS)-1:0]),
      .rd_data (meta[m])
    );

    pim_macro #(.ROWS(ROWS)) u_macro (
      .clk     (clk),
      .rst_n   (rst_n),
      .wr_en   (wr_en && wr_macro == m),
      .wr_row  (wr_row),
      .wr_data (wr_data),
      .col     (col),
      .meta    (meta[m]),
      .phi2    (phi2[m]),
      .acc_clr (acc_clr),
      .acc     (acc[m])
    );
  end

  output_rf #(.NM(NM)) u_orf (
    .clk     (clk),
    .rst_n   (rst_n),
    .cap     (out_cap),
    .acc_in  (acc),
    .rd_sel  (out_sel),
    .rd_data (out_data)
  );
endmodule
