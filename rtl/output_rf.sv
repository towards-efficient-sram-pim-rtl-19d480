// output_rf - 2 Kb output register file of the PIM core.
//
// Captures, in one cycle (cap = 1), the 64 accumulator values of the four PIM
// macros (4 x 16 post-processing units x 32 bits = 2 Kb). The SIMD core reads the
// 16 values of one macro at a time through rd_sel (combinational read).
// Follows the paper: a 2 Kb output RF after the macros. Own choice: the 64 x 32 b
// organisation and the one-macro-wide read port.
module output_rf
  import dbpim_pkg::*;
#(
  parameter int NM = N_MACRO,
  parameter int NU = N_DBMU
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           cap,
  input  logic signed [ACC_W-1:0]        acc_in [NM][NU],
  input  logic [$clog2(NM)-1:0]          rd_sel,
  output logic signed [ACC_W-1:0]        rd_data [NU]
);
  logic signed [ACC_W-1:0] rf [NM][NU];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int m = 0; m < NM; m++)
        for (int u = 0; u < NU; u++) rf[m][u] <= '0;
    end else if (cap) begin
      rf <= acc_in;
    end

  always_comb
    for (int u = 0; u < NU; u++) rd_data[u] = rf[rd_sel][u];
endmodule
