// csd_adder_tree - CSD-based adder tree of one post-processing unit.
//
// Sums the 16 DBMU outputs of one DBMU column (one per compartment, i.e. one per
// input of the group) for the current input bit column. Compartments 2k and
// 2k+1 feed CSD adder #k (k = 0..7); the eight 10-bit sums are then added by a
// plain binary tree into a 13-bit signed result. Combinational.
// Follows the paper: eight CSD adders over pairs of compartments followed by an
// adder tree. Own choice: the 13-bit width, the smallest that holds 16 x 128.
module csd_adder_tree
  import dbpim_pkg::*;
#(
  parameter int N_TERMS = 16
) (
  input  logic [N_TERMS-1:0]       o_q,
  input  logic [N_TERMS-1:0]       o_qb,
  input  meta_t [N_TERMS-1:0]      meta,
  output logic signed [TREE_W-1:0] sum
);
  localparam int N_ADD = N_TERMS / 2;
  logic signed [PAIR_W-1:0] pair [N_ADD];

  for (genvar k = 0; k < N_ADD; k++) begin : g_csd
    csd_adder u_csd (
      .o_q  (o_q[2*k+1 -: 2]),
      .o_qb (o_qb[2*k+1 -: 2]),
      .meta (meta[2*k+1 -: 2]),
      .sum  (pair[k])
    );
  end

  always_comb begin
    sum = '0;
    for (int k = 0; k < N_ADD; k++) sum += TREE_W'(pair[k]);
  end
endmodule
