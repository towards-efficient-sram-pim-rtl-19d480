// post_processing_unit - per-filter post-processing: CSD-based adder tree,
// Shift & Add, and Accumulator.
//
// Unit j reduces DBMU column j of all 16 compartments. With phi_th = 1 each
// weight is one dyadic block and unit j owns filter j. With phi_th = 2
// (pair_en = 1) a weight's two blocks sit in DBMUs 2j and 2j+1; the even unit
// then adds the odd neighbour's tree sum (pair_sum) and holds the filter
// result, and the odd unit's result is unused.
// Timing: the tree is combinational from the macro's registered column; psum
// updates at the edge where valid is high; one edge after the group's last
// column the finished psum is added into acc. acc_clr clears acc.
// Follows the paper: one unit per filter, adder tree + Shift & Add +
// Accumulator. Own choice: the pairing of neighbouring units for phi_th = 2.
module post_processing_unit
  import dbpim_pkg::*;
#(
  parameter int N_TERMS = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [N_TERMS-1:0]       o_q,
  input  logic [N_TERMS-1:0]       o_qb,
  input  meta_t [N_TERMS-1:0]      meta,
  input  logic signed [TREE_W-1:0] pair_sum,
  input  logic                     pair_en,
  input  logic                     valid,
  input  logic                     first,
  input  logic                     last,
  input  logic [IDX_W-1:0]         idx,
  input  logic                     neg,
  input  logic                     acc_clr,
  output logic signed [TREE_W-1:0] tree_sum,
  output logic signed [ACC_W-1:0]  acc
);
  logic signed [X_W-1:0]   x;
  logic signed [ACC_W-1:0] psum;
  logic                    last_q;

  csd_adder_tree #(.N_TERMS(N_TERMS)) u_tree (
    .o_q  (o_q),
    .o_qb (o_qb),
    .meta (meta),
    .sum  (tree_sum)
  );

  assign x = X_W'(tree_sum) + (pair_en ? X_W'(pair_sum) : X_W'(0));

  shift_add u_sa (
    .clk   (clk),
    .rst_n (rst_n),
    .valid (valid),
    .first (first),
    .x     (x),
    .idx   (idx),
    .neg   (neg),
    .psum  (psum)
  );

  // Accumulator: adds each finished group partial sum
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      last_q <= 1'b0;
      acc    <= '0;
    end else begin
      last_q <= valid & last;
      if (acc_clr)     acc <= '0;
      else if (last_q) acc <= acc + psum;
    end
endmodule
