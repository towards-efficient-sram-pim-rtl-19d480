// zero_detect - zero-detection module of the input pre-processing unit.
//
// For a group of 16 input features, mask[b] is 1 when at least one feature has
// bit b set, and 0 when bit column b is all zero and can be skipped.
// Combinational (an OR across the group for each bit position).
// Follows the paper: the column mask of the zero-detection module. Own choice:
// mask bit b is the column of weight 2^b.
module zero_detect #(
  parameter int N_IN = 16,
  parameter int W    = 8
) (
  input  logic [N_IN-1:0][W-1:0] feat,
  output logic [W-1:0]           mask
);
  always_comb begin
    mask = '0;
    for (int i = 0; i < N_IN; i++) mask |= feat[i];
  end
endmodule
