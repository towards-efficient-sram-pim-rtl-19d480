// leading_one_detect - leading-one detection module of the input
// pre-processing unit.
//
// Returns the position of the most significant 1 of the column mask, and found
// = 0 for an all-zero mask. The IPU clears each reported bit and asks again, so
// the non-zero columns are sent from the most significant down.
// Combinational priority encoder.
module leading_one_detect #(
  parameter int W = 8
) (
  input  logic [W-1:0]         mask,
  output logic                 found,
  output logic [$clog2(W)-1:0] idx
);
  always_comb begin
    found = 1'b0;
    idx   = '0;
    for (int b = 0; b < W; b++)
      if (mask[b]) begin
        found = 1'b1;
        idx   = b[$clog2(W)-1:0];
      end
  end
endmodule
