// shift_add - the "Shift & Add" stage of a post-processing unit.
//
// The IPU sends input bit columns in any order, each with its bit index. For a
// column result x (the filter's sum over the 16 inputs of that bit) the stage
// adds x * 2^idx to the group partial sum; for the sign bit of signed inputs
// (neg = 1) it adds -x * 2^7 instead, chosen by a mux between x and its
// two's-complement. The partial sum restarts at the first column of a group.
// Timing: psum is updated at the clock edge on which valid is high.
// Follows the paper: shifter driven by the index of the non-zero bit, a mux on
// the signed MSB, a DFF holding the running sum. Own choice: the incoming term
// is shifted by its absolute index (the figure draws the shifter on the DFF
// side); the 32-bit width.
module shift_add
  import dbpim_pkg::*;
#(
  parameter int IN_W_X = X_W,
  parameter int OUT_W  = ACC_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     valid,
  input  logic                     first,
  input  logic signed [IN_W_X-1:0] x,
  input  logic [IDX_W-1:0]         idx,
  input  logic                     neg,
  output logic signed [OUT_W-1:0]  psum
);
  logic signed [OUT_W-1:0] xs, term;

  always_comb begin
    xs   = OUT_W'(x);
    term = (neg ? -xs : xs) <<< idx;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)     psum <= '0;
    else if (valid) psum <= (first ? '0 : psum) + term;
endmodule
