// simd_core - element-wise post-processing of 16 accumulator values.
//
// Each lane takes a 32-bit signed accumulator, applies an optional ReLU, an
// arithmetic right shift by `shift` (requantisation) and saturates the result to
// INT8. The 16 bytes form one 128-bit feature word (lane i in bits 8i+7:8i) that
// is written back to the feature buffer.
// Timing: one cycle; out_valid/out_data follow in_valid by one clock.
// Follows the paper: a SIMD core for element-wise work whose results go back to
// the feature buffer. Own choice: the operation set (the paper does not list
// it).
module simd_core
  import dbpim_pkg::*;
#(
  parameter int LANES = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic signed [ACC_W-1:0]       acc [LANES],
  input  logic                          relu,
  input  logic [4:0]                    shift,
  output logic                          out_valid,
  output logic [LANES-1:0][IN_W-1:0]    out_data
);
  logic [LANES-1:0][IN_W-1:0] res;

  always_comb
    for (int i = 0; i < LANES; i++) begin
      logic signed [ACC_W-1:0] v;
      v = (relu && acc[i] < 0) ? '0 : acc[i];
      v = v >>> shift;
      if (v > 127)       res[i] = 8'sd127;
      else if (v < -128) res[i] = 8'h80;
      else               res[i] = v[IN_W-1:0];
    end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_data <= res;
    end
endmodule
