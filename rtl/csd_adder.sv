// csd_adder - one "CSD adder" of the CSD-based adder tree: turns the LPU outputs
// of two DBMUs into signed terms and adds them.
//
// A DBMU output pair (o_q, o_qb) has at most one bit set, and it is set when the
// input bit is 1. The non-zero digit of the stored block sits at bit position
// 2*idx + 1 for block 10 (Q = 1) and 2*idx for block 01 (Q = 0), so the term is
// (o_q | o_qb) shifted left by the 3-bit amount {idx, o_q}, giving 8 bits. When
// the block's sign is 1 the term is negated (invert and add 1) and a mux picks
// the 9-bit signed result. Two such terms are summed into 10 bits.
// Purely combinational.
// Follows the paper: the {index, O_Q} shift amount, the 8-bit shifter, the
// negate-and-mux on the sign and the 9-bit terms. Own choice: the 10-bit sum.
module csd_adder
  import dbpim_pkg::*;
(
  input  logic [1:0]               o_q,
  input  logic [1:0]               o_qb,
  input  meta_t [1:0]              meta,
  output logic signed [PAIR_W-1:0] sum
);
  logic signed [TERM_W-1:0] term [2];

  always_comb begin
    for (int t = 0; t < 2; t++) begin
      logic [7:0]        mag;
      logic [TERM_W-1:0] pos, neg;
      mag = 8'((o_q[t] | o_qb[t])) << {meta[t].idx, o_q[t]};
      pos = {1'b0, mag};
      neg = ~pos + 1'b1;
      term[t] = meta[t].sign ? neg : pos;
    end
    sum = PAIR_W'(term[0]) + PAIR_W'(term[1]);
  end
endmodule
