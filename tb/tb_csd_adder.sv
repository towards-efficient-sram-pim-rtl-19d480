// tb_csd_adder - exhaustive check of the two-term CSD adder: every stored Q,
// input bit, sign and DB index for both terms (1024 cases, then random ones) against the block
// values; also the example of two weights 0001_0000 and -1000_0000.
module tb_csd_adder;
  import dbpim_pkg::*;
  import tb_ref_pkg::*;
  logic [1:0] o_q, o_qb;
  meta_t [1:0] meta;
  logic signed [9:0] sum;
  int checks = 0, failures = 0;

  csd_adder dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 4096; c++) begin
      bit q0, q1, i0, i1, s0, s1;
      int x0, x1, e;
      x0 = (c >> 0) & 3; x1 = (c >> 2) & 3;
      q0 = 1'(c >> 4); i0 = 1'(c >> 5); s0 = 1'(c >> 6);
      q1 = 1'(c >> 7); i1 = 1'(c >> 8); s1 = 1'(c >> 9);
      if (c >= 1024) begin   // repeat with random metadata
        x0 = $urandom_range(3); x1 = $urandom_range(3);
      end
      o_q  = {q1 & i1, q0 & i0};
      o_qb = {!q1 & i1, !q0 & i0};
      meta[0] = '{sign: s0, idx: 2'(x0)};
      meta[1] = '{sign: s1, idx: 2'(x1)};
      #1;
      e = (i0 ? db_value(q0, s0, x0) : 0) + (i1 ? db_value(q1, s1, x1) : 0);
      checks++;
      if (int'(sum) != e) begin
        failures++;
        if (failures < 10) $display("case %0d: sum %0d expected %0d", c, sum, e);
      end
    end
    // the two weights of the worked example, both inputs 1: 16 - 128 = -112
    o_q = 2'b10; o_qb = 2'b01;
    meta[0] = '{sign: 1'b0, idx: 2'd2};   // block 01 at DB#2
    meta[1] = '{sign: 1'b1, idx: 2'd3};   // block (-1)0 at DB#3
    #1;
    checks++;
    if (sum != -10'sd112) begin
      failures++;
      $display("example: %0d expected -112", sum);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
