// tb_csd_adder_tree - random stored blocks, inputs and metadata for 16 terms;
// the tree sum must equal the sum of the block values of the active inputs.
// Includes the extremes (all +128 and all -128).
module tb_csd_adder_tree;
  import dbpim_pkg::*;
  import tb_ref_pkg::*;
  logic [15:0] o_q, o_qb;
  meta_t [15:0] meta;
  logic signed [12:0] sum;
  int checks = 0, failures = 0;

  csd_adder_tree #(.N_TERMS(16)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 3000; n++) begin
      bit q[16], in[16];
      int e;
      e = 0;
      for (int t = 0; t < 16; t++) begin
        q[t]  = 1'($urandom);
        in[t] = (n < 2) ? 1'b1 : 1'($urandom);
        meta[t].sign = (n == 0) ? 1'b0 : (n == 1) ? 1'b1 : 1'($urandom);
        meta[t].idx  = (n < 2) ? 2'd3 : 2'($urandom);
        if (n < 2) q[t] = 1'b1;
        o_q[t]  = q[t] & in[t];
        o_qb[t] = !q[t] & in[t];
        if (in[t]) e += db_value(q[t], meta[t].sign, int'(meta[t].idx));
      end
      #1;
      checks++;
      if (int'(sum) != e) begin
        failures++;
        if (failures < 10) $display("vector %0d: sum %0d expected %0d", n, sum, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
