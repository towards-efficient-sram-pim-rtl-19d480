// tb_post_processing_unit - random column streams through one post-processing
// unit: per column random DBMU outputs, metadata, bit index and sign-bit flag,
// with and without the paired neighbour sum. Checks the tree sum every column
// and the accumulator after every group (two edges after the last column),
// over several groups and an accumulator clear.
module tb_post_processing_unit;
  import dbpim_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [15:0] o_q, o_qb;
  meta_t [15:0] meta;
  logic signed [12:0] pair_sum, tree_sum;
  logic pair_en, valid, first, last, neg, acc_clr;
  logic [2:0] idx;
  logic signed [31:0] acc;
  int checks = 0, failures = 0;

  post_processing_unit #(.N_TERMS(16)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint acc_ref;
    o_q = 0; o_qb = 0; meta = '0; pair_sum = 0; pair_en = 0; valid = 0;
    first = 0; last = 0; neg = 0; acc_clr = 0; idx = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    acc_ref = 0;
    for (int g = 0; g < 300; g++) begin
      int ncol;
      longint psum_ref;
      if (g % 50 == 0) begin
        acc_clr = 1; @(negedge clk); acc_clr = 0; acc_ref = 0;
      end
      pair_en  = 1'($urandom);
      ncol     = $urandom_range(1, 8);
      psum_ref = 0;
      for (int c = 0; c < ncol; c++) begin
        int t_ref, x;
        t_ref = 0;
        for (int t = 0; t < 16; t++) begin
          bit q, in;
          q = 1'($urandom); in = 1'($urandom);
          meta[t] = meta_t'($urandom);
          o_q[t] = q & in; o_qb[t] = !q & in;
          if (in) t_ref += db_value(q, meta[t].sign, int'(meta[t].idx));
        end
        pair_sum = 13'($urandom_range(0, 4095) - 2048);
        idx = 3'($urandom); neg = 1'($urandom);
        valid = 1; first = (c == 0); last = (c == ncol - 1);
        x = t_ref + (pair_en ? int'(pair_sum) : 0);
        psum_ref += (neg ? -longint'(x) : longint'(x)) * (longint'(1) << idx);
        #1;
        checks++;
        if (int'(tree_sum) != t_ref) begin
          failures++;
          if (failures < 10) $display("tree %0d expected %0d", tree_sum, t_ref);
        end
        @(negedge clk);
      end
      valid = 0; last = 0;
      acc_ref += psum_ref;
      @(negedge clk);
      checks++;
      if (longint'(acc) != acc_ref) begin
        failures++;
        if (failures < 10) $display("group %0d: acc %0d expected %0d", g, acc, acc_ref);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
