// tb_dbmu - writes random Q bits into all 64 cells, then reads every row with
// input bit 0 and 1 and checks IN x Q and IN x Qbar.
module tb_dbmu;
  logic clk = 0;
  logic wr_en, wr_q, in_bit, o_q, o_qb;
  logic [5:0] wr_row, rd_row;
  bit   ref_q [64];
  int   checks = 0, failures = 0;

  dbmu #(.ROWS(64)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_row = 0; wr_q = 0; rd_row = 0; in_bit = 0;
    for (int r = 0; r < 64; r++) begin
      ref_q[r] = 1'($urandom);
      @(negedge clk); wr_en = 1; wr_row = 6'(r); wr_q = ref_q[r];
    end
    @(negedge clk); wr_en = 0;
    for (int pass = 0; pass < 2; pass++)
      for (int r = 0; r < 64; r++)
        for (int b = 0; b < 2; b++) begin
          rd_row = 6'(r); in_bit = 1'(b);
          #1;
          checks++;
          if (o_q !== (ref_q[r] & 1'(b)) || o_qb !== (!ref_q[r] & 1'(b))) begin
            failures++;
            $display("row %0d in %0d: o_q %b o_qb %b, expected Q %b", r, b, o_q, o_qb, ref_q[r]);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
