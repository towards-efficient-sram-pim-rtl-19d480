// tb_shift_add - random groups of 1..8 columns with random column sums, bit
// indices and sign-bit flags; after each group the partial sum must equal
// sum(x * 2^idx) with the sign-bit column counted negative.
module tb_shift_add;
  logic clk = 0, rst_n = 0;
  logic valid, first, neg;
  logic signed [13:0] x;
  logic [2:0] idx;
  logic signed [31:0] psum;
  int checks = 0, failures = 0;

  shift_add dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    valid = 0; first = 0; neg = 0; x = 0; idx = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int g = 0; g < 500; g++) begin
      longint e;
      int ncol;
      e = 0;
      ncol = $urandom_range(1, 8);
      for (int c = 0; c < ncol; c++) begin
        @(negedge clk);
        valid = 1; first = (c == 0);
        x   = 14'($urandom_range(0, 8191) - 4096);
        idx = 3'($urandom);
        neg = 1'($urandom);
        e  += (neg ? -longint'(x) : longint'(x)) * (longint'(1) << idx);
      end
      @(negedge clk);
      valid = 0;
      if ($urandom_range(1) == 1) @(negedge clk);   // idle cycles keep the sum
      checks++;
      if (longint'(psum) != e) begin
        failures++;
        if (failures < 10) $display("group %0d: psum %0d expected %0d", g, psum, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
