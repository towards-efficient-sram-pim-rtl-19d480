// tb_compartment - fills a compartment with random rows and checks all 16 DBMU
// outputs for every row and both input values.
module tb_compartment;
  logic clk = 0;
  logic wr_en, in_bit;
  logic [5:0] wr_row, rd_row;
  logic [15:0] wr_data, o_q, o_qb;
  logic [15:0] ref_row [64];
  int   checks = 0, failures = 0;

  compartment #(.N_DBMU(16), .ROWS(64)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_row = 0; wr_data = 0; rd_row = 0; in_bit = 0;
    for (int r = 0; r < 64; r++) begin
      ref_row[r] = 16'($urandom);
      @(negedge clk); wr_en = 1; wr_row = 6'(r); wr_data = ref_row[r];
    end
    @(negedge clk); wr_en = 0;
    for (int r = 63; r >= 0; r--)
      for (int b = 0; b < 2; b++) begin
        rd_row = 6'(r); in_bit = 1'(b);
        #1;
        checks++;
        if (o_q !== (b ? ref_row[r] : 16'h0) || o_qb !== (b ? ~ref_row[r] : 16'h0)) begin
          failures++;
          $display("row %0d in %0d: o_q %h o_qb %h, row %h", r, b, o_q, o_qb, ref_row[r]);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
