// tb_meta_rf - writes random 768-bit rows to all 64 rows of a meta RF, reads
// them back in a shuffled order and checks the one-cycle read latency, and
// that a read without rd_en keeps the previous output.
module tb_meta_rf;
  import dbpim_pkg::*;
  logic clk = 0;
  logic wr_en, rd_en;
  logic [5:0] wr_row, rd_row;
  logic [767:0] wr_data, rd_data;
  logic [767:0] ref_mem [64];
  int checks = 0, failures = 0;

  meta_rf #(.ROWS(64), .NB(256)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [767:0] rand_row();
    logic [767:0] v;
    for (int i = 0; i < 24; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    wr_en = 0; rd_en = 0; wr_row = 0; rd_row = 0; wr_data = 0;
    for (int r = 0; r < 64; r++) begin
      ref_mem[r] = rand_row();
      @(negedge clk); wr_en = 1; wr_row = 6'(r); wr_data = ref_mem[r];
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 64; i++) begin
      int r;
      r = (i * 37 + 11) % 64;
      rd_en = 1; rd_row = 6'(r);
      @(negedge clk);
      rd_en = 0; rd_row = 6'(r + 1);
      checks++;
      if (rd_data !== ref_mem[r]) begin
        failures++;
        $display("row %0d mismatch", r);
      end
      @(negedge clk);
      checks++;
      if (rd_data !== ref_mem[r]) begin
        failures++;
        $display("row %0d not held", r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
