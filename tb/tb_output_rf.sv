// tb_output_rf - captures random accumulator sets and reads each macro's 16
// values back; values must change only on cap.
module tb_output_rf;
  logic clk = 0, rst_n = 0;
  logic cap;
  logic signed [31:0] acc_in [4][16];
  logic [1:0] rd_sel;
  logic signed [31:0] rd_data [16];
  logic signed [31:0] ref_rf [4][16];
  int checks = 0, failures = 0;

  output_rf #(.NM(4), .NU(16)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cap = 0; rd_sel = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 20; n++) begin
      for (int m = 0; m < 4; m++)
        for (int u = 0; u < 16; u++) acc_in[m][u] = $urandom;
      cap = (n % 4 != 3);
      if (cap) ref_rf = acc_in;
      @(negedge clk);
      cap = 0;
      for (int m = 0; m < 4; m++)
        for (int u = 0; u < 16; u++) acc_in[m][u] = $urandom;   // ignored without cap
      @(negedge clk);
      for (int m = 0; m < 4; m++) begin
        rd_sel = 2'(m);
        #1;
        for (int u = 0; u < 16; u++) begin
          checks++;
          if (rd_data[u] !== ref_rf[m][u]) begin
            failures++;
            if (failures < 10) $display("macro %0d unit %0d: %h expected %h", m, u, rd_data[u], ref_rf[m][u]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
