// tb_zero_detect - random and sparse 16-input groups, including the input
// pattern of the worked IPU example (columns 1, 4, 5 and 7 non-zero).
module tb_zero_detect;
  logic [15:0][7:0] feat;
  logic [7:0] mask;
  int checks = 0, failures = 0;

  zero_detect #(.N_IN(16), .W(8)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      logic [7:0] keep, e;
      keep = (n == 0) ? 8'b1011_0010 : 8'($urandom);
      e = 0;
      for (int i = 0; i < 16; i++) begin
        feat[i] = 8'($urandom) & keep & ((n % 5 == 0) ? 8'($urandom) : 8'hff);
        for (int b = 0; b < 8; b++) if (feat[i][b]) e[b] = 1'b1;
      end
      if (n == 0) feat[0] = 8'b1011_0010;
      if (n == 0) e = 8'b1011_0010;
      #1;
      checks++;
      if (mask !== e) begin
        failures++;
        if (failures < 10) $display("mask %b expected %b", mask, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
