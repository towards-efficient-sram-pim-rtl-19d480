// tb_leading_one_detect - all 256 masks: found and the highest set position.
module tb_leading_one_detect;
  logic [7:0] mask;
  logic found;
  logic [2:0] idx;
  int checks = 0, failures = 0;

  leading_one_detect #(.W(8)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 256; v++) begin
      int e;
      mask = 8'(v);
      e = -1;
      for (int b = 7; b >= 0; b--) if (e < 0 && v[b]) e = b;
      #1;
      checks++;
      if (found !== (e >= 0) || (e >= 0 && int'(idx) != e)) begin
        failures++;
        $display("mask %b: found %b idx %0d, expected %0d", mask, found, idx, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
