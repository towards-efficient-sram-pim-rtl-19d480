// tb_simd_core - random accumulators through ReLU / shift / INT8 saturation,
// checked against an integer model; the result must appear one cycle later.
module tb_simd_core;
  logic clk = 0, rst_n = 0;
  logic in_valid, relu, out_valid;
  logic [4:0] shift;
  logic signed [31:0] acc [16];
  logic [15:0][7:0] out_data;
  int checks = 0, failures = 0;

  simd_core #(.LANES(16)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; relu = 0; shift = 0;
    foreach (acc[i]) acc[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      logic [7:0] e [16];
      relu = 1'($urandom); shift = 5'($urandom_range(0, 12));
      for (int i = 0; i < 16; i++) begin
        longint v;
        acc[i] = (n % 3 == 0) ? 32'($urandom_range(0, 400) - 200) : 32'($urandom_range(0, 400000) - 200000);
        v = acc[i];
        if (relu && v < 0) v = 0;
        v = v >>> shift;
        if (v > 127) v = 127;
        if (v < -128) v = -128;
        e[i] = 8'(v);
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin
        failures++;
        $display("no out_valid");
      end
      for (int i = 0; i < 16; i++) begin
        checks++;
        if (out_data[i] !== e[i]) begin
          failures++;
          if (failures < 10) $display("lane %0d acc %0d relu %0d shift %0d: %0d expected %0d",
                                      i, acc[i], relu, shift, $signed(out_data[i]), $signed(e[i]));
        end
      end
      @(negedge clk);
      checks++;
      if (out_valid) begin
        failures++;
        $display("out_valid stuck");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
