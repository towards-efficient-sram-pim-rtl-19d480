// tb_ipu - feeds random input groups (dense, sparse, all-zero, and the worked
// example whose non-zero columns are 1, 4, 5 and 7) into the IPU whenever it has
// a free entry, and checks the column stream against a model: one column per
// non-zero bit position, highest first, each carrying the 16 selected bits,
// first/last flags, the sign-bit flag and the group's row; all-zero groups send
// nothing and raise grp_skip. Also checks that the stream runs at one column
// per cycle (popcount of the mask cycles per group, one cycle for an all-zero
// group) when loads keep up.
module tb_ipu;
  import dbpim_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_signed, ld_valid, grp_skip, idle;
  logic [15:0][7:0] ld_data;
  logic [5:0] ld_row;
  logic [1:0] free_cnt;
  col_t col;
  int checks = 0, failures = 0;

  ipu dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NG = 400;
  logic [15:0][7:0] grp [NG];
  int exp_cycles, cost0;
  int skips_seen, skips_exp;

  // producer: load as soon as an entry is free
  initial begin
    ld_valid = 0; ld_data = 0; ld_row = 0; in_signed = 0;
    exp_cycles = 0; skips_exp = 0;
    for (int g = 0; g < NG; g++) begin
      logic [7:0] keep, mask;
      keep = (g % 4 == 0) ? 8'hff : 8'($urandom);
      if (g % 7 == 3) keep = 8'h00;
      mask = 0;
      for (int i = 0; i < 16; i++) begin
        grp[g][i] = 8'($urandom) & keep;
        mask |= grp[g][i];
      end
      if (g == 1) begin
        grp[g] = '0;
        grp[g][0] = 8'b1011_0010;   // columns 7, 5, 4, 1
        mask = 8'b1011_0010;
      end
      exp_cycles += (mask == 0) ? 1 : $countones(mask);
      if (g == 0) cost0 = exp_cycles;
      if (mask == 0) skips_exp++;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int g = 0; g < NG; g++) begin
      while (free_cnt == 0) @(negedge clk);
      ld_valid = 1; ld_data = grp[g]; ld_row = 6'(g);
      @(negedge clk);
      ld_valid = 0;
    end
  end

  // consumer / checker
  initial begin
    int t0, t1;
    skips_seen = 0;
    in_signed = 0;
    @(posedge rst_n);
    for (int g = 0; g < NG; g++) begin
      logic [7:0] mask;
      int b;
      bit firstc;
      if (g == NG / 2) begin in_signed = 1; #1; end
      // wait for the group to become active
      while (!(col.valid || grp_skip)) @(negedge clk);
      if (g == 1) t0 = $time;
      mask = 0;
      for (int i = 0; i < 16; i++) mask |= grp[g][i];
      if (mask == 0) begin
        checks++;
        if (!grp_skip || col.valid) begin failures++; $display("group %0d: skip expected", g); end
        skips_seen++;
        @(negedge clk);
        continue;
      end
      firstc = 1;
      for (b = 7; b >= 0; b--) if (mask[b]) begin
        logic [15:0] bits;
        for (int i = 0; i < 16; i++) bits[i] = grp[g][i][b];
        checks++;
        if (!col.valid || col.idx != 3'(b) || col.bits != bits || col.first != firstc ||
            col.last != ((mask & ((8'd1 << b) - 1)) == 0) || col.row != 6'(g) ||
            col.neg != (in_signed && b == 7)) begin
          failures++;
          if (failures < 10) $display("group %0d col %0d: got v%b i%0d bits %h f%b l%b r%0d n%b",
                                      g, b, col.valid, col.idx, col.bits, col.first, col.last, col.row, col.neg);
        end
        firstc = 0;
        @(negedge clk);
      end
    end
    t1 = $time;
    // throughput after the first group: one cycle per column / skipped group
    checks++;
    if (!idle) begin failures++; $display("not idle at end"); end
    checks++;
    if (skips_seen != skips_exp) begin failures++; $display("skips %0d expected %0d", skips_seen, skips_exp); end
    checks++;
    if ((t1 - t0) / 10 != exp_cycles - cost0) begin
      failures++;
      $display("groups 1.. took %0d cycles, expected %0d", (t1 - t0) / 10, exp_cycles - cost0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
