// tb_pim_macro - programs a macro with FTA-approximated weights (all phi_th = 1:
// 16 filters; all phi_th = 2: 8 filters; mixed per DBMU pair) and runs several 16-input groups through
// it as bit columns, the way the IPU sends them (only non-zero columns, in a
// random order). The metadata of the registered row is supplied one cycle
// after the column, like the meta RF. Accumulators are compared with integer
// dot products for unsigned and signed inputs. Also checks that a column is
// accepted every cycle.
module tb_pim_macro;
  import dbpim_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic wr_en, acc_clr;
  logic [7:0] phi2;
  logic [5:0] wr_row;
  logic [15:0][15:0] wr_data;
  col_t col;
  meta_t [15:0][15:0] meta;
  logic signed [31:0] acc [16];
  logic [767:0] meta_mem [64];
  int checks = 0, failures = 0;

  pim_macro #(.NC(16), .ND(16), .ROWS(64)) dut (.*);

  always #5 clk = ~clk;
  always_ff @(posedge clk) meta <= meta_mem[col.row];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(logic [7:0] pm, bit sgn, int ngrp);
    int w[64][16][16];
    int x[64][16];
    longint ref_acc[16];
    int rows[64];
    logic [255:0] q;
    logic [767:0] m;
    int cyc0, ncols;
    // weights: one random row per group
    for (int g = 0; g < ngrp; g++) begin
      rows[g] = (g * 7 + 3) % 64;
      for (int c = 0; c < 16; c++)
        for (int f = 0; f < 16; f++) w[g][c][f] = rand_weight_mix(f, pm);
      pack_row_mix(w[g], pm, q, m);
      @(negedge clk); wr_en = 1; wr_row = 6'(rows[g]); wr_data = q;
      meta_mem[rows[g]] = m;
    end
    @(negedge clk); wr_en = 0;
    phi2 = pm;
    acc_clr = 1; @(negedge clk); acc_clr = 0;
    foreach (ref_acc[f]) ref_acc[f] = 0;
    ncols = 0;
    cyc0 = $time;
    for (int g = 0; g < ngrp; g++) begin
      logic [7:0] mask;
      int order[8];
      int n;
      mask = 0;
      for (int c = 0; c < 16; c++) begin
        x[g][c] = $urandom_range(0, 255);
        if (g % 3 == 1) x[g][c] &= 8'h3c;       // some all-zero columns
        mask |= 8'(x[g][c]);
        if (sgn && x[g][c] > 127) x[g][c] -= 256;
      end
      for (int f = 0; f < 16; f++)
        for (int c = 0; c < 16; c++) if (lane_used(f, pm)) ref_acc[f] += longint'(w[g][c][f]) * x[g][c];
      n = 0;
      for (int b = 0; b < 8; b++) if (mask[b]) order[n++] = b;
      for (int i = n - 1; i > 0; i--) begin      // random order
        int j, t;
        j = $urandom_range(0, i);
        t = order[i]; order[i] = order[j]; order[j] = t;
      end
      for (int i = 0; i < n; i++) begin
        col = '0;
        col.valid = 1; col.first = (i == 0); col.last = (i == n - 1);
        col.idx = 3'(order[i]); col.neg = sgn && order[i] == 7;
        col.row = 6'(rows[g]);
        for (int c = 0; c < 16; c++) col.bits[c] = 1'(x[g][c] >>> order[i]);
        @(negedge clk);
        ncols++;
      end
    end
    col = '0;
    repeat (3) @(negedge clk);
    for (int f = 0; f < 16; f++) if (lane_used(f, pm)) begin
      checks++;
      if (longint'(acc[f]) != ref_acc[f]) begin
        failures++;
        if (failures < 10) $display("mask %h signed %0d lane %0d: acc %0d expected %0d",
                                    pm, sgn, f, acc[f], ref_acc[f]);
      end
    end
    // one column per cycle: ncols cycles + 3 drain
    checks++;
    if (($time - cyc0) / 10 != ncols + 3) begin
      failures++;
      $display("took %0d cycles for %0d columns", ($time - cyc0) / 10, ncols);
    end
  endtask

  initial begin
    wr_en = 0; wr_row = 0; wr_data = 0; col = '0; phi2 = 0; acc_clr = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(8'h00, 0, 6);
    run(8'hff, 0, 6);
    run(8'h00, 1, 6);
    run(8'hff, 1, 6);
    run(8'h5a, 0, 6);   // phi_th = 1 and phi_th = 2 filters in the same rows
    run(8'hc3, 1, 6);
    run(8'h00, 1, 64);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
