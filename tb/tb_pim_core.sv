// tb_pim_core - loads FTA-approximated weights and their metadata into all
// four macros through the core's write ports (macro 0 and 2 phi_th = 1, macro 1
// phi_th = 2, macro 3 mixed per DBMU pair), broadcasts the bit columns of
// several input groups, captures the accumulators into the output RF and
// reads all four macros back; results are compared with integer dot products. Two runs: unsigned, then signed
// inputs.
module tb_pim_core;
  import dbpim_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic wr_en, mwr_en, acc_clr, out_cap;
  logic [1:0] wr_macro, mwr_macro, out_sel;
  logic [5:0] wr_row, mwr_row;
  logic [255:0] wr_data;
  logic [767:0] mwr_data;
  col_t col;
  logic [3:0][7:0] phi2;
  localparam logic [3:0][7:0] PM = {8'ha5, 8'h00, 8'hff, 8'h00};  // macro 3 mixed
  logic signed [31:0] out_data [16];
  int checks = 0, failures = 0;

  pim_core #(.NM(4), .ROWS(64)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NG = 8;
  int w [4][NG][16][16];
  int x [NG][16];

  task automatic run(bit sgn);
    longint ref_acc [4][16];
    logic [255:0] q;
    logic [767:0] m;
    for (int mc = 0; mc < 4; mc++) begin
      for (int g = 0; g < NG; g++) begin
        for (int c = 0; c < 16; c++)
          for (int f = 0; f < 16; f++) w[mc][g][c][f] = rand_weight_mix(f, PM[mc]);
        pack_row_mix(w[mc][g], PM[mc], q, m);
        @(negedge clk);
        wr_en = 1; wr_macro = 2'(mc); wr_row = 6'(g + 10); wr_data = q;
        mwr_en = 1; mwr_macro = 2'(mc); mwr_row = 6'(g + 10); mwr_data = m;
      end
    end
    @(negedge clk);
    wr_en = 0; mwr_en = 0;
    phi2 = PM;
    acc_clr = 1; @(negedge clk); acc_clr = 0;
    for (int g = 0; g < NG; g++) begin
      logic [7:0] mask;
      int n, k;
      mask = 0;
      for (int c = 0; c < 16; c++) begin
        x[g][c] = $urandom_range(0, 255) & ((g % 2) ? 8'hf0 : 8'hff);
        mask |= 8'(x[g][c]);
        if (sgn && x[g][c] > 127) x[g][c] -= 256;
      end
      n = $countones(mask); k = 0;
      for (int b = 7; b >= 0; b--) if (mask[b]) begin
        col = '0;
        col.valid = 1; col.first = (k == 0); col.last = (k == n - 1);
        col.idx = 3'(b); col.neg = sgn && b == 7; col.row = 6'(g + 10);
        for (int c = 0; c < 16; c++) col.bits[c] = 1'(x[g][c] >>> b);
        @(negedge clk);
        k++;
      end
    end
    col = '0;
    repeat (2) @(negedge clk);
    out_cap = 1; @(negedge clk); out_cap = 0;
    for (int mc = 0; mc < 4; mc++) begin
      for (int f = 0; f < 16; f++) ref_acc[mc][f] = 0;
      for (int g = 0; g < NG; g++)
        for (int f = 0; f < 16; f++)
          for (int c = 0; c < 16; c++) ref_acc[mc][f] += longint'(w[mc][g][c][f]) * x[g][c];
      out_sel = 2'(mc);
      #1;
      for (int f = 0; f < 16; f++) if (lane_used(f, PM[mc])) begin
        checks++;
        if (longint'(out_data[f]) != ref_acc[mc][f]) begin
          failures++;
          if (failures < 10) $display("macro %0d lane %0d: %0d expected %0d", mc, f, out_data[f], ref_acc[mc][f]);
        end
      end
    end
  endtask

  initial begin
    wr_en = 0; mwr_en = 0; acc_clr = 0; out_cap = 0; wr_macro = 0; mwr_macro = 0; out_sel = 0;
    wr_row = 0; mwr_row = 0; wr_data = 0; mwr_data = 0; col = '0; phi2 = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(0);
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
